// Testbench for mi_axi_to_mem (512-bit). An AXI4 master runs random write
// and read bursts concurrently on separate address ranges; a behavioural
// memory grants the read and write streams at random and returns read
// data one cycle after the grant. Checks: every R beat against the model,
// r_last on the last beat, r_id/b_id echo the request ids, one B per
// write burst, and the rate: with a always-granting memory and a ready
// master a 64-beat read burst finishes within 64 + 6 cycles.
module tb_mi_axi_to_mem;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready, ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] aw_addr, ar_addr, rd_addr, wr_addr;
  logic [7:0] aw_len, ar_len;
  logic [3:0] aw_id, ar_id, b_id, r_id;
  logic [511:0] w_data, r_data, rd_rdata, wr_wdata;
  logic [63:0] w_strb, wr_be;
  logic rd_req, rd_gnt, rd_rvalid, wr_req, wr_gnt;
  logic [511:0] mem [logic [31:0]];
  int checks = 0, failures = 0;
  bit fast = 0;

  mi_axi_to_mem #(.DW(512), .AW(32), .IW(4), .DEPTH(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .aw_valid_i(aw_valid), .aw_ready_o(aw_ready), .aw_addr_i(aw_addr),
    .aw_len_i(aw_len), .aw_id_i(aw_id), .w_valid_i(w_valid), .w_ready_o(w_ready), .w_data_i(w_data),
    .w_strb_i(w_strb), .w_last_i(w_last), .b_valid_o(b_valid), .b_ready_i(b_ready), .b_id_o(b_id),
    .ar_valid_i(ar_valid), .ar_ready_o(ar_ready), .ar_addr_i(ar_addr), .ar_len_i(ar_len), .ar_id_i(ar_id),
    .r_valid_o(r_valid), .r_ready_i(r_ready), .r_data_o(r_data), .r_last_o(r_last), .r_id_o(r_id),
    .rd_req_o(rd_req), .rd_gnt_i(rd_gnt), .rd_addr_o(rd_addr), .rd_rvalid_i(rd_rvalid), .rd_rdata_i(rd_rdata),
    .wr_req_o(wr_req), .wr_gnt_i(wr_gnt), .wr_addr_o(wr_addr), .wr_be_o(wr_be), .wr_wdata_o(wr_wdata));

  function automatic logic [511:0] rd_mem(input logic [31:0] a);
    return mem.exists(a) ? mem[a] : {16{a}};
  endfunction

  // behavioural memory
  always @(negedge clk) begin
    rd_gnt <= fast | ($urandom % 3 != 0);
    wr_gnt <= fast | ($urandom % 3 != 0);
  end
  always @(posedge clk) begin
    rd_rvalid <= rd_req & rd_gnt;
    rd_rdata  <= rd_mem(rd_addr);
    if (wr_req && wr_gnt) begin
      automatic logic [511:0] v = rd_mem(wr_addr);
      for (int b = 0; b < 64; b++) if (wr_be[b]) v[8*b +: 8] = wr_wdata[8*b +: 8];
      mem[wr_addr] = v;
    end
  end

  logic [511:0] ref_mem [logic [31:0]];
  function automatic logic [511:0] rd_ref(input logic [31:0] a);
    return ref_mem.exists(a) ? ref_mem[a] : {16{a}};
  endfunction

  task automatic axi_write(input logic [31:0] a, input int n, input logic [3:0] id);
    @(negedge clk);
    aw_valid = 1; aw_addr = a; aw_len = 8'(n - 1); aw_id = id;
    do @(posedge clk); while (!aw_ready);
    @(negedge clk); aw_valid = 0;
    for (int i = 0; i < n; i++) begin
      automatic logic [511:0] v;
      while (!fast && $urandom % 4 == 0) begin w_valid = 0; @(negedge clk); end
      w_valid = 1; w_last = (i == n - 1); w_strb = fast ? '1 : {$urandom, $urandom};
      for (int k = 0; k < 16; k++) w_data[32*k +: 32] = $urandom;
      v = rd_ref(a + 64 * i);
      for (int b = 0; b < 64; b++) if (w_strb[b]) v[8*b +: 8] = w_data[8*b +: 8];
      ref_mem[a + 64 * i] = v;
      do @(posedge clk); while (!w_ready);
      @(negedge clk);
    end
    w_valid = 0; w_last = 0;
    b_ready = 1;
    while (!b_valid) @(negedge clk);
    checks++;
    if (b_id !== id) begin failures++; $display("b_id %0d expected %0d", b_id, id); end
    @(posedge clk); @(negedge clk);
    b_ready = 0;
  endtask

  task automatic axi_read(input logic [31:0] a, input int n, input logic [3:0] id);
    @(negedge clk);
    ar_valid = 1; ar_addr = a; ar_len = 8'(n - 1); ar_id = id;
    do @(posedge clk); while (!ar_ready);
    @(negedge clk); ar_valid = 0;
    for (int i = 0; i < n; i++) begin
      r_ready = fast | ($urandom % 4 != 0);
      #1;
      while (!(r_valid && r_ready)) begin
        @(negedge clk); r_ready = fast | ($urandom % 4 != 0); #1;
      end
      checks++;
      if (r_data !== rd_ref(a + 64 * i) || r_last !== (i == n - 1) || r_id !== id) begin
        failures++; $display("read beat %0d of %0h: data %b last %b id %0d", i, a, r_data === rd_ref(a + 64 * i), r_last, r_id);
      end
      @(posedge clk); @(negedge clk);
    end
    r_ready = 0;
  endtask

  initial begin
    automatic int t0;
    aw_valid = 0; w_valid = 0; w_last = 0; b_ready = 0; ar_valid = 0; r_ready = 0;
    aw_addr = 0; aw_len = 0; aw_id = 0; w_data = '0; w_strb = '0; ar_addr = 0; ar_len = 0; ar_id = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 8; k++) axi_write(32'h1000 + 32'(k * 64 * 16), 16, 4'(k));
    fork
      for (int k = 0; k < 20; k++) axi_write(32'h8000 + 32'(($urandom % 64) * 64), 1 + $urandom % 16, 4'($urandom));
      for (int k = 0; k < 20; k++) axi_read(32'h1000 + 32'(($urandom % 100) * 64), 1 + $urandom % 28, 4'($urandom));
    join
    for (int k = 0; k < 10; k++) axi_read(32'h8000 + 32'(($urandom % 64) * 64), 1 + $urandom % 16, 4'($urandom));
    fast = 1;
    repeat (2) @(negedge clk);
    t0 = $time;
    axi_read(32'h1000, 64, 4'd3);
    checks++;
    if (($time - t0) / 10 > 64 + 6) begin failures++; $display("64-beat burst took %0d cycles", ($time - t0) / 10); end
    $display("64-beat read burst: %0d cycles", ($time - t0) / 10);
    t0 = $time;
    axi_write(32'h1000, 64, 4'd5);
    checks++;
    if (($time - t0) / 10 > 64 + 6) begin failures++; $display("64-beat write burst took %0d cycles", ($time - t0) / 10); end
    $display("64-beat write burst: %0d cycles", ($time - t0) / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
