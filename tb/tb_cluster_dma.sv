// Testbench for cluster_dma. A behavioural AXI4 slave stands for the L2
// (random AR/AW ready, random gaps between R beats, random W ready) and a
// behavioural TCDM wide port grants at random and answers reads one cycle
// later. Transfers of random length (64 B multiples, up to 8 KiB) and
// addresses that cross 4 KiB boundaries are copied L2 -> TCDM, then
// TCDM -> L2 to a second region, and both copies are compared. Each AXI
// burst is checked to stay inside one 4 KiB page and to be at most 64
// beats. With all ready and no gaps a 4 KiB copy must take at most
// 64 + 12 cycles (one 64-byte line per cycle).
module tb_cluster_dma;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, dir, busy, done;
  logic [31:0] l2a, tca, len;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready, ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] aw_addr, ar_addr, t_addr;
  logic [7:0] aw_len, ar_len;
  logic [3:0] aw_id, ar_id;
  logic [511:0] w_data, r_data, t_wdata, t_rdata;
  logic [63:0] w_strb, t_be;
  logic t_req, t_gnt, t_we, t_rvalid;
  logic [511:0] l2 [logic [31:0]];
  logic [511:0] tc [logic [31:0]];
  int checks = 0, failures = 0, n_ar = 0, n_aw = 0;
  bit fast = 0;

  cluster_dma #(.AW(32), .IW(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .dir_i(dir), .l2_addr_i(l2a), .tcdm_addr_i(tca), .len_i(len),
    .busy_o(busy), .done_o(done), .aw_valid_o(aw_valid), .aw_ready_i(aw_ready), .aw_addr_o(aw_addr),
    .aw_len_o(aw_len), .aw_id_o(aw_id), .w_valid_o(w_valid), .w_ready_i(w_ready), .w_data_o(w_data),
    .w_strb_o(w_strb), .w_last_o(w_last), .b_valid_i(b_valid), .b_ready_o(b_ready), .ar_valid_o(ar_valid),
    .ar_ready_i(ar_ready), .ar_addr_o(ar_addr), .ar_len_o(ar_len), .ar_id_o(ar_id), .r_valid_i(r_valid),
    .r_ready_o(r_ready), .r_data_i(r_data), .r_last_i(r_last), .tcdm_req_o(t_req), .tcdm_gnt_i(t_gnt),
    .tcdm_addr_o(t_addr), .tcdm_we_o(t_we), .tcdm_be_o(t_be), .tcdm_wdata_o(t_wdata), .tcdm_rvalid_i(t_rvalid),
    .tcdm_rdata_i(t_rdata));

  function automatic logic [511:0] l2_rd(input logic [31:0] a);
    return l2.exists(a) ? l2[a] : {16{a ^ 32'h5a5a_0000}};
  endfunction
  function automatic logic [511:0] tc_rd(input logic [31:0] a);
    return tc.exists(a) ? tc[a] : '0;
  endfunction

  function automatic void check_burst(input logic [31:0] a, input logic [7:0] l);
    checks++;
    if ((a >> 12) != ((a + 64 * (32'(l) + 1) - 1) >> 12) || a[5:0] != 0) begin
      failures++; $display("burst at %h, %0d beats crosses 4 KiB or is unaligned", a, l + 1);
    end
  endfunction

  // AXI slave: read side
  logic [31:0] r_addr_q;
  int r_left = 0;
  always @(negedge clk) begin
    ar_ready <= fast | ($urandom % 2 == 0);
    aw_ready <= fast | ($urandom % 2 == 0);
    w_ready  <= fast | ($urandom % 4 != 0);
    t_gnt    <= fast | ($urandom % 4 != 0);
  end
  always @(posedge clk) if (rst_n) begin
    if (r_valid && r_ready) begin
      r_addr_q = r_addr_q + 64; r_left--;
    end
    if (ar_valid && ar_ready) begin
      check_burst(ar_addr, ar_len);
      n_ar++;
      r_addr_q = ar_addr; r_left = ar_len + 1;
    end
  end
  always @(negedge clk) begin
    r_valid <= (r_left > 0) && (fast || $urandom % 4 != 0);
    r_data  <= l2_rd(r_addr_q);
    r_last  <= r_left == 1;
  end

  // AXI slave: write side
  logic [31:0] w_addr_q;
  int w_left = 0;
  bit b_pend = 0;
  always @(posedge clk) if (rst_n) begin
    if (w_valid && w_ready) begin
      checks++;
      if (w_left == 0 || w_last !== (w_left == 1) || w_strb !== '1) begin failures++; $display("bad W beat"); end
      l2[w_addr_q] = w_data; w_addr_q = w_addr_q + 64; w_left--;
      if (w_left == 0) b_pend = 1;
    end
    if (b_valid && b_ready) b_pend = 0;
    if (aw_valid && aw_ready) begin
      check_burst(aw_addr, aw_len);
      n_aw++;
      w_addr_q = aw_addr; w_left = aw_len + 1;
    end
  end
  always @(negedge clk) b_valid <= b_pend;

  // TCDM wide port
  always @(posedge clk) begin
    t_rvalid <= t_req & t_gnt & ~t_we;
    t_rdata  <= tc_rd(t_addr);
    if (t_req && t_gnt && t_we) tc[t_addr] = t_wdata;
  end

  task automatic copy(input bit d, input logic [31:0] l2_addr, input logic [31:0] tc_addr, input int bytes);
    @(negedge clk);
    start = 1; dir = d; l2a = l2_addr; tca = tc_addr; len = 32'(bytes);
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    @(negedge clk);
    if (busy) begin failures++; $display("busy after done"); end
  endtask

  initial begin
    automatic int t0, ar0;
    start = 0; dir = 0; l2a = 0; tca = 0; len = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 12; k++) begin
      automatic logic [31:0] src = 32'h0001_0000 + 32'(($urandom % 256) * 64);
      automatic logic [31:0] dst = 32'h0004_0000 + 32'(($urandom % 256) * 64);
      automatic logic [31:0] tcb = 32'(($urandom % 64) * 64);
      automatic int bytes = (k == 0) ? 8192 : 64 * (1 + $urandom % 128);
      copy(0, src, tcb, bytes);
      for (int i = 0; i < bytes; i += 64) begin
        checks++;
        if (tc_rd(tcb + i) !== l2_rd(src + i)) begin failures++; $display("copy %0d: TCDM line %h wrong", k, tcb + i); end
      end
      copy(1, dst, tcb, bytes);
      for (int i = 0; i < bytes; i += 64) begin
        checks++;
        if (l2_rd(dst + i) !== l2_rd(src + i)) begin failures++; $display("copy %0d: L2 line %h wrong", k, dst + i); end
      end
    end
    fast = 1;
    repeat (2) @(negedge clk);
    t0 = $time; ar0 = n_ar;
    copy(0, 32'h0002_0000, 32'h0, 4096);
    checks++;
    if (($time - t0) / 10 > 64 + 12) begin failures++; $display("4 KiB copy took %0d cycles", ($time - t0) / 10); end
    checks++;
    if (n_ar - ar0 != 1) begin failures++; $display("aligned 4 KiB copy used %0d bursts", n_ar - ar0); end
    $display("4 KiB L2->TCDM copy: %0d cycles; bursts: %0d AR, %0d AW", ($time - t0) / 10, n_ar, n_aw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
