// Testbench for tac_streamer (8 ports). A behavioural TCDM grants each port
// at random and answers reads one cycle after the grant. The test writes
// random lines with random word masks, reads them back through the
// response FIFO with a randomly stalling consumer, and checks data, tags
// and order. A final phase with all grants and a ready consumer checks
// the rate: one line per cycle (64 lines in at most 64 + 4 cycles).
module tb_tac_streamer;
  localparam int NW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, cmd_partial, cmd_write, rsp_valid, rsp_ready, t_we;
  logic [31:0] cmd_addr;
  logic [NW-1:0] cmd_mask, t_req, t_gnt, t_rvalid;
  logic [NW-1:0][63:0] cmd_wdata, rsp_data, t_wdata, t_rdata;
  logic [1:0] cmd_tag, rsp_tag;
  logic [NW-1:0][31:0] t_addr;
  logic [63:0] mem [logic [31:0]];
  logic [NW-1:0][63:0] exp_data [$];
  logic [1:0] exp_tag [$];
  int checks = 0, failures = 0, rsp_seen = 0;
  bit fast = 0;

  tac_streamer #(.NW(NW), .AW(32), .TAG_W(2), .DEPTH(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_partial_o(cmd_partial),
    .cmd_write_i(cmd_write), .cmd_addr_i(cmd_addr), .cmd_mask_i(cmd_mask), .cmd_wdata_i(cmd_wdata),
    .cmd_tag_i(cmd_tag), .rsp_valid_o(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_data_o(rsp_data),
    .rsp_tag_o(rsp_tag), .tcdm_req_o(t_req), .tcdm_gnt_i(t_gnt), .tcdm_addr_o(t_addr), .tcdm_we_o(t_we),
    .tcdm_wdata_o(t_wdata), .tcdm_rvalid_i(t_rvalid), .tcdm_rdata_i(t_rdata));

  // behavioural TCDM
  logic [NW-1:0] rv_d;
  logic [NW-1:0][63:0] rd_d;
  always @(negedge clk) t_gnt <= fast ? '1 : NW'($urandom);
  always @(posedge clk) begin
    for (int i = 0; i < NW; i++) begin
      rv_d[i] = t_req[i] & t_gnt[i] & ~t_we;
      rd_d[i] = mem.exists(t_addr[i]) ? mem[t_addr[i]] : 64'hdead_beef_0000_0000 | 64'(t_addr[i]);
      if (t_req[i] & t_gnt[i] & t_we) mem[t_addr[i]] = t_wdata[i];
    end
    t_rvalid <= rv_d;
    t_rdata  <= rd_d;
  end

  // consumer
  always @(negedge clk) rsp_ready <= fast ? 1'b1 : ($urandom % 3 != 0);
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    checks++;
    rsp_seen++;
    if (exp_data.size() == 0) begin failures++; $display("unexpected response"); end
    else begin
      if (rsp_data !== exp_data[0] || rsp_tag !== exp_tag[0]) begin
        failures++; $display("response %0d: tag %0d expected %0d, data mismatch %b", rsp_seen, rsp_tag, exp_tag[0], rsp_data !== exp_data[0]);
      end
      void'(exp_data.pop_front()); void'(exp_tag.pop_front());
    end
  end

  task automatic issue(input bit wr, input logic [31:0] a, input logic [NW-1:0] m);
    logic [NW-1:0][63:0] d;
    cmd_valid = 1; cmd_write = wr; cmd_addr = a; cmd_mask = m; cmd_tag = 2'($urandom);
    for (int i = 0; i < NW; i++) cmd_wdata[i] = {$urandom, $urandom};
    forever begin
      #1;
      if (cmd_ready) break;
      @(negedge clk);
    end
    if (!wr) begin
      for (int i = 0; i < NW; i++) d[i] = mem.exists(a + 8 * i) ? mem[a + 8 * i] : 64'hdead_beef_0000_0000 | 64'(a + 8 * i);
      exp_data.push_back(d); exp_tag.push_back(cmd_tag);
    end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  initial begin
    automatic int t0, n0;
    cmd_valid = 0; cmd_write = 0; cmd_addr = 0; cmd_mask = 0; cmd_wdata = '0; cmd_tag = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < 64; l++) issue(1, 32'(l * 64), '1);
    for (int l = 0; l < 64; l++) issue(1, 32'(l * 64), NW'($urandom));
    for (int l = 0; l < 200; l++) issue(0, 32'(($urandom % 64) * 64), '1);
    wait (exp_data.size() == 0);
    // rate
    @(negedge clk);
    fast = 1;
    repeat (2) @(negedge clk);
    t0 = $time; n0 = rsp_seen;
    for (int l = 0; l < 64; l++) issue(0, 32'(l * 64), '1);
    wait (exp_data.size() == 0);
    checks++;
    if (($time - t0) / 10 > 64 + 4) begin failures++; $display("64 lines took %0d cycles", ($time - t0) / 10); end
    $display("64 lines streamed in %0d cycles", ($time - t0) / 10);
    checks++;
    if (rsp_seen != 264) begin failures++; $display("%0d responses, expected 264", rsp_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
