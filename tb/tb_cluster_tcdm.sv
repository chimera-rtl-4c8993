// Testbench for cluster_tcdm (128 KiB, 32 banks of 64 bits) with 4 narrow
// masters and the 512-bit wide port. The memory is first filled through
// the wide port; then narrow masters issue random 64-bit reads and
// byte-masked writes while the wide port reads and writes random lines.
// Checks: read data one cycle after the grant against a byte-exact model,
// the wide port is granted in the cycle it asks (priority over the
// narrow masters), and narrow masters are still served while the wide
// port is busy in another super bank.
module tb_cluster_tcdm;
  localparam int NM = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NM-1:0] m_req, m_gnt, m_we, m_rvalid;
  logic [NM-1:0][31:0] m_addr;
  logic [NM-1:0][7:0] m_be;
  logic [NM-1:0][63:0] m_wdata, m_rdata;
  logic w_req, w_gnt, w_we, w_rvalid;
  logic [31:0] w_addr;
  logic [63:0] w_be;
  logic [511:0] w_wdata, w_rdata;
  logic [63:0] model [16384];
  int checks = 0, failures = 0, narrow_during_wide = 0;

  cluster_tcdm #(.NM(NM), .AW(32)) dut (
    .clk_i(clk), .rst_ni(rst_n), .m_req_i(m_req), .m_gnt_o(m_gnt), .m_addr_i(m_addr), .m_we_i(m_we),
    .m_be_i(m_be), .m_wdata_i(m_wdata), .m_rvalid_o(m_rvalid), .m_rdata_o(m_rdata),
    .wide_req_i(w_req), .wide_gnt_o(w_gnt), .wide_addr_i(w_addr), .wide_we_i(w_we), .wide_be_i(w_be),
    .wide_wdata_i(w_wdata), .wide_rvalid_o(w_rvalid), .wide_rdata_o(w_rdata));

  logic [NM-1:0] exp_rv, exp_isrd;
  logic [NM-1:0][63:0] exp_rd;
  logic exp_wrv, exp_wisrd;
  logic [511:0] exp_wrd;

  always @(negedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      checks++;
      if (m_rvalid[m] !== exp_rv[m]) begin failures++; $display("master %0d rvalid %b", m, m_rvalid[m]); end
      else if (exp_rv[m] && exp_isrd[m] && m_rdata[m] !== exp_rd[m]) begin failures++; $display("%0t: master %0d read %h expected %h", $time, m, m_rdata[m], exp_rd[m]); end
    end
    checks++;
    if (w_rvalid !== exp_wrv) begin failures++; $display("wide rvalid %b", w_rvalid); end
    else if (exp_wrv && exp_wisrd && w_rdata !== exp_wrd) begin failures++; $display("%0t: wide read mismatch", $time); end
  end

  initial begin
    m_req = '0; m_we = '0; m_addr = '0; m_be = '0; m_wdata = '0; exp_rv = '0; exp_wrv = 0;
    w_req = 0; w_we = 0; w_addr = 0; w_be = '0; w_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0, fill = 0; t < 12000; t++) begin
      if (fill < 2048) begin
        w_req = 1; w_we = 1; w_be = '1; w_addr = 32'(fill * 64);
        for (int i = 0; i < 16; i++) w_wdata[32*i +: 32] = $urandom;
        fill++;
      end else begin
        w_req = $urandom % 3 == 0; w_we = $urandom % 2; w_addr = 32'(($urandom % 2048) * 64);
        w_be = {$urandom, $urandom};
        for (int i = 0; i < 16; i++) w_wdata[32*i +: 32] = $urandom;
        for (int m = 0; m < NM; m++) if (!m_req[m] || exp_rv[m]) begin
          m_req[m] = $urandom % 4 != 0; m_we[m] = $urandom % 2; m_addr[m] = 32'(($urandom % 16384) * 8);
          m_be[m] = 8'($urandom); m_wdata[m] = {$urandom, $urandom};
        end
      end
      #1;
      checks++;
      if (w_gnt !== w_req) begin failures++; $display("wide port not granted at once"); end
      exp_wrv = w_req & w_gnt & !w_we; exp_wisrd = !w_we;  // the wide port answers reads only
      for (int i = 0; i < 8; i++) exp_wrd[64*i +: 64] = model[w_addr / 8 + i];
      for (int m = 0; m < NM; m++) begin
        exp_rv[m] = m_gnt[m]; exp_isrd[m] = !m_we[m]; exp_rd[m] = model[m_addr[m] / 8];
        if (m_gnt[m] && w_req) narrow_during_wide++;
      end
      if (w_req && w_gnt && w_we)
        for (int b = 0; b < 64; b++) if (w_be[b]) model[w_addr / 8 + b / 8][8*(b%8) +: 8] = w_wdata[8*b +: 8];
      for (int m = 0; m < NM; m++) if (m_gnt[m] && m_we[m])
        for (int b = 0; b < 8; b++) if (m_be[m][b]) model[m_addr[m] / 8][8*b +: 8] = m_wdata[m][8*b +: 8];
      @(posedge clk);
      @(negedge clk);
    end
    checks++;
    if (narrow_during_wide == 0) begin failures++; $display("narrow masters never served during a wide access"); end
    $display("narrow grants during wide accesses: %0d", narrow_during_wide);
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
