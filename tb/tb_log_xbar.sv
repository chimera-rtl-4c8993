// Testbench for log_xbar: 4 masters, 8 word-interleaved banks of 32 bits.
// Masters issue random reads and writes and hold each request until it is
// granted; banks accept at random (t_gnt). Checks: every read returns the
// data of the model memory one cycle after its grant, at most one master
// is granted per bank per cycle, and under full contention on one bank the
// round-robin arbiter serves every master within NM grants.
module tb_log_xbar;
  localparam int NM = 4, NT = 8, ROW_W = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NM-1:0] m_req, m_gnt, m_we, m_rvalid;
  logic [NM-1:0][31:0] m_addr, m_wdata, m_rdata;
  logic [NM-1:0][3:0] m_be;
  logic [NT-1:0] t_req, t_gnt, t_we;
  logic [NT-1:0][ROW_W-1:0] t_addr;
  logic [NT-1:0][3:0] t_be;
  logic [NT-1:0][31:0] t_wdata, t_rdata;
  logic [31:0] model [NT << ROW_W];
  int checks = 0, failures = 0;
  bit contend = 0;

  log_xbar #(.NM(NM), .NT(NT), .DW(32), .AW(32), .SEL_LSB(2), .ROW_W(ROW_W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .m_req_i(m_req), .m_gnt_o(m_gnt), .m_addr_i(m_addr), .m_we_i(m_we),
    .m_be_i(m_be), .m_wdata_i(m_wdata), .m_rvalid_o(m_rvalid), .m_rdata_o(m_rdata), .t_req_o(t_req),
    .t_gnt_i(t_gnt), .t_addr_o(t_addr), .t_we_o(t_we), .t_be_o(t_be), .t_wdata_o(t_wdata), .t_rdata_i(t_rdata));

  for (genvar t = 0; t < NT; t++) begin : g_bank
    sram_bank #(.WORDS(1 << ROW_W), .DW(32)) u_bank (
      .clk_i(clk), .req_i(t_req[t] & t_gnt[t]), .we_i(t_we[t]), .addr_i(t_addr[t]), .be_i(t_be[t]),
      .wdata_i(t_wdata[t]), .rdata_o(t_rdata[t]));
  end

  logic [NM-1:0] exp_rv, exp_rd_v;
  logic [NM-1:0][31:0] exp_rd;
  int since [NM];
  int worst_wait = 0;

  always @(negedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      checks++;
      if (m_rvalid[m] !== exp_rv[m]) begin failures++; $display("master %0d rvalid %b expected %b", m, m_rvalid[m], exp_rv[m]); end
      else if (exp_rv[m] && exp_rd_v[m] && m_rdata[m] !== exp_rd[m]) begin failures++; $display("%0t: master %0d read %h expected %h", $time, m, m_rdata[m], exp_rd[m]); end
    end
    for (int m = 0; m < NM; m++) begin
      if (!m_req[m] || exp_rv[m]) begin
        if (contend && since[m] > worst_wait) worst_wait = since[m];
        since[m] = 0;
      end else since[m]++;
    end
  end

  initial begin
    m_req = '0; m_we = '0; m_addr = '0; m_wdata = '0; m_be = '0; t_gnt = '1; exp_rv = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0, fill = 0; t < 7000; t++) begin
      contend = (t >= 5000);
      for (int m = 0; m < NM; m++) if (!m_req[m] || exp_rv[m]) begin
        if (fill < (NT << ROW_W)) begin
          // first write every word once through master 0
          m_req[m] = (m == 0); m_we[m] = 1; m_be[m] = '1; m_wdata[m] = $urandom;
          m_addr[m] = 32'(fill * 4);
          if (m == 0) fill++;
          continue;
        end
        m_req[m] = $urandom % 4 != 0 || contend;
        m_we[m] = $urandom % 2;
        m_addr[m] = contend ? 32'(($urandom % 64) * NT * 4) : 32'(($urandom % (NT << ROW_W)) * 4);
        m_be[m] = 4'($urandom);
        m_wdata[m] = $urandom;
      end
      t_gnt = contend ? '1 : NT'($urandom | $urandom);
      #1;
      begin
        automatic int per_bank [NT];
        for (int m = 0; m < NM; m++) begin
          automatic int w = m_addr[m] >> 2;
          exp_rv[m] = m_gnt[m];
          exp_rd_v[m] = !m_we[m];
          exp_rd[m] = model[w];
          if (m_gnt[m]) begin
            per_bank[w % NT]++;
            if (m_we[m]) for (int b = 0; b < 4; b++) if (m_be[m][b]) model[w][8*b +: 8] = m_wdata[m][8*b +: 8];
          end
        end
        for (int b = 0; b < NT; b++) begin
          checks++;
          if (per_bank[b] > 1) begin failures++; $display("bank %0d granted %0d masters", b, per_bank[b]); end
        end
      end
      @(posedge clk);
      @(negedge clk);
    end
    // a master still waiting at the end counts too
    for (int m = 0; m < NM; m++) if (since[m] > worst_wait) worst_wait = since[m];
    checks++;
    if (worst_wait > NM - 1) begin failures++; $display("round robin: a master waited %0d cycles", worst_wait); end
    $display("worst wait under full contention: %0d cycles", worst_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
