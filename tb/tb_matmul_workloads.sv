// Workload testbench: the six MATMUL sizes (M x K x N) evaluated for one
// cluster in the published performance study: 64x128x64, 64x256x64,
// 64x512x64, 128x128x64, 128x128x128 and 128x512x64. Each runs on the
// accelerator attached to the full-size 128 KiB cluster memory
// (cluster_tcdm with its default 25 masters; the core ports stay idle).
// Operands are written into the cluster memory through the 512-bit wide
// port, one line per cycle, as the DMA would; the result is read back the
// same way and compared byte for byte with a reference computed here.
// The largest case uses 104.3 KiB of the 128 KiB.
//
// Cycle counts: the ideal is M*K*N/1024 cycles (1024 MACs per cycle). The
// test requires at least 80% of that rate per job, start to done.
module tb_matmul_workloads;
  import chimera_pkg::*;
  localparam int NP = TAC_N_PORTS, NM = 25;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cfg_req, cfg_we, done;
  logic [3:0]  cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [NP-1:0]       a_req, a_gnt, a_we, a_rvalid;
  logic [NP-1:0][31:0] a_addr;
  logic [NP-1:0][63:0] a_wdata, a_rdata;
  logic [NM-1:0]       m_gnt, m_rvalid;
  logic [NM-1:0][63:0] m_rdata;
  logic w_req, w_gnt, w_we, w_rvalid;
  logic [31:0] w_addr;
  logic [511:0] w_wdata, w_rdata;

  tac_accel u_acc (
    .clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr),
    .cfg_wdata_i(cfg_wdata), .cfg_rdata_o(cfg_rdata), .done_o(done),
    .tcdm_req_o(a_req), .tcdm_gnt_i(a_gnt), .tcdm_addr_o(a_addr), .tcdm_we_o(a_we),
    .tcdm_wdata_o(a_wdata), .tcdm_rvalid_i(a_rvalid), .tcdm_rdata_i(a_rdata));

  cluster_tcdm u_tcdm (
    .clk_i(clk), .rst_ni(rst_n),
    .m_req_i({9'd0, a_req}), .m_gnt_o(m_gnt), .m_addr_i({{9{32'd0}}, a_addr}), .m_we_i({9'd0, a_we}),
    .m_be_i({{9{8'h00}}, {NP{8'hff}}}), .m_wdata_i({{9{64'd0}}, a_wdata}), .m_rvalid_o(m_rvalid),
    .m_rdata_o(m_rdata), .wide_req_i(w_req), .wide_gnt_o(w_gnt), .wide_addr_i(w_addr), .wide_we_i(w_we),
    .wide_be_i('1), .wide_wdata_i(w_wdata), .wide_rvalid_o(w_rvalid), .wide_rdata_o(w_rdata));

  assign a_gnt    = m_gnt[NP-1:0];
  assign a_rvalid = m_rvalid[NP-1:0];
  assign a_rdata  = m_rdata[NP-1:0];

  int checks = 0, failures = 0;
  logic [7:0] img [131072];     // what the test wrote / expects

  task automatic cfg(input int a, input int unsigned d);
    @(negedge clk);
    cfg_req = 1; cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_req = 0; cfg_we = 0;
  endtask

  // copy img[base +: bytes] into the cluster memory through the wide port
  task automatic load(input int base, input int bytes);
    for (int a = base; a < base + bytes; a += 64) begin
      @(negedge clk);
      w_req = 1; w_we = 1; w_addr = 32'(a);
      for (int b = 0; b < 64; b++) w_wdata[8*b +: 8] = img[a + b];
    end
    @(negedge clk);
    w_req = 0; w_we = 0;
  endtask

  function automatic int requant(input longint acc, input int mult, input int sh, input int add);
    longint v = acc * mult;
    if (sh > 0) v = v + (longint'(1) << (sh - 1));
    v = (v >>> sh) + add;
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction

  task automatic run(input int m, input int k, input int n);
    int i_b = 0, w_b = m * k, b_b = m * k + n * k, o_b = m * k + n * k + 4 * n;
    int t0, took, ideal, errs = 0;
    int mult = 3, sh = 9 + (k / 128), add = 2;
    for (int a = 0; a < b_b; a++) img[a] = 8'($urandom);
    for (int c = 0; c < n; c++) begin
      automatic int bv = int'($urandom % 8192) - 4096;
      {img[b_b + 4*c + 3], img[b_b + 4*c + 2], img[b_b + 4*c + 1], img[b_b + 4*c]} = 32'(bv);
    end
    load(0, o_b);
    cfg(TAC_REG_I_BASE, i_b); cfg(TAC_REG_W_BASE, w_b); cfg(TAC_REG_B_BASE, b_b); cfg(TAC_REG_O_BASE, o_b);
    cfg(TAC_REG_M, m); cfg(TAC_REG_K, k); cfg(TAC_REG_N, n);
    cfg(TAC_REG_REQUANT, {8'd0, 8'(add), 3'd0, 5'(sh), 8'(mult)});
    cfg(TAC_REG_MODE, 32'(ACT_RELU));
    @(negedge clk);
    t0 = $time;
    cfg(TAC_REG_CTRL, 1);
    while (!done) @(negedge clk);
    took = ($time - t0) / 10;
    ideal = m * k * n / 1024;
    // read the result back through the wide port
    for (int a = o_b; a < o_b + m * n; a += 64) begin
      @(negedge clk);
      w_req = 1; w_we = 0; w_addr = 32'(a);
      @(negedge clk);
      w_req = 0;
      for (int b = 0; b < 64 && a + b < o_b + m * n; b++) begin
        automatic int r = (a + b - o_b) / n, c = (a + b - o_b) % n;
        automatic longint acc = longint'($signed(32'({img[b_b+4*c+3], img[b_b+4*c+2], img[b_b+4*c+1], img[b_b+4*c]})));
        automatic int e;
        for (int x = 0; x < k; x++)
          acc += longint'($signed(img[i_b + r * k + x])) * longint'($signed(img[w_b + c * k + x]));
        e = requant(acc, mult, sh, add);
        if (e < 0) e = 0;
        checks++;
        if (int'($signed(w_rdata[8*b +: 8])) != e) begin
          failures++;
          if (errs++ < 5) $display("%0dx%0dx%0d: O[%0d][%0d] = %0d expected %0d", m, k, n, r, c, $signed(w_rdata[8*b +: 8]), e);
        end
      end
    end
    checks++;
    if (took * 8 > ideal * 10) begin failures++; $display("%0dx%0dx%0d: %0d cycles, below 80%% of %0d", m, k, n, took, ideal); end
    $display("MATMUL %0dx%0dx%0d: %0d cycles, ideal %0d, utilisation %0d%%, operands %0d bytes",
             m, k, n, took, ideal, 100 * ideal / took, o_b + m * n);
  endtask

  initial begin
    cfg_req = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    w_req = 0; w_we = 0; w_addr = 0; w_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(64, 128, 64);
    run(64, 256, 64);
    run(64, 512, 64);
    run(128, 128, 64);
    run(128, 128, 128);
    run(128, 512, 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
