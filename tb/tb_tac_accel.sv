// Testbench for tac_accel. A behavioural 16-port TCDM (byte array, one-cycle
// read latency, optionally random per-port grant stalls) serves the
// accelerator. The testbench programs the registers, runs jobs and compares
// every output byte against a reference computed here from the same input
// bytes:
//   1. GEMM with two m-tiles (the second partial), 2 n-tiles, 2 k-tiles,
//      ReLU, random grant stalls.
//   2. GEMM with identity activation and no stalls; the compute rate is
//      checked: one row (16 outputs, 2048 operations) per cycle for all but
//      a bounded start/drain overhead.
//   3. Attention: S = 64, E = P = 64. Pass 1 computes Q.K^T with softmax
//      accumulation; pass 2 computes softmax(A).V with on-the-fly
//      normalisation of the input.
module tb_tac_accel;
  import chimera_pkg::*;

  localparam int unsigned NP = TAC_N_PORTS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cfg_req, cfg_we, done;
  logic [3:0]  cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [NP-1:0]        req, gnt, we, rvalid;
  logic [NP-1:0][31:0]  addr;
  logic [NP-1:0][63:0]  wdata, rdata;

  tac_accel dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_req_i(cfg_req), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .cfg_rdata_o(cfg_rdata), .done_o(done),
    .tcdm_req_o(req), .tcdm_gnt_i(gnt), .tcdm_addr_o(addr), .tcdm_we_o(we),
    .tcdm_wdata_o(wdata), .tcdm_rvalid_i(rvalid), .tcdm_rdata_i(rdata)
  );

  // ---------------- TCDM model ----------------
  logic [7:0] mem [65536];
  logic [NP-1:0] allow;
  bit stall_en = 0;
  assign gnt = req & allow;
  always_ff @(posedge clk) begin
    for (int i = 0; i < NP; i++) begin
      rvalid[i] <= gnt[i] & ~we[i];
      if (gnt[i]) begin
        for (int b = 0; b < 8; b++) begin
          if (we[i]) mem[16'(addr[i] + 32'(b))] <= wdata[i][8*b +: 8];
          else       rdata[i][8*b +: 8] <= mem[16'(addr[i] + 32'(b))];
        end
      end
      allow[i] <= stall_en ? ($urandom % 4 != 0) : 1'b1;
    end
  end

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  task automatic cfg(input int a, input int unsigned d);
    @(negedge clk);
    cfg_req = 1; cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_req = 0; cfg_we = 0;
  endtask

  localparam int I_B = 'h0000, W_B = 'h4000, B_B = 'h8000, O_B = 'hC000, A_B = 'hE000;

  function automatic int sb(input int a); return int'($signed(mem[a])); endfunction
  function automatic int rd32(input int a);
    return int'({mem[a+3], mem[a+2], mem[a+1], mem[a]});
  endfunction

  function automatic int requant(input longint acc, input int mult, input int sh, input int add);
    longint v;
    v = acc * mult;
    if (sh > 0) v = v + (longint'(1) << (sh - 1));
    v = (v >>> sh) + add;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  task automatic run_job(input int m, input int k, input int n, input int i_b, input int w_b,
                         input int o_b, input int act, input bit sm_acc, input bit sm_norm,
                         input int mult, input int sh, input int add, output int took);
    int t0;
    cfg(TAC_REG_I_BASE, i_b); cfg(TAC_REG_W_BASE, w_b); cfg(TAC_REG_B_BASE, B_B);
    cfg(TAC_REG_O_BASE, o_b);
    cfg(TAC_REG_M, m); cfg(TAC_REG_K, k); cfg(TAC_REG_N, n);
    cfg(TAC_REG_REQUANT, {8'd0, 8'(add), 3'd0, 5'(sh), 8'(mult)});
    cfg(TAC_REG_MODE, {28'd0, sm_norm, sm_acc, 2'(act)});
    t0 = cycles;
    cfg(TAC_REG_CTRL, 1);
    @(posedge clk iff done);
    took = cycles - t0;
    // STATUS: done, not busy
    @(negedge clk); cfg_req = 1; cfg_we = 0; cfg_addr = 4'(TAC_REG_STATUS); #1;
    checks++;
    if (cfg_rdata[1:0] != 2'b10) begin failures++; $display("status %b", cfg_rdata[1:0]); end
    cfg_req = 0;
  endtask

  // reference GEMM from memory: input matrix given as an int array
  task automatic check_gemm(input int m, input int k, input int n, input int in_mat[],
                            input int w_b, input int o_b, input int act,
                            input int mult, input int sh, input int add, output int out_mat[]);
    int errs = 0;
    out_mat = new[m * n];
    for (int r = 0; r < m; r++)
      for (int c = 0; c < n; c++) begin
        longint acc = longint'(rd32(B_B + 4 * c));
        int e;
        for (int x = 0; x < k; x++) acc += longint'(in_mat[r * k + x]) * longint'(sb(w_b + c * k + x));
        e = requant(acc, mult, sh, add);
        if (act == 1 && e < 0) e = 0;
        out_mat[r * n + c] = e;
        checks++;
        if (sb(o_b + r * n + c) != e) begin
          failures++;
          if (errs++ < 5) $display("O[%0d][%0d] = %0d expected %0d", r, c, sb(o_b + r * n + c), e);
        end
      end
  endtask

  function automatic int pexp(input int d);
    int e = d >> 3;
    return (e > 8) ? 0 : (256 >> e);
  endfunction

  initial begin
    int in_mat[], out_mat[], logits[], probs[];
    int took;
    cfg_req = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    for (int a = 0; a < 65536; a++) mem[a] = 8'($urandom);
    for (int c = 0; c < 64; c++) begin
      automatic int bv = int'($urandom % 4096) - 2048;
      {mem[B_B+4*c+3], mem[B_B+4*c+2], mem[B_B+4*c+1], mem[B_B+4*c]} = 32'(bv);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- 1: GEMM 70 x 128 x 32, ReLU, random stalls ----
    stall_en = 1;
    run_job(70, 128, 32, I_B, W_B, O_B, 1, 0, 0, 3, 9, -2, took);
    in_mat = new[70 * 128];
    foreach (in_mat[i]) in_mat[i] = sb(I_B + i);
    check_gemm(70, 128, 32, in_mat, W_B, O_B, 1, 3, 9, -2, out_mat);

    // ---- 2: GEMM 64 x 256 x 16, identity, no stalls, rate ----
    stall_en = 0;
    repeat (2) @(negedge clk);
    run_job(64, 256, 16, I_B, W_B, O_B, 0, 0, 0, 1, 10, 5, took);
    in_mat = new[64 * 256];
    foreach (in_mat[i]) in_mat[i] = sb(I_B + i);
    check_gemm(64, 256, 16, in_mat, W_B, O_B, 0, 1, 10, 5, out_mat);
    // 64 rows x 4 k-tiles = 256 compute cycles at 16 outputs (2048 op) per cycle
    checks++;
    if (took > 256 + 60) begin failures++; $display("GEMM took %0d cycles, expected <= 316", took); end
    $display("GEMM 64x256x16: %0d cycles for 256 compute cycles", took);

    // ---- 3: attention, S = E = P = 64 ----
    stall_en = 1;
    // pass 1: logits = Q.K^T (Q at I_B, K row-major = W layout at W_B), softmax accumulate
    run_job(64, 64, 64, I_B, W_B, A_B, 0, 1, 0, 1, 8, 0, took);
    in_mat = new[64 * 64];
    foreach (in_mat[i]) in_mat[i] = sb(I_B + i);
    check_gemm(64, 64, 64, in_mat, W_B, A_B, 0, 1, 8, 0, logits);
    // reference softmax, processing each row in 16-column groups
    probs = new[64 * 64];
    for (int r = 0; r < 64; r++) begin
      automatic int mx = 0, sm = 0;
      for (int g = 0; g < 4; g++) begin
        automatic int lm = -1000, nm = 0, sh = 0;
        for (int c = 0; c < 16; c++) if (logits[r*64 + g*16 + c] > lm) lm = logits[r*64 + g*16 + c];
        if (g == 0) begin nm = lm; sm = 0; end
        else begin
          nm = (lm > mx) ? lm : mx;
          sh = (nm - mx) >> 3;
          sm = (sh >= 24) ? 0 : (sm >> sh);
        end
        mx = nm;
        for (int c = 0; c < 16; c++) sm += pexp(mx - logits[r*64 + g*16 + c]);
      end
      for (int c = 0; c < 64; c++) begin
        automatic int p = (pexp(mx - logits[r*64 + c]) * (65536 / sm)) >> 9;
        probs[r*64 + c] = (p > 127) ? 127 : p;
      end
    end
    // pass 2: out = softmax(A).V, V^T at W_B + 0x1000, output at O_B
    run_job(64, 64, 64, A_B, W_B + 'h1000, O_B, 0, 0, 1, 1, 7, 0, took);
    check_gemm(64, 64, 64, probs, W_B + 'h1000, O_B, 0, 1, 7, 0, out_mat);

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
