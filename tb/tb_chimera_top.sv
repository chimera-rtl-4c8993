// End-to-end testbench for chimera_top at its default parameters.
//
// Another cluster's wide port loads operands into the L2; the cluster DMA
// copies them into the TCDM; the accelerator runs (1) a GEMM with ReLU and
// (2) a single-head attention (Q.K^T with softmax accumulation, then
// softmax(A).V); the DMA copies the results back to L2 and the host reads
// them through the narrow port, where they are compared with a reference
// computed here. Meanwhile a cluster core hammers the TCDM, the DMA
// fetches the attention's Q while the GEMM runs (the tile prefetch of the
// cluster's schedule), and the host reads L2 under DMA traffic in both QoS
// modes.
//
// Each mechanism of the design is counted and must occur at least once:
// TCDM bank conflicts stalling the accelerator, the DMA's wide port taking
// a super bank from narrow masters, weight loading overlapping compute
// (double buffer), softmax accumulation and normalisation, both L2 wide
// banks serving in one cycle (interleaving), narrow/wide contention in the
// L2 QoS arbiter, a bounded-priority forced wide grant, a DMA transfer
// split at a 4 KiB boundary, both DMA directions, core stalls, and a DMA
// transfer into the TCDM while the accelerator computes.
module tb_chimera_top;
  import chimera_pkg::*;

  localparam int NOC = L2_N_WIDE_PORTS - 1;
  localparam int NCORE = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  qos_mode_e qos_mode;
  logic [7:0] qos_bound;
  logic [NOC-1:0]            aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [NOC-1:0]            ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [NOC-1:0][31:0]      aw_addr, ar_addr;
  logic [NOC-1:0][7:0]       aw_len, ar_len;
  logic [NOC-1:0][3:0]       aw_id, ar_id, b_id, r_id;
  logic [NOC-1:0][511:0]     w_data, r_data;
  logic [NOC-1:0][63:0]      w_strb;
  logic        h_aw_valid, h_aw_ready, h_w_valid, h_w_ready, h_w_last, h_b_valid, h_ar_valid, h_ar_ready;
  logic        h_r_valid, h_r_last;
  logic [7:0]  h_aw_len;
  logic [31:0] h_aw_addr, h_ar_addr, h_w_data, h_r_data;
  logic [3:0]  h_b_id, h_r_id;
  logic        cfg_req, cfg_we, acc_done;
  logic [3:0]  cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [NCORE-1:0]       c_req, c_gnt, c_we, c_rvalid;
  logic [NCORE-1:0][31:0] c_addr;
  logic [NCORE-1:0][7:0]  c_be;
  logic [NCORE-1:0][63:0] c_wdata, c_rdata;
  logic        dma_start, dma_dir, dma_busy, dma_done;
  logic [31:0] dma_l2, dma_tc, dma_len;

  chimera_top dut (
    .clk_i(clk), .rst_ni(rst_n), .qos_mode_i(qos_mode), .qos_bound_i(qos_bound),
    .oc_aw_valid_i(aw_valid), .oc_aw_ready_o(aw_ready), .oc_aw_addr_i(aw_addr), .oc_aw_len_i(aw_len),
    .oc_aw_id_i(aw_id), .oc_w_valid_i(w_valid), .oc_w_ready_o(w_ready), .oc_w_data_i(w_data),
    .oc_w_strb_i(w_strb), .oc_w_last_i(w_last), .oc_b_valid_o(b_valid), .oc_b_ready_i(b_ready),
    .oc_b_id_o(b_id), .oc_ar_valid_i(ar_valid), .oc_ar_ready_o(ar_ready), .oc_ar_addr_i(ar_addr),
    .oc_ar_len_i(ar_len), .oc_ar_id_i(ar_id), .oc_r_valid_o(r_valid), .oc_r_ready_i(r_ready),
    .oc_r_data_o(r_data), .oc_r_last_o(r_last), .oc_r_id_o(r_id),
    .h_aw_valid_i(h_aw_valid), .h_aw_ready_o(h_aw_ready), .h_aw_addr_i(h_aw_addr), .h_aw_len_i(h_aw_len),
    .h_aw_id_i(4'd1), .h_w_valid_i(h_w_valid), .h_w_ready_o(h_w_ready), .h_w_data_i(h_w_data),
    .h_w_strb_i(4'hf), .h_w_last_i(h_w_last), .h_b_valid_o(h_b_valid), .h_b_ready_i(1'b1),
    .h_b_id_o(h_b_id), .h_ar_valid_i(h_ar_valid), .h_ar_ready_o(h_ar_ready), .h_ar_addr_i(h_ar_addr),
    .h_ar_len_i(8'd0), .h_ar_id_i(4'd2), .h_r_valid_o(h_r_valid), .h_r_ready_i(1'b1),
    .h_r_data_o(h_r_data), .h_r_last_o(h_r_last), .h_r_id_o(h_r_id),
    .acc_cfg_req_i(cfg_req), .acc_cfg_we_i(cfg_we), .acc_cfg_addr_i(cfg_addr),
    .acc_cfg_wdata_i(cfg_wdata), .acc_cfg_rdata_o(cfg_rdata), .acc_done_o(acc_done),
    .core_req_i(c_req), .core_gnt_o(c_gnt), .core_addr_i(c_addr), .core_we_i(c_we), .core_be_i(c_be),
    .core_wdata_i(c_wdata), .core_rvalid_o(c_rvalid), .core_rdata_o(c_rdata),
    .dma_start_i(dma_start), .dma_dir_i(dma_dir), .dma_l2_addr_i(dma_l2), .dma_tcdm_addr_i(dma_tc),
    .dma_len_i(dma_len), .dma_busy_o(dma_busy), .dma_done_o(dma_done)
  );

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  // ---------------- mechanism counters ----------------
  int n_acc_stall = 0, n_wide_tcdm = 0, n_wb_overlap = 0, n_sm_acc = 0, n_sm_norm = 0;
  int n_both_banks = 0, n_qos_contend = 0, n_qos_forced = 0, n_dma_ar = 0, n_dma_aw = 0, n_core_stall = 0;
  int n_dma_overlap = 0;
  always @(posedge clk) if (rst_n) begin
    if (|(dut.acc_req & ~dut.acc_gnt)) n_acc_stall++;
    if (dut.tw_req && |(dut.acc_req | c_req)) n_wide_tcdm++;
    if (dut.u_accel.wb_wr_en && dut.u_accel.fire) n_wb_overlap++;
    if (dut.u_accel.u_softmax.acc_valid_i) n_sm_acc++;
    if (dut.u_accel.fire && dut.u_accel.sm_norm_q) n_sm_norm++;
    if (dut.u_l2.wt_req[0] && dut.u_l2.wt_gnt[0] && dut.u_l2.wt_req[1] && dut.u_l2.wt_gnt[1]) n_both_banks++;
    if (dut.u_l2.g_wide_bank[0].u_qos.narrow_any && dut.u_l2.g_wide_bank[0].u_qos.w_req_i) n_qos_contend++;
    if (dut.u_l2.g_wide_bank[1].u_qos.narrow_any && dut.u_l2.g_wide_bank[1].u_qos.w_req_i) n_qos_contend++;
    if (dut.u_l2.g_wide_bank[0].u_qos.narrow_any && dut.u_l2.g_wide_bank[0].u_qos.wide_wins) n_qos_forced++;
    if (dut.u_l2.g_wide_bank[1].u_qos.narrow_any && dut.u_l2.g_wide_bank[1].u_qos.wide_wins) n_qos_forced++;
    if (dut.d_ar_valid && dut.d_ar_ready) n_dma_ar++;
    if (dut.d_aw_valid && dut.d_aw_ready) n_dma_aw++;
    if (|(c_req & ~c_gnt)) n_core_stall++;
    if (dut.tw_req && dut.u_accel.fire) n_dma_overlap++;
  end

  // ---------------- L2 image and loaders ----------------
  logic [7:0] img [int];   // what the testbench has put into L2

  task automatic oc_write(input int addr, input int beats);
    @(negedge clk);
    aw_valid[0] = 1; aw_addr[0] = addr; aw_len[0] = 8'(beats - 1); aw_id[0] = 4'd3;
    @(posedge clk iff aw_ready[0]);
    @(negedge clk); aw_valid[0] = 0;
    for (int b = 0; b < beats; b++) begin
      for (int i = 0; i < 64; i++) w_data[0][8*i +: 8] = img.exists(addr + 64*b + i) ? img[addr + 64*b + i] : 8'h00;
      w_valid[0] = 1; w_strb[0] = '1; w_last[0] = (b == beats - 1);
      @(posedge clk iff w_ready[0]);
      @(negedge clk);
    end
    w_valid[0] = 0; b_ready[0] = 1;
    @(posedge clk iff b_valid[0]);
    @(negedge clk); b_ready[0] = 0;
  endtask

  task automatic load_l2(input int addr, input int bytes);
    for (int a = addr; a < addr + bytes; a += 64 * 32) oc_write(a, ((addr + bytes - a) >= 64 * 32) ? 32 : (addr + bytes - a) / 64);
  endtask

  // another cluster reading L2 (data compared with the image)
  task automatic oc_read(input int addr, input int beats);
    int errs = 0;
    @(negedge clk);
    ar_valid[1] = 1; ar_addr[1] = addr; ar_len[1] = 8'(beats - 1); ar_id[1] = 4'd5;
    @(posedge clk iff ar_ready[1]);
    @(negedge clk); ar_valid[1] = 0; r_ready[1] = 1;
    for (int b = 0; b < beats; b++) begin
      @(posedge clk iff r_valid[1]);
      for (int i = 0; i < 64; i++) if (r_data[1][8*i +: 8] != img[addr + 64*b + i]) errs++;
    end
    @(negedge clk); r_ready[1] = 0;
    checks++;
    if (errs != 0) begin failures++; $display("other-cluster read: %0d byte mismatches", errs); end
  endtask

  int h_lat_max = 0;
  task automatic host_read(input int addr, output logic [31:0] d);
    int t0;
    @(negedge clk);
    h_ar_valid = 1; h_ar_addr = addr;
    @(posedge clk iff h_ar_ready);
    t0 = cycles;
    @(negedge clk); h_ar_valid = 0;
    @(posedge clk iff h_r_valid);
    d = h_r_data;
    if (cycles - t0 > h_lat_max) h_lat_max = cycles - t0;
  endtask

  task automatic host_burst_write(input int addr, input int beats);
    @(negedge clk);
    h_aw_valid = 1; h_aw_addr = addr; h_aw_len = 8'(beats - 1);
    @(posedge clk iff h_aw_ready);
    @(negedge clk); h_aw_valid = 0;
    for (int b = 0; b < beats; b++) begin
      h_w_valid = 1; h_w_data = $urandom; h_w_last = (b == beats - 1);
      for (int i = 0; i < 4; i++) img[addr + 4*b + i] = h_w_data[8*i +: 8];
      @(posedge clk iff h_w_ready);
      @(negedge clk);
    end
    h_w_valid = 0; h_aw_len = 0;
    @(posedge clk iff h_b_valid);
  endtask

  task automatic dma(input bit dir, input int l2, input int tc, input int len);
    @(negedge clk);
    dma_start = 1; dma_dir = dir; dma_l2 = l2; dma_tc = tc; dma_len = len;
    @(negedge clk); dma_start = 0;
    @(posedge clk iff dma_done);
  endtask

  task automatic cfg(input int a, input int unsigned d);
    @(negedge clk);
    cfg_req = 1; cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_req = 0; cfg_we = 0;
  endtask

  task automatic accel(input int m, input int k, input int n, input int i_b, input int w_b, input int b_b,
                       input int o_b, input int act, input bit sm_acc, input bit sm_norm, input int rq);
    cfg(TAC_REG_I_BASE, i_b); cfg(TAC_REG_W_BASE, w_b); cfg(TAC_REG_B_BASE, b_b); cfg(TAC_REG_O_BASE, o_b);
    cfg(TAC_REG_M, m); cfg(TAC_REG_K, k); cfg(TAC_REG_N, n); cfg(TAC_REG_REQUANT, rq);
    cfg(TAC_REG_MODE, {28'd0, sm_norm, sm_acc, 2'(act)});
    cfg(TAC_REG_CTRL, 1);
    @(posedge clk iff acc_done);
  endtask

  // ---------------- a cluster core using the TCDM ----------------
  bit core_on = 0;
  logic [63:0] core_ref [16];
  task automatic core_traffic();
    int k = 0;
    while (core_on) begin
      int slot = k % 16;
      @(negedge clk);
      c_req[0] = 1; c_addr[0] = 'h1F000 + 8 * slot; c_be[0] = 8'hff;
      c_we[0] = (k < 16) || ($urandom % 2 == 0);
      c_wdata[0] = {$urandom, $urandom};
      @(posedge clk iff c_gnt[0]);
      if (c_we[0]) core_ref[slot] = c_wdata[0];
      @(negedge clk);
      c_req[0] = 0;
      if (!c_we[0]) begin
        checks++;
        if (c_rdata[0] != core_ref[slot]) begin failures++; $display("core read mismatch"); end
      end
      k++;
    end
  endtask

  // ---------------- references ----------------
  function automatic int sbyte(input int a); return int'($signed(img[a])); endfunction
  function automatic int requant(input longint acc, input int mult, input int sh, input int add);
    longint v = acc * mult;
    if (sh > 0) v = v + (longint'(1) << (sh - 1));
    v = (v >>> sh) + add;
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction
  function automatic int pexp(input int d);
    int e = d >> 3;
    return (e > 8) ? 0 : (256 >> e);
  endfunction

  // result rows read back from L2 through the host port
  task automatic check_result(input int l2_o, input int m, input int n, input int ref_o[]);
    logic [31:0] d;
    int errs = 0;
    for (int r = 0; r < m; r++)
      for (int c = 0; c < n; c += 4) begin
        host_read(l2_o + r * n + c, d);
        for (int i = 0; i < 4; i++) begin
          checks++;
          if (int'($signed(d[8*i +: 8])) != ref_o[r * n + c + i]) begin
            failures++;
            if (errs++ < 5) $display("result[%0d][%0d] = %0d expected %0d", r, c + i, int'($signed(d[8*i +: 8])), ref_o[r*n+c+i]);
          end
        end
      end
  endtask

  localparam int L_I = 'h00000, L_W = 'h04000, L_B = 'h08000, L_O = 'h09000;
  localparam int L_Q = 'h10000, L_K = 'h11000, L_VT = 'h12000, L_Y = 'h13000;
  localparam int T_I = 'h0000, T_W = 'h4000, T_B = 'h8000, T_O = 'hC000, T_A = 'hE000, T_Y = 'h10000, T_Q = 'h14000;
  localparam int M = 64, K = 128, N = 32;

  initial begin
    int ref_o[], logit[], prob[], ref_y[];
    logic [31:0] d;
    aw_valid = '0; w_valid = '0; b_ready = '0; ar_valid = '0; r_ready = '0; aw_addr = '0; aw_len = '0;
    aw_id = '0; ar_addr = '0; ar_len = '0; ar_id = '0; w_data = '0; w_strb = '0; w_last = '0;
    h_aw_valid = 0; h_w_valid = 0; h_ar_valid = 0; h_aw_addr = 0; h_ar_addr = 0; h_w_data = 0;
    h_w_last = 1; h_aw_len = 0;
    cfg_req = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    c_req = '0; c_addr = '0; c_we = '0; c_be = '0; c_wdata = '0;
    dma_start = 0; dma_dir = 0; dma_l2 = 0; dma_tc = 0; dma_len = 0;
    qos_mode = QOS_FIXED; qos_bound = 8'd4;
    // operands
    for (int i = 0; i < M * K; i++) img[L_I + i] = 8'($urandom);
    for (int i = 0; i < N * K; i++) img[L_W + i] = 8'($urandom);
    for (int c = 0; c < 64; c++) {img[L_B+4*c+3], img[L_B+4*c+2], img[L_B+4*c+1], img[L_B+4*c]} = 32'(int'($urandom % 2048) - 1024);
    for (int i = 0; i < 64 * 64; i++) begin
      img[L_Q + i] = 8'($urandom); img[L_K + i] = 8'($urandom); img[L_VT + i] = 8'($urandom);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    load_l2(L_I, M * K); load_l2(L_W, N * K); load_l2(L_B, 256);
    load_l2(L_Q, 4096); load_l2(L_K, 4096); load_l2(L_VT, 4096);
    host_read(L_B, d);
    checks++;
    if (d != {img[L_B+3], img[L_B+2], img[L_B+1], img[L_B]}) begin failures++; $display("L2 load failed"); end

    // ---- GEMM: O = relu(requant(I.W + B)) ----
    dma(0, L_I, T_I, M * K); dma(0, L_W, T_W, N * K); dma(0, L_B, T_B, 256);
    core_on = 1;
    fork
      core_traffic();
      begin
        accel(M, K, N, T_I, T_W, T_B, T_O, 1, 0, 0, {8'd0, 8'(-3), 3'd0, 5'd9, 8'd5});
        core_on = 0;
      end
      // the DMA brings in the next job's Q while the accelerator computes
      begin repeat (40) @(negedge clk); dma(0, L_Q, T_Q, 4096); end
    join
    dma(1, L_O, T_O, M * N);
    ref_o = new[M * N];
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++) begin
        automatic longint acc = longint'(int'({img[L_B+4*c+3], img[L_B+4*c+2], img[L_B+4*c+1], img[L_B+4*c]}));
        for (int x = 0; x < K; x++) acc += longint'(sbyte(L_I + r*K + x)) * longint'(sbyte(L_W + c*K + x));
        ref_o[r*N + c] = requant(acc, 5, 9, -3);
        if (ref_o[r*N + c] < 0) ref_o[r*N + c] = 0;
      end
    check_result(L_O, M, N, ref_o);

    // ---- attention: Y = softmax(Q.K^T) . V (Q is already in the TCDM) ----
    fork
      begin dma(0, L_K, T_W, 4096); dma(0, L_VT, T_W + 'h1000, 4096); end
      oc_read('h00040, 64);
    join
    // bias zero for the attention passes
    for (int c = 0; c < 64; c++) {img[L_B+4*c+3], img[L_B+4*c+2], img[L_B+4*c+1], img[L_B+4*c]} = 32'd0;
    load_l2(L_B, 256);
    dma(0, L_B, T_B, 256);
    accel(64, 64, 64, T_Q, T_W, T_B, T_A, 0, 1, 0, {8'd0, 8'd0, 3'd0, 5'd8, 8'd1});
    accel(64, 64, 64, T_A, T_W + 'h1000, T_B, T_Y, 0, 0, 1, {8'd0, 8'd0, 3'd0, 5'd7, 8'd1});
    // write back while the host reads L2, in both QoS modes
    core_on = 1;
    fork
      dma(1, L_Y, T_Y, 4096);
      for (int i = 0; i < 40; i++) host_read(L_Y + 4 * ($urandom % 1024), d);
      begin core_traffic(); end
      begin @(posedge clk iff dma_done); core_on = 0; end
    join
    qos_mode = QOS_BOUNDED;
    fork
      dma(1, L_Y, T_Y, 4096);
      host_burst_write('h20000, 64);
    join
    checks++;
    if (h_lat_max > 3) begin failures++; $display("host read latency %0d under DMA traffic", h_lat_max); end
    logit = new[64 * 64]; prob = new[64 * 64]; ref_y = new[64 * 64];
    for (int r = 0; r < 64; r++)
      for (int c = 0; c < 64; c++) begin
        automatic longint acc = 0;
        for (int x = 0; x < 64; x++) acc += longint'(sbyte(L_Q + r*64 + x)) * longint'(sbyte(L_K + c*64 + x));
        logit[r*64 + c] = requant(acc, 1, 8, 0);
      end
    for (int r = 0; r < 64; r++) begin
      automatic int mx = 0, sm = 0;
      for (int g = 0; g < 4; g++) begin
        automatic int lm = -1000, nm = 0;
        for (int c = 0; c < 16; c++) if (logit[r*64 + g*16 + c] > lm) lm = logit[r*64 + g*16 + c];
        if (g == 0) begin nm = lm; sm = 0; end
        else begin
          nm = (lm > mx) ? lm : mx;
          sm = (((nm - mx) >> 3) >= 24) ? 0 : (sm >> ((nm - mx) >> 3));
        end
        mx = nm;
        for (int c = 0; c < 16; c++) sm += pexp(mx - logit[r*64 + g*16 + c]);
      end
      for (int c = 0; c < 64; c++) begin
        automatic int p = (pexp(mx - logit[r*64 + c]) * (65536 / sm)) >> 9;
        prob[r*64 + c] = (p > 127) ? 127 : p;
      end
    end
    for (int r = 0; r < 64; r++)
      for (int c = 0; c < 64; c++) begin
        automatic longint acc = 0;
        for (int x = 0; x < 64; x++) acc += longint'(prob[r*64 + x]) * longint'(sbyte(L_VT + c*64 + x));
        ref_y[r*64 + c] = requant(acc, 1, 7, 0);
      end
    check_result(L_Y, 64, 64, ref_y);
    // the host burst landed in L2
    host_read('h20000 + 4 * 37, d);
    checks++;
    if (d != {img['h20000+151], img['h20000+150], img['h20000+149], img['h20000+148]}) begin
      failures++; $display("host burst write lost");
    end

    // ---- every mechanism happened ----
    begin
      automatic int cnt [12] = '{n_acc_stall, n_wide_tcdm, n_wb_overlap, n_sm_acc, n_sm_norm, n_both_banks,
                       n_qos_contend, n_qos_forced, n_dma_ar, n_dma_aw, n_core_stall, n_dma_overlap};
      automatic string nm [12] = '{"accelerator TCDM stall", "DMA wide TCDM access beside narrow masters",
                         "weight load overlapping compute", "softmax accumulate", "softmax normalise",
                         "both L2 wide banks busy", "L2 narrow/wide contention", "bounded-priority wide grant",
                         "DMA read bursts", "DMA write bursts", "core TCDM stall",
                         "DMA transfer overlapping accelerator compute"};
      for (int i = 0; i < 12; i++) begin
        checks++;
        $display("%-45s %0d", nm[i], cnt[i]);
        if (cnt[i] == 0) begin failures++; $display("  never happened"); end
      end
      checks++;
      if (n_dma_ar != 8) begin failures++; $display("DMA read bursts %0d, expected 8 (the 8 KiB copy split at 4 KiB)", n_dma_ar); end
    end
    $display("host read worst latency %0d cycles, %0d cycles in total", h_lat_max, cycles);
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
