// Workload testbench for the L2 QoS experiment: a host issues 32-bit
// single-word reads through the narrow port while a cluster DMA keeps
// issuing AXI4 burst reads over the same memory region through a wide
// port. The interfering burst length is swept over 64, 128, 256, 512,
// 1024, 2048, 4096 and 8192 bytes (1 to 128 beats of 64 bytes) and 2,500
// narrow reads are made at each length, 20,000 in all. Fixed priority for
// narrow accesses is used.
//
// Checks: every narrow read returns the right word; the worst narrow
// latency (AR handshake to R) stays within 34 cycles, the chip's quoted
// worst case, at every burst length; the average does not grow with the
// burst length (spread of the averages at most 1 cycle); and the wide
// stream really competed with the narrow reads at every length (wide beats
// delivered and cycles with both kinds of request on a bank).
module tb_qos_workload;
  import chimera_pkg::*;

  localparam int NWP = L2_N_WIDE_PORTS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  qos_mode_e qos_mode;
  logic [7:0] qos_bound;
  logic [NWP-1:0]            aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [NWP-1:0]            ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [NWP-1:0][31:0]      aw_addr, ar_addr;
  logic [NWP-1:0][7:0]       aw_len, ar_len;
  logic [NWP-1:0][3:0]       aw_id, ar_id, b_id, r_id;
  logic [NWP-1:0][511:0]     w_data, r_data;
  logic [NWP-1:0][63:0]      w_strb;
  logic        n_aw_valid, n_aw_ready, n_w_valid, n_w_ready, n_b_valid, n_ar_valid, n_ar_ready;
  logic        n_r_valid, n_r_last, n_w_last;
  logic [7:0]  n_aw_len;
  logic [31:0] n_aw_addr, n_ar_addr, n_w_data, n_r_data;
  logic [3:0]  n_b_id, n_r_id;

  mem_island dut (
    .clk_i(clk), .rst_ni(rst_n), .qos_mode_i(qos_mode), .qos_bound_i(qos_bound),
    .wd_aw_valid_i(aw_valid), .wd_aw_ready_o(aw_ready), .wd_aw_addr_i(aw_addr), .wd_aw_len_i(aw_len),
    .wd_aw_id_i(aw_id), .wd_w_valid_i(w_valid), .wd_w_ready_o(w_ready), .wd_w_data_i(w_data),
    .wd_w_strb_i(w_strb), .wd_w_last_i(w_last), .wd_b_valid_o(b_valid), .wd_b_ready_i(b_ready),
    .wd_b_id_o(b_id), .wd_ar_valid_i(ar_valid), .wd_ar_ready_o(ar_ready), .wd_ar_addr_i(ar_addr),
    .wd_ar_len_i(ar_len), .wd_ar_id_i(ar_id), .wd_r_valid_o(r_valid), .wd_r_ready_i(r_ready),
    .wd_r_data_o(r_data), .wd_r_last_o(r_last), .wd_r_id_o(r_id),
    .nr_aw_valid_i(n_aw_valid), .nr_aw_ready_o(n_aw_ready), .nr_aw_addr_i(n_aw_addr),
    .nr_aw_len_i(n_aw_len), .nr_aw_id_i(4'd1), .nr_w_valid_i(n_w_valid), .nr_w_ready_o(n_w_ready),
    .nr_w_data_i(n_w_data), .nr_w_strb_i(4'hf), .nr_w_last_i(n_w_last), .nr_b_valid_o(n_b_valid),
    .nr_b_ready_i(1'b1), .nr_b_id_o(n_b_id), .nr_ar_valid_i(n_ar_valid), .nr_ar_ready_o(n_ar_ready),
    .nr_ar_addr_i(n_ar_addr), .nr_ar_len_i(8'd0), .nr_ar_id_i(4'd2), .nr_r_valid_o(n_r_valid),
    .nr_r_ready_i(1'b1), .nr_r_data_o(n_r_data), .nr_r_last_o(n_r_last), .nr_r_id_o(n_r_id)
  );

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  // reference image of the L2, byte addressed (low 18 bits)
  logic [7:0] ref_mem [int];

  task automatic wide_write(input int p, input int addr, input int beats);
    @(negedge clk);
    aw_valid[p] = 1; aw_addr[p] = addr; aw_len[p] = 8'(beats - 1); aw_id[p] = 4'(p);
    @(posedge clk iff aw_ready[p]);
    @(negedge clk); aw_valid[p] = 0;
    for (int b = 0; b < beats; b++) begin
      for (int i = 0; i < 16; i++) w_data[p][32*i +: 32] = $urandom;
      for (int i = 0; i < 64; i++) ref_mem[(addr + 64*b + i) & 'h3ffff] = w_data[p][8*i +: 8];
      w_valid[p] = 1; w_strb[p] = '1; w_last[p] = (b == beats - 1);
      @(posedge clk iff w_ready[p]);
      @(negedge clk);
    end
    w_valid[p] = 0;
    b_ready[p] = 1;
    @(posedge clk iff b_valid[p]);
    checks++; if (b_id[p] != 4'(p)) failures++;
    @(negedge clk); b_ready[p] = 0;
  endtask

  // read burst; compare = check data against the reference image
  task automatic wide_read(input int p, input int addr, input int beats, input bit compare);
    int errs = 0;
    @(negedge clk);
    ar_valid[p] = 1; ar_addr[p] = addr; ar_len[p] = 8'(beats - 1); ar_id[p] = 4'(p);
    @(posedge clk iff ar_ready[p]);
    @(negedge clk); ar_valid[p] = 0;
    r_ready[p] = 1;
    for (int b = 0; b < beats; b++) begin
      @(posedge clk iff r_valid[p]);
      if (compare) begin
        checks++;
        for (int i = 0; i < 64; i++)
          if (r_data[p][8*i +: 8] != ref_mem[(addr + 64*b + i) & 'h3ffff]) errs++;
        if (errs != 0) failures++;
        checks++;
        if (r_last[p] != (b == beats - 1) || r_id[p] != 4'(p)) failures++;
      end
    end
    @(negedge clk); r_ready[p] = 0;
    if (errs != 0) $display("port %0d read at %h: %0d byte mismatches", p, addr, errs);
  endtask

  int lat_max;
  task automatic narrow_read(input int addr, input bit compare);
    int t0;
    logic [31:0] e;
    @(negedge clk);
    n_ar_valid = 1; n_ar_addr = addr;
    @(posedge clk iff n_ar_ready);
    t0 = cycles;
    @(negedge clk); n_ar_valid = 0;
    @(posedge clk iff n_r_valid);
    if (cycles - t0 > lat_max) lat_max = cycles - t0;
    if (compare) begin
      for (int i = 0; i < 4; i++) e[8*i +: 8] = ref_mem[(addr + i) & 'h3ffff];
      checks++;
      if (n_r_data != e || !n_r_last || n_r_id != 4'd2) begin
        failures++; $display("narrow read %h: %h expected %h", addr, n_r_data, e);
      end
    end
  endtask

  task automatic narrow_write(input int addr, input logic [31:0] d);
    @(negedge clk);
    n_aw_valid = 1; n_aw_addr = addr; n_w_valid = 1; n_w_data = d;
    @(posedge clk iff n_aw_ready);
    @(negedge clk); n_aw_valid = 0;
    @(posedge clk iff n_w_ready);
    @(negedge clk); n_w_valid = 0;
    for (int i = 0; i < 4; i++) ref_mem[(addr + i) & 'h3ffff] = d[8*i +: 8];
    @(posedge clk iff n_b_valid);
  endtask

  // narrow write burst: one word per cycle, keeps a wide bank busy with narrow requests
  task automatic narrow_burst(input int addr, input int beats);
    @(negedge clk);
    n_aw_valid = 1; n_aw_addr = addr; n_aw_len = 8'(beats - 1);
    @(posedge clk iff n_aw_ready);
    @(negedge clk); n_aw_valid = 0;
    for (int b = 0; b < beats; b++) begin
      n_w_valid = 1; n_w_data = $urandom; n_w_last = (b == beats - 1);
      for (int i = 0; i < 4; i++) ref_mem[(addr + 4*b + i) & 'h3ffff] = n_w_data[8*i +: 8];
      @(posedge clk iff n_w_ready);
      @(negedge clk);
    end
    n_w_valid = 0; n_w_last = 1; n_aw_len = 0;
    @(posedge clk iff n_b_valid);
  endtask

  // background wide streams for the QoS test
  bit stream_on = 0;
  int wide_beats = 0;
  always @(posedge clk) for (int p = 0; p < NWP; p++) if (r_valid[p] && r_ready[p]) wide_beats++;
  int forced = 0, contended = 0;
  always @(posedge clk) begin
    if (dut.g_wide_bank[0].u_qos.narrow_any && dut.g_wide_bank[0].u_qos.w_req_i) contended++;
    if (dut.g_wide_bank[1].u_qos.narrow_any && dut.g_wide_bank[1].u_qos.w_req_i) contended++;
    if (dut.g_wide_bank[0].u_qos.narrow_any && dut.g_wide_bank[0].u_qos.wide_wins) forced++;
    if (dut.g_wide_bank[1].u_qos.narrow_any && dut.g_wide_bank[1].u_qos.wide_wins) forced++;
  end

  task automatic stream(input int p, input int base);
    while (stream_on) wide_read(p, base, 256, 0);
  endtask

  initial begin
    automatic int lens [8] = '{64, 128, 256, 512, 1024, 2048, 4096, 8192};
    automatic int avg_min = 1 << 30, avg_max = 0;
    aw_valid = '0; w_valid = '0; b_ready = '0; ar_valid = '0; r_ready = '0;
    aw_addr = '0; aw_len = '0; aw_id = '0; ar_addr = '0; ar_len = '0; ar_id = '0;
    w_data = '0; w_strb = '0; w_last = '0;
    n_aw_valid = 0; n_w_valid = 0; n_ar_valid = 0; n_w_last = 1; n_aw_len = 0; n_aw_addr = 0; n_ar_addr = 0; n_w_data = 0;
    qos_mode = QOS_FIXED; qos_bound = 8'd4;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // region the host reads and the DMA streams: 16 KiB at 0x10000
    for (int a = 'h10000; a < 'h14000; a += 64 * 64) wide_write(1, a, 64);
    for (int li = 0; li < 8; li++) begin
      automatic int beats = lens[li] / 64;
      automatic longint lat_sum = 0;
      automatic int c0 = contended, wb0 = wide_beats, avg10;
      lat_max = 0;
      stream_on = 1;
      fork
        begin
          automatic int off = 0;
          while (stream_on) begin
            wide_read(0, 'h10000 + off, beats, 0);
            off = (off + lens[li]) % 'h4000;
          end
        end
        begin
          repeat (20) @(negedge clk);
          for (int i = 0; i < 2500; i++) begin
            automatic int t0 = cycles;
            narrow_read('h10000 + 4 * int'($urandom % 4096), 1);
            lat_sum += cycles - t0;
          end
          stream_on = 0;
        end
      join
      avg10 = int'(lat_sum * 10 / 2500);
      if (avg10 < avg_min) avg_min = avg10;
      if (avg10 > avg_max) avg_max = avg10;
      $display("burst %5d B: narrow latency worst %0d, average %0d.%0d cycles (incl. issue); %0d wide beats, %0d contended cycles",
               lens[li], lat_max, avg10 / 10, avg10 % 10, wide_beats - wb0, contended - c0);
      checks++;
      if (lat_max > 34) begin failures++; $display("worst narrow latency above 34 cycles"); end
      checks++;
      if (wide_beats - wb0 < 100 || contended - c0 == 0) begin failures++; $display("no interference at this burst length"); end
    end
    checks++;
    if (avg_max - avg_min > 10) begin failures++; $display("average latency depends on the burst length"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
