// Testbench for mi_qos_arbiter with its 16 word banks (2048 x 32 bits).
// Random wide and narrow traffic in both modes. Checks: read data (wide
// line and narrow words) one cycle after the grant against a model; fixed
// mode never grants the wide side while a narrow request is present;
// bounded mode grants a waiting wide request after at most `bound`
// consecutive refusals; a narrow request is never granted in the same
// cycle as the wide side.
module tb_mi_qos_arbiter;
  import chimera_pkg::*;
  localparam int NW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  qos_mode_e mode;
  logic [7:0] bound;
  logic w_req, w_gnt, w_we;
  logic [10:0] w_addr;
  logic [NW*4-1:0] w_be;
  logic [NW*32-1:0] w_wdata, w_rdata;
  logic [NW-1:0] n_req, n_gnt, n_we, b_req, b_we;
  logic [NW-1:0][10:0] n_addr, b_addr;
  logic [NW-1:0][3:0] n_be, b_be;
  logic [NW-1:0][31:0] n_wdata, n_rdata, b_wdata, b_rdata;
  logic [31:0] model [NW][2048];
  int checks = 0, failures = 0, wide_wait = 0, worst_wait = 0, forced = 0;

  mi_qos_arbiter #(.NW(NW), .ROW_W(11), .CNT_W(8)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mode_i(mode), .bound_i(bound), .w_req_i(w_req), .w_gnt_o(w_gnt),
    .w_addr_i(w_addr), .w_we_i(w_we), .w_be_i(w_be), .w_wdata_i(w_wdata), .w_rdata_o(w_rdata),
    .n_req_i(n_req), .n_gnt_o(n_gnt), .n_addr_i(n_addr), .n_we_i(n_we), .n_be_i(n_be), .n_wdata_i(n_wdata),
    .n_rdata_o(n_rdata), .b_req_o(b_req), .b_we_o(b_we), .b_addr_o(b_addr), .b_be_o(b_be),
    .b_wdata_o(b_wdata), .b_rdata_i(b_rdata));

  for (genvar i = 0; i < NW; i++) begin : g_bank
    sram_bank #(.WORDS(2048), .DW(32)) u_bank (.clk_i(clk), .req_i(b_req[i]), .we_i(b_we[i]), .addr_i(b_addr[i]),
      .be_i(b_be[i]), .wdata_i(b_wdata[i]), .rdata_o(b_rdata[i]));
  end

  logic exp_w, exp_wrd_v;
  logic [NW*32-1:0] exp_wrd;
  logic [NW-1:0] exp_n, exp_nrd_v;
  logic [NW-1:0][31:0] exp_nrd;

  always @(negedge clk) if (rst_n) begin
    if (exp_w && exp_wrd_v) begin
      checks++;
      if (w_rdata !== exp_wrd) begin failures++; $display("%0t: wide read mismatch", $time); end
    end
    for (int i = 0; i < NW; i++) if (exp_n[i] && exp_nrd_v[i]) begin
      checks++;
      if (n_rdata[i] !== exp_nrd[i]) begin failures++; $display("%0t: lane %0d read %h expected %h", $time, i, n_rdata[i], exp_nrd[i]); end
    end
  end

  initial begin
    mode = QOS_FIXED; bound = 8'd4; exp_w = 0; exp_n = '0;
    w_req = 0; w_we = 0; w_addr = 0; w_be = '0; w_wdata = '0;
    n_req = '0; n_we = '0; n_addr = '0; n_be = '0; n_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 10000; t++) begin
      if (t < 2048) begin
        w_req = 1; w_we = 1; w_be = '1; w_addr = 11'(t); n_req = '0;
        for (int i = 0; i < NW; i++) w_wdata[32*i +: 32] = $urandom;
      end else begin
        mode = (t < 6000) ? QOS_FIXED : QOS_BOUNDED;
        if (t == 6000) wide_wait = 0;  // measure waits that start in bounded mode
        if (!w_req || exp_w) begin
          w_req = $urandom % 2; w_we = $urandom % 2; w_addr = 11'($urandom % 128); w_be = {$urandom, $urandom};
          for (int i = 0; i < NW; i++) w_wdata[32*i +: 32] = $urandom;
        end
        for (int i = 0; i < NW; i++) if (!n_req[i] || exp_n[i]) begin
          // narrow traffic is heavy, so the wide side has to wait
          n_req[i] = ($urandom % 8) != 0 && ((t / 500) % 2 == 0 || i < 2); n_we[i] = $urandom % 2;
          n_addr[i] = 11'($urandom % 128); n_be[i] = 4'($urandom); n_wdata[i] = $urandom;
        end
      end
      #1;
      checks++;
      if ((w_gnt && (n_gnt != '0)) || (n_gnt & ~n_req) != '0 || (w_gnt && !w_req)) begin failures++; $display("grant conflict"); end
      if (mode == QOS_FIXED && t >= 2048) begin
        checks++;
        if (w_gnt && n_req != '0) begin failures++; $display("fixed mode: wide granted over narrow"); end
        checks++;
        if (w_req && n_req == '0 && !w_gnt) begin failures++; $display("fixed mode: idle wide request refused"); end
      end
      if (w_req && !w_gnt) wide_wait++;
      if (mode == QOS_BOUNDED && w_gnt && n_req != '0) forced++;
      if (mode == QOS_BOUNDED && wide_wait > worst_wait) worst_wait = wide_wait;
      exp_w = w_gnt; exp_wrd_v = !w_we;
      for (int i = 0; i < NW; i++) exp_wrd[32*i +: 32] = model[i][w_addr];
      exp_n = n_gnt; exp_nrd_v = ~n_we;
      for (int i = 0; i < NW; i++) exp_nrd[i] = model[i][n_addr[i]];
      if (w_gnt && w_we) for (int i = 0; i < NW; i++) for (int b = 0; b < 4; b++)
        if (w_be[4*i + b]) model[i][w_addr][8*b +: 8] = w_wdata[32*i + 8*b +: 8];
      for (int i = 0; i < NW; i++) if (n_gnt[i] && n_we[i]) for (int b = 0; b < 4; b++)
        if (n_be[i][b]) model[i][n_addr[i]][8*b +: 8] = n_wdata[i][8*b +: 8];
      if (w_gnt || !w_req) wide_wait = 0;
      @(posedge clk);
      @(negedge clk);
    end
    checks++;
    if (worst_wait > bound) begin failures++; $display("bounded mode: wide waited %0d cycles, bound %0d", worst_wait, bound); end
    checks++;
    if (forced == 0) begin failures++; $display("bounded mode never forced a wide grant"); end
    $display("bounded mode: worst wide wait %0d, forced grants %0d", worst_wait, forced);
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
