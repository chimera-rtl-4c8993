// Testbench for tac_pe: random operands, bias, partial sums and
// requantization settings. The combinational accumulator output and the
// registered, requantized and activated output (one cycle later) are
// compared with values computed here.
module tb_tac_pe;
  import chimera_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, first, last, yv;
  logic [63:0][7:0] in_v, w_v;
  logic signed [25:0] bias, psum, acc;
  logic signed [7:0] y;
  requant_t rq;
  act_mode_e act;
  int checks = 0, failures = 0;

  tac_pe dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .first_i(first), .last_i(last), .in_i(in_v),
              .w_i(w_v), .bias_i(bias), .psum_i(psum), .rq_i(rq), .act_i(act), .acc_o(acc),
              .y_o(y), .y_valid_o(yv));

  initial begin
    longint e_acc, v;
    int e_y;
    en = 0; first = 0; last = 0; in_v = '0; w_v = '0; bias = '0; psum = '0;
    rq = '{mult: 8'd1, shift: 5'd0, add: 8'sd0}; act = ACT_IDENTITY;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      for (int i = 0; i < 64; i++) begin
        in_v[i] = (t < 5) ? 8'h80 : 8'($urandom);   // also the extreme -128 * -128 case
        w_v[i]  = (t < 5) ? 8'h80 : 8'($urandom);
      end
      bias = 26'(int'($urandom % 200000) - 100000);
      psum = 26'(int'($urandom % 2000000) - 1000000);
      first = $urandom % 2; last = $urandom % 2; en = 1;
      rq = '{mult: 8'($urandom), shift: 5'($urandom % 20), add: 8'($urandom)};
      act = act_mode_e'($urandom % 2);
      #1;
      e_acc = first ? longint'(bias) : longint'(psum);
      for (int i = 0; i < 64; i++) e_acc += longint'($signed(in_v[i])) * longint'($signed(w_v[i]));
      checks++;
      if (longint'(acc) != e_acc) begin failures++; $display("acc %0d expected %0d", acc, e_acc); end
      v = e_acc * longint'(rq.mult);
      if (rq.shift != 0) v += longint'(1) << (rq.shift - 1);
      v = (v >>> rq.shift) + longint'(rq.add);
      e_y = (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
      if (act == ACT_RELU && e_y < 0) e_y = 0;
      @(posedge clk); #1;
      checks++;
      if (yv != last) begin failures++; $display("y_valid %b expected %b", yv, last); end
      if (last) begin
        checks++;
        if (int'(y) != e_y) begin failures++; $display("y %0d expected %0d", y, e_y); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
