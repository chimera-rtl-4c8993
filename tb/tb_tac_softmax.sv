// Testbench for tac_softmax. Rows of 64 random scores are presented in four
// 16-score groups (as the accelerator produces them); afterwards every row
// is normalised and compared with two references: bit-exact against the
// documented integer algorithm, and against the real softmax
// (128 * exp2((x - max) / 8) / sum) within the error of the base-2
// approximation. Rescaling the running sum by floor((new max - old max)/8) can overestimate it by up to 2x when the maximum grows late in a row, so the bounds are 32/128 per entry and a row total between 48/128 and 160/128.
module tb_tac_softmax;
  logic clk = 0;
  always #5 clk = ~clk;
  logic acc_valid, acc_clear;
  logic [5:0] acc_row, norm_row;
  logic [15:0][7:0] acc_vals;
  logic [63:0][7:0] norm_in, norm_out;
  int checks = 0, failures = 0;
  int sc [64][64];

  tac_softmax dut (.clk_i(clk), .acc_valid_i(acc_valid), .acc_clear_i(acc_clear), .acc_row_i(acc_row),
                   .acc_vals_i(acc_vals), .norm_row_i(norm_row), .norm_in_i(norm_in), .norm_out_o(norm_out));

  function automatic int pexp(input int d);
    int e = d >> 3;
    return (e > 8) ? 0 : (256 >> e);
  endfunction

  initial begin
    acc_valid = 0; acc_clear = 0; acc_row = 0; acc_vals = '0; norm_row = 0; norm_in = '0;
    for (int r = 0; r < 64; r++)
      for (int c = 0; c < 64; c++)
        sc[r][c] = (r % 4 == 0) ? int'($urandom % 256) - 128 : int'($urandom % 48) - 24 + (c % 16 == 3 ? r : 0);
    // accumulate, groups of the same row interleaved with other rows
    for (int g = 0; g < 4; g++)
      for (int r = 0; r < 64; r++) begin
        @(negedge clk);
        acc_valid = 1; acc_clear = (g == 0); acc_row = 6'(r);
        for (int c = 0; c < 16; c++) acc_vals[c] = 8'(sc[r][16*g + c]);
      end
    @(negedge clk); acc_valid = 0;
    for (int r = 0; r < 64; r++) begin
      automatic int mx = 0, sm = 0, errs = 0;
      automatic real rs = 0.0, tot = 0.0, rmx = -1000.0;
      for (int g = 0; g < 4; g++) begin
        automatic int lm = -1000, nm = 0;
        for (int c = 0; c < 16; c++) if (sc[r][16*g + c] > lm) lm = sc[r][16*g + c];
        if (g == 0) begin nm = lm; sm = 0; end
        else begin
          nm = (lm > mx) ? lm : mx;
          sm = (((nm - mx) >> 3) >= 24) ? 0 : (sm >> ((nm - mx) >> 3));
        end
        mx = nm;
        for (int c = 0; c < 16; c++) sm += pexp(mx - sc[r][16*g + c]);
      end
      for (int c = 0; c < 64; c++) if (sc[r][c] > rmx) rmx = sc[r][c];
      for (int c = 0; c < 64; c++) rs += 2.0 ** ((sc[r][c] - rmx) / 8.0);
      @(negedge clk);
      norm_row = 6'(r);
      for (int c = 0; c < 64; c++) norm_in[c] = 8'(sc[r][c]);
      #1;
      for (int c = 0; c < 64; c++) begin
        automatic int p = (pexp(mx - sc[r][c]) * (65536 / sm)) >> 9;
        automatic real pr = 128.0 * (2.0 ** ((sc[r][c] - rmx) / 8.0)) / rs;
        if (p > 127) p = 127;
        checks++;
        if (int'(norm_out[c]) != p) begin failures++; if (errs++ < 3) $display("row %0d col %0d: %0d expected %0d", r, c, norm_out[c], p); end
        checks++;
        if (real'(norm_out[c]) - pr > 32.0 || pr - real'(norm_out[c]) > 32.0) begin failures++; $display("row %0d col %0d: %0d vs real %f", r, c, norm_out[c], pr); end
        tot += real'(norm_out[c]);
      end
      checks++;
      if (tot < 48.0 || tot > 160.0) begin failures++; $display("row %0d sums to %f / 128", r, tot); end
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
