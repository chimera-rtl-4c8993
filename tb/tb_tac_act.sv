// Testbench for tac_act: sweeps all 256 int8 inputs in the three modes.
// Identity and ReLU are checked exactly; GeLU is checked against the real
// GeLU, 16 * gelu(x/16) with gelu(v) = v * Phi(v), allowing 2 LSB of
// approximation and truncation error.
module tb_tac_act;
  import chimera_pkg::*;

  act_mode_e         mode;
  logic signed [7:0] x, y;
  int checks = 0, failures = 0;

  tac_act dut (.mode_i(mode), .x_i(x), .y_i(y));

  // erf by its Taylor series is slow to converge; use Abramowitz-Stegun 7.1.26
  function automatic real erf_r(input real v);
    real t, p, s;
    s = (v < 0.0) ? -1.0 : 1.0;
    v = (v < 0.0) ? -v : v;
    t = 1.0 / (1.0 + 0.3275911 * v);
    p = t * (0.254829592 + t * (-0.284496736 + t * (1.421413741 + t * (-1.453152027 + t * 1.061405429))));
    return s * (1.0 - p * $exp(-v * v));
  endfunction

  initial begin
    real g;
    int  exp_i;
    for (int m = 0; m < 3; m++) begin
      mode = act_mode_e'(m);
      for (int v = -128; v < 128; v++) begin
        x = 8'(v);
        #1;
        checks++;
        case (m)
          0: exp_i = v;
          1: exp_i = (v < 0) ? 0 : v;
          default: begin
            g = (v / 16.0) * 0.5 * (1.0 + erf_r((v / 16.0) / $sqrt(2.0)));
            exp_i = int'($floor(g * 16.0));
          end
        endcase
        if ((m < 2 && int'(y) != exp_i) || (m == 2 && (int'(y) - exp_i > 2 || exp_i - int'(y) > 2))) begin
          failures++;
          $display("mismatch mode=%0d x=%0d y=%0d expected=%0d", m, v, y, exp_i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
