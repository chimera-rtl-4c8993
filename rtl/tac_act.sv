// TAC activation unit: applies identity, ReLU or GeLU to one requantized
// int8 value. One instance sits at the output of every processing element.
//
// GeLU follows the integer polynomial approximation of erf (I-BERT style):
// erf(u) ~ sign(u) * (1 - 0.2888 * (min(|u|,1.769) - 1.769)^2), and
// gelu(x) = x/2 * (1 + erf(x/sqrt(2))). The input is read as a fixed-point
// number with 4 fractional bits (x/16) and the result has the same scale.
// The accelerator offering ReLU and GeLU follows the published design; the
// approximation and the input scale are this implementation's choices.
//
// Purely combinational: y follows x and mode in the same cycle.
module tac_act
  import chimera_pkg::*;
(
  input  act_mode_e         mode_i,
  input  logic signed [7:0] x_i,
  output logic signed [7:0] y_i
);

  logic [7:0]         ax;      // |x|
  logic [15:0]        u;       // |x| / sqrt(2), same scale
  logic [4:0]         d;       // 1.769*16 - min(u, 28)
  logic [15:0]        erf_q8;  // erf magnitude, 8 fractional bits
  logic signed [10:0] fac;     // 256 * (1 + erf)
  logic signed [19:0] prod;

  always_comb begin
    ax     = x_i[7] ? 8'(-x_i) : 8'(x_i);
    u      = (16'(ax) * 16'd181) >> 8;
    d      = (u >= 16'd28) ? 5'd0 : 5'(16'd28 - u);
    erf_q8 = 16'd256 - ((16'd74 * 16'(d) * 16'(d)) >> 8);
    fac    = x_i[7] ? 11'(16'd256 - erf_q8) : 11'(16'd256 + erf_q8);
    prod   = 20'(x_i) * 20'(fac);
    unique case (mode_i)
      ACT_RELU: y_i = x_i[7] ? 8'sd0 : x_i;
      ACT_GELU: y_i = 8'(prod >>> 9);
      default:  y_i = x_i;
    endcase
  end

endmodule
