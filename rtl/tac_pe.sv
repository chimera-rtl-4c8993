// TAC processing element: a 64-way int8 dot product, a 26-bit accumulator,
// a requantizer and an activation unit.
//
// Every cycle with en_i high the PE multiplies the broadcast input vector
// (64 x int8) with its own weight vector (64 x int8) and sums the products
// into a 22-bit value. The accumulator adds it either to the bias
// (first_i, first K tile) or to the partial sum read back from the partial
// sum buffer. acc_o is combinational so the caller can write the partial-sum
// buffer in the same cycle. When last_i is also high the accumulated value
// is requantized, clip8(((acc*mult + 2^(shift-1)) >>> shift) + add), passed
// through the activation unit and registered: y_o/y_valid_o appear one
// cycle after en_i.
//
// Widths (8b operands, 64-way dot product, 22b, 26b, 8b) follow the
// published datapath; the requantization formula and rounding are this
// implementation's choices.
module tac_pe
  import chimera_pkg::*;
#(
  parameter int unsigned N      = TAC_DOTP_N,
  parameter int unsigned DOTP_W = TAC_DOTP_W,
  parameter int unsigned ACC_W  = TAC_ACC_W
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic                    en_i,
  input  logic                    first_i,
  input  logic                    last_i,
  input  logic [N-1:0][7:0]       in_i,      // broadcast activations
  input  logic [N-1:0][7:0]       w_i,       // this PE's weights
  input  logic signed [ACC_W-1:0] bias_i,
  input  logic signed [ACC_W-1:0] psum_i,
  input  requant_t                rq_i,
  input  act_mode_e               act_i,
  output logic signed [ACC_W-1:0] acc_o,
  output logic signed [7:0]       y_o,
  output logic                    y_valid_o
);

  logic signed [DOTP_W-1:0] dotp;
  logic signed [ACC_W+8:0]  scaled;
  logic signed [ACC_W+8:0]  shifted;
  logic signed [ACC_W+9:0]  biased;
  logic signed [7:0]        rq;
  logic signed [7:0]        act;

  always_comb begin
    dotp = '0;
    for (int unsigned i = 0; i < N; i++) begin
      dotp += DOTP_W'($signed(in_i[i]) * $signed(w_i[i]));
    end
    acc_o   = ACC_W'(dotp) + (first_i ? bias_i : psum_i);
    scaled  = (ACC_W+9)'(acc_o) * $signed({1'b0, rq_i.mult});
    if (rq_i.shift != '0) scaled += (ACC_W+9)'(1) <<< (rq_i.shift - 5'd1);
    shifted = scaled >>> rq_i.shift;
    biased  = (ACC_W+10)'(shifted) + (ACC_W+10)'(rq_i.add);
    if (biased > 127)       rq = 8'sd127;
    else if (biased < -128) rq = -8'sd128;
    else                    rq = 8'(biased);
  end

  tac_act u_act (.mode_i(act_i), .x_i(rq), .y_i(act));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      y_o       <= '0;
      y_valid_o <= 1'b0;
    end else begin
      y_valid_o <= en_i & last_i;
      if (en_i & last_i) y_o <= act;
    end
  end

endmodule
