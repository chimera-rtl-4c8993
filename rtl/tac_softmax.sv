// TAC softmax engine: computes the row-wise softmax of attention scores on
// the fly, without a separate pass over memory.
//
// Accumulate side: while the accelerator writes the 16 int8 scores of row r
// of Q.K^T, acc_valid_i presents them here. The engine keeps, per row, the
// running maximum (Max Buf) and the running sum of exponentials (Sum Buf),
// both rescaled when the maximum grows. acc_clear_i starts a new row.
// Normalize side: while the accelerator reads the same scores back as the
// input of A.V, norm_in_i (64 scores of row norm_row_i) is replaced
// combinationally by 64 probabilities, so the engine delivers 64 softmax
// results per cycle.
//
// The exponential is base 2 with a step of 2^SHIFT score units:
// p(d) = 256 >> (d >> SHIFT), d = max - score. Sum rescaling on a new
// maximum is sum >> ((new - old) >> SHIFT). The probability is
// min(127, (p * floor(2^16 / sum)) >> 9), an int8 with 7 fractional bits,
// so it feeds the signed int8 datapath directly.
// The two buffers and the throughput of 64 per cycle follow the published
// design; the exponent approximation and number formats are this
// implementation's choices.
module tac_softmax
  import chimera_pkg::*;
#(
  parameter int unsigned ROWS     = TAC_PSUM_ROWS,
  parameter int unsigned ACC_LANES = TAC_N_PE,
  parameter int unsigned NORM_LANES = TAC_DOTP_N,
  parameter int unsigned SHIFT    = 3,
  parameter int unsigned SUM_W    = 24
) (
  input  logic                                 clk_i,
  input  logic                                 acc_valid_i,
  input  logic                                 acc_clear_i,
  input  logic [$clog2(ROWS)-1:0]              acc_row_i,
  input  logic [ACC_LANES-1:0][7:0]            acc_vals_i,
  input  logic [$clog2(ROWS)-1:0]              norm_row_i,
  input  logic [NORM_LANES-1:0][7:0]           norm_in_i,
  output logic [NORM_LANES-1:0][7:0]           norm_out_o
);

  logic signed [7:0] max_q [ROWS];
  logic [SUM_W-1:0]  sum_q [ROWS];

  function automatic logic [8:0] pexp(input logic [8:0] d);
    logic [8:0] e;
    e = d >> SHIFT;
    return (e > 9'd8) ? 9'd0 : (9'd256 >> e);
  endfunction

  // ---------------- accumulate ----------------
  logic signed [7:0] lmax, nmax, omax;
  logic [SUM_W-1:0]  osum, nsum;
  logic [8:0]        rsh;

  always_comb begin
    lmax = $signed(acc_vals_i[0]);
    for (int unsigned i = 1; i < ACC_LANES; i++)
      if ($signed(acc_vals_i[i]) > lmax) lmax = $signed(acc_vals_i[i]);
    omax = max_q[acc_row_i];
    osum = sum_q[acc_row_i];
    rsh  = 9'd0;
    if (acc_clear_i) begin
      nmax = lmax;
      nsum = '0;
    end else begin
      nmax = (lmax > omax) ? lmax : omax;
      rsh  = 9'((10'(nmax) - 10'(omax)) >> SHIFT);
      nsum = (rsh >= 9'(SUM_W)) ? '0 : (osum >> rsh);
    end
    for (int unsigned i = 0; i < ACC_LANES; i++)
      nsum += SUM_W'(pexp(9'(10'(nmax) - 10'($signed(acc_vals_i[i])))));
  end

  always_ff @(posedge clk_i) begin
    if (acc_valid_i) begin
      max_q[acc_row_i] <= nmax;
      sum_q[acc_row_i] <= nsum;
    end
  end

  // ---------------- normalize ----------------
  logic signed [7:0] rmax;
  logic [SUM_W-1:0]  rsum;
  logic [16:0]       inv;
  logic [25:0]       prob;

  always_comb begin
    rmax = max_q[norm_row_i];
    rsum = sum_q[norm_row_i];
    inv  = (rsum == '0) ? 17'd0 : 17'(SUM_W'(1 << 16) / rsum);
    for (int unsigned i = 0; i < NORM_LANES; i++) begin
      prob = (26'(pexp(9'(10'(rmax) - 10'($signed(norm_in_i[i]))))) * 26'(inv)) >> 9;
      norm_out_o[i] = (prob > 26'd127) ? 8'd127 : 8'(prob);
    end
  end

endmodule
