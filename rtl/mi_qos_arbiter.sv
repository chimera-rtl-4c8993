// QoS arbiter and split-to-mem of one interleaved wide bank of the L2
// memory island.
//
// The wide side carries one 512-bit request per cycle for a 64-byte line;
// split-to-mem cuts it into 16 32-bit word requests, one per word bank of
// this wide bank, and joins the 16 read words into one 512-bit response.
// The narrow side carries up to 16 independent 32-bit requests, one per
// word bank, from the narrow interconnect. A wide request needs all 16
// banks in the same cycle; narrow requests use only their own bank.
//
// Policy (mode_i):
//   QOS_FIXED   - any narrow request wins; the wide request waits.
//   QOS_BOUNDED - as above, but once the wide request has been refused
//                 bound_i cycles in a row it wins the next cycle, so wide
//                 traffic cannot starve under continuous narrow load.
// Without narrow requests the wide request is granted at once. Grants are
// combinational; the banks answer one cycle later.
//
// Fixed priority for narrow accesses, the bounded-priority alternative and
// the placement between the interconnects and the banks follow the
// published design; the form of the bound (consecutive refusals) is this
// implementation's choice.
module mi_qos_arbiter
  import chimera_pkg::*;
#(
  parameter int unsigned NW    = L2_WORDS_PER_WB,
  parameter int unsigned ROW_W = 11,
  parameter int unsigned CNT_W = 8
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  qos_mode_e                mode_i,
  input  logic [CNT_W-1:0]         bound_i,
  // wide side
  input  logic                     w_req_i,
  output logic                     w_gnt_o,
  input  logic [ROW_W-1:0]         w_addr_i,
  input  logic                     w_we_i,
  input  logic [NW*4-1:0]          w_be_i,
  input  logic [NW*32-1:0]         w_wdata_i,
  output logic [NW*32-1:0]         w_rdata_o,
  // narrow side, one lane per word bank
  input  logic [NW-1:0]            n_req_i,
  output logic [NW-1:0]            n_gnt_o,
  input  logic [NW-1:0][ROW_W-1:0] n_addr_i,
  input  logic [NW-1:0]            n_we_i,
  input  logic [NW-1:0][3:0]       n_be_i,
  input  logic [NW-1:0][31:0]      n_wdata_i,
  output logic [NW-1:0][31:0]      n_rdata_o,
  // word banks
  output logic [NW-1:0]            b_req_o,
  output logic [NW-1:0]            b_we_o,
  output logic [NW-1:0][ROW_W-1:0] b_addr_o,
  output logic [NW-1:0][3:0]       b_be_o,
  output logic [NW-1:0][31:0]      b_wdata_o,
  input  logic [NW-1:0][31:0]      b_rdata_i
);

  logic [CNT_W-1:0] refused_q;
  logic             narrow_any, wide_wins;

  assign narrow_any = |n_req_i;
  always_comb begin
    if (!w_req_i)            wide_wins = 1'b0;
    else if (!narrow_any)    wide_wins = 1'b1;
    else if (mode_i == QOS_BOUNDED && refused_q >= bound_i) wide_wins = 1'b1;
    else                     wide_wins = 1'b0;
  end

  assign w_gnt_o = wide_wins;
  assign n_gnt_o = wide_wins ? '0 : n_req_i;

  always_comb begin
    for (int unsigned i = 0; i < NW; i++) begin
      b_req_o[i]   = wide_wins | n_req_i[i];
      b_we_o[i]    = wide_wins ? w_we_i : n_we_i[i];
      b_addr_o[i]  = wide_wins ? w_addr_i : n_addr_i[i];
      b_be_o[i]    = wide_wins ? w_be_i[4*i +: 4] : n_be_i[i];
      b_wdata_o[i] = wide_wins ? w_wdata_i[32*i +: 32] : n_wdata_i[i];
      w_rdata_o[32*i +: 32] = b_rdata_i[i];
    end
    n_rdata_o = b_rdata_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                   refused_q <= '0;
    else if (!w_req_i || wide_wins) refused_q <= '0;
    else if (refused_q != '1)      refused_q <= refused_q + 1'b1;
  end

endmodule
