// TAC weights buffer: 2 KiB of weights as two 1 KiB halves, each holding one
// 64-byte weight vector for each of the 16 processing elements.
//
// The halves alternate as producer (filled by the weight streamer, one PE
// vector per write) and consumer (read by all PEs at once), so loading the
// next tile overlaps computing the current one. The producer writes vectors
// 0..15 into the half it owns while wr_ready_o is high; writing vector 15
// marks that half full and hands the producer the other half. The consumer
// sees rd_valid_o while its half is full and releases it with rd_release_i,
// which also moves the consumer to the other half.
//
// Size and double buffering follow the published design; the full/empty
// handshake is this implementation's choice.
//
// The Verilator lint reports SYNCASYNCNET on rst_ni here. Each flip-flop uses the
// asynchronous active-low reset; the only other use of rst_ni is the
// `disable iff (!rst_ni)` of the concurrent assertions (in this module or
// in the submodules it feeds rst_ni to), which the tool counts as a
// synchronous use. No logic samples the reset synchronously.
module tac_weight_buffer
  import chimera_pkg::*;
#(
  parameter int unsigned N_PE  = TAC_N_PE,
  parameter int unsigned VEC_B = TAC_DOTP_N
) (
  input  logic                                clk_i,
  input  logic                                rst_ni,
  input  logic                                wr_en_i,
  input  logic [$clog2(N_PE)-1:0]             wr_pe_i,
  input  logic [VEC_B-1:0][7:0]               wr_data_i,
  output logic                                wr_ready_o,
  output logic                                rd_valid_o,
  output logic [N_PE-1:0][VEC_B-1:0][7:0]     rd_data_o,
  input  logic                                rd_release_i
);

  logic [N_PE-1:0][VEC_B-1:0][7:0] mem [2];
  logic [1:0] full_q;
  logic       wptr_q, rptr_q;

  assign wr_ready_o = ~full_q[wptr_q];
  assign rd_valid_o = full_q[rptr_q];
  assign rd_data_o  = mem[rptr_q];

  always_ff @(posedge clk_i) begin
    if (wr_en_i && wr_ready_o) mem[wptr_q][wr_pe_i] <= wr_data_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      full_q <= '0;
      wptr_q <= 1'b0;
      rptr_q <= 1'b0;
    end else begin
      if (wr_en_i && wr_ready_o && wr_pe_i == $clog2(N_PE)'(N_PE-1)) begin
        full_q[wptr_q] <= 1'b1;
        wptr_q         <= ~wptr_q;
      end
      if (rd_release_i && rd_valid_o) begin
        full_q[rptr_q] <= 1'b0;
        rptr_q         <= ~rptr_q;
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) rd_release_i |-> rd_valid_o)
    else $error("weight buffer released while empty");

endmodule
