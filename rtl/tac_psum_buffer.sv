// TAC partial-sum buffer: one entry of 16 x 26-bit partial sums per output
// row of the current 64-row tile. While the accelerator walks through the K
// dimension 64 elements at a time, the entry for row m is read, extended by
// the processing elements and written back in the same cycle.
//
// Size (16 x 26b, 64 entries) follows the published datapath figure. Reads
// are combinational, writes take effect at the clock edge; a read of the
// entry being written returns the old value. No reset: an entry is always
// written (K tile 0 adds the bias) before it is read.
module tac_psum_buffer
  import chimera_pkg::*;
#(
  parameter int unsigned ROWS  = TAC_PSUM_ROWS,
  parameter int unsigned LANES = TAC_N_PE,
  parameter int unsigned W     = TAC_ACC_W
) (
  input  logic                            clk_i,
  input  logic                            we_i,
  input  logic [$clog2(ROWS)-1:0]         waddr_i,
  input  logic [LANES-1:0][W-1:0]         wdata_i,
  input  logic [$clog2(ROWS)-1:0]         raddr_i,
  output logic [LANES-1:0][W-1:0]         rdata_o
);

  logic [LANES-1:0][W-1:0] mem [ROWS];

  always_ff @(posedge clk_i) begin
    if (we_i) mem[waddr_i] <= wdata_i;
  end

  assign rdata_o = mem[raddr_i];

endmodule
