// Single-port SRAM bank with byte enables and a registered read port. Used
// for the 32 x 64-bit TCDM banks of the cluster and the 32 x 32-bit word
// banks of the L2 memory island. In silicon these are SRAM macros; here the
// storage is an array, which synthesis maps to memory.
//
// A request (req_i) with we_i writes the enabled bytes of wdata_i; a request
// without we_i returns mem[addr_i] on rdata_o in the next cycle. rdata_o
// holds its value between reads. The bank count and sizes come from the
// instantiating modules; the one-cycle read latency is this
// implementation's choice.
module sram_bank #(
  parameter int unsigned WORDS = 2048,
  parameter int unsigned DW    = 32
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [DW/8-1:0]          be_i,
  input  logic [DW-1:0]            wdata_i,
  output logic [DW-1:0]            rdata_o
);

  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int unsigned b = 0; b < DW / 8; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
