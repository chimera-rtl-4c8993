// TAC streamer: moves one line of up to NW 64-bit words per command between
// the accelerator datapath and NW TCDM master ports.
//
// A command gives a byte address (8-byte aligned), a word count and, for a
// write, the data. Word i goes to port i at address addr + 8*i. The TCDM
// grants each port independently; the command is accepted (cmd_ready_o)
// in the cycle its last word is granted, so the ports can carry a new
// command every cycle. Read data returns one cycle after the grant; the
// words of one line are collected and the full line is pushed into a
// response FIFO of DEPTH entries together with the command's tag. Requests
// are only issued while the FIFO has room for the line, so a stalled
// consumer never blocks the TCDM. Writes produce no response.
//
// Four such streams (input, weight, bias, output) at up to 128 B/cycle and
// the 64-bit port width follow the published design; the command/response
// handshake and the FIFO are this implementation's choices.
//
// The Verilator lint reports SYNCASYNCNET on rst_ni here. Each flip-flop uses the
// asynchronous active-low reset; the only other use of rst_ni is the
// `disable iff (!rst_ni)` of the concurrent assertions (in this module or
// in the submodules it feeds rst_ni to), which the tool counts as a
// synchronous use. No logic samples the reset synchronously.
module tac_streamer #(
  parameter int unsigned NW    = 8,
  parameter int unsigned AW    = 32,
  parameter int unsigned TAG_W = 2,
  parameter int unsigned DEPTH = 4
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // command
  input  logic                  cmd_valid_i,
  output logic                  cmd_ready_o,
  output logic                  cmd_partial_o, // some words of the command already granted
  input  logic                  cmd_write_i,
  input  logic [AW-1:0]         cmd_addr_i,
  input  logic [NW-1:0]         cmd_mask_i,    // words taking part
  input  logic [NW-1:0][63:0]   cmd_wdata_i,
  input  logic [TAG_W-1:0]      cmd_tag_i,
  // read response
  output logic                  rsp_valid_o,
  input  logic                  rsp_ready_i,
  output logic [NW-1:0][63:0]   rsp_data_o,
  output logic [TAG_W-1:0]      rsp_tag_o,
  // TCDM ports
  output logic [NW-1:0]         tcdm_req_o,
  input  logic [NW-1:0]         tcdm_gnt_i,
  output logic [NW-1:0][AW-1:0] tcdm_addr_o,
  output logic                  tcdm_we_o,
  output logic [NW-1:0][63:0]   tcdm_wdata_o,
  input  logic [NW-1:0]         tcdm_rvalid_i,
  input  logic [NW-1:0][63:0]   tcdm_rdata_i
);

  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [NW-1:0]         granted_q;   // words of the current command already granted
  logic [NW-1:0][63:0]   asm_q;       // read words collected so far
  logic                  closing_q;   // a read line completes this cycle
  logic [TAG_W-1:0]      closing_tag_q;
  logic [CW-1:0]         count_q;
  logic [DEPTH-1:0][NW*64-1:0] fifo_data_q;
  logic [DEPTH-1:0][TAG_W-1:0] fifo_tag_q;
  logic [$clog2(DEPTH)-1:0] rd_ptr_q, wr_ptr_q;

  logic space, push, pop, accept;
  logic [NW-1:0] now_granted;
  logic [NW-1:0][63:0] line;

  // room for this line, counting the one that completes in this cycle
  assign space = cmd_write_i ? 1'b1 : (32'(count_q) + 32'(closing_q) < DEPTH);

  always_comb begin
    for (int unsigned i = 0; i < NW; i++) begin
      tcdm_req_o[i]   = cmd_valid_i & space & cmd_mask_i[i] & ~granted_q[i];
      tcdm_addr_o[i]  = cmd_addr_i + AW'(8 * i);
      tcdm_wdata_o[i] = cmd_wdata_i[i];
    end
    tcdm_we_o   = cmd_write_i;
    now_granted = granted_q | (tcdm_req_o & tcdm_gnt_i);
    accept      = cmd_valid_i & space & ((now_granted & cmd_mask_i) == cmd_mask_i);
    for (int unsigned i = 0; i < NW; i++)
      line[i] = tcdm_rvalid_i[i] ? tcdm_rdata_i[i] : asm_q[i];
  end
  assign cmd_ready_o   = accept;
  assign cmd_partial_o = |granted_q;

  assign push        = closing_q;
  assign pop         = rsp_valid_o & rsp_ready_i;
  assign rsp_valid_o = count_q != '0;
  assign rsp_data_o  = fifo_data_q[rd_ptr_q];
  assign rsp_tag_o   = fifo_tag_q[rd_ptr_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      granted_q     <= '0;
      asm_q         <= '0;
      closing_q     <= 1'b0;
      closing_tag_q <= '0;
      count_q       <= '0;
      rd_ptr_q      <= '0;
      wr_ptr_q      <= '0;
    end else begin
      granted_q <= accept ? '0 : now_granted;
      closing_q <= accept & ~cmd_write_i;
      if (accept) closing_tag_q <= cmd_tag_i;
      // words of a line arrive at most one cycle after the line is accepted
      asm_q <= closing_q ? '0 : line;
      if (push) begin
        fifo_data_q[wr_ptr_q] <= line;
        fifo_tag_q[wr_ptr_q]  <= closing_tag_q;
        wr_ptr_q <= (32'(wr_ptr_q) == DEPTH - 1) ? '0 : wr_ptr_q + 1'b1;
      end
      if (pop) rd_ptr_q <= (32'(rd_ptr_q) == DEPTH - 1) ? '0 : rd_ptr_q + 1'b1;
      count_q <= count_q + CW'(push) - CW'(pop);
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push && count_q == CW'(DEPTH) && !pop))
    else $error("streamer response FIFO overflow");

endmodule
