// AXI to MEM: terminates one AXI4 port of the L2 memory island and turns
// it into two memory request streams, one for reads and one for writes,
// so a port can read and write in the same cycle (one full-width beat
// each way per cycle).
//
// Read side: an accepted AR burst issues one read request per beat at
// consecutive addresses (INCR, full-width beats). Data returns one cycle
// after the grant and waits in a DEPTH-entry FIFO for the R channel;
// requests are only issued while the FIFO has room, so R back-pressure
// never stalls a memory bank. Write side: an accepted AW burst forwards
// each W beat as a write request; w_ready is the grant. After the last
// beat a B response is sent. One burst per direction is handled at a time.
//
// The split into read and write streams follows the published memory
// island figure; burst handling limits (INCR only, size equal to the bus
// width, one burst in flight) are this implementation's choices.
//
// The Verilator lint reports SYNCASYNCNET on rst_ni here. Each flip-flop uses the
// asynchronous active-low reset; the only other use of rst_ni is the
// `disable iff (!rst_ni)` of the concurrent assertions (in this module or
// in the submodules it feeds rst_ni to), which the tool counts as a
// synchronous use. No logic samples the reset synchronously.
module mi_axi_to_mem #(
  parameter int unsigned DW    = 512,
  parameter int unsigned AW    = 32,
  parameter int unsigned IW    = 4,
  parameter int unsigned DEPTH = 4
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // AXI4 slave
  input  logic              aw_valid_i,
  output logic              aw_ready_o,
  input  logic [AW-1:0]     aw_addr_i,
  input  logic [7:0]        aw_len_i,
  input  logic [IW-1:0]     aw_id_i,
  input  logic              w_valid_i,
  output logic              w_ready_o,
  input  logic [DW-1:0]     w_data_i,
  input  logic [DW/8-1:0]   w_strb_i,
  input  logic              w_last_i,
  output logic              b_valid_o,
  input  logic              b_ready_i,
  output logic [IW-1:0]     b_id_o,
  input  logic              ar_valid_i,
  output logic              ar_ready_o,
  input  logic [AW-1:0]     ar_addr_i,
  input  logic [7:0]        ar_len_i,
  input  logic [IW-1:0]     ar_id_i,
  output logic              r_valid_o,
  input  logic              r_ready_i,
  output logic [DW-1:0]     r_data_o,
  output logic              r_last_o,
  output logic [IW-1:0]     r_id_o,
  // read request stream
  output logic              rd_req_o,
  input  logic              rd_gnt_i,
  output logic [AW-1:0]     rd_addr_o,
  input  logic              rd_rvalid_i,
  input  logic [DW-1:0]     rd_rdata_i,
  // write request stream
  output logic              wr_req_o,
  input  logic              wr_gnt_i,
  output logic [AW-1:0]     wr_addr_o,
  output logic [DW/8-1:0]   wr_be_o,
  output logic [DW-1:0]     wr_wdata_o
);

  localparam int unsigned CW = $clog2(DEPTH + 1);
  localparam int unsigned PW = $clog2(DEPTH);

  // ---------------- read ----------------
  logic          rd_act_q;
  logic [AW-1:0] rd_addr_q;
  logic [8:0]    rd_left_q;   // beats still to request
  logic [IW-1:0] rd_id_q;
  logic          infl_q, infl_last_q;
  logic [CW-1:0] cnt_q;
  logic [PW-1:0] rp_q, wp_q;
  logic [DEPTH-1:0][DW-1:0] fd_q;
  logic [DEPTH-1:0]         fl_q;
  logic          rd_fire, push, pop;

  assign ar_ready_o = ~rd_act_q;
  assign rd_req_o   = rd_act_q & (rd_left_q != 0) & (32'(cnt_q) + 32'(infl_q) < DEPTH);
  assign rd_addr_o  = rd_addr_q;
  assign rd_fire    = rd_req_o & rd_gnt_i;
  assign push       = rd_rvalid_i & infl_q;
  assign pop        = r_valid_o & r_ready_i;
  assign r_valid_o  = cnt_q != 0;
  assign r_data_o   = fd_q[rp_q];
  assign r_last_o   = fl_q[rp_q];
  assign r_id_o     = rd_id_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_act_q <= 1'b0; rd_addr_q <= '0; rd_left_q <= '0; rd_id_q <= '0;
      infl_q <= 1'b0; infl_last_q <= 1'b0; cnt_q <= '0; rp_q <= '0; wp_q <= '0;
    end else begin
      if (ar_valid_i && ar_ready_o) begin
        rd_act_q  <= 1'b1;
        rd_addr_q <= ar_addr_i;
        rd_left_q <= 9'(ar_len_i) + 9'd1;
        rd_id_q   <= ar_id_i;
      end else if (rd_fire) begin
        rd_addr_q <= rd_addr_q + AW'(DW / 8);
        rd_left_q <= rd_left_q - 9'd1;
      end
      infl_q      <= rd_fire;
      infl_last_q <= rd_fire & (rd_left_q == 9'd1);
      if (push) begin
        fd_q[wp_q] <= rd_rdata_i;
        fl_q[wp_q] <= infl_last_q;
        wp_q <= (32'(wp_q) == DEPTH - 1) ? '0 : wp_q + 1'b1;
      end
      if (pop) begin
        rp_q <= (32'(rp_q) == DEPTH - 1) ? '0 : rp_q + 1'b1;
        if (r_last_o) rd_act_q <= 1'b0;
      end
      cnt_q <= cnt_q + CW'(push) - CW'(pop);
    end
  end

  // ---------------- write ----------------
  typedef enum logic [1:0] { W_IDLE, W_DATA, W_RESP } wstate_e;
  wstate_e       ws_q;
  logic [AW-1:0] wr_addr_q;
  logic [IW-1:0] wr_id_q;

  assign aw_ready_o = ws_q == W_IDLE;
  assign wr_req_o   = (ws_q == W_DATA) & w_valid_i;
  assign wr_addr_o  = wr_addr_q;
  assign wr_be_o    = w_strb_i;
  assign wr_wdata_o = w_data_i;
  assign w_ready_o  = (ws_q == W_DATA) & wr_gnt_i;
  assign b_valid_o  = ws_q == W_RESP;
  assign b_id_o     = wr_id_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ws_q <= W_IDLE; wr_addr_q <= '0; wr_id_q <= '0;
    end else begin
      unique case (ws_q)
        W_IDLE: if (aw_valid_i) begin
          ws_q <= W_DATA; wr_addr_q <= aw_addr_i; wr_id_q <= aw_id_i;
        end
        W_DATA: if (w_valid_i && wr_gnt_i) begin
          wr_addr_q <= wr_addr_q + AW'(DW / 8);
          if (w_last_i) ws_q <= W_RESP;
        end
        W_RESP: if (b_ready_i) ws_q <= W_IDLE;
        default: ws_q <= W_IDLE;
      endcase
    end
  end

  // aw_len is not needed: the burst ends with w_last
  logic unused_len;
  assign unused_len = ^aw_len_i;

  assert property (@(posedge clk_i) disable iff (!rst_ni) push |-> cnt_q < CW'(DEPTH))
    else $error("read FIFO overflow");

endmodule
