// Cluster DMA: copies a block between the L2 memory island (512-bit AXI4
// master) and the cluster TCDM (512-bit wide port), one 64-byte line per
// cycle in steady state.
//
// A transfer is started with start_i and described by dir_i (0: L2 to
// TCDM, 1: TCDM to L2), the two byte addresses (64-byte aligned) and the
// length in bytes (a multiple of 64). It is cut into AXI4 INCR bursts of
// at most 64 beats that never cross a 4 KiB boundary. L2 to TCDM: each R
// beat is written into the TCDM in the cycle it arrives (r_ready is the
// TCDM grant). TCDM to L2: lines are read from the TCDM ahead into a
// 4-entry FIFO that feeds the W channel; the next burst starts after the
// B response. busy_o is high from start_i until the last write has
// completed; done_o pulses once at the end.
//
// The 512-bit path between cluster and L2 follows the published design;
// the engine itself is this implementation's minimal stand-in for the
// cluster's DMA engine, whose internals are not described.
module cluster_dma #(
  parameter int unsigned AW = 32,
  parameter int unsigned IW = 4
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // control
  input  logic              start_i,
  input  logic              dir_i,
  input  logic [AW-1:0]     l2_addr_i,
  input  logic [AW-1:0]     tcdm_addr_i,
  input  logic [AW-1:0]     len_i,
  output logic              busy_o,
  output logic              done_o,
  // AXI4 master (512 bit)
  output logic              aw_valid_o,
  input  logic              aw_ready_i,
  output logic [AW-1:0]     aw_addr_o,
  output logic [7:0]        aw_len_o,
  output logic [IW-1:0]     aw_id_o,
  output logic              w_valid_o,
  input  logic              w_ready_i,
  output logic [511:0]      w_data_o,
  output logic [63:0]       w_strb_o,
  output logic              w_last_o,
  input  logic              b_valid_i,
  output logic              b_ready_o,
  output logic              ar_valid_o,
  input  logic              ar_ready_i,
  output logic [AW-1:0]     ar_addr_o,
  output logic [7:0]        ar_len_o,
  output logic [IW-1:0]     ar_id_o,
  input  logic              r_valid_i,
  output logic              r_ready_o,
  input  logic [511:0]      r_data_i,
  input  logic              r_last_i,
  // TCDM wide port
  output logic              tcdm_req_o,
  input  logic              tcdm_gnt_i,
  output logic [AW-1:0]     tcdm_addr_o,
  output logic              tcdm_we_o,
  output logic [63:0]       tcdm_be_o,
  output logic [511:0]      tcdm_wdata_o,
  input  logic              tcdm_rvalid_i,
  input  logic [511:0]      tcdm_rdata_i
);

  typedef enum logic [2:0] { D_IDLE, D_NEXT, D_AR, D_RDATA, D_AW, D_WDATA, D_BRESP } dstate_e;
  dstate_e       st_q;
  logic          dir_q;
  logic [AW-1:0] l2_q, tc_q, left_q;     // left_q in lines
  logic [6:0]    burst_q;                // beats of the current burst
  logic [6:0]    rd_left_q, w_left_q;    // TCDM reads / W beats still to do
  logic [AW-1:0] tc_rd_q;
  logic [6:0]    beats;

  // FIFO TCDM -> W
  logic [3:0][511:0] f_q;
  logic [1:0] frp_q, fwp_q;
  logic [2:0] fcnt_q;
  logic       finfl_q, fpush, fpop, tc_rd;

  always_comb begin
    logic [6:0] to_4k;
    to_4k = 7'd64 - 7'(l2_q[11:6]);
    beats = (left_q < AW'(to_4k)) ? 7'(left_q) : to_4k;
  end

  assign busy_o     = st_q != D_IDLE;
  assign aw_valid_o = st_q == D_AW;
  assign aw_addr_o  = l2_q;
  assign aw_len_o   = 8'(burst_q - 7'd1);
  assign aw_id_o    = '0;
  assign ar_valid_o = st_q == D_AR;
  assign ar_addr_o  = l2_q;
  assign ar_len_o   = 8'(burst_q - 7'd1);
  assign ar_id_o    = '0;
  assign b_ready_o  = st_q == D_BRESP;

  // L2 -> TCDM: R beat straight into the TCDM
  // TCDM -> L2: read ahead into the FIFO
  assign tc_rd       = (st_q == D_WDATA) & (rd_left_q != 0) & (32'(fcnt_q) + 32'(finfl_q) < 4);
  assign tcdm_req_o  = ((st_q == D_RDATA) & r_valid_i) | tc_rd;
  assign tcdm_we_o   = st_q == D_RDATA;
  assign tcdm_addr_o = (st_q == D_RDATA) ? tc_q : tc_rd_q;
  assign tcdm_be_o   = '1;
  assign tcdm_wdata_o = r_data_i;
  assign r_ready_o   = (st_q == D_RDATA) & tcdm_gnt_i;

  assign fpush     = tcdm_rvalid_i & finfl_q;
  assign w_valid_o = (st_q == D_WDATA) & (fcnt_q != 0);
  assign w_data_o  = f_q[frp_q];
  assign w_strb_o  = '1;
  assign w_last_o  = w_left_q == 7'd1;
  assign fpop      = w_valid_o & w_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= D_IDLE; dir_q <= 1'b0; l2_q <= '0; tc_q <= '0; left_q <= '0; burst_q <= '0;
      rd_left_q <= '0; w_left_q <= '0; tc_rd_q <= '0; done_o <= 1'b0;
      frp_q <= '0; fwp_q <= '0; fcnt_q <= '0; finfl_q <= 1'b0;
    end else begin
      done_o  <= 1'b0;
      finfl_q <= tc_rd & tcdm_gnt_i;
      if (fpush) begin
        f_q[fwp_q] <= tcdm_rdata_i;
        fwp_q <= fwp_q + 1'b1;
      end
      if (fpop) frp_q <= frp_q + 1'b1;
      fcnt_q <= fcnt_q + 3'(fpush) - 3'(fpop);
      if (tc_rd && tcdm_gnt_i) begin
        tc_rd_q   <= tc_rd_q + AW'(64);
        rd_left_q <= rd_left_q - 7'd1;
      end
      unique case (st_q)
        D_IDLE: if (start_i) begin
          dir_q <= dir_i; l2_q <= l2_addr_i; tc_q <= tcdm_addr_i; left_q <= len_i >> 6;
          st_q  <= D_NEXT;
        end
        D_NEXT: begin
          burst_q <= beats;
          if (left_q == 0) begin
            st_q <= D_IDLE; done_o <= 1'b1;
          end else if (dir_q) begin
            st_q <= D_AW; rd_left_q <= beats; w_left_q <= beats; tc_rd_q <= tc_q;
          end else begin
            st_q <= D_AR;
          end
        end
        D_AR: if (ar_ready_i) st_q <= D_RDATA;
        D_RDATA: if (r_valid_i && tcdm_gnt_i) begin
          tc_q <= tc_q + AW'(64); l2_q <= l2_q + AW'(64); left_q <= left_q - 1'b1;
          if (r_last_i) st_q <= D_NEXT;
        end
        D_AW: if (aw_ready_i) st_q <= D_WDATA;
        D_WDATA: if (fpop) begin
          tc_q <= tc_q + AW'(64); l2_q <= l2_q + AW'(64); left_q <= left_q - 1'b1;
          w_left_q <= w_left_q - 7'd1;
          if (w_left_q == 7'd1) st_q <= D_BRESP;
        end
        D_BRESP: if (b_valid_i) st_q <= D_NEXT;
        default: st_q <= D_IDLE;
      endcase
    end
  end

endmodule
