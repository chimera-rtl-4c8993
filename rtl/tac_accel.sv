// TAC accelerator: 16 processing elements computing O = act(requant(I.W + B))
// for int8 matrices held in the cluster TCDM, with on-the-fly softmax for
// attention.
//
// Dataflow. The input row chunk I[m, 64k +: 64] is broadcast to all PEs;
// PE j holds the 64 weights W[64k +: 64, 16n + j], so each cycle produces
// 16 output elements of row m, i.e. 2048 operations. The loops run
// m-tile (64 rows) / n-tile (16 columns) / k-tile (64) / row. Partial sums
// of the 64 rows of an m-tile stay in the partial-sum buffer across
// k-tiles; the first k-tile adds the bias, the last one requantizes,
// activates and writes 16 bytes of O.
//
// Memory layout expected in the TCDM (byte addresses): I row-major M x K;
// W stored transposed, row-major N x K (so one PE's 64 weights are
// contiguous); B as N int32 (low 26 bits used); O row-major M x N int8.
// K must be a multiple of 64, N a multiple of 16, all bases 8-byte aligned.
//
// Streams. Streamer A (TCDM ports 0-7, 64 B/cycle) fetches input chunks
// ahead of the compute loop. Streamer B (ports 8-15) carries, in priority
// order, output writes, bias reads and weight reads. Weights for the next
// (n,k) tile are loaded into the free half of the double-buffered weights
// buffer while the current tile is computed.
//
// Attention. With MODE[2] set the 16 outputs of every row update the
// softmax engine's max/sum of that row (Q.K^T pass, clear on n-tile 0).
// With MODE[3] set the input chunk is replaced by its softmax
// probabilities before it reaches the PEs (A.V pass). Rows are indexed
// within the 64-row tile, so attention passes use M <= 64.
//
// Configuration is a 32-bit register port (see chimera_pkg for the map);
// writing 1 to CTRL starts, STATUS/done_o report completion.
// PE count, dot-product length, widths, 2 KiB double-buffered weights,
// the four streamers, 16 x 64-bit TCDM ports and the softmax placement
// follow the published design. Loop order, memory layout, register map,
// port split between streamers and the register-port protocol are this
// implementation's choices.
//
// The Verilator lint reports SYNCASYNCNET on rst_ni here. Each flip-flop uses the
// asynchronous active-low reset; the only other use of rst_ni is the
// `disable iff (!rst_ni)` of the concurrent assertions (in this module or
// in the submodules it feeds rst_ni to), which the tool counts as a
// synchronous use. No logic samples the reset synchronously.
//
// Three streamer outputs are left open on purpose (PINCONNECTEMPTY):
// streamer A only reads, so its tcdm_we_o is replaced by a constant 0 on
// ports 0-7; its rsp_tag_o and cmd_partial_o (some words of a line already
// granted) only matter when several sources share a streamer, as on
// streamer B, and the input stream has a single source.
module tac_accel
  import chimera_pkg::*;
#(
  parameter int unsigned AW = 32
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // configuration register port
  input  logic                          cfg_req_i,
  input  logic                          cfg_we_i,
  input  logic [3:0]                    cfg_addr_i,   // register index
  input  logic [31:0]                   cfg_wdata_i,
  output logic [31:0]                   cfg_rdata_o,
  output logic                          done_o,       // one-cycle pulse at the end of a job
  // TCDM master ports (64 bit)
  output logic [TAC_N_PORTS-1:0]        tcdm_req_o,
  input  logic [TAC_N_PORTS-1:0]        tcdm_gnt_i,
  output logic [TAC_N_PORTS-1:0][AW-1:0] tcdm_addr_o,
  output logic [TAC_N_PORTS-1:0]        tcdm_we_o,
  output logic [TAC_N_PORTS-1:0][63:0]  tcdm_wdata_o,
  input  logic [TAC_N_PORTS-1:0]        tcdm_rvalid_i,
  input  logic [TAC_N_PORTS-1:0][63:0]  tcdm_rdata_i
);

  localparam int unsigned NP   = TAC_N_PE;
  localparam int unsigned VB   = TAC_DOTP_N;
  localparam int unsigned ROWS = TAC_PSUM_ROWS;
  localparam int unsigned RW   = $clog2(ROWS);

  typedef enum logic [1:0] { TAG_WEIGHT = 2'd0, TAG_BIAS = 2'd1 } tag_e;
  typedef enum logic [2:0] { S_IDLE, S_BIAS_REQ, S_BIAS_WAIT, S_RUN, S_DRAIN } state_e;

  // ---------------- configuration registers ----------------
  logic [AW-1:0] i_base_q, w_base_q, b_base_q, o_base_q;
  logic [15:0]   m_q, k_q, n_q;
  requant_t      rq_q;
  act_mode_e     act_q;
  logic          sm_acc_q, sm_norm_q;
  logic          busy_q, done_q, start;
  state_e        state_q;
  logic [15:0]   c_mt_q, c_nt_q, c_kt_q, c_m_q;   // compute loop counters
  logic          b_we;

  assign start = cfg_req_i & cfg_we_i & (cfg_addr_i == 4'(TAC_REG_CTRL)) & cfg_wdata_i[0] & ~busy_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      i_base_q <= '0; w_base_q <= '0; b_base_q <= '0; o_base_q <= '0;
      m_q <= '0; k_q <= '0; n_q <= '0;
      rq_q <= '{mult: 8'd1, shift: 5'd0, add: 8'sd0};
      act_q <= ACT_IDENTITY; sm_acc_q <= 1'b0; sm_norm_q <= 1'b0;
    end else if (cfg_req_i && cfg_we_i && !busy_q) begin
      unique case (32'(cfg_addr_i))
        TAC_REG_I_BASE:  i_base_q <= AW'(cfg_wdata_i);
        TAC_REG_W_BASE:  w_base_q <= AW'(cfg_wdata_i);
        TAC_REG_B_BASE:  b_base_q <= AW'(cfg_wdata_i);
        TAC_REG_O_BASE:  o_base_q <= AW'(cfg_wdata_i);
        TAC_REG_M:       m_q <= cfg_wdata_i[15:0];
        TAC_REG_K:       k_q <= cfg_wdata_i[15:0];
        TAC_REG_N:       n_q <= cfg_wdata_i[15:0];
        TAC_REG_REQUANT: rq_q <= '{mult: cfg_wdata_i[7:0], shift: cfg_wdata_i[12:8], add: cfg_wdata_i[23:16]};
        TAC_REG_MODE: begin
          act_q     <= act_mode_e'(cfg_wdata_i[1:0]);
          sm_acc_q  <= cfg_wdata_i[2];
          sm_norm_q <= cfg_wdata_i[3];
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (32'(cfg_addr_i))
      TAC_REG_STATUS:  cfg_rdata_o = {30'd0, done_q, busy_q};
      TAC_REG_I_BASE:  cfg_rdata_o = 32'(i_base_q);
      TAC_REG_W_BASE:  cfg_rdata_o = 32'(w_base_q);
      TAC_REG_B_BASE:  cfg_rdata_o = 32'(b_base_q);
      TAC_REG_O_BASE:  cfg_rdata_o = 32'(o_base_q);
      TAC_REG_M:       cfg_rdata_o = 32'(m_q);
      TAC_REG_K:       cfg_rdata_o = 32'(k_q);
      TAC_REG_N:       cfg_rdata_o = 32'(n_q);
      TAC_REG_REQUANT: cfg_rdata_o = {8'd0, rq_q.add, 3'd0, rq_q.shift, rq_q.mult};
      TAC_REG_MODE:    cfg_rdata_o = {28'd0, sm_norm_q, sm_acc_q, act_q};
      default:         cfg_rdata_o = '0;
    endcase
  end

  // ---------------- loop bounds ----------------
  logic [15:0] n_mt, n_nt, n_kt;
  assign n_mt = 16'((32'(m_q) + ROWS - 1) / ROWS);
  assign n_nt = n_q / 16'(NP);
  assign n_kt = k_q / 16'(VB);

  function automatic logic [15:0] rows_of(input logic [15:0] mt, input logic [15:0] m);
    logic [31:0] left;
    left = 32'(m) - 32'(mt) * ROWS;
    return (left >= ROWS) ? 16'(ROWS) : 16'(left);
  endfunction

  // ---------------- streamer A: input chunks ----------------
  logic        ia_active_q;
  logic [15:0] ia_mt_q, ia_nt_q, ia_kt_q, ia_m_q;
  logic        a_cmd_ready, a_rsp_valid, a_rsp_ready;
  logic [7:0][63:0] a_rsp_data;
  logic [AW-1:0] ia_addr;

  assign ia_addr = i_base_q + AW'((32'(ia_mt_q) * ROWS + 32'(ia_m_q)) * 32'(k_q) + 32'(ia_kt_q) * VB);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ia_active_q <= 1'b0;
      ia_mt_q <= '0; ia_nt_q <= '0; ia_kt_q <= '0; ia_m_q <= '0;
    end else if (start) begin
      ia_active_q <= (m_q != 0) && (n_nt != 0) && (n_kt != 0);
      ia_mt_q <= '0; ia_nt_q <= '0; ia_kt_q <= '0; ia_m_q <= '0;
    end else if (ia_active_q && a_cmd_ready) begin
      if (ia_m_q + 1 < rows_of(ia_mt_q, m_q)) ia_m_q <= ia_m_q + 1;
      else begin
        ia_m_q <= '0;
        if (ia_kt_q + 1 < n_kt) ia_kt_q <= ia_kt_q + 1;
        else begin
          ia_kt_q <= '0;
          if (ia_nt_q + 1 < n_nt) ia_nt_q <= ia_nt_q + 1;
          else begin
            ia_nt_q <= '0;
            if (ia_mt_q + 1 < n_mt) ia_mt_q <= ia_mt_q + 1;
            else ia_active_q <= 1'b0;
          end
        end
      end
    end
  end

  tac_streamer #(.NW(8), .AW(AW), .TAG_W(2), .DEPTH(4)) u_stream_a (
    .clk_i, .rst_ni,
    .cmd_valid_i  (ia_active_q),
    .cmd_ready_o  (a_cmd_ready),
    .cmd_partial_o(),
    .cmd_write_i  (1'b0),
    .cmd_addr_i   (ia_addr),
    .cmd_mask_i   ('1),
    .cmd_wdata_i  ('0),
    .cmd_tag_i    ('0),
    .rsp_valid_o  (a_rsp_valid),
    .rsp_ready_i  (a_rsp_ready),
    .rsp_data_o   (a_rsp_data),
    .rsp_tag_o    (),
    .tcdm_req_o   (tcdm_req_o[7:0]),
    .tcdm_gnt_i   (tcdm_gnt_i[7:0]),
    .tcdm_addr_o  (tcdm_addr_o[7:0]),
    .tcdm_we_o    (),
    .tcdm_wdata_o (tcdm_wdata_o[7:0]),
    .tcdm_rvalid_i(tcdm_rvalid_i[7:0]),
    .tcdm_rdata_i (tcdm_rdata_i[7:0])
  );
  assign tcdm_we_o[7:0] = '0;

  // ---------------- weight fetch ----------------
  logic        wg_active_q, wg_wait_q;
  logic [15:0] wg_mt_q, wg_nt_q, wg_kt_q;
  logic [3:0]  wg_pe_q, wr_pe_q;
  logic        wb_wr_ready, wb_rd_valid, wb_release, wb_wr_en;
  logic [NP-1:0][VB-1:0][7:0] wb_rd_data;
  logic [AW-1:0] wg_addr;
  logic        wg_issue, wg_fire;

  assign wg_addr  = w_base_q + AW'((32'(wg_nt_q) * NP + 32'(wg_pe_q)) * 32'(k_q) + 32'(wg_kt_q) * VB);
  assign wg_issue = wg_active_q & ~wg_wait_q & wb_wr_ready;

  // ---------------- streamer B: output / bias / weight ----------------
  typedef enum logic [1:0] { B_NONE, B_OUT, B_BIAS, B_WEIGHT } bsel_e;
  bsel_e  bsel, bsel_q;
  logic   b_cmd_valid, b_cmd_ready, b_partial, b_cmd_write, b_rsp_valid;
  logic [AW-1:0] b_cmd_addr;
  logic [7:0]    b_cmd_mask;
  logic [7:0][63:0] b_cmd_wdata, b_rsp_data;
  logic [1:0]    b_cmd_tag, b_rsp_tag;

  // output FIFO (address + 16 bytes)
  localparam int unsigned OF_D = 4;
  logic [OF_D-1:0][AW-1:0]   of_addr_q;
  logic [OF_D-1:0][127:0]    of_data_q;
  logic [1:0] of_rd_q, of_wr_q;
  logic [2:0] of_cnt_q;
  logic       of_push, of_pop;
  logic [AW-1:0] out_addr_q;
  logic [NP-1:0][7:0] pe_y;
  logic [NP-1:0]      pe_yv;

  always_comb begin
    if (b_partial)                 bsel = bsel_q;     // finish a partly granted command
    else if (of_cnt_q != 0)        bsel = B_OUT;
    else if (state_q == S_BIAS_REQ) bsel = B_BIAS;
    else if (wg_issue)             bsel = B_WEIGHT;
    else                           bsel = B_NONE;
    b_cmd_valid = bsel != B_NONE;
    b_cmd_write = 1'b0;
    b_cmd_addr  = wg_addr;
    b_cmd_mask  = '1;
    b_cmd_wdata = '0;
    b_cmd_tag   = TAG_WEIGHT;
    unique case (bsel)
      B_OUT: begin
        b_cmd_write = 1'b1;
        b_cmd_addr  = of_addr_q[of_rd_q];
        b_cmd_mask  = 8'b0000_0011;
        b_cmd_wdata[1:0] = of_data_q[of_rd_q];
      end
      B_BIAS: begin
        b_cmd_addr = b_base_q + AW'(32'(c_nt_q) * NP * 4);
        b_cmd_tag  = TAG_BIAS;
      end
      default: ;
    endcase
  end

  assign of_pop   = (bsel == B_OUT) & b_cmd_ready;
  assign wg_fire  = (bsel == B_WEIGHT) & b_cmd_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) bsel_q <= B_NONE;
    else         bsel_q <= bsel;
  end

  tac_streamer #(.NW(8), .AW(AW), .TAG_W(2), .DEPTH(4)) u_stream_b (
    .clk_i, .rst_ni,
    .cmd_valid_i  (b_cmd_valid),
    .cmd_ready_o  (b_cmd_ready),
    .cmd_partial_o(b_partial),
    .cmd_write_i  (b_cmd_write),
    .cmd_addr_i   (b_cmd_addr),
    .cmd_mask_i   (b_cmd_mask),
    .cmd_wdata_i  (b_cmd_wdata),
    .cmd_tag_i    (b_cmd_tag),
    .rsp_valid_o  (b_rsp_valid),
    .rsp_ready_i  (1'b1),
    .rsp_data_o   (b_rsp_data),
    .rsp_tag_o    (b_rsp_tag),
    .tcdm_req_o   (tcdm_req_o[15:8]),
    .tcdm_gnt_i   (tcdm_gnt_i[15:8]),
    .tcdm_addr_o  (tcdm_addr_o[15:8]),
    .tcdm_we_o    (b_we),
    .tcdm_wdata_o (tcdm_wdata_o[15:8]),
    .tcdm_rvalid_i(tcdm_rvalid_i[15:8]),
    .tcdm_rdata_i (tcdm_rdata_i[15:8])
  );
  assign tcdm_we_o[15:8] = {8{b_we}};

  // weight fetch counters
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wg_active_q <= 1'b0; wg_wait_q <= 1'b0;
      wg_mt_q <= '0; wg_nt_q <= '0; wg_kt_q <= '0; wg_pe_q <= '0; wr_pe_q <= '0;
    end else if (start) begin
      wg_active_q <= (m_q != 0) && (n_nt != 0) && (n_kt != 0);
      wg_wait_q <= 1'b0;
      wg_mt_q <= '0; wg_nt_q <= '0; wg_kt_q <= '0; wg_pe_q <= '0; wr_pe_q <= '0;
    end else begin
      if (wb_wr_en) begin
        wr_pe_q <= wr_pe_q + 1'b1;
        if (wr_pe_q == 4'(NP - 1)) wg_wait_q <= 1'b0;
      end
      if (wg_fire) begin
        wg_pe_q <= wg_pe_q + 1'b1;
        if (wg_pe_q == 4'(NP - 1)) begin
          wg_wait_q <= 1'b1;
          if (wg_kt_q + 1 < n_kt) wg_kt_q <= wg_kt_q + 1;
          else begin
            wg_kt_q <= '0;
            if (wg_nt_q + 1 < n_nt) wg_nt_q <= wg_nt_q + 1;
            else begin
              wg_nt_q <= '0;
              if (wg_mt_q + 1 < n_mt) wg_mt_q <= wg_mt_q + 1;
              else wg_active_q <= 1'b0;
            end
          end
        end
      end
    end
  end

  assign wb_wr_en = b_rsp_valid & (b_rsp_tag == TAG_WEIGHT);

  tac_weight_buffer u_wbuf (
    .clk_i, .rst_ni,
    .wr_en_i     (wb_wr_en),
    .wr_pe_i     (wr_pe_q),
    .wr_data_i   (b_rsp_data),
    .wr_ready_o  (wb_wr_ready),
    .rd_valid_o  (wb_rd_valid),
    .rd_data_o   (wb_rd_data),
    .rd_release_i(wb_release)
  );

  // ---------------- compute loop ----------------
  logic        fire, c_first, c_last, row_last;
  logic [NP-1:0][TAC_ACC_W-1:0] bias_q, psum_rd, psum_wr;
  logic [VB-1:0][7:0] in_vec, sm_norm;
  logic [RW-1:0] sm_row_q;
  logic          sm_clear_q;

  assign c_first  = c_kt_q == 0;
  assign c_last   = c_kt_q + 1 == n_kt;
  assign row_last = c_m_q + 1 == rows_of(c_mt_q, m_q);
  // room in the output FIFO for this row and the one still in the PE register
  assign fire = (state_q == S_RUN) & a_rsp_valid & wb_rd_valid &
                (~c_last | (32'(of_cnt_q) + 32'(pe_yv[0]) + 1 < OF_D));
  assign a_rsp_ready = fire;
  assign wb_release  = fire & row_last;
  assign in_vec      = sm_norm_q ? sm_norm : a_rsp_data;

  tac_psum_buffer u_psum (
    .clk_i,
    .we_i   (fire),
    .waddr_i(RW'(c_m_q)),
    .wdata_i(psum_wr),
    .raddr_i(RW'(c_m_q)),
    .rdata_o(psum_rd)
  );

  for (genvar j = 0; j < NP; j++) begin : g_pe
    tac_pe u_pe (
      .clk_i, .rst_ni,
      .en_i     (fire),
      .first_i  (c_first),
      .last_i   (c_last),
      .in_i     (in_vec),
      .w_i      (wb_rd_data[j]),
      .bias_i   (bias_q[j]),
      .psum_i   (psum_rd[j]),
      .rq_i     (rq_q),
      .act_i    (act_q),
      .acc_o    (psum_wr[j]),
      .y_o      (pe_y[j]),
      .y_valid_o(pe_yv[j])
    );
  end

  tac_softmax u_softmax (
    .clk_i,
    .acc_valid_i(pe_yv[0] & sm_acc_q),
    .acc_clear_i(sm_clear_q),
    .acc_row_i  (sm_row_q),
    .acc_vals_i (pe_y),
    .norm_row_i (RW'(c_m_q)),
    .norm_in_i  (a_rsp_data),
    .norm_out_o (sm_norm)
  );

  assign of_push = pe_yv[0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; busy_q <= 1'b0; done_q <= 1'b0; done_o <= 1'b0;
      c_mt_q <= '0; c_nt_q <= '0; c_kt_q <= '0; c_m_q <= '0;
      bias_q <= '0; out_addr_q <= '0; sm_row_q <= '0; sm_clear_q <= 1'b0;
      of_rd_q <= '0; of_wr_q <= '0; of_cnt_q <= '0;
    end else begin
      done_o <= 1'b0;
      // output FIFO
      if (of_push) begin
        of_addr_q[of_wr_q] <= out_addr_q;
        of_data_q[of_wr_q] <= pe_y;
        of_wr_q <= of_wr_q + 1'b1;
      end
      if (of_pop) of_rd_q <= of_rd_q + 1'b1;
      of_cnt_q <= of_cnt_q + 3'(of_push) - 3'(of_pop);
      // bias
      if (b_rsp_valid && b_rsp_tag == TAG_BIAS) begin
        for (int unsigned j = 0; j < NP; j++)
          bias_q[j] <= b_rsp_data[j/2][32*(j%2) +: TAC_ACC_W];
      end
      if (fire) begin
        out_addr_q <= o_base_q + AW'((32'(c_mt_q) * ROWS + 32'(c_m_q)) * 32'(n_q) + 32'(c_nt_q) * NP);
        sm_row_q   <= RW'(c_m_q);
        sm_clear_q <= c_nt_q == 0;
      end
      unique case (state_q)
        S_IDLE: if (start) begin
          busy_q <= 1'b1; done_q <= 1'b0;
          c_mt_q <= '0; c_nt_q <= '0; c_kt_q <= '0; c_m_q <= '0;
          state_q <= ((m_q != 0) && (n_nt != 0) && (n_kt != 0)) ? S_BIAS_REQ : S_DRAIN;
        end
        S_BIAS_REQ: if (bsel == B_BIAS && b_cmd_ready) state_q <= S_BIAS_WAIT;
        S_BIAS_WAIT: if (b_rsp_valid && b_rsp_tag == TAG_BIAS) state_q <= S_RUN;
        S_RUN: if (fire) begin
          if (!row_last) c_m_q <= c_m_q + 1;
          else begin
            c_m_q <= '0;
            if (!c_last) c_kt_q <= c_kt_q + 1;
            else begin
              c_kt_q <= '0;
              state_q <= S_BIAS_REQ;
              if (c_nt_q + 1 < n_nt) c_nt_q <= c_nt_q + 1;
              else begin
                c_nt_q <= '0;
                if (c_mt_q + 1 < n_mt) c_mt_q <= c_mt_q + 1;
                else state_q <= S_DRAIN;
              end
            end
          end
        end
        S_DRAIN: if (of_cnt_q == 0 && !pe_yv[0] && !of_push && !b_partial) begin
          state_q <= S_IDLE; busy_q <= 1'b0; done_q <= 1'b1; done_o <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) of_push |-> of_cnt_q < 3'(OF_D))
    else $error("output FIFO overflow");

endmodule
