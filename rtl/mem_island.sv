// L2 memory island: 256 KiB of shared L2 with five 512-bit AXI4 ports for
// bulk transfers (one per cluster) and one 32-bit AXI4 port for
// latency-critical accesses of the host.
//
// Organisation. The memory is two interleaved wide banks of 128 KiB; each
// is 16 word banks of 2048 x 32 bit. A byte address maps to
//   word bank = addr[5:2], wide bank = addr[6], row = addr[17:7],
// so consecutive 64-byte lines alternate between the two wide banks and
// two streams rarely collide. Each AXI port is split into a read and a
// write stream (mi_axi_to_mem). The ten wide streams meet the two wide
// banks in a 512-bit logarithmic interconnect (selected by addr[6]), the
// two narrow streams meet the 32 word banks in a 32-bit logarithmic
// interconnect (selected by addr[6:2]). In front of every wide bank a QoS
// arbiter splits wide requests into words and decides between wide and
// narrow traffic, with narrow requests first (fixed, or bounded by
// qos_bound_i consecutive refusals of the wide request).
//
// Peak bandwidth: two wide banks x 64 B per cycle = 128 B/cycle, i.e.
// 563 Gb/s at 550 MHz. Each wide port can read and write 64 B per cycle.
// Address bits above bit 17 are ignored (the island decodes its own
// 256 KiB window). Organisation and sizes follow the published design; bit
// positions of the interleaving and the policy registers as ports are this
// implementation's choices.
//
// The Verilator lint reports SYNCASYNCNET on rst_ni here. Each flip-flop uses the
// asynchronous active-low reset; the only other use of rst_ni is the
// `disable iff (!rst_ni)` of the concurrent assertions (in this module or
// in the submodules it feeds rst_ni to), which the tool counts as a
// synchronous use. No logic samples the reset synchronously.
module mem_island
  import chimera_pkg::*;
#(
  parameter int unsigned NWP = L2_N_WIDE_PORTS,
  parameter int unsigned AW  = 32,
  parameter int unsigned IW  = 4,
  parameter int unsigned BANK_WORDS = L2_BYTES / (L2_N_WIDE_BANKS * L2_WORDS_PER_WB * 4)
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  qos_mode_e                 qos_mode_i,
  input  logic [7:0]                qos_bound_i,
  // wide AXI4 ports (512 bit)
  input  logic [NWP-1:0]            wd_aw_valid_i,
  output logic [NWP-1:0]            wd_aw_ready_o,
  input  logic [NWP-1:0][AW-1:0]    wd_aw_addr_i,
  input  logic [NWP-1:0][7:0]       wd_aw_len_i,
  input  logic [NWP-1:0][IW-1:0]    wd_aw_id_i,
  input  logic [NWP-1:0]            wd_w_valid_i,
  output logic [NWP-1:0]            wd_w_ready_o,
  input  logic [NWP-1:0][511:0]     wd_w_data_i,
  input  logic [NWP-1:0][63:0]      wd_w_strb_i,
  input  logic [NWP-1:0]            wd_w_last_i,
  output logic [NWP-1:0]            wd_b_valid_o,
  input  logic [NWP-1:0]            wd_b_ready_i,
  output logic [NWP-1:0][IW-1:0]    wd_b_id_o,
  input  logic [NWP-1:0]            wd_ar_valid_i,
  output logic [NWP-1:0]            wd_ar_ready_o,
  input  logic [NWP-1:0][AW-1:0]    wd_ar_addr_i,
  input  logic [NWP-1:0][7:0]       wd_ar_len_i,
  input  logic [NWP-1:0][IW-1:0]    wd_ar_id_i,
  output logic [NWP-1:0]            wd_r_valid_o,
  input  logic [NWP-1:0]            wd_r_ready_i,
  output logic [NWP-1:0][511:0]     wd_r_data_o,
  output logic [NWP-1:0]            wd_r_last_o,
  output logic [NWP-1:0][IW-1:0]    wd_r_id_o,
  // narrow AXI4 port (32 bit)
  input  logic                      nr_aw_valid_i,
  output logic                      nr_aw_ready_o,
  input  logic [AW-1:0]             nr_aw_addr_i,
  input  logic [7:0]                nr_aw_len_i,
  input  logic [IW-1:0]             nr_aw_id_i,
  input  logic                      nr_w_valid_i,
  output logic                      nr_w_ready_o,
  input  logic [31:0]               nr_w_data_i,
  input  logic [3:0]                nr_w_strb_i,
  input  logic                      nr_w_last_i,
  output logic                      nr_b_valid_o,
  input  logic                      nr_b_ready_i,
  output logic [IW-1:0]             nr_b_id_o,
  input  logic                      nr_ar_valid_i,
  output logic                      nr_ar_ready_o,
  input  logic [AW-1:0]             nr_ar_addr_i,
  input  logic [7:0]                nr_ar_len_i,
  input  logic [IW-1:0]             nr_ar_id_i,
  output logic                      nr_r_valid_o,
  input  logic                      nr_r_ready_i,
  output logic [31:0]               nr_r_data_o,
  output logic                      nr_r_last_o,
  output logic [IW-1:0]             nr_r_id_o
);

  localparam int unsigned NWB  = L2_N_WIDE_BANKS;
  localparam int unsigned NWW  = L2_WORDS_PER_WB;
  localparam int unsigned NB   = NWB * NWW;
  localparam int unsigned RW   = $clog2(BANK_WORDS);
  localparam int unsigned NWM  = 2 * NWP;

  // wide streams: master 2p = read of port p, 2p+1 = write of port p
  logic [NWM-1:0]          wm_req, wm_gnt, wm_we, wm_rvalid;
  logic [NWM-1:0][AW-1:0]  wm_addr;
  logic [NWM-1:0][63:0]    wm_be;
  logic [NWM-1:0][511:0]   wm_wdata, wm_rdata;

  for (genvar p = 0; p < NWP; p++) begin : g_wide_port
    mi_axi_to_mem #(.DW(512), .AW(AW), .IW(IW)) u_a2m (
      .clk_i, .rst_ni,
      .aw_valid_i(wd_aw_valid_i[p]), .aw_ready_o(wd_aw_ready_o[p]), .aw_addr_i(wd_aw_addr_i[p]),
      .aw_len_i(wd_aw_len_i[p]), .aw_id_i(wd_aw_id_i[p]),
      .w_valid_i(wd_w_valid_i[p]), .w_ready_o(wd_w_ready_o[p]), .w_data_i(wd_w_data_i[p]),
      .w_strb_i(wd_w_strb_i[p]), .w_last_i(wd_w_last_i[p]),
      .b_valid_o(wd_b_valid_o[p]), .b_ready_i(wd_b_ready_i[p]), .b_id_o(wd_b_id_o[p]),
      .ar_valid_i(wd_ar_valid_i[p]), .ar_ready_o(wd_ar_ready_o[p]), .ar_addr_i(wd_ar_addr_i[p]),
      .ar_len_i(wd_ar_len_i[p]), .ar_id_i(wd_ar_id_i[p]),
      .r_valid_o(wd_r_valid_o[p]), .r_ready_i(wd_r_ready_i[p]), .r_data_o(wd_r_data_o[p]),
      .r_last_o(wd_r_last_o[p]), .r_id_o(wd_r_id_o[p]),
      .rd_req_o(wm_req[2*p]), .rd_gnt_i(wm_gnt[2*p]), .rd_addr_o(wm_addr[2*p]),
      .rd_rvalid_i(wm_rvalid[2*p]), .rd_rdata_i(wm_rdata[2*p]),
      .wr_req_o(wm_req[2*p+1]), .wr_gnt_i(wm_gnt[2*p+1]), .wr_addr_o(wm_addr[2*p+1]),
      .wr_be_o(wm_be[2*p+1]), .wr_wdata_o(wm_wdata[2*p+1])
    );
    assign wm_we[2*p]    = 1'b0;
    assign wm_we[2*p+1]  = 1'b1;
    assign wm_be[2*p]    = '0;
    assign wm_wdata[2*p] = '0;
  end

  // narrow streams: master 0 = read, 1 = write
  logic [1:0]          nm_req, nm_gnt, nm_we, nm_rvalid;
  logic [1:0][AW-1:0]  nm_addr;
  logic [1:0][3:0]     nm_be;
  logic [1:0][31:0]    nm_wdata, nm_rdata;

  mi_axi_to_mem #(.DW(32), .AW(AW), .IW(IW)) u_a2m_narrow (
    .clk_i, .rst_ni,
    .aw_valid_i(nr_aw_valid_i), .aw_ready_o(nr_aw_ready_o), .aw_addr_i(nr_aw_addr_i),
    .aw_len_i(nr_aw_len_i), .aw_id_i(nr_aw_id_i),
    .w_valid_i(nr_w_valid_i), .w_ready_o(nr_w_ready_o), .w_data_i(nr_w_data_i),
    .w_strb_i(nr_w_strb_i), .w_last_i(nr_w_last_i),
    .b_valid_o(nr_b_valid_o), .b_ready_i(nr_b_ready_i), .b_id_o(nr_b_id_o),
    .ar_valid_i(nr_ar_valid_i), .ar_ready_o(nr_ar_ready_o), .ar_addr_i(nr_ar_addr_i),
    .ar_len_i(nr_ar_len_i), .ar_id_i(nr_ar_id_i),
    .r_valid_o(nr_r_valid_o), .r_ready_i(nr_r_ready_i), .r_data_o(nr_r_data_o),
    .r_last_o(nr_r_last_o), .r_id_o(nr_r_id_o),
    .rd_req_o(nm_req[0]), .rd_gnt_i(nm_gnt[0]), .rd_addr_o(nm_addr[0]),
    .rd_rvalid_i(nm_rvalid[0]), .rd_rdata_i(nm_rdata[0]),
    .wr_req_o(nm_req[1]), .wr_gnt_i(nm_gnt[1]), .wr_addr_o(nm_addr[1]),
    .wr_be_o(nm_be[1]), .wr_wdata_o(nm_wdata[1])
  );
  assign nm_we    = 2'b10;
  assign nm_be[0] = '0;
  assign nm_wdata[0] = '0;

  // 512-bit interconnect to the wide banks
  logic [NWB-1:0]          wt_req, wt_gnt, wt_we;
  logic [NWB-1:0][RW-1:0]  wt_addr;
  logic [NWB-1:0][63:0]    wt_be;
  logic [NWB-1:0][511:0]   wt_wdata, wt_rdata;

  log_xbar #(.NM(NWM), .NT(NWB), .DW(512), .AW(AW), .SEL_LSB(6), .ROW_W(RW)) u_wide_xbar (
    .clk_i, .rst_ni,
    .m_req_i(wm_req), .m_gnt_o(wm_gnt), .m_addr_i(wm_addr), .m_we_i(wm_we), .m_be_i(wm_be),
    .m_wdata_i(wm_wdata), .m_rvalid_o(wm_rvalid), .m_rdata_o(wm_rdata),
    .t_req_o(wt_req), .t_gnt_i(wt_gnt), .t_addr_o(wt_addr), .t_we_o(wt_we), .t_be_o(wt_be),
    .t_wdata_o(wt_wdata), .t_rdata_i(wt_rdata)
  );

  // 32-bit interconnect to the word banks
  logic [NB-1:0]          nt_req, nt_gnt, nt_we;
  logic [NB-1:0][RW-1:0]  nt_addr;
  logic [NB-1:0][3:0]     nt_be;
  logic [NB-1:0][31:0]    nt_wdata, nt_rdata;

  log_xbar #(.NM(2), .NT(NB), .DW(32), .AW(AW), .SEL_LSB(2), .ROW_W(RW)) u_narrow_xbar (
    .clk_i, .rst_ni,
    .m_req_i(nm_req), .m_gnt_o(nm_gnt), .m_addr_i(nm_addr), .m_we_i(nm_we), .m_be_i(nm_be),
    .m_wdata_i(nm_wdata), .m_rvalid_o(nm_rvalid), .m_rdata_o(nm_rdata),
    .t_req_o(nt_req), .t_gnt_i(nt_gnt), .t_addr_o(nt_addr), .t_we_o(nt_we), .t_be_o(nt_be),
    .t_wdata_o(nt_wdata), .t_rdata_i(nt_rdata)
  );

  for (genvar wb = 0; wb < NWB; wb++) begin : g_wide_bank
    logic [NWW-1:0]          b_req, b_we;
    logic [NWW-1:0][RW-1:0]  b_addr;
    logic [NWW-1:0][3:0]     b_be;
    logic [NWW-1:0][31:0]    b_wdata, b_rdata;

    mi_qos_arbiter #(.NW(NWW), .ROW_W(RW)) u_qos (
      .clk_i, .rst_ni,
      .mode_i(qos_mode_i), .bound_i(qos_bound_i),
      .w_req_i(wt_req[wb]), .w_gnt_o(wt_gnt[wb]), .w_addr_i(wt_addr[wb]), .w_we_i(wt_we[wb]),
      .w_be_i(wt_be[wb]), .w_wdata_i(wt_wdata[wb]), .w_rdata_o(wt_rdata[wb]),
      .n_req_i(nt_req[wb*NWW +: NWW]), .n_gnt_o(nt_gnt[wb*NWW +: NWW]),
      .n_addr_i(nt_addr[wb*NWW +: NWW]), .n_we_i(nt_we[wb*NWW +: NWW]),
      .n_be_i(nt_be[wb*NWW +: NWW]), .n_wdata_i(nt_wdata[wb*NWW +: NWW]),
      .n_rdata_o(nt_rdata[wb*NWW +: NWW]),
      .b_req_o(b_req), .b_we_o(b_we), .b_addr_o(b_addr), .b_be_o(b_be),
      .b_wdata_o(b_wdata), .b_rdata_i(b_rdata)
    );

    for (genvar w = 0; w < NWW; w++) begin : g_word_bank
      sram_bank #(.WORDS(BANK_WORDS), .DW(32)) u_bank (
        .clk_i, .req_i(b_req[w]), .we_i(b_we[w]), .addr_i(b_addr[w]), .be_i(b_be[w]),
        .wdata_i(b_wdata[w]), .rdata_o(b_rdata[w])
      );
    end
  end

endmodule
