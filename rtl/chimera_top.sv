// Chimera top: the shared L2 memory island together with one transformer
// acceleration cluster (TAC), wired as in the SoC.
//
// The TAC cluster here consists of the accelerator, its 128 KiB TCDM and
// the cluster DMA. The accelerator's 16 streamer ports and NCORE core data
// ports share the TCDM through its 64-bit logarithmic interconnect; the DMA
// moves 64-byte lines between the TCDM's 512-bit wide port and wide AXI4
// port 0 of the memory island. The other four wide ports (the other
// clusters) and the 32-bit narrow port (the host) are ports of this
// module, as are the accelerator's configuration register port, the core
// TCDM ports and the DMA control, which in the SoC are driven by the host
// and the cluster cores. Cluster and memory island share one clock here;
// the SoC places clock-domain crossings and clock gates between them.
//
// The Verilator lint reports SYNCASYNCNET on rst_ni here. Each flip-flop uses the
// asynchronous active-low reset; the only other use of rst_ni is the
// `disable iff (!rst_ni)` of the concurrent assertions (in this module or
// in the submodules it feeds rst_ni to), which the tool counts as a
// synchronous use. No logic samples the reset synchronously.
module chimera_top
  import chimera_pkg::*;
#(
  parameter int unsigned NCORE = 9,
  parameter int unsigned AW    = 32,
  parameter int unsigned IW    = 4
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  // L2 QoS policy
  input  qos_mode_e                       qos_mode_i,
  input  logic [7:0]                      qos_bound_i,
  // wide AXI4 ports of the other clusters (L2 wide ports 1..4)
  input  logic [L2_N_WIDE_PORTS-2:0]          oc_aw_valid_i,
  output logic [L2_N_WIDE_PORTS-2:0]          oc_aw_ready_o,
  input  logic [L2_N_WIDE_PORTS-2:0][AW-1:0]  oc_aw_addr_i,
  input  logic [L2_N_WIDE_PORTS-2:0][7:0]     oc_aw_len_i,
  input  logic [L2_N_WIDE_PORTS-2:0][IW-1:0]  oc_aw_id_i,
  input  logic [L2_N_WIDE_PORTS-2:0]          oc_w_valid_i,
  output logic [L2_N_WIDE_PORTS-2:0]          oc_w_ready_o,
  input  logic [L2_N_WIDE_PORTS-2:0][511:0]   oc_w_data_i,
  input  logic [L2_N_WIDE_PORTS-2:0][63:0]    oc_w_strb_i,
  input  logic [L2_N_WIDE_PORTS-2:0]          oc_w_last_i,
  output logic [L2_N_WIDE_PORTS-2:0]          oc_b_valid_o,
  input  logic [L2_N_WIDE_PORTS-2:0]          oc_b_ready_i,
  output logic [L2_N_WIDE_PORTS-2:0][IW-1:0]  oc_b_id_o,
  input  logic [L2_N_WIDE_PORTS-2:0]          oc_ar_valid_i,
  output logic [L2_N_WIDE_PORTS-2:0]          oc_ar_ready_o,
  input  logic [L2_N_WIDE_PORTS-2:0][AW-1:0]  oc_ar_addr_i,
  input  logic [L2_N_WIDE_PORTS-2:0][7:0]     oc_ar_len_i,
  input  logic [L2_N_WIDE_PORTS-2:0][IW-1:0]  oc_ar_id_i,
  output logic [L2_N_WIDE_PORTS-2:0]          oc_r_valid_o,
  input  logic [L2_N_WIDE_PORTS-2:0]          oc_r_ready_i,
  output logic [L2_N_WIDE_PORTS-2:0][511:0]   oc_r_data_o,
  output logic [L2_N_WIDE_PORTS-2:0]          oc_r_last_o,
  output logic [L2_N_WIDE_PORTS-2:0][IW-1:0]  oc_r_id_o,
  // narrow AXI4 port of the host (32 bit)
  input  logic                            h_aw_valid_i,
  output logic                            h_aw_ready_o,
  input  logic [AW-1:0]                   h_aw_addr_i,
  input  logic [7:0]                      h_aw_len_i,
  input  logic [IW-1:0]                   h_aw_id_i,
  input  logic                            h_w_valid_i,
  output logic                            h_w_ready_o,
  input  logic [31:0]                     h_w_data_i,
  input  logic [3:0]                      h_w_strb_i,
  input  logic                            h_w_last_i,
  output logic                            h_b_valid_o,
  input  logic                            h_b_ready_i,
  output logic [IW-1:0]                   h_b_id_o,
  input  logic                            h_ar_valid_i,
  output logic                            h_ar_ready_o,
  input  logic [AW-1:0]                   h_ar_addr_i,
  input  logic [7:0]                      h_ar_len_i,
  input  logic [IW-1:0]                   h_ar_id_i,
  output logic                            h_r_valid_o,
  input  logic                            h_r_ready_i,
  output logic [31:0]                     h_r_data_o,
  output logic                            h_r_last_o,
  output logic [IW-1:0]                   h_r_id_o,
  // accelerator configuration registers
  input  logic                            acc_cfg_req_i,
  input  logic                            acc_cfg_we_i,
  input  logic [3:0]                      acc_cfg_addr_i,
  input  logic [31:0]                     acc_cfg_wdata_i,
  output logic [31:0]                     acc_cfg_rdata_o,
  output logic                            acc_done_o,
  // cluster core TCDM ports (64 bit)
  input  logic [NCORE-1:0]                core_req_i,
  output logic [NCORE-1:0]                core_gnt_o,
  input  logic [NCORE-1:0][AW-1:0]        core_addr_i,
  input  logic [NCORE-1:0]                core_we_i,
  input  logic [NCORE-1:0][7:0]           core_be_i,
  input  logic [NCORE-1:0][63:0]          core_wdata_i,
  output logic [NCORE-1:0]                core_rvalid_o,
  output logic [NCORE-1:0][63:0]          core_rdata_o,
  // cluster DMA control
  input  logic                            dma_start_i,
  input  logic                            dma_dir_i,
  input  logic [AW-1:0]                   dma_l2_addr_i,
  input  logic [AW-1:0]                   dma_tcdm_addr_i,
  input  logic [AW-1:0]                   dma_len_i,
  output logic                            dma_busy_o,
  output logic                            dma_done_o
);

  localparam int unsigned NP = TAC_N_PORTS;
  localparam int unsigned NM = NP + NCORE;
  localparam int unsigned NWP = L2_N_WIDE_PORTS;

  // ---------------- TAC cluster ----------------
  logic [NP-1:0]          acc_req, acc_gnt, acc_we, acc_rvalid;
  logic [NP-1:0][AW-1:0]  acc_addr;
  logic [NP-1:0][63:0]    acc_wdata, acc_rdata;

  tac_accel #(.AW(AW)) u_accel (
    .clk_i, .rst_ni,
    .cfg_req_i(acc_cfg_req_i), .cfg_we_i(acc_cfg_we_i), .cfg_addr_i(acc_cfg_addr_i),
    .cfg_wdata_i(acc_cfg_wdata_i), .cfg_rdata_o(acc_cfg_rdata_o), .done_o(acc_done_o),
    .tcdm_req_o(acc_req), .tcdm_gnt_i(acc_gnt), .tcdm_addr_o(acc_addr), .tcdm_we_o(acc_we),
    .tcdm_wdata_o(acc_wdata), .tcdm_rvalid_i(acc_rvalid), .tcdm_rdata_i(acc_rdata)
  );

  logic              tw_req, tw_gnt, tw_we, tw_rvalid;
  logic [AW-1:0]     tw_addr;
  logic [63:0]       tw_be;
  logic [511:0]      tw_wdata, tw_rdata;

  cluster_tcdm #(.NM(NM), .AW(AW)) u_tcdm (
    .clk_i, .rst_ni,
    .m_req_i   ({core_req_i, acc_req}),
    .m_gnt_o   ({core_gnt_o, acc_gnt}),
    .m_addr_i  ({core_addr_i, acc_addr}),
    .m_we_i    ({core_we_i, acc_we}),
    .m_be_i    ({core_be_i, {NP{8'hff}}}),
    .m_wdata_i ({core_wdata_i, acc_wdata}),
    .m_rvalid_o({core_rvalid_o, acc_rvalid}),
    .m_rdata_o ({core_rdata_o, acc_rdata}),
    .wide_req_i(tw_req), .wide_gnt_o(tw_gnt), .wide_addr_i(tw_addr), .wide_we_i(tw_we),
    .wide_be_i(tw_be), .wide_wdata_i(tw_wdata), .wide_rvalid_o(tw_rvalid), .wide_rdata_o(tw_rdata)
  );

  // DMA <-> L2 wide port 0
  logic          d_aw_valid, d_aw_ready, d_w_valid, d_w_ready, d_w_last, d_b_valid, d_b_ready;
  logic          d_ar_valid, d_ar_ready, d_r_valid, d_r_ready, d_r_last;
  logic [AW-1:0] d_aw_addr, d_ar_addr;
  logic [7:0]    d_aw_len, d_ar_len;
  logic [IW-1:0] d_aw_id, d_ar_id;
  logic [511:0]  d_w_data, d_r_data;
  logic [63:0]   d_w_strb;

  cluster_dma #(.AW(AW), .IW(IW)) u_dma (
    .clk_i, .rst_ni,
    .start_i(dma_start_i), .dir_i(dma_dir_i), .l2_addr_i(dma_l2_addr_i),
    .tcdm_addr_i(dma_tcdm_addr_i), .len_i(dma_len_i), .busy_o(dma_busy_o), .done_o(dma_done_o),
    .aw_valid_o(d_aw_valid), .aw_ready_i(d_aw_ready), .aw_addr_o(d_aw_addr), .aw_len_o(d_aw_len),
    .aw_id_o(d_aw_id), .w_valid_o(d_w_valid), .w_ready_i(d_w_ready), .w_data_o(d_w_data),
    .w_strb_o(d_w_strb), .w_last_o(d_w_last), .b_valid_i(d_b_valid), .b_ready_o(d_b_ready),
    .ar_valid_o(d_ar_valid), .ar_ready_i(d_ar_ready), .ar_addr_o(d_ar_addr), .ar_len_o(d_ar_len),
    .ar_id_o(d_ar_id), .r_valid_i(d_r_valid), .r_ready_o(d_r_ready), .r_data_i(d_r_data),
    .r_last_i(d_r_last),
    .tcdm_req_o(tw_req), .tcdm_gnt_i(tw_gnt), .tcdm_addr_o(tw_addr), .tcdm_we_o(tw_we),
    .tcdm_be_o(tw_be), .tcdm_wdata_o(tw_wdata), .tcdm_rvalid_i(tw_rvalid), .tcdm_rdata_i(tw_rdata)
  );

  // ---------------- L2 memory island ----------------
  logic [NWP-1:0][IW-1:0] b_id_all, r_id_all;

  mem_island #(.AW(AW), .IW(IW)) u_l2 (
    .clk_i, .rst_ni,
    .qos_mode_i, .qos_bound_i,
    .wd_aw_valid_i({oc_aw_valid_i, d_aw_valid}),
    .wd_aw_ready_o({oc_aw_ready_o, d_aw_ready}),
    .wd_aw_addr_i ({oc_aw_addr_i, d_aw_addr}),
    .wd_aw_len_i  ({oc_aw_len_i, d_aw_len}),
    .wd_aw_id_i   ({oc_aw_id_i, d_aw_id}),
    .wd_w_valid_i ({oc_w_valid_i, d_w_valid}),
    .wd_w_ready_o ({oc_w_ready_o, d_w_ready}),
    .wd_w_data_i  ({oc_w_data_i, d_w_data}),
    .wd_w_strb_i  ({oc_w_strb_i, d_w_strb}),
    .wd_w_last_i  ({oc_w_last_i, d_w_last}),
    .wd_b_valid_o ({oc_b_valid_o, d_b_valid}),
    .wd_b_ready_i ({oc_b_ready_i, d_b_ready}),
    .wd_b_id_o    (b_id_all),
    .wd_ar_valid_i({oc_ar_valid_i, d_ar_valid}),
    .wd_ar_ready_o({oc_ar_ready_o, d_ar_ready}),
    .wd_ar_addr_i ({oc_ar_addr_i, d_ar_addr}),
    .wd_ar_len_i  ({oc_ar_len_i, d_ar_len}),
    .wd_ar_id_i   ({oc_ar_id_i, d_ar_id}),
    .wd_r_valid_o ({oc_r_valid_o, d_r_valid}),
    .wd_r_ready_i ({oc_r_ready_i, d_r_ready}),
    .wd_r_data_o  ({oc_r_data_o, d_r_data}),
    .wd_r_last_o  ({oc_r_last_o, d_r_last}),
    .wd_r_id_o    (r_id_all),
    .nr_aw_valid_i(h_aw_valid_i), .nr_aw_ready_o(h_aw_ready_o), .nr_aw_addr_i(h_aw_addr_i),
    .nr_aw_len_i(h_aw_len_i), .nr_aw_id_i(h_aw_id_i),
    .nr_w_valid_i(h_w_valid_i), .nr_w_ready_o(h_w_ready_o), .nr_w_data_i(h_w_data_i),
    .nr_w_strb_i(h_w_strb_i), .nr_w_last_i(h_w_last_i),
    .nr_b_valid_o(h_b_valid_o), .nr_b_ready_i(h_b_ready_i), .nr_b_id_o(h_b_id_o),
    .nr_ar_valid_i(h_ar_valid_i), .nr_ar_ready_o(h_ar_ready_o), .nr_ar_addr_i(h_ar_addr_i),
    .nr_ar_len_i(h_ar_len_i), .nr_ar_id_i(h_ar_id_i),
    .nr_r_valid_o(h_r_valid_o), .nr_r_ready_i(h_r_ready_i), .nr_r_data_o(h_r_data_o),
    .nr_r_last_o(h_r_last_o), .nr_r_id_o(h_r_id_o)
  );

  assign oc_b_id_o = b_id_all[NWP-1:1];
  assign oc_r_id_o = r_id_all[NWP-1:1];

  // the DMA issues one transaction at a time with ID 0
  logic unused_ids;
  assign unused_ids = ^{b_id_all[0], r_id_all[0]};

endmodule
