// Cluster TCDM: the 128 KiB shared L1 of the transformer acceleration
// cluster, 32 banks of 512 x 64 bit, grouped in 4 super banks of 8 banks.
//
// Narrow side: NM 64-bit masters (the accelerator's 16 streamer ports and
// the cores' data ports) reach the banks through the low-latency
// logarithmic interconnect, word-interleaved: bank = addr[7:3],
// row = addr[16:8]. Wide side: one 512-bit port (the cluster DMA's path to
// L2) accesses a whole super bank, i.e. one 64-byte line at addr[16:6], in
// one cycle. The wide port has priority over the narrow side on the 8
// banks it uses; narrow masters on other banks proceed in the same cycle.
// All reads return one cycle after the grant (wide_gnt_o is high whenever
// wide_req_i is).
//
// Size, bank count, 64-bit interconnect and 512-bit super-bank access
// follow the published cluster figure; the priority of the wide port is
// this implementation's choice.
module cluster_tcdm
  import chimera_pkg::*;
#(
  parameter int unsigned NM = 25,
  parameter int unsigned AW = 32
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // narrow masters
  input  logic [NM-1:0]           m_req_i,
  output logic [NM-1:0]           m_gnt_o,
  input  logic [NM-1:0][AW-1:0]   m_addr_i,
  input  logic [NM-1:0]           m_we_i,
  input  logic [NM-1:0][7:0]      m_be_i,
  input  logic [NM-1:0][63:0]     m_wdata_i,
  output logic [NM-1:0]           m_rvalid_o,
  output logic [NM-1:0][63:0]     m_rdata_o,
  // wide port
  input  logic                    wide_req_i,
  output logic                    wide_gnt_o,
  input  logic [AW-1:0]           wide_addr_i,
  input  logic                    wide_we_i,
  input  logic [63:0]             wide_be_i,
  input  logic [511:0]            wide_wdata_i,
  output logic                    wide_rvalid_o,
  output logic [511:0]            wide_rdata_o
);

  localparam int unsigned NB   = TCDM_N_BANKS;
  localparam int unsigned ROWS = TCDM_BYTES / NB / 8;   // 512
  localparam int unsigned RW   = $clog2(ROWS);

  logic [NB-1:0]          x_req, x_gnt, x_we;
  logic [NB-1:0][RW-1:0]  x_addr;
  logic [NB-1:0][7:0]     x_be;
  logic [NB-1:0][63:0]    x_wdata, b_rdata;
  logic [1:0]             wide_sb;
  logic [RW-1:0]          wide_row;

  assign wide_sb  = wide_addr_i[7:6];
  assign wide_row = wide_addr_i[8 +: RW];
  assign wide_gnt_o = wide_req_i;

  log_xbar #(.NM(NM), .NT(NB), .DW(64), .AW(AW), .SEL_LSB(3), .ROW_W(RW)) u_xbar (
    .clk_i, .rst_ni,
    .m_req_i, .m_gnt_o, .m_addr_i, .m_we_i, .m_be_i, .m_wdata_i, .m_rvalid_o, .m_rdata_o,
    .t_req_o(x_req), .t_gnt_i(x_gnt), .t_addr_o(x_addr), .t_we_o(x_we), .t_be_o(x_be),
    .t_wdata_o(x_wdata), .t_rdata_i(b_rdata)
  );

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic wide_here;
    assign wide_here = wide_req_i && (32'(wide_sb) == b / 8);
    assign x_gnt[b]  = ~wide_here;
    sram_bank #(.WORDS(ROWS), .DW(64)) u_bank (
      .clk_i,
      .req_i  (wide_here | x_req[b]),
      .we_i   (wide_here ? wide_we_i : x_we[b]),
      .addr_i (wide_here ? wide_row : x_addr[b]),
      .be_i   (wide_here ? wide_be_i[8*(b%8) +: 8] : x_be[b]),
      .wdata_i(wide_here ? wide_wdata_i[64*(b%8) +: 64] : x_wdata[b]),
      .rdata_o(b_rdata[b])
    );
  end

  logic [1:0] wide_sb_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wide_rvalid_o <= 1'b0;
      wide_sb_q     <= '0;
    end else begin
      wide_rvalid_o <= wide_req_i & ~wide_we_i;
      wide_sb_q     <= wide_sb;
    end
  end
  always_comb
    for (int unsigned i = 0; i < 8; i++) wide_rdata_o[64*i +: 64] = b_rdata[8*wide_sb_q + i];

endmodule
