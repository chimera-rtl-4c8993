// Logarithmic interconnect: a single-cycle crossbar from NM masters to NT
// banks. Used for the cluster's low-latency TCDM interconnect and for the
// 512-bit and 32-bit interconnects of the L2 memory island.
//
// The target of a request is the bank field of its byte address,
// addr[SEL_LSB +: log2(NT)] (word interleaving); the row field above it is
// passed on as the bank address. Each bank has a round-robin arbiter among
// the masters requesting it. A master is granted in the cycle its bank's
// arbiter picks it and the bank accepts (tgt_gnt_i, which a bank that can
// always accept ties high). The read response comes back to the granted
// master exactly one cycle later with rvalid. Write requests also get
// rvalid, so every granted request has one response.
//
// The crossbar structure with word interleaving follows the published
// design; round-robin arbitration and the one-cycle response are this
// implementation's choices.
module log_xbar #(
  parameter int unsigned NM      = 4,
  parameter int unsigned NT      = 8,
  parameter int unsigned DW      = 32,
  parameter int unsigned AW      = 32,
  parameter int unsigned SEL_LSB = 2,
  parameter int unsigned ROW_W   = 8
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // masters
  input  logic [NM-1:0]            m_req_i,
  output logic [NM-1:0]            m_gnt_o,
  input  logic [NM-1:0][AW-1:0]    m_addr_i,
  input  logic [NM-1:0]            m_we_i,
  input  logic [NM-1:0][DW/8-1:0]  m_be_i,
  input  logic [NM-1:0][DW-1:0]    m_wdata_i,
  output logic [NM-1:0]            m_rvalid_o,
  output logic [NM-1:0][DW-1:0]    m_rdata_o,
  // banks
  output logic [NT-1:0]            t_req_o,
  input  logic [NT-1:0]            t_gnt_i,
  output logic [NT-1:0][ROW_W-1:0] t_addr_o,
  output logic [NT-1:0]            t_we_o,
  output logic [NT-1:0][DW/8-1:0]  t_be_o,
  output logic [NT-1:0][DW-1:0]    t_wdata_o,
  input  logic [NT-1:0][DW-1:0]    t_rdata_i
);

  localparam int unsigned SW = (NT > 1) ? $clog2(NT) : 1;
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;

  logic [NM-1:0][SW-1:0] tsel;
  logic [NT-1:0][MW-1:0] rr_q, win;
  logic [NT-1:0]         win_v;
  logic [NT-1:0][MW-1:0] resp_m_q;
  logic [NT-1:0]         resp_v_q;

  always_comb begin
    for (int unsigned m = 0; m < NM; m++)
      tsel[m] = (NT > 1) ? SW'(m_addr_i[m] >> SEL_LSB) : '0;
    for (int unsigned t = 0; t < NT; t++) begin
      // round robin: first requester at or after the pointer
      win_v[t] = 1'b0;
      win[t]   = '0;
      for (int unsigned k = 0; k < NM; k++) begin
        int unsigned m;
        m = (32'(rr_q[t]) + k) % NM;
        if (!win_v[t] && m_req_i[m] && 32'(tsel[m]) == t) begin
          win_v[t] = 1'b1;
          win[t]   = MW'(m);
        end
      end
      t_req_o[t]   = win_v[t];
      t_addr_o[t]  = ROW_W'(m_addr_i[win[t]] >> (SEL_LSB + $clog2(NT)));
      t_we_o[t]    = m_we_i[win[t]];
      t_be_o[t]    = m_be_i[win[t]];
      t_wdata_o[t] = m_wdata_i[win[t]];
    end
  end

  always_comb begin
    m_gnt_o = '0;
    for (int unsigned t = 0; t < NT; t++)
      if (win_v[t] && t_gnt_i[t]) m_gnt_o[win[t]] = 1'b1;
  end

  always_comb begin
    m_rvalid_o = '0;
    m_rdata_o  = '0;
    for (int unsigned t = 0; t < NT; t++) begin
      if (resp_v_q[t]) begin
        m_rvalid_o[resp_m_q[t]] = 1'b1;
        m_rdata_o[resp_m_q[t]]  = t_rdata_i[t];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q     <= '0;
      resp_m_q <= '0;
      resp_v_q <= '0;
    end else begin
      for (int unsigned t = 0; t < NT; t++) begin
        resp_v_q[t] <= win_v[t] & t_gnt_i[t];
        resp_m_q[t] <= win[t];
        if (win_v[t] && t_gnt_i[t])
          rr_q[t] <= (32'(win[t]) == NM - 1) ? '0 : win[t] + 1'b1;
      end
    end
  end

endmodule
