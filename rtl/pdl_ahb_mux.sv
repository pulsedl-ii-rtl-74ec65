// pdl_ahb_mux: decoder and response multiplexer of a single-master AHB-Lite
// bus. Slave s is selected when (HADDR & MASK[s]) == BASE[s]; the first
// match wins. The selection is registered for the data phase, in which the
// selected slave's HRDATA, HREADYOUT and HRESP are returned to the master and
// HREADYOUT is fed back to all slaves as HREADY. An address that matches no
// slave is answered by a built-in default slave with zero data and OKAY.
// The processor and auxiliary buses of the SoC each use one instance.
module pdl_ahb_mux
  import pdl_pkg::*;
#(
  parameter int NS = 2,
  parameter logic [NS-1:0][31:0] BASE = '{32'h2000_0000, 32'h0000_0000},
  parameter logic [NS-1:0][31:0] MASK = '{32'hFFFF_0000, 32'hFFFF_0000}
) (
  input  logic          clk,
  input  logic          rst_n,
  input  ahb_req_t      m_req,
  output ahb_rsp_t      m_rsp,
  output logic          hready,
  output logic [NS-1:0] s_hsel,
  input  ahb_rsp_t      s_rsp [NS]
);
  logic [NS-1:0] dsel;   // data-phase selection

  always_comb begin
    s_hsel = '0;
    for (int s = NS - 1; s >= 0; s--)
      if ((m_req.haddr & MASK[s]) == BASE[s]) s_hsel = NS'(1) << s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      dsel <= '0;
    else if (hready) dsel <= m_req.htrans[1] ? s_hsel : '0;
  end

  always_comb begin
    m_rsp = AHB_RSP_OKAY;
    for (int s = 0; s < NS; s++) if (dsel[s]) m_rsp = s_rsp[s];
  end

  assign hready = m_rsp.hreadyout;

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(dsel));
endmodule
