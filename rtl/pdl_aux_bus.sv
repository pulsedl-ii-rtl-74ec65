// pdl_aux_bus: the auxiliary AHB bus joining several AHB-Lite masters
// (Quad-SPI, JTAG and UART/SPI masters) to the second ports of the three
// dual-port RAMs. A fixed-priority arbiter (master 0 highest) hands the bus
// to one owner at a time. A master that does not own the bus sees HREADY low
// and so holds its transfer. Ownership moves only in a cycle where the
// owner issues IDLE and HREADY is high, which is also the end of its last
// data phase, so address and data phases are never split between masters.
// Decoding and the response path are a pdl_ahb_mux.
// The bus and its masters follow the SoC diagram; arbitration policy is this
// implementation's choice.
module pdl_aux_bus
  import pdl_pkg::*;
#(
  parameter int NM = 3,
  parameter int NS = 3,
  parameter logic [NS-1:0][31:0] BASE = '{32'h2100_0000, 32'h2000_0000, 32'h0000_0000},
  parameter logic [NS-1:0][31:0] MASK = '{32'hFF00_0000, 32'hFF00_0000, 32'hFF00_0000}
) (
  input  logic          clk,
  input  logic          rst_n,
  input  ahb_req_t      m_req [NM],
  output ahb_rsp_t      m_rsp [NM],
  output logic          hready,
  output ahb_req_t      s_req,
  output logic [NS-1:0] s_hsel,
  input  ahb_rsp_t      s_rsp [NS]
);
  localparam int MW = (NM > 1) ? $clog2(NM) : 1;
  logic [MW-1:0] owner, next;
  logic          found;
  ahb_rsp_t      rsp;

  always_comb begin
    next = owner; found = 1'b0;
    for (int m = 0; m < NM; m++)
      if (!found && m_req[m].htrans[1]) begin next = MW'(m); found = 1'b1; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) owner <= '0;
    else if (hready && !s_req.htrans[1] && found) owner <= next;
  end

  assign s_req = m_req[owner];

  pdl_ahb_mux #(.NS(NS), .BASE(BASE), .MASK(MASK)) u_mux (.clk, .rst_n, .m_req(s_req),
    .m_rsp(rsp), .hready, .s_hsel, .s_rsp);

  always_comb
    for (int m = 0; m < NM; m++) begin
      m_rsp[m] = rsp;
      if (MW'(m) != owner) m_rsp[m].hreadyout = 1'b0;
    end
endmodule
