// pdl_ahb_apb_bridge: AHB-Lite to APB interconnect. An AHB transfer to the
// bridge becomes one APB transfer to slave PADDR-select = HADDR[15:12]:
// a SETUP cycle (PSEL high, PENABLE low) followed by ACCESS cycles (PENABLE
// high) until PREADY. HREADYOUT is held low meanwhile and rises with the
// read data in the cycle the APB slave completes, so a transfer takes at
// least two data-phase cycles. Write data is taken from HWDATA, which the AHB
// master holds through the wait states. PSLVERR is not propagated.
// The bridge and the APB bus follow the SoC diagram; the slave decode is
// this implementation's choice.
module pdl_ahb_apb_bridge
  import pdl_pkg::*;
#(
  parameter int NS = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          hsel,
  input  ahb_req_t      req,
  input  logic          hready,
  output ahb_rsp_t      rsp,
  output apb_req_t      apb,
  output logic [NS-1:0] psel,
  input  apb_rsp_t      prsp [NS]
);
  typedef enum logic [1:0] {B_IDLE, B_SETUP, B_ACCESS} bstate_e;
  bstate_e     st;
  logic [31:0] addr;
  logic        wr;
  apb_rsp_t    cur;
  wire  [3:0]  sidx = addr[15:12];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= B_IDLE; addr <= '0; wr <= 1'b0;
    end else begin
      if (st == B_SETUP) begin
        st <= B_ACCESS;
      end else if (st == B_IDLE || cur.pready) begin
        // a new address phase may come in the cycle the previous one ends
        if (hsel && req.htrans[1] && hready) begin
          st <= B_SETUP; addr <= req.haddr; wr <= req.hwrite;
        end else begin
          st <= B_IDLE;
        end
      end
    end
  end

  always_comb begin
    cur = '{prdata: 32'h0, pready: 1'b1, pslverr: 1'b0};
    for (int s = 0; s < NS; s++) if (sidx == 4'(s)) cur = prsp[s];
    psel = '0;
    if (st != B_IDLE && 32'(sidx) < NS) psel = NS'(1) << sidx;
    apb = '{paddr: addr[11:0], penable: (st == B_ACCESS), pwrite: wr, pwdata: req.hwdata};
    rsp = '{hrdata: cur.prdata, hreadyout: (st == B_IDLE) || (st == B_ACCESS && cur.pready), hresp: 1'b0};
  end
endmodule
