// pdl_apb_watchdog: APB watchdog. Once enabled, a 32-bit counter counts down
// from LOAD every cycle; writing the key 0x5A5A_5A5A to KICK reloads it. When
// it reaches zero the watchdog raises `wdog_reset` (held until the system is
// reset) to restart the system. Registers (word offsets): 0x0 CTRL (bit0
// enable; cannot be cleared once set), 0x4 VALUE (r), 0x8 LOAD, 0xC KICK.
// The watchdog is named in the SoC diagram; its behaviour is this
// implementation's choice.
module pdl_apb_watchdog
  import pdl_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     psel,
  input  apb_req_t apb,
  output apb_rsp_t rsp,
  output logic     wdog_reset
);
  localparam logic [31:0] KEY = 32'h5A5A_5A5A;
  logic        en;
  logic [31:0] value, load;
  wire wr = psel && apb.penable && apb.pwrite;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en <= 1'b0; value <= '0; load <= 32'hFFFF_FFFF; wdog_reset <= 1'b0;
    end else begin
      if (en && !wdog_reset) begin
        if (value == 0) wdog_reset <= 1'b1;
        else            value <= value - 32'd1;
      end
      if (wr) case (apb.paddr[3:2])
        2'd0: if (apb.pwdata[0] && !en) begin en <= 1'b1; value <= load; end
        2'd2: load <= apb.pwdata;
        2'd3: if (apb.pwdata == KEY) value <= load;
        default: ;
      endcase
    end
  end

  always_comb begin
    rsp = '{prdata: 32'h0, pready: 1'b1, pslverr: 1'b0};
    case (apb.paddr[3:2])
      2'd0: rsp.prdata = {31'b0, en};
      2'd1: rsp.prdata = value;
      2'd2: rsp.prdata = load;
      default: ;
    endcase
  end
endmodule
