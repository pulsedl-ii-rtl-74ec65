// pdl_apb_timer: APB timer. A 32-bit down-counter that, while enabled,
// decrements every cycle; on reaching zero it reloads from LOAD and sets the
// interrupt flag. Registers (word offsets): 0x0 CTRL (bit0 enable, bit1
// interrupt enable), 0x4 VALUE (r/w current count), 0x8 LOAD, 0xC INTCLR
// (w: clear flag; r: flag). The timer is named in the SoC diagram; its
// behaviour is this implementation's choice.
module pdl_apb_timer
  import pdl_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     psel,
  input  apb_req_t apb,
  output apb_rsp_t rsp,
  output logic     irq
);
  logic [1:0]  ctrl;
  logic [31:0] value, load;
  logic        flag;
  wire wr = psel && apb.penable && apb.pwrite;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl <= '0; value <= '0; load <= '0; flag <= 1'b0;
    end else begin
      if (ctrl[0]) begin
        if (value == 0) begin value <= load; flag <= 1'b1; end
        else value <= value - 32'd1;
      end
      if (wr) case (apb.paddr[3:2])
        2'd0: ctrl  <= apb.pwdata[1:0];
        2'd1: value <= apb.pwdata;
        2'd2: load  <= apb.pwdata;
        2'd3: flag  <= 1'b0;
        default: ;
      endcase
    end
  end

  always_comb begin
    rsp = '{prdata: 32'h0, pready: 1'b1, pslverr: 1'b0};
    case (apb.paddr[3:2])
      2'd0: rsp.prdata = {30'b0, ctrl};
      2'd1: rsp.prdata = value;
      2'd2: rsp.prdata = load;
      2'd3: rsp.prdata = {31'b0, flag};
      default: ;
    endcase
  end

  assign irq = flag && ctrl[1];
endmodule
