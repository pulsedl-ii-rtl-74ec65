// pdl_ahb_gpio: high-speed GPIO on the processor AHB bus (single-cycle
// access, unlike the APB peripherals), used to signal status to the outside.
// Registers (word offsets): 0x0 DATA_OUT, 0x4 OUT_EN, 0x8 DATA_IN (inputs
// after a two-flip-flop synchroniser), 0xC SET (w: OR into DATA_OUT),
// 0x10 CLR (w: clear bits of DATA_OUT). The block is named in the SoC
// diagram; width and register map are this implementation's choices.
module pdl_ahb_gpio
  import pdl_pkg::*;
#(
  parameter int NIO = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           hsel,
  input  ahb_req_t       req,
  input  logic           hready,
  output ahb_rsp_t       rsp,
  input  logic [NIO-1:0] gpio_in,
  output logic [NIO-1:0] gpio_out,
  output logic [NIO-1:0] gpio_oe
);
  logic           v, w;
  logic [31:0]    addr, wd, rdata;
  logic [NIO-1:0] s0, s1;

  pdl_ahb_slv_port u_port (.clk, .rst_n, .hsel, .req, .hready, .rsp,
    .acc_valid(v), .acc_write(w), .acc_addr(addr), .acc_wdata(wd), .rdata);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gpio_out <= '0; gpio_oe <= '0; s0 <= '0; s1 <= '0;
    end else begin
      s0 <= gpio_in; s1 <= s0;
      if (v && w) case (addr[4:2])
        3'd0: gpio_out <= wd[NIO-1:0];
        3'd1: gpio_oe  <= wd[NIO-1:0];
        3'd3: gpio_out <= gpio_out | wd[NIO-1:0];
        3'd4: gpio_out <= gpio_out & ~wd[NIO-1:0];
        default: ;
      endcase
    end
  end

  always_comb
    case (addr[4:2])
      3'd0:    rdata = 32'(gpio_out);
      3'd1:    rdata = 32'(gpio_oe);
      3'd2:    rdata = 32'(s1);
      default: rdata = '0;
    endcase
endmodule
