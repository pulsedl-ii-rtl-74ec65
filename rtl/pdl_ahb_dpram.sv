// pdl_ahb_dpram: dual-port AHB RAM. Port A is a slave on the processor AHB
// bus, port B a slave on the auxiliary AHB bus, so the on-chip masters of the
// auxiliary bus (Quad-SPI, JTAG, UART) can fill the memory while the
// processor runs. One instance each serves as double-port buffer (ADC
// waveform samples), program memory and system RAM.
// Both ports are 32-bit, zero wait state (see pdl_ahb_slv_port); reads return
// the word addressed in the preceding address phase. If both ports write the
// same word in one cycle, port A wins. The contents are not reset.
// The three memories and their two buses follow the SoC diagram; the size,
// the zero-wait-state timing and the collision rule are this
// implementation's choices.
module pdl_ahb_dpram
  import pdl_pkg::*;
#(
  parameter int DEPTH = 16384,           // 32-bit words (64 KiB)
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     a_hsel,
  input  ahb_req_t a_req,
  input  logic     a_hready,
  output ahb_rsp_t a_rsp,
  input  logic     b_hsel,
  input  ahb_req_t b_req,
  input  logic     b_hready,
  output ahb_rsp_t b_rsp
);
  logic [31:0] mem [DEPTH];
  logic        a_v, a_w, b_v, b_w;
  logic [31:0] a_addr, b_addr, a_wd, b_wd;
  wire  [AW-1:0] a_idx = a_addr[AW+1:2];
  wire  [AW-1:0] b_idx = b_addr[AW+1:2];

  pdl_ahb_slv_port u_pa (.clk, .rst_n, .hsel(a_hsel), .req(a_req), .hready(a_hready), .rsp(a_rsp),
    .acc_valid(a_v), .acc_write(a_w), .acc_addr(a_addr), .acc_wdata(a_wd), .rdata(mem[a_idx]));
  pdl_ahb_slv_port u_pb (.clk, .rst_n, .hsel(b_hsel), .req(b_req), .hready(b_hready), .rsp(b_rsp),
    .acc_valid(b_v), .acc_write(b_w), .acc_addr(b_addr), .acc_wdata(b_wd), .rdata(mem[b_idx]));

  always_ff @(posedge clk) begin
    if (b_v && b_w && !(a_v && a_w && a_idx == b_idx)) mem[b_idx] <= b_wd;
    if (a_v && a_w) mem[a_idx] <= a_wd;
  end
endmodule
