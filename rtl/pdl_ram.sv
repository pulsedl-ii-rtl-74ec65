// pdl_ram: simple dual-port memory written as an array, used for the feature
// map, kernel, bias and result memories of a PE.
// Port A writes (synchronous, one word per cycle when we is high); port B
// reads combinationally (the address is presented and the word appears in the
// same cycle), so the PE datapath can issue a read and use it in one cycle.
// The asynchronous read suits FPGA distributed RAM and a register-file
// macro; a block RAM would need one extra pipeline stage in the PE.
// The array has no reset, so synthesis maps it to a RAM rather than to
// flip-flops; software writes every word a layer uses before starting it.
// The paper names these memories but gives no organisation, so width and
// depth are parameters.
module pdl_ram #(
  parameter int W     = 32,
  parameter int DEPTH = 256,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];
endmodule
