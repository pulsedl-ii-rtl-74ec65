// pdl_psum_acc: partial sum accumulator with its partial sum memory.
// Each valid input carries an address and a `first` flag. The accumulator
// updates the memory in place: mem[addr] <= first ? in : mem[addr] + in (the
// multiplexer in front of the memory picks the adder tree output directly or
// the adder output). This replaces a temporal adder tree: contributions of
// successive input-channel groups and kernel chunks are summed in memory.
// A second, combinational read port serves the final process.
// Timing: one write per cycle, read-modify-write within the cycle (the read
// is combinational), so back-to-back updates of the same address are safe.
// The in-situ update follows the design; depth and widths are assumed.
module pdl_psum_acc
  import pdl_pkg::*;
#(
  parameter int DEPTH = 256,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic [AW-1:0]          in_addr,
  input  logic signed [ACCW-1:0] in_data,
  input  logic [AW-1:0]          rd_addr,
  output logic signed [ACCW-1:0] rd_data
);
  logic signed [ACCW-1:0] mem [DEPTH];
  logic signed [ACCW-1:0] upd;

  assign upd = in_first ? in_data : mem[in_addr] + in_data;

  // no reset: every word is written with in_first before it is accumulated
  always_ff @(posedge clk)
    if (in_valid) mem[in_addr] <= upd;

  assign rd_data = mem[rd_addr];
endmodule
