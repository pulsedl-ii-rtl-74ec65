// pdl_sum_tree: combinational balanced adder tree over N signed W-bit
// operands (any N >= 1), built recursively by halving. Used inside the AU to
// sum the products of its multipliers.
// Interface: in[N] operands, sum output; no clock, result valid in the same
// cycle. The tree shape is this design's choice; the paper only says the AU
// adds the multiplier products. Tool note: verilator reports slo/shi as
// UNDRIVEN when it lints the recursive instance alone; both are driven by the
// .sum outputs of the child instances u_lo/u_hi, and the simulations and the
// synthesised netlist confirm the adder is connected.
module pdl_sum_tree #(
  parameter int N = 4,
  parameter int W = 32
) (
  input  logic signed [W-1:0] in [N],
  output logic signed [W-1:0] sum
);
  if (N == 1) begin : g_leaf
    assign sum = in[0];
  end else begin : g_node
    localparam int NL = N / 2;
    localparam int NR = N - NL;
    logic signed [W-1:0] lo [NL];
    logic signed [W-1:0] hi [NR];
    logic signed [W-1:0] slo, shi;
    always_comb begin
      for (int i = 0; i < NL; i++) lo[i] = in[i];
      for (int i = 0; i < NR; i++) hi[i] = in[NL+i];
    end
    pdl_sum_tree #(.N(NL), .W(W)) u_lo (.in(lo), .sum(slo));
    pdl_sum_tree #(.N(NR), .W(W)) u_hi (.in(hi), .sum(shi));
    assign sum = slo + shi;
  end
endmodule
