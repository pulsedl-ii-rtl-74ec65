// pdl_adder_tree: the adder tree (AT) of a PE with multi-stage readout.
// The N_AU AU results enter level 0; each further level adds neighbouring
// pairs of the level below and is registered, so level s holds sums of 2^s
// AUs, one cycle later than level s-1. A readout multiplexer (the "OR" of the
// block diagram) picks node rd_node of level rd_stage, so a layer that uses
// only one or two AUs reads its result earlier and does not pass through the
// full tree. The multiplexer output is registered.
// Timing: out_valid follows in_valid by rd_stage + 1 cycles; rd_stage and
// rd_node must stay constant while data is in flight (they change per layer).
// Multi-stage readout, the pairwise tree and the readout multiplexer follow
// the design; the registering of every level is this implementation's choice.
module pdl_adder_tree
  import pdl_pkg::*;
#(
  parameter int N_AU = 4,
  parameter int TAGW = 1,
  localparam int S   = $clog2(N_AU),
  localparam int SW  = (S > 0) ? $clog2(S + 1) : 1,
  localparam int NW  = (N_AU > 1) ? $clog2(N_AU) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [ACCW-1:0] in [N_AU],
  input  logic                   in_valid,
  input  logic [TAGW-1:0]        in_tag,
  input  logic [SW-1:0]          rd_stage,
  input  logic [NW-1:0]          rd_node,
  output logic signed [ACCW-1:0] out,
  output logic                   out_valid,
  output logic [TAGW-1:0]        out_tag
);
  logic signed [ACCW-1:0] lvl [S+1][N_AU];
  logic                   lv  [S+1];
  logic [TAGW-1:0]        lt  [S+1];

  always_comb begin
    for (int i = 0; i < N_AU; i++) lvl[0][i] = in[i];
    lv[0] = in_valid;
    lt[0] = in_tag;
  end

  for (genvar s = 1; s <= S; s++) begin : g_lvl
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < N_AU; i++) lvl[s][i] <= '0;
        lv[s] <= 1'b0;
        lt[s] <= '0;
      end else begin
        for (int i = 0; i < N_AU; i++)
          lvl[s][i] <= (i < (N_AU >> s)) ? lvl[s-1][2*i] + lvl[s-1][2*i+1] : '0;
        lv[s] <= lv[s-1];
        lt[s] <= lt[s-1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0; out_valid <= 1'b0; out_tag <= '0;
    end else begin
      out       <= lvl[rd_stage][rd_node];
      out_valid <= lv[rd_stage];
      out_tag   <= lt[rd_stage];
    end
  end

  initial assert (N_AU == (1 << S)) else $error("N_AU must be a power of two");
endmodule
