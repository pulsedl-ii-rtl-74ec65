// pdl_au: arithmetic unit (AU), the lowest level of the accelerator hierarchy.
// An AU holds a feature-map register (fmap reg) that is a shift register of
// MULTS samples (newest in element 0) and a ping-pong kernel register with
// two banks of MULTS taps. Each cycle the active bank is multiplied tap by tap
// with the fmap window and the products are summed by a small adder tree
// (the MAC of the design): a 1-D convolution window per cycle.
// Interface: shift_en shifts fmap_in into the window (shift_clr clears the
// older elements at the same time, starting a new pass); k_load writes k_in
// into the shadow bank; k_swap exchanges the banks. tag_in is carried along
// with the window so the caller can mark which windows are wanted.
// Timing: window updated at edge 0, products registered at edge 1, sum
// registered at edge 2: out_valid/out_tag are high three cycles after the
// cycle in which shift_en was high.
// The AU structure (fmap reg, ping-pong kernel reg, multipliers, adder tree)
// follows the design; MULTS=6 follows its count of 360 multipliers in
// 15 PEs x 4 AUs; the shift-register window is this implementation's choice.
module pdl_au
  import pdl_pkg::*;
#(
  parameter int MULTS = 6,
  parameter int TAGW  = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     shift_en,
  input  logic                     shift_clr,
  input  logic signed [DW-1:0]     fmap_in,
  input  logic [TAGW-1:0]          tag_in,
  input  logic                     k_load,
  input  logic signed [DW-1:0]     k_in [MULTS],
  input  logic                     k_swap,
  output logic signed [ACCW-1:0]   out,
  output logic                     out_valid,
  output logic [TAGW-1:0]          out_tag
);
  logic signed [DW-1:0]     win [MULTS];
  logic signed [DW-1:0]     kreg [2][MULTS];
  logic                     kact;            // active bank
  logic                     v0, v1;
  logic [TAGW-1:0]          t0, t1;
  logic signed [2*DW-1:0]   prod [MULTS];
  logic signed [ACCW-1:0]   prod_ext [MULTS];
  logic signed [ACCW-1:0]   psum;

  // fmap reg and ping-pong kernel reg
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < MULTS; j++) begin
        win[j] <= '0; kreg[0][j] <= '0; kreg[1][j] <= '0;
      end
      kact <= 1'b0; v0 <= 1'b0; t0 <= '0;
    end else begin
      v0 <= shift_en;
      if (shift_en) begin
        t0 <= tag_in;
        win[0] <= fmap_in;
        for (int j = 1; j < MULTS; j++) win[j] <= shift_clr ? '0 : win[j-1];
      end
      if (k_load) for (int j = 0; j < MULTS; j++) kreg[~kact][j] <= k_in[j];
      if (k_swap) kact <= ~kact;
    end
  end

  // multipliers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < MULTS; j++) prod[j] <= '0;
      v1 <= 1'b0; t1 <= '0;
    end else begin
      for (int j = 0; j < MULTS; j++) prod[j] <= win[j] * kreg[kact][j];
      v1 <= v0; t1 <= t0;
    end
  end

  always_comb
    for (int j = 0; j < MULTS; j++) prod_ext[j] = ACCW'(prod[j]);

  pdl_sum_tree #(.N(MULTS), .W(ACCW)) u_tree (.in(prod_ext), .sum(psum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0; out_valid <= 1'b0; out_tag <= '0;
    end else begin
      out <= psum; out_valid <= v1; out_tag <= t1;
    end
  end
endmodule
