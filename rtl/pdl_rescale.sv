// pdl_rescale: rescale & bit-shift, the requantisation step that maps a
// 32-bit accumulated value back to the 8-bit range of the next layer, as in
// integer-only quantised inference:
//   q = sat8( (x * mult + 2^(shift-1)) >>> shift )     (shift >= 1)
//   q = sat8( x * mult )                               (shift == 0)
// mult is an unsigned RQW-bit integer scale and shift a right shift; together
// they approximate the real-valued scale ratio of the quantised layer.
// Rounding is half-up on the arithmetic shift. One register stage: out_valid
// follows in_valid by one cycle. out_raw carries the unscaled input along so
// that the final multiplexer can bypass the rescale.
// Position and purpose follow the design; the exact formula (no zero point,
// rounding, saturation) is this implementation's choice.
module pdl_rescale
  import pdl_pkg::*;
#(
  parameter int TAGW = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [TAGW-1:0]        in_tag,
  input  logic signed [ACCW-1:0] in_data,
  input  logic [RQW-1:0]         mult,
  input  logic [5:0]             shift,
  output logic                   out_valid,
  output logic [TAGW-1:0]        out_tag,
  output logic signed [DW-1:0]   out_q,
  output logic signed [ACCW-1:0] out_raw
);
  logic signed [63:0] p, r;

  always_comb begin
    p = 64'(in_data) * $signed({48'b0, mult});
    if (shift == 0) r = p;
    else            r = (p + (64'sd1 <<< (shift - 6'd1))) >>> shift;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_tag <= '0; out_q <= '0; out_raw <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      out_q     <= sat_dw(r);
      out_raw   <= in_data;
    end
  end
endmodule
