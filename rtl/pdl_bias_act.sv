// pdl_bias_act: bias addition and activation of the final process.
// y = x + bias, then ReLU (max(y, 0)) when relu is set. The sum saturates to
// the 32-bit range instead of wrapping. One register stage: out_valid
// follows in_valid by one cycle, and an address tag travels with the data.
// The block and its position follow the design; ReLU is the activation the
// paper names; the saturation is this implementation's choice.
module pdl_bias_act
  import pdl_pkg::*;
#(
  parameter int TAGW = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [TAGW-1:0]        in_tag,
  input  logic signed [ACCW-1:0] in_data,
  input  logic signed [ACCW-1:0] bias,
  input  logic                   relu,
  output logic                   out_valid,
  output logic [TAGW-1:0]        out_tag,
  output logic signed [ACCW-1:0] out_data
);
  localparam logic signed [ACCW:0] MAXV = {2'b00, {(ACCW-1){1'b1}}};
  localparam logic signed [ACCW:0] MINV = {2'b11, {(ACCW-1){1'b0}}};
  logic signed [ACCW:0]   s;
  logic signed [ACCW-1:0] y;

  always_comb begin
    s = (ACCW+1)'(in_data) + (ACCW+1)'(bias);
    if (s > MAXV)      y = MAXV[ACCW-1:0];
    else if (s < MINV) y = MINV[ACCW-1:0];
    else               y = s[ACCW-1:0];
    if (relu && y < 0) y = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_tag <= '0; out_data <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      out_data  <= y;
    end
  end
endmodule
