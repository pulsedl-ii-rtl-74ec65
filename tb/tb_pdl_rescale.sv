// tb_pdl_rescale: testbench of rescale & bit-shift. Random 32-bit inputs,
// scales and shifts (including shift 0 and saturation); each 8-bit output
// is compared with the rounding rule evaluated in 64-bit arithmetic, and the
// bypass output with the input.
module tb_pdl_rescale;
  import pdl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 0, out_valid;
  logic [7:0] in_tag = '0, out_tag;
  logic signed [ACCW-1:0] in_data = '0, out_raw;
  logic [RQW-1:0] mult = '0;
  logic [5:0] shift = '0;
  logic signed [DW-1:0] out_q;
  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0;
  int expq [256];
  int expr [256];

  always #5 clk = ~clk;

  pdl_rescale #(.TAGW(8)) dut (.clk, .rst_n, .in_valid, .in_tag, .in_data, .mult, .shift,
    .out_valid, .out_tag, .out_q, .out_raw);

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (int'(out_q) != expq[out_tag]) begin failures++; $display("FAIL q tag %0d: %0d vs %0d", out_tag, out_q, expq[out_tag]); end
    if (out_raw != expr[out_tag]) begin failures++; $display("FAIL raw tag %0d", out_tag); end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 3000; k++) begin
      longint p, r;
      @(negedge clk);
      in_valid = 1'b1;
      in_tag   = 8'(k);
      in_data  = (k % 3 == 0) ? ACCW'($urandom) : ACCW'(int'($urandom_range(200000)) - 100000);
      mult     = RQW'($urandom);
      shift    = (k % 17 == 0) ? 6'd0 : 6'(8 + $urandom_range(24));
      p = longint'(in_data) * longint'(mult);
      r = (shift == 0) ? p : (p + (64'sd1 <<< (shift - 1))) >>> shift;
      if (r > 127) begin r = 127; sat_hi++; end
      if (r < -128) begin r = -128; sat_lo++; end
      expq[k % 256] = int'(r);
      expr[k % 256] = int'(in_data);
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    checks += 2; if (sat_hi == 0) failures++; if (sat_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
