// tb_pdl_bias_act: testbench of bias & activation: random and extreme
// values (saturation at both ends), with and without ReLU; each output is
// compared one cycle later with a 64-bit computation of the same rule.
module tb_pdl_bias_act;
  import pdl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 0, relu = 0, out_valid;
  logic [7:0] in_tag = '0, out_tag;
  logic signed [ACCW-1:0] in_data = '0, bias = '0, out_data;
  int checks = 0, failures = 0;
  longint expq [256];

  always #5 clk = ~clk;

  pdl_bias_act #(.TAGW(8)) dut (.clk, .rst_n, .in_valid, .in_tag, .in_data, .bias, .relu,
    .out_valid, .out_tag, .out_data);

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (longint'(out_data) != expq[out_tag]) begin failures++; $display("FAIL tag %0d: %0d vs %0d", out_tag, out_data, expq[out_tag]); end
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
    for (int k = 0; k < 2000; k++) begin
      longint s;
      @(negedge clk);
      in_valid = 1'b1;
      in_tag   = 8'(k);
      relu     = 1'($urandom);
      case (k % 4)
        0: begin in_data = 32'h7FFF_FF00; bias = ACCW'($urandom_range(1000)); end
        1: begin in_data = 32'h8000_0100; bias = -ACCW'($urandom_range(1000)); end
        default: begin in_data = ACCW'($urandom); bias = ACCW'(int'($urandom_range(20000)) - 10000); end
      endcase
      s = longint'(in_data) + longint'(bias);
      if (s > 64'sd2147483647) s = 64'sd2147483647;
      if (s < -64'sd2147483648) s = -64'sd2147483648;
      if (relu && s < 0) s = 0;
      expq[k % 256] = s;
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
