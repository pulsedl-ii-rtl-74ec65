// tb_pdl_adder_tree: testbench of the PE adder tree with multi-stage readout.
// For every readout stage and node, random AU values are streamed in; each
// output must equal the sum of the 2^stage AU values of the chosen node and
// appear stage+1 cycles after its input (checked through the tag).
module tb_pdl_adder_tree;
  import pdl_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [ACCW-1:0] in [N];
  logic in_valid = 0, out_valid;
  logic [15:0] in_tag = '0, out_tag;
  logic [1:0] rd_stage = '0, rd_node = '0;
  logic signed [ACCW-1:0] out;
  int checks = 0, failures = 0, cyc = 0;
  int exp_val [65536];
  int exp_cyc [65536];
  int seen [3];

  always #5 clk = ~clk;
  always @(negedge clk) cyc++;

  pdl_adder_tree #(.N_AU(N), .TAGW(16)) dut (.clk, .rst_n, .in, .in_valid, .in_tag,
    .rd_stage, .rd_node, .out, .out_valid, .out_tag);

  always @(posedge clk) if (rst_n && in_valid) begin
    int s, w;
    s = 0; w = 1 << rd_stage;
    for (int i = 0; i < w; i++) s += int'(in[rd_node * w + i]);
    exp_val[in_tag] = s;
    exp_cyc[in_tag] = cyc + 1 + rd_stage;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (out !== exp_val[out_tag]) begin failures++; $display("FAIL value tag %0d", out_tag); end
    if (cyc != exp_cyc[out_tag]) begin failures++; $display("FAIL latency tag %0d", out_tag); end
    seen[rd_stage]++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) in[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int st = 0; st <= 2; st++)
      for (int nd = 0; nd < (N >> st); nd++) begin
        @(negedge clk); in_valid = 0; rd_stage = 2'(st); rd_node = 2'(nd);
        repeat (4) @(negedge clk);
        for (int k = 0; k < 200; k++) begin
          @(negedge clk);
          in_valid = ($urandom_range(3) != 0);
          in_tag = in_tag + 16'(in_valid);
          for (int i = 0; i < N; i++) in[i] = ACCW'(int'($urandom_range(2000000)) - 1000000);
        end
        @(negedge clk); in_valid = 0;
        repeat (4) @(negedge clk);
      end
    for (int st = 0; st <= 2; st++) begin checks++; if (seen[st] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
