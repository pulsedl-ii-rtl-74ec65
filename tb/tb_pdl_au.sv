// tb_pdl_au: testbench of the arithmetic unit. Random samples are shifted
// into the window while kernels are loaded into the shadow bank and the
// banks are swapped at random moments, also while streaming. A model keeps
// its own window and both kernel banks and, for every shift, the expected
// dot product; the AU result carrying that shift's tag must equal it and
// arrive exactly three cycles after the cycle in which shift_en was high.
module tb_pdl_au;
  import pdl_pkg::*;
  localparam int M = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  logic shift_en = 0, shift_clr = 0, k_load = 0, k_swap = 0;
  logic signed [DW-1:0] fmap_in = '0;
  logic signed [DW-1:0] k_in [M];
  logic [15:0] tag_in = '0, out_tag;
  logic signed [ACCW-1:0] out;
  logic out_valid;
  int checks = 0, failures = 0, cyc = 0, swaps_streaming = 0;
  int exp_val [65536];
  int exp_cyc [65536];
  int win [M];
  int kb [2][M];
  int act = 0;

  always #5 clk = ~clk;
  always @(negedge clk) cyc++;

  pdl_au #(.MULTS(M), .TAGW(16)) dut (.clk, .rst_n, .shift_en, .shift_clr, .fmap_in, .tag_in,
    .k_load, .k_in, .k_swap, .out, .out_valid, .out_tag);

  // reference: apply this edge's updates, then record the product the AU
  // must compute for the new window
  always @(posedge clk) if (rst_n) begin
    if (k_load) for (int j = 0; j < M; j++) kb[1-act][j] = int'(k_in[j]);
    if (k_swap) act = 1 - act;
    if (shift_en) begin
      int s;
      s = 0;
      for (int j = M - 1; j > 0; j--) win[j] = shift_clr ? 0 : win[j-1];
      win[0] = int'(fmap_in);
      for (int j = 0; j < M; j++) s += win[j] * kb[act][j];
      exp_val[tag_in] = s;
      exp_cyc[tag_in] = cyc + 3;
    end
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (out !== exp_val[out_tag]) begin failures++; $display("FAIL value tag %0d: %0d vs %0d", out_tag, out, exp_val[out_tag]); end
    if (cyc != exp_cyc[out_tag])  begin failures++; $display("FAIL latency tag %0d", out_tag); end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < M; j++) begin win[j] = 0; kb[0][j] = 0; kb[1][j] = 0; k_in[j] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      shift_en  = ($urandom_range(9) != 0);
      shift_clr = ($urandom_range(19) == 0);
      fmap_in   = DW'($urandom);
      tag_in    = tag_in + 16'(shift_en);
      k_load    = ($urandom_range(7) == 0);
      for (int j = 0; j < M; j++) k_in[j] = DW'($urandom);
      k_swap    = ($urandom_range(9) == 0);
      if (k_swap && shift_en) swaps_streaming++;
    end
    @(negedge clk); shift_en = 0; k_load = 0; k_swap = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (swaps_streaming == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
