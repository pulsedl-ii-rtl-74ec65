// tb_pdl_psum_acc: testbench of the partial sum accumulator. Random updates
// (overwrite with `first`, otherwise add), including back-to-back updates of
// one address, are mirrored in a model array; the read port must return the
// model value for every address afterwards and during the run.
module tb_pdl_psum_acc;
  import pdl_pkg::*;
  localparam int D = 32;
  logic clk = 1'b0;
  logic in_valid = 0, in_first = 0;
  logic [4:0] in_addr = '0, rd_addr = '0;
  logic signed [ACCW-1:0] in_data = '0, rd_data;
  int checks = 0, failures = 0, same_addr = 0;
  int model [D];

  always #5 clk = ~clk;

  pdl_psum_acc #(.DEPTH(D)) dut (.clk, .in_valid, .in_first, .in_addr, .in_data, .rd_addr, .rd_data);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [4:0] last;
    for (int i = 0; i < D; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    // the memory has no reset: start every word with a `first` write of 0
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      in_valid = 1; in_first = 1; in_addr = 5'(i); in_data = '0;
    end
    last = '0;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      in_valid = ($urandom_range(4) != 0);
      in_first = ($urandom_range(5) == 0);
      in_addr  = ($urandom_range(3) == 0) ? last : 5'($urandom);
      in_data  = ACCW'(int'($urandom_range(200000)) - 100000);
      rd_addr  = 5'($urandom);
      #1;
      checks++;
      if (rd_data !== model[rd_addr]) begin failures++; $display("FAIL read %0d", rd_addr); end
      if (in_valid) begin
        if (in_addr == last) same_addr++;
        model[in_addr] = in_first ? int'(in_data) : model[in_addr] + int'(in_data);
        last = in_addr;
      end
    end
    @(negedge clk); in_valid = 0;
    for (int i = 0; i < D; i++) begin
      rd_addr = 5'(i); #1; checks++;
      if (rd_data !== model[i]) begin failures++; $display("FAIL final %0d", i); end
    end
    checks++; if (same_addr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
