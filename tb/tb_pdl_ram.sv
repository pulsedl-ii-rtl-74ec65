// tb_pdl_ram: testbench of the PE memory: every word is first written with
// a random value and read back; then random
// writes are mirrored in a model; the combinational read port must return
// the model value at every cycle, including a word written in the previous
// cycle.
module tb_pdl_ram;
  logic clk = 1'b0;
  logic we = 0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [15:0] model [64];

  always #5 clk = ~clk;

  pdl_ram #(.W(16), .DEPTH(64)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = 16'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 64; i++) begin
      raddr = 6'(i); #1; checks++;
      if (rdata !== model[i]) begin failures++; $display("FAIL fill %0d", i); end
    end
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      raddr = ($urandom_range(2) == 0) ? waddr : 6'($urandom);
      #1; checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL read %0d", raddr); end
      we = 1'($urandom); waddr = 6'($urandom); wdata = 16'($urandom);
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
