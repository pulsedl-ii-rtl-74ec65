// tb_pdl_pe: self-checking testbench of one processing element.
// Random layers (channel counts, kernel length, stride, padding, zero
// insertion, AU group size, ReLU, raw or requantised output) are loaded
// through the host port, run, and every result word is compared with the
// reference model. It also checks the busy-cycle count against the schedule
// of the coordinator, the event token, the interrupt, and the loopback of
// requantised results into the feature map memory.
module tb_pdl_pe;
  import pdl_pkg::*;
  import pdl_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic        host_we = 1'b0;
  logic [15:0] host_addr = '0;
  logic [31:0] host_wdata = '0, host_rdata;
  logic        irq, busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pdl_pe dut (.clk, .rst_n, .host_we, .host_addr, .host_wdata, .host_rdata, .irq, .busy);

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); host_we = 1'b1; host_addr = 16'(a); host_wdata = d;
    @(negedge clk); host_we = 1'b0;
  endtask
  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk); host_addr = 16'(a); #1 d = host_rdata;
  endtask
  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d (0x%08h) expected %0d", what, $signed(got), got, $signed(exp));
    end
  endtask

  task automatic run_layer(lay_t l, int token);
    logic [31:0] d;
    int t0;
    compute(l);
    for (int i = 0; i < fmap_words(l); i++) wr(16'h4000 + 4*i, fmap_word(l, i));
    for (int i = 0; i < kern_words(l); i++) wr(16'h8000 + 4*i, kern_word(l, i));
    for (int o = 0; o < l.oc; o++) wr(16'h1000 + 4*o, b[o]);
    for (int r = 3; r <= 15; r++) wr(4*r, reg_value(l, r));
    wr(16'h0008, token);
    wr(16'h0004, 32'h2);               // clear done
    wr(16'h0000, 32'h3);               // start, irq enable
    t0 = 0;
    while (!irq && t0 < 200000) begin @(posedge clk); t0++; end
    check("irq", {31'b0, irq}, 1);
    rd(16'h0004, d); check("status done", d, 32'h2);
    rd(16'h0008, d); check("token", d, token);
    rd(16'h0040, d); check("cycles", d, layer_cycles(l));
    for (int i = 0; i < l.oc * l.l_out; i++) begin
      rd(16'h2000 + 4*i, d);
      check($sformatf("result[%0d]", i), d, l.raw ? ref_out[i] : 32'(signed'(ref_out[i])));
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lay_t l;
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // directed: 1 channel, kernel 4, stride 2 (first layer of the workload)
    l = '{ic:1, oc:4, k:4, l_in:16, l_out:8, stride:2, pad:1, ulog:0, glog:0,
          relu:1, raw:0, loopback:0, loop_base:0, mult:1200, shift:12};
    randomize_layer(l, 100, 60); run_layer(l, 101);
    // random layers
    for (int it = 0; it < 10; it++) begin
      l.glog   = $urandom_range(2);
      l.ic     = 1 + $urandom_range(9);
      l.oc     = 1 + $urandom_range(7);
      l.k      = 1 + $urandom_range(13);
      l.l_in   = 2 + $urandom_range(12);
      l.ulog   = $urandom_range(1);
      l.stride = 1 + $urandom_range(2);
      l.pad    = $urandom_range(3);
      l.l_out  = 1 + $urandom_range(8);
      l.relu   = 1'($urandom_range(1));
      l.raw    = 1'($urandom_range(1));
      l.mult   = 200 + $urandom_range(3000);
      l.shift  = 8 + $urandom_range(8);
      randomize_layer(l, 127, 127); run_layer(l, 200 + it);
    end
    // loopback: results requantised into fmap words from loop_base
    l = '{ic:4, oc:6, k:4, l_in:8, l_out:4, stride:2, pad:1, ulog:0, glog:2,
          relu:1, raw:0, loopback:1, loop_base:100, mult:900, shift:12};
    randomize_layer(l, 100, 100); run_layer(l, 300);
    for (int o = 0; o < l.oc; o++) for (int p = 0; p < l.l_out; p++) begin
      rd(16'h4000 + 4*(100 + (o / 4) * l.l_out + p), d);
      check("loopback", 32'(signed'(d[8*(o%4) +: 8])), 32'(signed'(ref_out[o*l.l_out+p])));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
