// tb_pdl_nn_accel: testbench of the accelerator behind its AHB-Lite port.
// An AHB master model loads two different layers into PE 2 and PE 14, starts
// both so that they run at the same time, waits for the interrupt, checks
// the global IRQ/BUSY/INFO page and reads every result back for comparison
// with the reference model.
module tb_pdl_nn_accel;
  import pdl_pkg::*;
  import pdl_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, irq;
  ahb_req_t req;
  ahb_rsp_t rsp;
  int checks = 0, failures = 0;
  int res_a [MAXO];

  always #5 clk = ~clk;

  pdl_nn_accel dut (.clk, .rst_n, .hsel(1'b1), .req, .hready(rsp.hreadyout), .rsp, .irq);

  task automatic ahb(input bit wr, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    req.haddr = a; req.htrans = HT_NONSEQ; req.hwrite = wr; req.hsize = 3'b010;
    while (!rsp.hreadyout) @(negedge clk);
    @(negedge clk);
    req.htrans = HT_IDLE; req.hwdata = wd;
    while (!rsp.hreadyout) @(negedge clk);
    rd = rsp.hrdata;
  endtask
  task automatic wr32(input logic [31:0] a, input logic [31:0] d); logic [31:0] x; ahb(1, a, d, x); endtask
  task automatic rd32(input logic [31:0] a, output logic [31:0] d); ahb(0, a, 0, d); endtask
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %0d vs %0d", what, got, exp); end
  endtask

  task automatic load(int pe, lay_t l);
    logic [31:0] base = 32'(pe) << 16;
    for (int i = 0; i < fmap_words(l); i++) wr32(base + 32'h4000 + 4*i, fmap_word(l, i));
    for (int i = 0; i < kern_words(l); i++) wr32(base + 32'h8000 + 4*i, kern_word(l, i));
    for (int o = 0; o < l.oc; o++) wr32(base + 32'h1000 + 4*o, b[o]);
    for (int r = 3; r <= 15; r++) wr32(base + 4*r, reg_value(l, r));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lay_t la, lb;
    logic [31:0] d;
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    rd32(32'hF0008, d); chk("info", d, {8'd0, 8'd6, 8'd4, 8'd15});
    la = '{ic:8, oc:8, k:4, l_in:12, l_out:6, stride:2, pad:1, ulog:0, glog:2,
           relu:1, raw:0, loopback:0, loop_base:0, mult:700, shift:12};
    lb = '{ic:3, oc:5, k:8, l_in:10, l_out:5, stride:1, pad:2, ulog:0, glog:1,
           relu:0, raw:1, loopback:0, loop_base:0, mult:1, shift:0};
    randomize_layer(la, 100, 100); compute(la); load(2, la);
    for (int i = 0; i < la.oc * la.l_out; i++) res_a[i] = ref_out[i];
    randomize_layer(lb, 127, 127); compute(lb); load(14, lb);
    wr32(32'h20000, 3); wr32(32'hE0000, 3);                 // start both
    rd32(32'hF0004, d); chk("both busy", d, (1 << 2) | (1 << 14));
    while (!irq) @(posedge clk);
    while (1) begin rd32(32'hF0000, d); if (d == ((1 << 2) | (1 << 14))) break; end
    chk("irq mask", d, (1 << 2) | (1 << 14));
    for (int i = 0; i < la.oc * la.l_out; i++) begin rd32(32'h22000 + 4*i, d); chk("pe2 result", d, 32'(signed'(res_a[i]))); end
    for (int i = 0; i < lb.oc * lb.l_out; i++) begin rd32(32'hE2000 + 4*i, d); chk("pe14 result", d, ref_out[i]); end
    wr32(32'h20004, 2); wr32(32'hE0004, 2);
    rd32(32'hF0000, d); chk("irq cleared", d, 0);
    @(negedge clk); chk("irq line low", {31'b0, irq}, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
