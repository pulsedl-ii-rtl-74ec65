// tb_pdl_ahb_sysregs: testbench of the system registers. Checks the ID
// constant, random SCRATCH and CTRL write/read-back, the `sys_ctrl` output,
// and that two CYCLE reads differ by exactly the number of clock cycles
// between their data phases.
module tb_pdl_ahb_sysregs;
  import pdl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  ahb_req_t req;
  ahb_rsp_t rsp;
  logic [31:0] sys_ctrl;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  pdl_ahb_sysregs dut (.clk, .rst_n, .hsel(1'b1), .req, .hready(rsp.hreadyout), .rsp, .sys_ctrl);

  task automatic ahb(input bit wr, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    req.haddr = a; req.htrans = HT_NONSEQ; req.hwrite = wr; req.hsize = 3'b010;
    while (!rsp.hreadyout) @(negedge clk);
    @(negedge clk);
    req.htrans = HT_IDLE; req.hwdata = wd;
    while (!rsp.hreadyout) @(negedge clk);
    rd = rsp.hrdata;
  endtask
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", what, got, exp); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd, c0, c1, s, c;
    int unsigned t0, t1;
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    ahb(0, 32'h0, 0, rd);
    chk("ID", rd, 32'h5044_4C32);
    for (int k = 0; k < 300; k++) begin
      s = $urandom; c = $urandom;
      ahb(1, 32'h4, s, rd);
      ahb(1, 32'h8, c, rd);
      ahb(0, 32'h4, 0, rd); chk("SCRATCH", rd, s);
      ahb(0, 32'h8, 0, rd); chk("CTRL", rd, c);
      chk("sys_ctrl pin", sys_ctrl, c);
      ahb(0, 32'hC, 0, c0); t0 = cyc;
      repeat ($urandom_range(20)) @(posedge clk);
      ahb(0, 32'hC, 0, c1); t1 = cyc;
      chk("CYCLE delta", c1 - c0, t1 - t0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
