// tb_pdl_ahb_dpram: testbench of the dual-port AHB RAM. Two AHB master
// models write and read random words through both ports at the same time;
// each port must read what either port wrote (checked against a model),
// and a same-word collision must keep port A's data.
module tb_pdl_ahb_dpram;
  import pdl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  ahb_req_t ra, rb;
  ahb_rsp_t sa, sb;
  int checks = 0, failures = 0;
  logic [31:0] model [256];

  always #5 clk = ~clk;

  pdl_ahb_dpram #(.DEPTH(256)) dut (.clk, .rst_n, .a_hsel(1'b1), .a_req(ra), .a_hready(sa.hreadyout), .a_rsp(sa),
    .b_hsel(1'b1), .b_req(rb), .b_hready(sb.hreadyout), .b_rsp(sb));

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ra = '0; rb = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // fill through port B, read through port A (pipelined back-to-back)
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      model[i] = $urandom;
      rb.haddr = 32'(4*i); rb.htrans = HT_NONSEQ; rb.hwrite = 1; rb.hsize = 3'b010;
      if (i > 0) rb.hwdata = model[i-1];
    end
    @(negedge clk); rb.htrans = HT_IDLE; rb.hwdata = model[255];
    for (int i = 0; i <= 256; i++) begin
      @(negedge clk);
      if (i > 0) chk("A reads B", sa.hrdata, model[i-1]);
      ra.haddr = 32'(4*(i % 256)); ra.htrans = (i < 256) ? HT_NONSEQ : HT_IDLE; ra.hwrite = 0; ra.hsize = 3'b010;
    end
    // simultaneous random writes from both ports, collisions included
    for (int k = 0; k < 500; k++) begin
      int ia, ib;
      logic [31:0] da, db;
      ia = $urandom_range(255); ib = ($urandom_range(3) == 0) ? ia : $urandom_range(255);
      da = $urandom; db = $urandom;
      @(negedge clk);
      ra.haddr = 32'(4*ia); ra.htrans = HT_NONSEQ; ra.hwrite = 1;
      rb.haddr = 32'(4*ib); rb.htrans = HT_NONSEQ; rb.hwrite = 1;
      @(negedge clk);
      ra.htrans = HT_IDLE; rb.htrans = HT_IDLE; ra.hwdata = da; rb.hwdata = db;
      model[ib] = db; model[ia] = da;
      @(negedge clk);
      ra.haddr = 32'(4*ib); ra.htrans = HT_NONSEQ; ra.hwrite = 0;
      rb.haddr = 32'(4*ia); rb.htrans = HT_NONSEQ; rb.hwrite = 0;
      @(negedge clk);
      ra.htrans = HT_IDLE; rb.htrans = HT_IDLE;
      #1;
      chk("A read", sa.hrdata, model[ib]);
      chk("B read", sb.hrdata, model[ia]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
