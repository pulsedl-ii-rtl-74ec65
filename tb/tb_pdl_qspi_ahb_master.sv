// tb_pdl_qspi_ahb_master: testbench of the Quad-SPI link master. A
// testbench SPI host sends frames (start address + random data words) with
// an SPI clock of 1/6 of the system clock into an AHB slave model (a word
// memory) that inserts random wait states. After each frame the memory must
// hold exactly the sent words at consecutive addresses. A final frame sent
// against a slave that stalls for a long time must set `overflow`.
module tb_pdl_qspi_ahb_master;
  import pdl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cs_n, sclk, busy, overflow;
  logic [3:0] io;
  ahb_req_t req;
  ahb_rsp_t rsp;
  logic [31:0] mem [1024];
  logic [31:0] model [1024];
  logic dph, stall_all;
  logic [9:0] dad;
  int wait_left, checks = 0, failures = 0, waits = 0;

  always #5 clk = ~clk;

  pdl_qspi_ahb_master #(.FIFO_D(4)) dut (.clk, .rst_n, .qspi_cs_n(cs_n), .qspi_sclk(sclk),
    .qspi_io(io), .req, .rsp, .busy, .overflow);

  // AHB slave model with random wait states
  always_ff @(posedge clk) begin
    if (rsp.hreadyout) begin
      if (dph && req.hwrite === 1'b1) mem[dad] <= req.hwdata;
      dph <= req.htrans[1];
      dad <= req.haddr[11:2];
      wait_left <= stall_all ? 1000 : $urandom_range(2);
    end else begin
      wait_left <= wait_left - 1;
      waits++;
    end
  end
  always_comb begin
    rsp.hrdata = '0; rsp.hresp = 1'b0;
    rsp.hreadyout = !dph || wait_left == 0;
  end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", what, got, exp); end
  endtask

  task automatic nibbles(logic [31:0] w);
    for (int i = 7; i >= 0; i--) begin
      io = w[4*i +: 4];
      repeat (3) @(posedge clk); sclk = 1;
      repeat (3) @(posedge clk); sclk = 0;
    end
  endtask

  task automatic frame(logic [31:0] a, int n);
    cs_n = 0; repeat (4) @(posedge clk);
    nibbles(a);
    for (int i = 0; i < n; i++) begin
      logic [31:0] d;
      d = $urandom;
      model[(a >> 2) + 32'(i)] = d;
      nibbles(d);
    end
    repeat (4) @(posedge clk); cs_n = 1;
    repeat (6) @(posedge clk);
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cs_n = 1; sclk = 0; io = 0; dph = 0; stall_all = 0; wait_left = 0; dad = '0;
    for (int i = 0; i < 1024; i++) begin mem[i] = '0; model[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 12; f++) begin
      int n, a;
      n = $urandom_range(1, 40);
      a = $urandom_range(0, 1023 - n);
      frame(32'(4 * a), n);
      while (busy) @(posedge clk);
      for (int i = 0; i < 1024; i++) chk("memory", mem[i], model[i]);
    end
    chk("no overflow yet", overflow, 0);
    stall_all = 1;
    frame(32'h100, 8);
    chk("overflow flagged", overflow, 1);
    checks++;
    if (waits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
