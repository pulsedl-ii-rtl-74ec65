// tb_pdl_apb_watchdog: testbench of the APB watchdog. For random LOAD
// values the watchdog is enabled and then either kicked with the key (must
// not fire), kicked with a wrong key (must not reload) or left alone; the
// time at which `wdog_reset` rises is compared with the value computed from
// LOAD, and reset must clear it. Disabling once enabled must be refused.
module tb_pdl_apb_watchdog;
  import pdl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, psel, wdog_reset;
  apb_req_t apb;
  apb_rsp_t rsp;
  int checks = 0, failures = 0, fired = 0, kicked = 0;

  always #5 clk = ~clk;

  pdl_apb_watchdog dut (.clk, .rst_n, .psel, .apb, .rsp, .wdog_reset);

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", what, got, exp); end
  endtask

  task automatic apb_xfer(bit wr, logic [11:0] a, logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    psel = 1; apb.penable = 0; apb.pwrite = wr; apb.paddr = a; apb.pwdata = wd;
    @(negedge clk);
    apb.penable = 1;
    rd = rsp.prdata;
    @(negedge clk);
    psel = 0; apb.penable = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    psel = 0; apb = '0;
    for (int t = 0; t < 60; t++) begin
      int load, mode, n;
      rst_n = 0;
      repeat (2) @(posedge clk);
      rst_n = 1;
      chk("reset clears", wdog_reset, 0);
      load = $urandom_range(20, 200);
      mode = $urandom_range(2);
      apb_xfer(1, 12'h008, load, rd);
      apb_xfer(1, 12'h000, 1, rd);        // enable: VALUE = LOAD at this edge
      // VALUE was loaded at the posedge before the last negedge of apb_xfer
      n = 1;
      if (mode == 0) begin
        // kick every load/2 cycles a few times: must never fire
        for (int k = 0; k < 4; k++) begin
          repeat (load / 2 - 3) begin @(negedge clk); chk("no fire while kicked", wdog_reset, 0); end
          apb_xfer(1, 12'h00C, 32'h5A5A_5A5A, rd);
          kicked++;
        end
        apb_xfer(1, 12'h000, 0, rd);
        apb_xfer(0, 12'h000, 0, rd);
        chk("cannot disable", rd, 1);
        n = 0;
      end else if (mode == 1) begin
        apb_xfer(1, 12'h00C, 32'h1234_5678, rd);   // wrong key: no reload
        n = 4;
      end
      if (mode != 0) begin
        // n counts negedges since the enable edge: VALUE reaches 0 at edge
        // `load`, wdog_reset rises at edge load+1, seen at negedge load+2
        while (!wdog_reset && n < load + 10) begin @(negedge clk); n++; end
        chk("fire time", n, load + 2);
        fired++;
        repeat (5) @(negedge clk);
        chk("held", wdog_reset, 1);
      end
    end
    checks += 2;
    if (fired == 0) failures++;
    if (kicked == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
