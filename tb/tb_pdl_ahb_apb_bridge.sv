// tb_pdl_ahb_apb_bridge: testbench of the AHB-to-APB bridge. An AHB master
// model issues random reads and writes (including back-to-back transfers)
// to four APB slave models, each a 16-word register file that inserts a
// random number of wait states. Each read must return the model value; the
// APB protocol (PSEL one-hot, SETUP before ACCESS, stable address) is
// checked every cycle; wait states must have occurred.
module tb_pdl_ahb_apb_bridge;
  import pdl_pkg::*;
  localparam int NS = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  ahb_req_t req;
  ahb_rsp_t rsp;
  apb_req_t apb;
  logic [NS-1:0] psel;
  apb_rsp_t prsp [NS];
  logic [31:0] regs [NS][16];
  logic [31:0] model [NS][16];
  int wcnt [NS], wtarget [NS];
  int checks = 0, failures = 0, waits = 0;

  always #5 clk = ~clk;

  pdl_ahb_apb_bridge #(.NS(NS)) dut (.clk, .rst_n, .hsel(1'b1), .req, .hready(rsp.hreadyout), .rsp,
    .apb, .psel, .prsp);

  for (genvar s = 0; s < NS; s++) begin : g_s
    always_ff @(posedge clk) begin
      if (psel[s] && !apb.penable) begin wcnt[s] <= 0; wtarget[s] <= $urandom_range(3); end
      else if (psel[s] && apb.penable) begin
        wcnt[s] <= wcnt[s] + 1;
        if (prsp[s].pready && apb.pwrite) regs[s][apb.paddr[5:2]] <= apb.pwdata;
      end
    end
    always_comb begin
      prsp[s].pready  = (wcnt[s] >= wtarget[s]);
      prsp[s].prdata  = regs[s][apb.paddr[5:2]];
      prsp[s].pslverr = 1'b0;
    end
  end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", what, got, exp); end
  endtask

  // protocol monitor
  always @(posedge clk) if (rst_n) begin
    if (!$onehot0(psel)) begin failures++; $display("FAIL psel not one-hot"); end
    if (apb.penable && !(|psel)) begin failures++; $display("FAIL penable without psel"); end
    if (|psel && apb.penable && !prsp[0].pready && psel[0]) waits++;
    if (|psel && apb.penable && !prsp[1].pready && psel[1]) waits++;
    if (|psel && apb.penable && !prsp[2].pready && psel[2]) waits++;
    if (|psel && apb.penable && !prsp[3].pready && psel[3]) waits++;
  end
  always @(posedge clk) if (rst_n && apb.penable) begin
    checks++;
    if (!$past(|psel)) begin failures++; $display("FAIL ACCESS without SETUP"); end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, r;
    bit pend_rd;
    int pend_s, pend_r;
    logic [31:0] pend_wd;
    bit pend_wr;
    req = '0;
    for (int i = 0; i < NS; i++) begin
      wcnt[i] = 0; wtarget[i] = 0;
      for (int j = 0; j < 16; j++) begin regs[i][j] = '0; model[i][j] = '0; end
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    pend_rd = 0; pend_wr = 0;
    // pipelined AHB master: a new address phase is presented in the data
    // phase of the previous transfer
    for (int k = 0; k < 800; k++) begin
      bit wr, idle;
      idle = ($urandom_range(3) == 0) || k == 799;
      wr = $urandom_range(1);
      s = $urandom_range(NS - 1); r = $urandom_range(15);
      @(negedge clk);
      req.haddr = 32'h4000_0000 + 32'(s << 12) + 32'(r << 2);
      req.htrans = idle ? HT_IDLE : HT_NONSEQ; req.hwrite = wr; req.hsize = 3'b010;
      if (pend_wr) req.hwdata = pend_wd;
      @(posedge clk);
      while (!rsp.hreadyout) @(posedge clk);
      // the data phase of the pending transfer completed at this edge
      if (pend_rd) chk("read", rsp.hrdata, model[pend_s][pend_r]);
      if (pend_wr) model[pend_s][pend_r] = pend_wd;
      pend_rd = !idle && !wr; pend_wr = !idle && wr;
      pend_s = s; pend_r = r; pend_wd = $urandom;
    end
    @(negedge clk); req.htrans = HT_IDLE;
    repeat (3) @(posedge clk);
    for (int i = 0; i < NS; i++)
      for (int j = 0; j < 16; j++) chk("final regs", regs[i][j], model[i][j]);
    checks++;
    if (waits == 0) begin failures++; $display("FAIL no APB wait state"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
