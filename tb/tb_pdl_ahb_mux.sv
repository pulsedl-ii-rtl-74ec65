// tb_pdl_ahb_mux: testbench of the processor-bus decoder and multiplexer.
// Three slave models answer with distinct data and one of them inserts wait
// states. Random addresses must select exactly the decoded slave, return
// its data in the data phase, pass its HREADY back, and unmapped addresses
// must be answered by the default slave.
module tb_pdl_ahb_mux;
  import pdl_pkg::*;
  localparam int NS = 3;
  localparam logic [NS-1:0][31:0] BASE = {32'h5000_0000, 32'h2000_0000, 32'h0000_0000};
  localparam logic [NS-1:0][31:0] MASK = {32'hFFF0_0000, 32'hFF00_0000, 32'hFF00_0000};
  logic clk = 1'b0, rst_n = 1'b0, hready;
  ahb_req_t req;
  ahb_rsp_t rsp;
  logic [NS-1:0] hsel;
  ahb_rsp_t srsp [NS];
  logic [31:0] saddr [NS];
  logic sdat [NS];
  int wait_cnt = 0, waits_seen = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pdl_ahb_mux #(.NS(NS), .BASE(BASE), .MASK(MASK)) dut (.clk, .rst_n, .m_req(req), .m_rsp(rsp),
    .hready, .s_hsel(hsel), .s_rsp(srsp));

  // slave models: data = slave number in the top byte, address below;
  // slave 2 holds HREADY low for two cycles per transfer
  for (genvar s = 0; s < NS; s++) begin : g_s
    always_ff @(posedge clk) if (hready) begin
      sdat[s]  <= hsel[s] && req.htrans[1];
      saddr[s] <= req.haddr;
    end
    always_comb begin
      srsp[s].hrdata    = {8'(s + 1), saddr[s][23:0]};
      srsp[s].hresp     = 1'b0;
      srsp[s].hreadyout = (s == 2 && sdat[s]) ? (wait_cnt == 2) : 1'b1;
    end
  end
  always_ff @(posedge clk) wait_cnt <= (sdat[2] && !hready) ? wait_cnt + 1 : 0;

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
    for (int s = 0; s < NS; s++) begin sdat[s] = 0; saddr[s] = '0; end
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 600; k++) begin
      logic [31:0] a;
      int exp_s, w;
      case ($urandom_range(3))
        0: begin a = {8'h00, 24'($urandom)}; exp_s = 0; end
        1: begin a = {8'h20, 24'($urandom)}; exp_s = 1; end
        2: begin a = {12'h500, 20'($urandom)}; exp_s = 2; end
        default: begin a = {8'h70, 24'($urandom)}; exp_s = -1; end
      endcase
      @(negedge clk);
      req.haddr = a; req.htrans = HT_NONSEQ; req.hwrite = 0; req.hsize = 3'b010;
      #1 chk("hsel", 32'(hsel), (exp_s < 0) ? 0 : (1 << exp_s));
      @(negedge clk);
      req.htrans = HT_IDLE;
      w = 0;
      while (!hready) begin w++; @(negedge clk); end
      if (w > 0) waits_seen++;
      chk("wait states", w, (exp_s == 2) ? 2 : 0);
      chk("data", rsp.hrdata, (exp_s < 0) ? 32'h0 : {8'(exp_s + 1), a[23:0]});
    end
    checks++; if (waits_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
