// tb_pdl_aux_bus: testbench of the auxiliary AHB bus. Three master models
// run concurrently, each writing random words into its own region of the
// three slave memories and reading them back. The slave models are simple
// word memories, one of which inserts a wait state. Every read must return
// what that master wrote, the arbiter must make masters wait (counted), and
// the highest-priority master must win when all request together.
module tb_pdl_aux_bus;
  import pdl_pkg::*;
  localparam int NM = 3, NS = 3;
  logic clk = 1'b0, rst_n = 1'b0, hready;
  ahb_req_t mreq [NM];
  ahb_rsp_t mrsp [NM];
  ahb_req_t sreq;
  logic [NS-1:0] hsel;
  ahb_rsp_t srsp [NS];
  logic [31:0] mem [NS][64];
  logic        dph [NS];
  logic        dwr [NS];
  logic [5:0]  dad [NS];
  logic        slow;
  int checks = 0, failures = 0, stalls = 0;

  always #5 clk = ~clk;

  pdl_aux_bus #(.NM(NM), .NS(NS)) dut (.clk, .rst_n, .m_req(mreq), .m_rsp(mrsp), .hready,
    .s_req(sreq), .s_hsel(hsel), .s_rsp(srsp));

  for (genvar s = 0; s < NS; s++) begin : g_s
    always_ff @(posedge clk) begin
      if (dph[s] && dwr[s] && srsp[s].hreadyout) mem[s][dad[s]] <= sreq.hwdata;
      if (hready) begin
        dph[s] <= hsel[s] && sreq.htrans[1];
        dwr[s] <= sreq.hwrite;
        dad[s] <= sreq.haddr[7:2];
      end
    end
    always_comb begin
      srsp[s].hrdata    = mem[s][dad[s]];
      srsp[s].hresp     = 1'b0;
      srsp[s].hreadyout = (s == 1 && dph[s]) ? slow : 1'b1;
    end
  end
  always_ff @(posedge clk) slow <= dph[1] && !slow;

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", what, got, exp); end
  endtask

  // one single transfer from master m; counts cycles spent waiting
  task automatic xfer(int m, bit wr, logic [31:0] a, logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    mreq[m].haddr = a; mreq[m].htrans = HT_NONSEQ; mreq[m].hwrite = wr; mreq[m].hsize = 3'b010;
    @(posedge clk);
    while (!mrsp[m].hreadyout) begin stalls++; @(posedge clk); end
    @(negedge clk);
    mreq[m].htrans = HT_IDLE; mreq[m].hwdata = wd;
    @(posedge clk);
    while (!mrsp[m].hreadyout) @(posedge clk);
    rd = mrsp[m].hrdata;
  endtask

  task automatic master(int m);
    logic [31:0] data [3][16];
    logic [31:0] rd;
    localparam logic [31:0] B [3] = '{32'h0000_0000, 32'h2000_0000, 32'h2100_0000};
    for (int rep = 0; rep < 6; rep++) begin
      for (int s = 0; s < NS; s++)
        for (int i = 0; i < 16; i++) begin
          data[s][i] = $urandom;
          xfer(m, 1, B[s] + 32'(4*(16*m + i)), data[s][i], rd);
        end
      for (int s = 0; s < NS; s++)
        for (int i = 0; i < 16; i++) begin
          xfer(m, 0, B[s] + 32'(4*(16*m + i)), 0, rd);
          chk($sformatf("m%0d read", m), rd, data[s][i]);
        end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < NM; m++) mreq[m] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // all three request in the same cycle: master 0 must get the bus first
    @(negedge clk);
    for (int m = 0; m < NM; m++) begin
      mreq[m].haddr = 32'(4*m); mreq[m].htrans = HT_NONSEQ; mreq[m].hsize = 3'b010;
    end
    @(posedge clk); @(negedge clk);
    chk("priority m0", mrsp[0].hreadyout, 1);
    chk("m1 held", mrsp[1].hreadyout, 0);
    chk("m2 held", mrsp[2].hreadyout, 0);
    for (int m = 0; m < NM; m++) mreq[m].htrans = HT_IDLE;
    repeat (4) @(posedge clk);
    fork
      master(0);
      master(1);
      master(2);
    join
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no arbitration stall seen"); end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
