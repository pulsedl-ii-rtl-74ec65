// tb_pdl_uart_ahb_master: testbench of the UART programming master. A
// testbench 8N1 encoder sends 'W' and 'R' commands (plus noise bytes that
// must be ignored) to the master at 16 cycles per bit; an independent
// decoder collects the replies. The AHB side is a word-memory model with
// random wait states. Writes must land in the memory and be acknowledged
// with 'K', reads must return the memory word MSB first, and each command
// must cause exactly one AHB transfer.
module tb_pdl_uart_ahb_master;
  import pdl_pkg::*;
  localparam int DIV = 16;
  logic clk = 1'b0, rst_n = 1'b0, rxd, txd;
  ahb_req_t req;
  ahb_rsp_t rsp;
  logic [31:0] mem [256];
  logic [31:0] model [256];
  logic dph;
  logic [7:0] dad;
  int wait_left, transfers = 0, checks = 0, failures = 0;
  byte unsigned got [$];

  always #5 clk = ~clk;

  pdl_uart_ahb_master #(.DIV(DIV)) dut (.clk, .rst_n, .rxd, .txd, .req, .rsp);

  always_ff @(posedge clk) begin
    if (rsp.hreadyout) begin
      if (dph && req.hwrite === 1'b1) mem[dad] <= req.hwdata;
      dph <= req.htrans[1];
      dad <= req.haddr[9:2];
      if (req.htrans[1]) transfers++;
      wait_left <= $urandom_range(3);
    end else wait_left <= wait_left - 1;
  end
  always_comb begin
    rsp.hrdata = dph ? mem[dad] : 32'h0; rsp.hresp = 1'b0;
    rsp.hreadyout = !dph || wait_left == 0;
  end

  task automatic chk(string what, logic [31:0] got_v, logic [31:0] exp);
    checks++;
    if (got_v !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", what, got_v, exp); end
  endtask

  initial begin
    forever begin
      byte unsigned b;
      @(negedge txd);
      repeat (DIV / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (DIV) @(posedge clk); b[i] = txd; end
      repeat (DIV) @(posedge clk);
      got.push_back(b);
    end
  end

  task automatic send(byte unsigned b);
    rxd = 0; repeat (DIV) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (DIV) @(posedge clk); end
    rxd = 1; repeat (DIV) @(posedge clk);
  endtask
  task automatic send32(logic [31:0] w);
    for (int i = 3; i >= 0; i--) send(w[8*i +: 8]);
  endtask
  task automatic wait_bytes(int n);
    int t = 0;
    while (got.size() < n && t < 20000) begin @(posedge clk); t++; end
    chk("reply bytes", got.size(), n);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tr0;
    rxd = 1; dph = 0; wait_left = 0; dad = '0;
    for (int i = 0; i < 256; i++) begin mem[i] = '0; model[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    for (int k = 0; k < 60; k++) begin
      int w;
      logic [31:0] d, r;
      w = $urandom_range(255);
      tr0 = transfers;
      if ($urandom_range(3) == 0) send(8'h00);     // noise byte, ignored
      if ($urandom_range(1)) begin
        d = $urandom;
        send(8'h57); send32(32'(4 * w)); send32(d);
        model[w] = d;
        wait_bytes(1);
        chk("ack", got.pop_front(), 8'h4B);
        chk("memory", mem[w], d);
      end else begin
        send(8'h52); send32(32'(4 * w));
        wait_bytes(4);
        r = {got[0], got[1], got[2], got[3]};
        got.delete();
        chk("read data", r, model[w]);
      end
      chk("one transfer", transfers - tr0, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
