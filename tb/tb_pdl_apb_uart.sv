// tb_pdl_apb_uart: testbench of the buffered APB UART (UART3 configuration,
// 16-byte transmit FIFO). The bit rate is set through BAUDDIV. Random bytes
// are pushed over APB until the FIFO reports full (extra pushes must be
// dropped); an independent 8N1 decoder in the testbench samples TXD at
// mid-bit and must see exactly the accepted bytes in order. In the other
// direction a testbench 8N1 encoder drives RXD; DATA, the RX-valid
// interrupt and the overrun flag are checked.
module tb_pdl_apb_uart;
  import pdl_pkg::*;
  localparam int DIV = 12;
  logic clk = 1'b0, rst_n = 1'b0, psel, txd, rxd, irq;
  apb_req_t apb;
  apb_rsp_t rsp;
  int checks = 0, failures = 0, fulls = 0, drops = 0;
  byte unsigned sent [$], got [$];

  always #5 clk = ~clk;

  pdl_apb_uart #(.TXFIFO(16)) dut (.clk, .rst_n, .psel, .apb, .rsp, .txd, .rxd, .irq);

  task automatic chk(string what, logic [31:0] got_v, logic [31:0] exp);
    checks++;
    if (got_v !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", what, got_v, exp); end
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

  // independent 8N1 decoder
  initial begin
    forever begin
      byte unsigned b;
      @(negedge txd);
      repeat (DIV / 2) @(posedge clk);
      if (txd !== 1'b0) begin failures++; $display("FAIL start bit"); end
      for (int i = 0; i < 8; i++) begin repeat (DIV) @(posedge clk); b[i] = txd; end
      repeat (DIV) @(posedge clk);
      checks++;
      if (txd !== 1'b1) begin failures++; $display("FAIL stop bit"); end
      got.push_back(b);
    end
  end

  task automatic send_rx(byte unsigned b);
    rxd = 0; repeat (DIV) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (DIV) @(posedge clk); end
    rxd = 1; repeat (DIV) @(posedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    psel = 0; apb = '0; rxd = 1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    apb_xfer(0, 12'h008, 0, rd);
    chk("reset BAUDDIV", rd, 868);
    apb_xfer(1, 12'h008, DIV, rd);
    // transmit bursts
    for (int burst = 0; burst < 4; burst++) begin
      for (int k = 0; k < 24; k++) begin
        byte unsigned b;
        b = 8'($urandom);
        apb_xfer(0, 12'h004, 0, rd);
        if (rd[0]) begin
          fulls++;
          apb_xfer(1, 12'h000, b, rd);    // must be dropped
          drops++;
        end else begin
          apb_xfer(1, 12'h000, b, rd);
          sent.push_back(b);
        end
      end
      do apb_xfer(0, 12'h004, 0, rd); while (!rd[1]);
      repeat (2 * DIV) @(posedge clk);
    end
    chk("tx count", got.size(), sent.size());
    foreach (sent[i]) if (i < got.size()) chk("tx byte", got[i], sent[i]);
    // receive
    for (int k = 0; k < 20; k++) begin
      byte unsigned b;
      b = 8'($urandom);
      send_rx(b);
      repeat (3) @(posedge clk);
      chk("rx irq", irq, 1);
      apb_xfer(0, 12'h004, 0, rd);
      chk("rx valid", rd[2], 1);
      apb_xfer(0, 12'h000, 0, rd);
      chk("rx data", rd[7:0], b);
      @(negedge clk);
      chk("rx irq cleared", irq, 0);
    end
    // overrun: two bytes without reading
    send_rx(8'h11); send_rx(8'h22);
    repeat (3) @(posedge clk);
    apb_xfer(0, 12'h004, 0, rd);
    chk("overrun", rd[3], 1);
    apb_xfer(0, 12'h000, 0, rd);
    chk("latest byte kept", rd[7:0], 8'h22);
    checks += 2;
    if (fulls == 0) failures++;
    if (drops == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
