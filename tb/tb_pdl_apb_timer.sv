// tb_pdl_apb_timer: testbench of the APB timer. A cycle-accurate model of the
// down-counter runs next to the DUT; random LOAD values, enables and
// interrupt enables are programmed over APB, VALUE and the interrupt flag
// are compared every cycle, and the interrupt must have fired and been
// cleared at least once.
module tb_pdl_apb_timer;
  import pdl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, psel, irq;
  apb_req_t apb;
  apb_rsp_t rsp;
  int checks = 0, failures = 0, irqs = 0;
  logic [31:0] m_value, m_load;
  logic [1:0]  m_ctrl;
  logic        m_flag, snap_flag;

  always #5 clk = ~clk;

  pdl_apb_timer dut (.clk, .rst_n, .psel, .apb, .rsp, .irq);

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", what, got, exp); end
  endtask

  // reference model, updated on the same edges as the DUT
  always @(posedge clk) if (rst_n) begin
    logic [31:0] v; logic [1:0] c; logic [31:0] l; logic f;
    v = m_value; c = m_ctrl; l = m_load; f = m_flag;
    if (c[0]) begin
      if (v == 0) begin v = l; f = 1; end else v = v - 1;
    end
    if (psel && apb.penable && apb.pwrite)
      case (apb.paddr[3:2])
        0: c = apb.pwdata[1:0];
        1: v = apb.pwdata;
        2: l = apb.pwdata;
        3: f = 0;
      endcase
    m_value <= v; m_ctrl <= c; m_load <= l; m_flag <= f;
  end

  always @(negedge clk) if (rst_n) begin
    chk("irq", irq, m_flag && m_ctrl[1]);
    if (irq) irqs++;
  end

  task automatic apb_xfer(bit wr, logic [11:0] a, logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    psel = 1; apb.penable = 0; apb.pwrite = wr; apb.paddr = a; apb.pwdata = wd;
    @(negedge clk);
    apb.penable = 1;
    rd = rsp.prdata;
    snap_flag = m_flag;
    @(negedge clk);
    psel = 0; apb.penable = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    psel = 0; apb = '0;
    m_value = 0; m_load = 0; m_ctrl = 0; m_flag = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 300; k++) begin
      case ($urandom_range(5))
        0: apb_xfer(1, 12'h008, $urandom_range(40), rd);
        1: apb_xfer(1, 12'h000, $urandom_range(3), rd);
        2: apb_xfer(1, 12'h00C, 0, rd);
        3: apb_xfer(1, 12'h004, $urandom_range(60), rd);
        4: begin
          apb_xfer(0, 12'h004, 0, rd);
          // the read sample was taken in the ACCESS cycle
        end
        default: repeat ($urandom_range(50)) @(posedge clk);
      endcase
      @(negedge clk);
      chk("value", dut.value, m_value);
      apb_xfer(0, 12'h00C, 0, rd);
      chk("flag read", rd, {31'b0, snap_flag});
    end
    checks++;
    if (irqs == 0) begin failures++; $display("FAIL interrupt never raised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
