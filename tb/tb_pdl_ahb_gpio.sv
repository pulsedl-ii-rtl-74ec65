// tb_pdl_ahb_gpio: testbench of the AHB GPIO. A register model tracks
// DATA_OUT and OUT_EN through random writes, SET and CLR operations; the
// pins and read-back values are compared after every access. Random input
// patterns must appear in DATA_IN after the two-stage synchroniser.
module tb_pdl_ahb_gpio;
  import pdl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  ahb_req_t req;
  ahb_rsp_t rsp;
  logic [15:0] gin, gout, goe, m_out, m_oe;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pdl_ahb_gpio #(.NIO(16)) dut (.clk, .rst_n, .hsel(1'b1), .req, .hready(rsp.hreadyout), .rsp,
    .gpio_in(gin), .gpio_out(gout), .gpio_oe(goe));

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
    logic [31:0] rd;
    req = '0; gin = '0; m_out = '0; m_oe = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 1000; k++) begin
      logic [15:0] d;
      d = 16'($urandom);
      case ($urandom_range(5))
        0: begin ahb(1, 32'h00, d, rd); m_out = d; end
        1: begin ahb(1, 32'h04, d, rd); m_oe = d; end
        2: begin ahb(1, 32'h0C, d, rd); m_out |= d; end
        3: begin ahb(1, 32'h10, d, rd); m_out &= ~d; end
        4: begin
          gin = d;
          repeat (2) @(posedge clk);
          ahb(0, 32'h08, 0, rd);
          chk("DATA_IN", rd, d);
        end
        default: begin
          ahb(0, 32'h00, 0, rd); chk("DATA_OUT read", rd, m_out);
          ahb(0, 32'h04, 0, rd); chk("OUT_EN read", rd, m_oe);
        end
      endcase
      @(negedge clk);
      chk("pins out", gout, m_out);
      chk("pins oe", goe, m_oe);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
