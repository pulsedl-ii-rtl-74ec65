// pdl_nn_accel: the neural network (NN) level of the accelerator, the
// "NN Pulse Processor" peripheral on the processor AHB bus.
// N_PE processing elements sit behind one AHB-Lite slave port. Address bits
// [19:16] select the PE (0 .. N_PE-1) and bits [15:0] the offset inside its
// 64 KiB window (see pdl_pe); PE index 15 is a global register page:
//   0xF0000 IRQ  (r: one bit per PE whose interrupt is pending)
//   0xF0004 BUSY (r: one bit per busy PE)
//   0xF0008 INFO (r: N_PE in [7:0], N_AU in [15:8], MULTS in [23:16])
// `irq` is the OR of the PE interrupts and goes to the processor: the
// accelerator raises it when a layer has finished. Zero-wait-state access.
// The PE count (15) and AUs per PE (4) are the design's numbers; the address
// map and the global page are this implementation's choices.
module pdl_nn_accel
  import pdl_pkg::*;
#(
  parameter int N_PE   = 15,
  parameter int N_AU   = 4,
  parameter int MULTS  = 6,
  parameter int FDEPTH = 256,
  parameter int KDEPTH = 256,
  parameter int PDEPTH = 256,
  parameter int BDEPTH = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     hsel,
  input  ahb_req_t req,
  input  logic     hready,
  output ahb_rsp_t rsp,
  output logic     irq
);
  logic        acc_valid, acc_write;
  logic [31:0] acc_addr, acc_wdata, rdata;
  logic [31:0] pe_rd [N_PE];
  logic [N_PE-1:0] pe_irq, pe_busy;

  pdl_ahb_slv_port u_port (.clk, .rst_n, .hsel, .req, .hready, .rsp,
    .acc_valid, .acc_write, .acc_addr, .acc_wdata, .rdata);

  wire [3:0] pe_sel = acc_addr[19:16];

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    pdl_pe #(.N_AU(N_AU), .MULTS(MULTS), .FDEPTH(FDEPTH), .KDEPTH(KDEPTH),
             .PDEPTH(PDEPTH), .BDEPTH(BDEPTH)) u_pe (
      .clk, .rst_n,
      .host_we(acc_valid && acc_write && (pe_sel == 4'(p))),
      .host_addr(acc_addr[15:0]), .host_wdata(acc_wdata),
      .host_rdata(pe_rd[p]), .irq(pe_irq[p]), .busy(pe_busy[p]));
  end

  always_comb begin
    rdata = '0;
    if (pe_sel == 4'hF) begin
      case (acc_addr[3:2])
        2'd0: rdata = 32'(pe_irq);
        2'd1: rdata = 32'(pe_busy);
        2'd2: rdata = {8'b0, 8'(MULTS), 8'(N_AU), 8'(N_PE)};
        default: rdata = '0;
      endcase
    end else begin
      for (int p = 0; p < N_PE; p++) if (pe_sel == 4'(p)) rdata = pe_rd[p];
    end
  end

  assign irq = |pe_irq;

  initial assert (N_PE <= 15) else $error("at most 15 PEs fit the address map");
endmodule
