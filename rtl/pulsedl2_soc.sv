// pulsedl2_soc: top level of the PulseDL-II system-on-chip.
// Three parts share the chip: the NN Pulse Processor (the neural network
// accelerator, pdl_nn_accel), the microcontroller subsystem around a
// Cortex-M0 class processor, and the dual-port AHB RAM (double-port buffer,
// program memory and system RAM). The processor is not part of this RTL: its
// AHB-Lite master port (cpu_req/cpu_rsp) and interrupt lines are ports of
// the top, as is the AHB master port of the JTAG debug access (jtag_req/
// jtag_rsp), which also comes with the processor.
//
// Processor AHB bus (single master, zero wait state except the APB bridge):
//   0x0000_0000 program memory      (port A of a dual-port RAM)
//   0x2000_0000 system RAM          (port A)
//   0x2100_0000 double-port buffer  (port A; ADC waveform samples)
//   0x4000_0000 APB: +0x0000 timer, +0x1000 watchdog, +0x2000 UART2 (debug),
//               +0x3000 UART3 (buffered, feature output)
//   0x4001_0000 GPIO high-speed
//   0x4002_0000 system registers
//   0x5000_0000 neural network accelerator (1 MiB, see pdl_nn_accel)
// Auxiliary AHB bus (masters: Quad-SPI, JTAG, UART programming, in this
// priority order) reaches port B of the three RAMs at the same addresses.
//
// Data flow: ADC samples arrive over Quad-SPI into the double-port buffer;
// software on the processor relays them to the accelerator, waits for its
// interrupt (cpu_irq[0]), moves feature maps between PEs and system RAM
// until the last layer, and sends the features out through UART3.
// cpu_irq: [0] accelerator, [1] timer, [2] UART2 receive, [3] UART3 receive.
// The partition and the peripheral set follow the SoC diagram of the design;
// the address map, memory sizes and priorities are this implementation's.
module pulsedl2_soc
  import pdl_pkg::*;
#(
  parameter int PROG_WORDS  = 16384,   // 64 KiB
  parameter int SRAM_WORDS  = 16384,   // 64 KiB
  parameter int DPBUF_WORDS = 4096,    // 16 KiB
  parameter int N_PE        = 15,
  parameter int N_AU        = 4,
  parameter int MULTS       = 6,
  parameter int UART_DIV    = 868,
  parameter int UART3_FIFO  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // processor (Cortex-M0) AHB-Lite master port and interrupts
  input  ahb_req_t    cpu_req,
  output ahb_rsp_t    cpu_rsp,
  output logic [3:0]  cpu_irq,
  output logic        wdog_reset,
  // JTAG debug AHB master port
  input  ahb_req_t    jtag_req,
  output ahb_rsp_t    jtag_rsp,
  // ADC waveform samples input
  input  logic        qspi_cs_n,
  input  logic        qspi_sclk,
  input  logic [3:0]  qspi_io,
  output logic        qspi_overflow,
  // alternative programming
  input  logic        prog_rxd,
  output logic        prog_txd,
  // status
  input  logic [15:0] gpio_in,
  output logic [15:0] gpio_out,
  output logic [15:0] gpio_oe,
  output logic [31:0] sys_ctrl,
  // debug information and feature output
  input  logic        uart2_rxd,
  output logic        uart2_txd,
  input  logic        uart3_rxd,
  output logic        uart3_txd
);
  localparam int NS = 7;
  localparam logic [NS-1:0][31:0] P_BASE = {32'h5000_0000, 32'h4002_0000, 32'h4001_0000,
                                            32'h4000_0000, 32'h2100_0000, 32'h2000_0000, 32'h0000_0000};
  localparam logic [NS-1:0][31:0] P_MASK = {32'hFFF0_0000, 32'hFFFF_0000, 32'hFFFF_0000,
                                            32'hFFFF_0000, 32'hFF00_0000, 32'hFF00_0000, 32'hFF00_0000};

  // ---------------- processor AHB bus ----------------
  logic          p_hready;
  logic [NS-1:0] p_hsel;
  ahb_rsp_t      p_rsp [NS];

  pdl_ahb_mux #(.NS(NS), .BASE(P_BASE), .MASK(P_MASK)) u_pbus (
    .clk, .rst_n, .m_req(cpu_req), .m_rsp(cpu_rsp), .hready(p_hready), .s_hsel(p_hsel), .s_rsp(p_rsp));

  // ---------------- auxiliary AHB bus ----------------
  ahb_req_t   a_mreq [3];
  ahb_rsp_t   a_mrsp [3];
  ahb_req_t   a_sreq;
  ahb_rsp_t   a_srsp [3];
  logic [2:0] a_hsel;
  logic       a_hready, qspi_busy;

  pdl_qspi_ahb_master u_qspi (.clk, .rst_n, .qspi_cs_n, .qspi_sclk, .qspi_io,
    .req(a_mreq[0]), .rsp(a_mrsp[0]), .busy(qspi_busy), .overflow(qspi_overflow));
  assign a_mreq[1] = jtag_req;
  assign jtag_rsp  = a_mrsp[1];
  pdl_uart_ahb_master #(.DIV(UART_DIV)) u_uprog (.clk, .rst_n, .rxd(prog_rxd), .txd(prog_txd),
    .req(a_mreq[2]), .rsp(a_mrsp[2]));

  pdl_aux_bus #(.NM(3), .NS(3)) u_abus (.clk, .rst_n, .m_req(a_mreq), .m_rsp(a_mrsp),
    .hready(a_hready), .s_req(a_sreq), .s_hsel(a_hsel), .s_rsp(a_srsp));

  // ---------------- dual-port AHB RAM ----------------
  pdl_ahb_dpram #(.DEPTH(PROG_WORDS)) u_prog (.clk, .rst_n,
    .a_hsel(p_hsel[0]), .a_req(cpu_req), .a_hready(p_hready), .a_rsp(p_rsp[0]),
    .b_hsel(a_hsel[0]), .b_req(a_sreq), .b_hready(a_hready), .b_rsp(a_srsp[0]));
  pdl_ahb_dpram #(.DEPTH(SRAM_WORDS)) u_sram (.clk, .rst_n,
    .a_hsel(p_hsel[1]), .a_req(cpu_req), .a_hready(p_hready), .a_rsp(p_rsp[1]),
    .b_hsel(a_hsel[1]), .b_req(a_sreq), .b_hready(a_hready), .b_rsp(a_srsp[1]));
  pdl_ahb_dpram #(.DEPTH(DPBUF_WORDS)) u_dpbuf (.clk, .rst_n,
    .a_hsel(p_hsel[2]), .a_req(cpu_req), .a_hready(p_hready), .a_rsp(p_rsp[2]),
    .b_hsel(a_hsel[2]), .b_req(a_sreq), .b_hready(a_hready), .b_rsp(a_srsp[2]));

  // ---------------- APB peripherals ----------------
  apb_req_t   apb;
  logic [3:0] psel;
  apb_rsp_t   prsp [4];
  logic       nn_irq, tim_irq, u2_irq, u3_irq;

  pdl_ahb_apb_bridge #(.NS(4)) u_bridge (.clk, .rst_n, .hsel(p_hsel[3]), .req(cpu_req),
    .hready(p_hready), .rsp(p_rsp[3]), .apb, .psel, .prsp);
  pdl_apb_timer    u_timer (.clk, .rst_n, .psel(psel[0]), .apb, .rsp(prsp[0]), .irq(tim_irq));
  pdl_apb_watchdog u_wdog  (.clk, .rst_n, .psel(psel[1]), .apb, .rsp(prsp[1]), .wdog_reset);
  pdl_apb_uart #(.TXFIFO(1), .DIV0(UART_DIV)) u_uart2 (.clk, .rst_n, .psel(psel[2]), .apb,
    .rsp(prsp[2]), .txd(uart2_txd), .rxd(uart2_rxd), .irq(u2_irq));
  pdl_apb_uart #(.TXFIFO(UART3_FIFO), .DIV0(UART_DIV)) u_uart3 (.clk, .rst_n, .psel(psel[3]), .apb,
    .rsp(prsp[3]), .txd(uart3_txd), .rxd(uart3_rxd), .irq(u3_irq));

  // ---------------- AHB peripherals ----------------
  pdl_ahb_gpio #(.NIO(16)) u_gpio (.clk, .rst_n, .hsel(p_hsel[4]), .req(cpu_req), .hready(p_hready),
    .rsp(p_rsp[4]), .gpio_in, .gpio_out, .gpio_oe);
  pdl_ahb_sysregs u_sysregs (.clk, .rst_n, .hsel(p_hsel[5]), .req(cpu_req), .hready(p_hready),
    .rsp(p_rsp[5]), .sys_ctrl);

  // ---------------- NN Pulse Processor ----------------
  pdl_nn_accel #(.N_PE(N_PE), .N_AU(N_AU), .MULTS(MULTS)) u_nn (.clk, .rst_n, .hsel(p_hsel[6]),
    .req(cpu_req), .hready(p_hready), .rsp(p_rsp[6]), .irq(nn_irq));

  assign cpu_irq = {u3_irq, u2_irq, tim_irq, nn_irq};
endmodule
