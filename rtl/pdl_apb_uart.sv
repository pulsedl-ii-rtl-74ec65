// pdl_apb_uart: APB UART. UART2 (debug information) and UART3 (buffered,
// sends the physical feature outputs) are instances of this module; UART3
// has a transmit FIFO of TXFIFO bytes, UART2 uses TXFIFO = 1.
// Registers (word offsets): 0x0 DATA (w: push a byte into the transmit FIFO,
// dropped when full; r: last received byte, clears RX valid), 0x4 STATUS
// (r: bit0 TX FIFO full, bit1 TX idle, bit2 RX valid, bit3 RX overrun),
// 0x8 BAUDDIV (clock cycles per bit). APB accesses complete without wait
// states. 8N1 framing. The UARTs and the buffering of UART3 follow the SoC
// diagram; the register map and framing are this implementation's choices.
module pdl_apb_uart
  import pdl_pkg::*;
#(
  parameter int TXFIFO = 16,
  parameter int DIV0   = 868        // 100 MHz / 115200 baud
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     psel,
  input  apb_req_t apb,
  output apb_rsp_t rsp,
  output logic     txd,
  input  logic     rxd,
  output logic     irq
);
  localparam int FW = (TXFIFO > 1) ? $clog2(TXFIFO) : 1;
  logic [7:0]  fifo [TXFIFO];
  logic [FW-1:0] rp, wp;
  logic [FW:0] cnt;
  logic [15:0] div;
  logic [7:0]  rx_byte, rx_data;
  logic        rx_v, rx_valid, rx_ovr, tx_ready, pop;
  wire wr = psel && apb.penable && apb.pwrite;
  wire rd = psel && apb.penable && !apb.pwrite;
  wire push = wr && apb.paddr[3:2] == 2'd0 && 32'(cnt) < TXFIFO;

  assign pop = (cnt != 0) && tx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0; div <= 16'(DIV0);
      rx_data <= '0; rx_valid <= 1'b0; rx_ovr <= 1'b0;
    end else begin
      if (push) begin
        fifo[wp] <= apb.pwdata[7:0];
        wp <= (32'(wp) == TXFIFO - 1) ? '0 : wp + FW'(1);
      end
      if (pop) rp <= (32'(rp) == TXFIFO - 1) ? '0 : rp + FW'(1);
      cnt <= cnt + (FW+1)'(push) - (FW+1)'(pop);
      if (wr && apb.paddr[3:2] == 2'd2) div <= apb.pwdata[15:0];
      if (rd && apb.paddr[3:2] == 2'd0) rx_valid <= 1'b0;
      if (rx_v) begin
        rx_data <= rx_byte; rx_valid <= 1'b1;
        if (rx_valid && !(rd && apb.paddr[3:2] == 2'd0)) rx_ovr <= 1'b1;
      end
    end
  end

  pdl_uart_tx u_tx (.clk, .rst_n, .div, .valid(cnt != 0), .data(fifo[rp]), .ready(tx_ready), .txd);
  pdl_uart_rx u_rx (.clk, .rst_n, .div, .rxd, .valid(rx_v), .data(rx_byte));

  always_comb begin
    rsp = '{prdata: 32'h0, pready: 1'b1, pslverr: 1'b0};
    case (apb.paddr[3:2])
      2'd0: rsp.prdata = {24'b0, rx_data};
      2'd1: rsp.prdata = {28'b0, rx_ovr, rx_valid, (cnt == 0) && tx_ready, 32'(cnt) == TXFIFO};
      2'd2: rsp.prdata = {16'b0, div};
      default: ;
    endcase
  end

  assign irq = rx_valid;
endmodule
