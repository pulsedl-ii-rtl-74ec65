// pdl_uart_ahb_master: serial-line AHB master for alternative programming of
// the memories (UART side of the UART/SPI AHB master). Commands, 8N1 at
// `div` cycles per bit, multi-byte fields most significant byte first:
//   'W' (0x57), address[4], data[4]  -> one 32-bit write, answered with 'K'
//   'R' (0x52), address[4]           -> one 32-bit read, answered with data[4]
// Unknown command bytes are ignored.
// The block is named in the SoC diagram; the command protocol is this
// implementation's choice, and the SPI alternative is not built.
module pdl_uart_ahb_master
  import pdl_pkg::*;
#(
  parameter int DIV = 868
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     rxd,
  output logic     txd,
  output ahb_req_t req,
  input  ahb_rsp_t rsp
);
  typedef enum logic [2:0] {U_CMD, U_ADDR, U_DATA, U_BUS, U_REPLY} ustate_e;
  ustate_e     st;
  logic        is_wr, rx_v, tx_v, tx_ready, cmd_ready, done;
  logic [7:0]  rx_b, tx_b;
  logic [31:0] addr, data, rdata;
  logic [2:0]  cnt;

  pdl_uart_rx u_rx (.clk, .rst_n, .div(16'(DIV)), .rxd, .valid(rx_v), .data(rx_b));
  pdl_uart_tx u_tx (.clk, .rst_n, .div(16'(DIV)), .valid(tx_v), .data(tx_b), .ready(tx_ready), .txd);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= U_CMD; is_wr <= 1'b0; addr <= '0; data <= '0; cnt <= '0;
    end else begin
      case (st)
        U_CMD: if (rx_v && (rx_b == 8'h57 || rx_b == 8'h52)) begin
          is_wr <= (rx_b == 8'h57); st <= U_ADDR; cnt <= '0;
        end
        U_ADDR: if (rx_v) begin
          addr <= {addr[23:0], rx_b}; cnt <= cnt + 3'd1;
          if (cnt == 3'd3) begin cnt <= '0; st <= is_wr ? U_DATA : U_BUS; end
        end
        U_DATA: if (rx_v) begin
          data <= {data[23:0], rx_b}; cnt <= cnt + 3'd1;
          if (cnt == 3'd3) begin cnt <= '0; st <= U_BUS; end
        end
        U_BUS: if (done) begin
          data <= rdata; st <= U_REPLY; cnt <= '0;
        end
        U_REPLY: if (tx_v && tx_ready) begin
          if (is_wr || cnt == 3'd3) st <= U_CMD;
          data <= {data[23:0], 8'h00}; cnt <= cnt + 3'd1;
        end
        default: st <= U_CMD;
      endcase
    end
  end

  assign tx_v = (st == U_REPLY);
  assign tx_b = is_wr ? 8'h4B : data[31:24];

  pdl_ahb_mst_port u_mst (.clk, .rst_n, .cmd_valid(st == U_BUS && cmd_ready && !done),
    .cmd_write(is_wr), .cmd_addr(addr), .cmd_wdata(data), .cmd_ready, .done, .rdata, .req, .rsp);
endmodule
