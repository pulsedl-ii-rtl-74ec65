// pdl_uart_tx: UART transmitter, 8 data bits, no parity, one stop bit,
// LSB first. `div` is the number of clock cycles per bit (>= 1). A byte is
// accepted when valid and ready are both high; ready is high while idle.
// A frame lasts 10*div cycles; `txd` idles high.
module pdl_uart_tx (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] div,
  input  logic        valid,
  input  logic [7:0]  data,
  output logic        ready,
  output logic        txd
);
  logic [9:0]  sh;
  logic [3:0]  bits;
  logic [15:0] cnt;

  assign ready = (bits == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh <= '1; bits <= '0; cnt <= '0; txd <= 1'b1;
    end else if (bits == 0) begin
      txd <= 1'b1;
      if (valid) begin
        sh <= {1'b1, data, 1'b0}; bits <= 4'd10; cnt <= '0;
      end
    end else begin
      txd <= sh[0];
      if (cnt == div - 16'd1) begin
        cnt <= '0; sh <= {1'b1, sh[9:1]}; bits <= bits - 4'd1;
      end else begin
        cnt <= cnt + 16'd1;
      end
    end
  end
endmodule
