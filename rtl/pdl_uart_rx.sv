// pdl_uart_rx: UART receiver, 8N1, LSB first, `div` clock cycles per bit.
// The input is synchronised with two flip-flops; a falling edge starts a
// frame, each bit is sampled in the middle of its bit time, and `valid`
// pulses for one cycle with the byte after the stop bit has been sampled.
// A low stop bit drops the byte.
module pdl_uart_rx (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] div,
  input  logic        rxd,
  output logic        valid,
  output logic [7:0]  data
);
  logic [1:0]  sync;
  logic [3:0]  bits;
  logic [15:0] cnt;
  logic [8:0]  sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync <= 2'b11; bits <= '0; cnt <= '0; sh <= '0; valid <= 1'b0; data <= '0;
    end else begin
      sync  <= {sync[0], rxd};
      valid <= 1'b0;
      if (bits == 0) begin
        if (!sync[1]) begin bits <= 4'd10; cnt <= div >> 1; end
      end else if (cnt == div - 16'd1) begin
        cnt <= '0;
        bits <= bits - 4'd1;
        if (bits == 4'd10) begin
          if (sync[1]) bits <= '0;                  // false start
        end else if (bits == 4'd1) begin
          if (sync[1]) begin valid <= 1'b1; data <= sh[8:1]; end
        end else begin
          sh <= {sync[1], sh[8:1]};
        end
      end else begin
        cnt <= cnt + 16'd1;
      end
    end
  end
endmodule
