// pdl_qspi_ahb_master: Quad-SPI slave link that writes into on-chip memory
// as an AHB master; the path by which ADC waveform samples reach the
// double-port buffer. The external device drives chip select (active low),
// a clock and 4 data lines; all three are synchronised to the system clock
// and data is sampled on rising edges of the SPI clock, so the SPI clock
// must be at most 1/4 of the system clock. A frame sends, MSB nibble first,
// a 32-bit start address (8 nibbles) followed by any number of 32-bit data
// words; each word is written to the next word address. Words wait in a
// FIFO of FIFO_D entries for the auxiliary bus; `overflow` is set (until
// reset) if a word arrives when the FIFO is full, `busy` is high while a
// frame is open or words are pending.
// The block and its role follow the SoC description; the frame format is
// this implementation's choice (the paper does not give one).
module pdl_qspi_ahb_master
  import pdl_pkg::*;
#(
  parameter int FIFO_D = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       qspi_cs_n,
  input  logic       qspi_sclk,
  input  logic [3:0] qspi_io,
  output ahb_req_t   req,
  input  ahb_rsp_t   rsp,
  output logic       busy,
  output logic       overflow
);
  localparam int FW = (FIFO_D > 1) ? $clog2(FIFO_D) : 1;
  logic [2:0]  cs_s, ck_s;
  logic [3:0]  io_s0, io_s1;
  logic [31:0] sh, addr;
  logic [2:0]  nib;
  logic        have_addr;
  logic [63:0] fifo [FIFO_D];   // {address, data}
  logic [FW-1:0] rp, wp;
  logic [FW:0] cnt;
  logic        push, pop, cmd_ready, done;
  logic [31:0] unused_rd;

  wire rise   = ck_s[1] && !ck_s[2];
  wire active = !cs_s[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_s <= '1; ck_s <= '0; io_s0 <= '0; io_s1 <= '0;
      sh <= '0; addr <= '0; nib <= '0; have_addr <= 1'b0;
      rp <= '0; wp <= '0; cnt <= '0; overflow <= 1'b0;
    end else begin
      cs_s <= {cs_s[1:0], qspi_cs_n};
      ck_s <= {ck_s[1:0], qspi_sclk};
      io_s0 <= qspi_io; io_s1 <= io_s0;
      if (!active) begin
        nib <= '0; have_addr <= 1'b0;
      end else if (rise) begin
        sh  <= {sh[27:0], io_s1};
        nib <= nib + 3'd1;
        if (nib == 3'd7) begin
          if (!have_addr) begin addr <= {sh[27:0], io_s1}; have_addr <= 1'b1; end
          else addr <= addr + 32'd4;
        end
      end
      if (push) begin
        if (32'(cnt) < FIFO_D) begin
          fifo[wp] <= {addr, sh[27:0], io_s1};
          wp <= (32'(wp) == FIFO_D - 1) ? '0 : wp + FW'(1);
        end else begin
          overflow <= 1'b1;
        end
      end
      if (pop) rp <= (32'(rp) == FIFO_D - 1) ? '0 : rp + FW'(1);
      cnt <= cnt + (FW+1)'(push && 32'(cnt) < FIFO_D) - (FW+1)'(pop);
    end
  end

  assign push = active && rise && nib == 3'd7 && have_addr;
  assign pop  = (cnt != 0) && cmd_ready;
  assign busy = active || (cnt != 0) || !cmd_ready;

  pdl_ahb_mst_port u_mst (.clk, .rst_n, .cmd_valid(cnt != 0), .cmd_write(1'b1),
    .cmd_addr(fifo[rp][63:32]), .cmd_wdata(fifo[rp][31:0]), .cmd_ready, .done,
    .rdata(unused_rd), .req, .rsp);
endmodule
