// pdl_ahb_slv_port: AHB-Lite slave front end shared by the memory-mapped
// slaves of the SoC. It registers the address phase of a transfer (HSEL,
// HTRANS NONSEQ/SEQ, HREADY high) and presents it during the data phase as a
// simple access: acc_valid, acc_write, acc_addr, with the write data taken
// from HWDATA. The slave answers in the same cycle with rdata, so transfers
// have zero wait states and an OKAY response. Only 32-bit transfers are
// supported; an assertion flags any other HSIZE.
module pdl_ahb_slv_port
  import pdl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hsel,
  input  ahb_req_t    req,
  input  logic        hready,
  output ahb_rsp_t    rsp,
  output logic        acc_valid,
  output logic        acc_write,
  output logic [31:0] acc_addr,
  output logic [31:0] acc_wdata,
  input  logic [31:0] rdata
);
  wire addr_phase = hsel && req.htrans[1] && hready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_valid <= 1'b0; acc_write <= 1'b0; acc_addr <= '0;
    end else if (hready) begin
      acc_valid <= addr_phase;
      acc_write <= req.hwrite;
      acc_addr  <= req.haddr;
    end
  end

  assign acc_wdata = req.hwdata;
  assign rsp = '{hrdata: rdata, hreadyout: 1'b1, hresp: 1'b0};

  a_word_only: assert property (@(posedge clk) disable iff (!rst_n)
    addr_phase |-> req.hsize == 3'b010)
    else $error("only 32-bit AHB transfers are supported");
endmodule
