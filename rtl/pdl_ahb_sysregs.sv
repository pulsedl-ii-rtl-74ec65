// pdl_ahb_sysregs: system registers on the processor AHB bus.
// Registers (word offsets): 0x0 ID (r: constant ID), 0x4 SCRATCH (r/w),
// 0x8 CTRL (r/w, driven on `sys_ctrl`, e.g. board-level enables), 0xC
// CYCLE (r: free-running cycle counter for time stamps and performance
// measurement). The block is named in the SoC diagram; its contents are this
// implementation's choice.
module pdl_ahb_sysregs
  import pdl_pkg::*;
#(
  parameter logic [31:0] ID = 32'h5044_4C32   // "PDL2"
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hsel,
  input  ahb_req_t    req,
  input  logic        hready,
  output ahb_rsp_t    rsp,
  output logic [31:0] sys_ctrl
);
  logic        v, w;
  logic [31:0] addr, wd, rdata, scratch, cycle;

  pdl_ahb_slv_port u_port (.clk, .rst_n, .hsel, .req, .hready, .rsp,
    .acc_valid(v), .acc_write(w), .acc_addr(addr), .acc_wdata(wd), .rdata);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scratch <= '0; sys_ctrl <= '0; cycle <= '0;
    end else begin
      cycle <= cycle + 32'd1;
      if (v && w) case (addr[3:2])
        2'd1: scratch  <= wd;
        2'd2: sys_ctrl <= wd;
        default: ;
      endcase
    end
  end

  always_comb
    case (addr[3:2])
      2'd0:    rdata = ID;
      2'd1:    rdata = scratch;
      2'd2:    rdata = sys_ctrl;
      default: rdata = cycle;
    endcase
endmodule
