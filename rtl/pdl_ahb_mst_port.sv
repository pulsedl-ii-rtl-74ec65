// pdl_ahb_mst_port: single-transfer AHB-Lite master engine shared by the
// serial AHB masters. A command (cmd_valid with write flag, address and
// write data) is accepted when cmd_ready is high; the engine drives one
// NONSEQ 32-bit address phase, waits for HREADY in the data phase, then
// pulses `done` with the read data. One transfer at a time; HTRANS is IDLE
// otherwise. A transfer takes at least two cycles.
module pdl_ahb_mst_port
  import pdl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  logic        cmd_write,
  input  logic [31:0] cmd_addr,
  input  logic [31:0] cmd_wdata,
  output logic        cmd_ready,
  output logic        done,
  output logic [31:0] rdata,
  output ahb_req_t    req,
  input  ahb_rsp_t    rsp
);
  typedef enum logic [1:0] {M_IDLE, M_ADDR, M_DATA} mstate_e;
  mstate_e     st;
  logic        wr;
  logic [31:0] addr, wdata;

  assign cmd_ready = (st == M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; wr <= 1'b0; addr <= '0; wdata <= '0; done <= 1'b0; rdata <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        M_IDLE: if (cmd_valid) begin
          st <= M_ADDR; wr <= cmd_write; addr <= cmd_addr; wdata <= cmd_wdata;
        end
        M_ADDR: if (rsp.hreadyout) st <= M_DATA;
        M_DATA: if (rsp.hreadyout) begin st <= M_IDLE; done <= 1'b1; rdata <= rsp.hrdata; end
        default: st <= M_IDLE;
      endcase
    end
  end

  always_comb begin
    req.haddr  = addr;
    req.htrans = (st == M_ADDR) ? HT_NONSEQ : HT_IDLE;
    req.hwrite = wr;
    req.hsize  = 3'b010;
    req.hwdata = wdata;
  end
endmodule
