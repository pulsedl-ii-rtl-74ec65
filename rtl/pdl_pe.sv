// pdl_pe: processing element (PE), a self-contained miniature accelerator.
// A PE holds its own feature map (fmap), kernel, bias, partial-sum and result
// memories, the mapping mode coordinator, N_AU arithmetic units fed through
// two multicast controllers, the adder tree with multi-stage readout, the
// partial sum accumulator, and the final process (bias & activation, rescale
// & bit-shift, output multiplexer). Several PEs can run different layers at
// the same time (layer-wise pipelining).
//
// Host port: a word-wide memory-mapped port (we/addr/wdata, combinational
// rdata) on a 64 KiB window. Byte offsets:
//   0x0000 registers (see below)
//   0x1000 bias memory, one signed 32-bit word per output channel
//   0x2000 result memory, one word per output (8-bit result sign-extended,
//          or the 32-bit value when MODE.raw is set)
//   0x4000 fmap memory, word w holds lane l in byte l (channel c at lane
//          c mod N_AU, word (c div N_AU)*l_in + x)
//   0x8000 kernel memory: byte ((k*N_AU + a)*8 + j) is tap j of the kernel
//          chunk for AU a in pass k (taps stored reversed, zero padded)
// Registers (word offsets): 0x00 CTRL (w: bit0 start, bit1 irq enable),
// 0x04 STATUS (r: bit0 busy, bit1 done; w1c bit1), 0x08 TOKEN (w: token of
// the event to run, r: token of the last finished layer), 0x0C L_IN,
// 0x10 L_OUT, 0x14 OC, 0x18 NICG, 0x1C NKC, 0x20 GLOG, 0x24 STRIDE, 0x28 PAD,
// 0x2C ULOG, 0x30 MODE (bit0 relu, bit1 raw, bit2 loopback), 0x34 LOOP_BASE,
// 0x38 RQ_MULT, 0x3C RQ_SHIFT, 0x40 CYCLES (r: busy cycles of the last layer).
// The fmap memory is readable only while the PE is idle; kernel and bias
// memories are write-only. The event token is latched at start and handed
// back with the result, so software can trace events through a pipeline of
// PEs. `irq` is high while done and irq enable are both set.
// The PE contents follow the block diagram of the design; the host map,
// register set, token register and loopback path are this implementation's.
module pdl_pe
  import pdl_pkg::*;
#(
  parameter int N_AU   = 4,
  parameter int MULTS  = 6,
  parameter int FDEPTH = 256,
  parameter int KDEPTH = 256,
  parameter int PDEPTH = 256,
  parameter int BDEPTH = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        host_we,
  input  logic [15:0] host_addr,
  input  logic [31:0] host_wdata,
  output logic [31:0] host_rdata,
  output logic        irq,
  output logic        busy
);
  localparam int FAW  = $clog2(FDEPTH);
  localparam int KAW  = $clog2(KDEPTH);
  localparam int PAW  = $clog2(PDEPTH);
  localparam int BAW  = $clog2(BDEPTH);
  localparam int OW   = (N_AU > 1) ? $clog2(N_AU) : 1;
  localparam int GW   = $clog2(N_AU) + 1;
  localparam int SW   = ($clog2(N_AU) > 0) ? $clog2($clog2(N_AU) + 1) : 1;
  localparam int TAGW = PAW + 2;
  localparam int FTW  = PAW + FAW + OW;

  // ---------------- registers ----------------
  layer_cfg_t  cfg, cfg_q;
  logic        irq_en, done_flag, start, done;
  logic [31:0] token_next, token_done, cycles, cyc_cnt;

  wire [3:0]  region = host_addr[15:12];
  wire [5:0]  regidx = host_addr[7:2];
  wire        reg_we = host_we && (region == 4'h0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0; irq_en <= 1'b0; done_flag <= 1'b0; start <= 1'b0;
      token_next <= '0; token_done <= '0; cycles <= '0; cyc_cnt <= '0;
    end else begin
      start <= 1'b0;
      if (busy) cyc_cnt <= cyc_cnt + 32'd1;
      if (done) begin
        done_flag <= 1'b1; token_done <= token_next; cycles <= cyc_cnt;
      end
      if (reg_we) begin
        case (regidx)
          6'h00: begin start <= host_wdata[0] && !busy; irq_en <= host_wdata[1];
                   if (host_wdata[0] && !busy) cyc_cnt <= '0; end
          6'h01: if (host_wdata[1]) done_flag <= 1'b0;
          6'h02: token_next <= host_wdata;
          6'h03: cfg.l_in     <= host_wdata[15:0];
          6'h04: cfg.l_out    <= host_wdata[15:0];
          6'h05: cfg.oc       <= host_wdata[15:0];
          6'h06: cfg.nicg     <= host_wdata[15:0];
          6'h07: cfg.nkc      <= host_wdata[15:0];
          6'h08: cfg.glog     <= host_wdata[1:0];
          6'h09: cfg.stride   <= host_wdata[3:0];
          6'h0A: cfg.pad      <= host_wdata[7:0];
          6'h0B: cfg.ulog     <= host_wdata[1:0];
          6'h0C: {cfg.loopback, cfg.raw, cfg.relu} <= host_wdata[2:0];
          6'h0D: cfg.loop_base <= host_wdata[15:0];
          6'h0E: cfg.rq_mult  <= host_wdata[RQW-1:0];
          6'h0F: cfg.rq_shift <= host_wdata[5:0];
          default: ;
        endcase
      end
    end
  end

  assign irq = done_flag && irq_en;

  // ---------------- coordinator ----------------
  logic [FAW-1:0]  f_raddr, fin_lbaddr;
  logic            f_zero, au_shift, au_clr, k_load, k_swap, fin_valid;
  logic [OW-1:0]   f_off, fin_lane;
  logic [GW-1:0]   glog;
  logic [TAGW-1:0] au_tag;
  logic [KAW-1:0]  k_raddr;
  logic [PAW-1:0]  fin_paddr;
  logic [BAW-1:0]  fin_baddr;

  pdl_coordinator #(.N_AU(N_AU), .MULTS(MULTS), .FDEPTH(FDEPTH), .KDEPTH(KDEPTH),
                    .PDEPTH(PDEPTH), .BDEPTH(BDEPTH)) u_coord (
    .clk, .rst_n, .start, .cfg, .busy, .done, .cfg_q,
    .f_raddr, .f_zero, .f_off, .glog, .au_shift, .au_clr, .au_tag,
    .k_raddr, .k_load, .k_swap,
    .fin_valid, .fin_paddr, .fin_baddr, .fin_lbaddr, .fin_lane);

  // ---------------- fmap memory (N_AU byte banks) ----------------
  logic [7:0]     f_lane [N_AU];
  logic [7:0]     f_au   [N_AU];
  logic           lb_we;
  logic [FAW-1:0] lb_addr;
  logic [OW-1:0]  lb_lane;
  logic signed [DW-1:0] lb_data;
  wire            fmap_host_we = host_we && (host_addr[15:14] == 2'b01);

  for (genvar l = 0; l < N_AU; l++) begin : g_fmem
    logic           we;
    logic [FAW-1:0] wa, ra;
    logic [7:0]     wd;
    always_comb begin
      if (busy) begin
        we = lb_we && (lb_lane == OW'(l)); wa = lb_addr; wd = lb_data;
      end else begin
        we = fmap_host_we && (l < 4); wa = FAW'(host_addr[13:2]); wd = host_wdata[8*(l%4) +: 8];
      end
      ra = busy ? f_raddr : FAW'(host_addr[13:2]);
    end
    pdl_ram #(.W(8), .DEPTH(FDEPTH)) u_ram (.clk, .we, .waddr(wa), .wdata(wd),
                                            .raddr(ra), .rdata(f_lane[l]));
  end

  pdl_mcast_ctrl #(.N(N_AU), .W(8)) u_fmc (.lanes(f_lane), .offset(f_off), .glog,
                                           .bcast_idle(1'b1), .out(f_au));

  // ---------------- kernel memory (N_AU x MULTS byte banks) ----------------
  logic [8*MULTS-1:0] k_lane [N_AU];
  logic [8*MULTS-1:0] k_au   [N_AU];
  wire  kmem_host_we = host_we && host_addr[15];
  wire [KAW-1:0] k_waddr = KAW'(host_addr[14:3] >> OW);
  wire [OW-1:0]  k_wbank = OW'(host_addr[14:3]);

  for (genvar a = 0; a < N_AU; a++) begin : g_kbank
    for (genvar j = 0; j < MULTS; j++) begin : g_tap
      logic we;
      assign we = kmem_host_we && (k_wbank == OW'(a)) && (host_addr[2] == 1'(j / 4));
      pdl_ram #(.W(8), .DEPTH(KDEPTH)) u_ram (.clk, .we, .waddr(k_waddr),
        .wdata(host_wdata[8*(j%4) +: 8]), .raddr(k_raddr), .rdata(k_lane[a][8*j +: 8]));
    end
  end

  pdl_mcast_ctrl #(.N(N_AU), .W(8*MULTS)) u_kmc (.lanes(k_lane), .offset('0), .glog,
                                                 .bcast_idle(1'b0), .out(k_au));

  // ---------------- arithmetic units ----------------
  logic signed [ACCW-1:0] au_out [N_AU];
  logic                   au_v   [N_AU];
  logic [TAGW-1:0]        au_t   [N_AU];

  for (genvar a = 0; a < N_AU; a++) begin : g_au
    logic signed [DW-1:0] kin [MULTS];
    always_comb for (int j = 0; j < MULTS; j++) kin[j] = k_au[a][8*j +: 8];
    pdl_au #(.MULTS(MULTS), .TAGW(TAGW)) u_au (
      .clk, .rst_n, .shift_en(au_shift), .shift_clr(au_clr),
      .fmap_in(f_zero ? '0 : f_au[a]), .tag_in(au_tag),
      .k_load, .k_in(kin), .k_swap,
      .out(au_out[a]), .out_valid(au_v[a]), .out_tag(au_t[a]));
  end

  // ---------------- adder tree and accumulator ----------------
  logic signed [ACCW-1:0] at_out, ps_rd;
  logic                   at_v;
  logic [TAGW-1:0]        at_t;

  pdl_adder_tree #(.N_AU(N_AU), .TAGW(TAGW)) u_at (
    .clk, .rst_n, .in(au_out), .in_valid(au_v[0]), .in_tag(au_t[0]),
    .rd_stage(SW'(glog)), .rd_node('0), .out(at_out), .out_valid(at_v), .out_tag(at_t));

  pdl_psum_acc #(.DEPTH(PDEPTH)) u_psum (
    .clk, .in_valid(at_v && at_t[TAGW-1]), .in_first(at_t[TAGW-2]),
    .in_addr(at_t[PAW-1:0]), .in_data(at_out), .rd_addr(fin_paddr), .rd_data(ps_rd));

  // ---------------- final process ----------------
  logic [31:0]            bias_rd;
  logic                   ba_v, rq_v;
  logic [FTW-1:0]         ba_t, rq_t;
  logic signed [ACCW-1:0] ba_d, rq_raw;
  logic signed [DW-1:0]   rq_q;
  wire bias_host_we = host_we && (region == 4'h1);

  pdl_ram #(.W(32), .DEPTH(BDEPTH)) u_bias (.clk, .we(bias_host_we),
    .waddr(BAW'(host_addr[11:2])), .wdata(host_wdata), .raddr(fin_baddr), .rdata(bias_rd));

  pdl_bias_act #(.TAGW(FTW)) u_ba (.clk, .rst_n, .in_valid(fin_valid),
    .in_tag({fin_paddr, fin_lbaddr, fin_lane}), .in_data(ps_rd), .bias(bias_rd),
    .relu(cfg_q.relu), .out_valid(ba_v), .out_tag(ba_t), .out_data(ba_d));

  pdl_rescale #(.TAGW(FTW)) u_rq (.clk, .rst_n, .in_valid(ba_v), .in_tag(ba_t), .in_data(ba_d),
    .mult(cfg_q.rq_mult), .shift(cfg_q.rq_shift), .out_valid(rq_v), .out_tag(rq_t),
    .out_q(rq_q), .out_raw(rq_raw));

  // output multiplexer: rescaled 8-bit value or bypass of the rescale
  logic [31:0]    res_wd, res_rd;
  logic [PAW-1:0] res_wa;
  assign res_wd  = cfg_q.raw ? rq_raw : 32'(rq_q);
  assign res_wa  = rq_t[FTW-1 -: PAW];
  assign lb_we   = rq_v && cfg_q.loopback;
  assign lb_addr = rq_t[OW +: FAW];
  assign lb_lane = rq_t[OW-1:0];
  assign lb_data = rq_q;

  pdl_ram #(.W(32), .DEPTH(PDEPTH)) u_res (.clk, .we(rq_v), .waddr(res_wa),
    .wdata(res_wd), .raddr(PAW'(host_addr[11:2])), .rdata(res_rd));

  // ---------------- host read ----------------
  logic [31:0] reg_rd, fmap_rd;
  always_comb begin
    fmap_rd = '0;
    for (int l = 0; l < N_AU && l < 4; l++) fmap_rd[8*l +: 8] = f_lane[l];
    case (regidx)
      6'h00: reg_rd = {30'b0, irq_en, 1'b0};
      6'h01: reg_rd = {30'b0, done_flag, busy};
      6'h02: reg_rd = token_done;
      6'h03: reg_rd = 32'(cfg.l_in);
      6'h04: reg_rd = 32'(cfg.l_out);
      6'h05: reg_rd = 32'(cfg.oc);
      6'h06: reg_rd = 32'(cfg.nicg);
      6'h07: reg_rd = 32'(cfg.nkc);
      6'h08: reg_rd = 32'(cfg.glog);
      6'h09: reg_rd = 32'(cfg.stride);
      6'h0A: reg_rd = 32'(cfg.pad);
      6'h0B: reg_rd = 32'(cfg.ulog);
      6'h0C: reg_rd = {29'b0, cfg.loopback, cfg.raw, cfg.relu};
      6'h0D: reg_rd = 32'(cfg.loop_base);
      6'h0E: reg_rd = 32'(cfg.rq_mult);
      6'h0F: reg_rd = 32'(cfg.rq_shift);
      6'h10: reg_rd = cycles;
      default: reg_rd = '0;
    endcase
    case (region)
      4'h0:          host_rdata = reg_rd;
      4'h2:          host_rdata = res_rd;
      4'h4, 4'h5, 4'h6, 4'h7: host_rdata = busy ? '0 : fmap_rd;
      default:       host_rdata = '0;
    endcase
  end

  initial assert (N_AU <= 4 && MULTS <= 8) else $error("host packing needs N_AU <= 4 and MULTS <= 8");
endmodule
