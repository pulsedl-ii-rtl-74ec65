// pdl_coordinator: mapping mode coordinator of a PE, the layer controller.
// A layer is described by layer_cfg_t and latched at `start`. The layer runs
// as a sequence of passes, ordered output channel (oc), input-channel group
// (icg) and kernel chunk (kc), innermost last. The linear pass number is also
// the kernel memory word address, so the host stores kernels in that order.
//
// In a pass, 2^glog AUs each take one input channel of the group and one
// chunk of MULTS kernel taps (stored reversed, zero padded). The coordinator
// streams NS = (l_out-1)*stride + MULTS samples through the AU windows,
// starting at upsampled position kc*MULTS - pad. Position t reads input
// sample t >> ulog when t >= 0, t is a multiple of 2^ulog and the sample
// exists; otherwise a zero is shifted in, which gives padding and the zero
// insertion of a transposed convolution. From stream step MULTS-1 on, every
// stride-th window is an output and is tagged with its partial-sum address
// oc*l_out + p and a `first` flag (icg == 0 and kc == 0).
//
// The kernel for the next pass is loaded into the AUs' shadow banks at step 1
// of the current pass and the banks are swapped at step 0 of each pass
// (ping-pong), so a pass follows the previous one without a gap. The feature
// map memory has N_AU byte lanes: channel c lives in lane c mod N_AU at word
// (c div N_AU)*l_in + x, so the AUs of a group read one word and the
// multicast controller rotates lanes by `f_off`.
//
// After the last pass and a drain of the pipeline, the final process walks
// all oc*l_out partial sums once, one per cycle, giving the bias address and
// the loopback position (next-layer fmap word and lane) of each.
// Timing: PREP 1 cycle, then sum over passes of NS cycles, DRAIN_CYC cycles,
// oc*l_out final cycles, FIN_TAIL cycles; `done` pulses for one cycle at the end.
// What follows the design: the coordinator drives the multicast controllers,
// the ping-pong kernel registers, the readout stage of the adder tree and the
// accumulator. The loop order, the address arithmetic and the streaming
// schedule are this implementation's choices.
module pdl_coordinator
  import pdl_pkg::*;
#(
  parameter int N_AU    = 4,
  parameter int MULTS   = 6,
  parameter int FDEPTH  = 256,   // fmap memory words
  parameter int KDEPTH  = 256,   // kernel memory words
  parameter int PDEPTH  = 256,   // partial sum / result memory words
  parameter int BDEPTH  = 64,    // bias memory words
  localparam int FAW    = $clog2(FDEPTH),
  localparam int KAW    = $clog2(KDEPTH),
  localparam int PAW    = $clog2(PDEPTH),
  localparam int BAW    = $clog2(BDEPTH),
  localparam int OW     = (N_AU > 1) ? $clog2(N_AU) : 1,
  localparam int GW     = $clog2(N_AU) + 1,
  localparam int TAGW   = PAW + 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  layer_cfg_t      cfg,
  output logic            busy,
  output logic            done,
  output layer_cfg_t      cfg_q,
  // feature map streaming
  output logic [FAW-1:0]  f_raddr,
  output logic            f_zero,
  output logic [OW-1:0]   f_off,
  output logic [GW-1:0]   glog,
  output logic            au_shift,
  output logic            au_clr,
  output logic [TAGW-1:0] au_tag,     // {emit, first, psum address}
  // kernel
  output logic [KAW-1:0]  k_raddr,
  output logic            k_load,
  output logic            k_swap,
  // final process
  output logic            fin_valid,
  output logic [PAW-1:0]  fin_paddr,
  output logic [BAW-1:0]  fin_baddr,
  output logic [FAW-1:0]  fin_lbaddr,
  output logic [OW-1:0]   fin_lane
);
  localparam int DRAIN_CYC = $clog2(N_AU) + 6;
  localparam int FIN_TAIL  = 3;

  typedef enum logic [2:0] {S_IDLE, S_PREP, S_STREAM, S_DRAIN, S_FINAL, S_TAIL} state_e;
  state_e state;

  logic [15:0] n, ns, sc;
  logic [15:0] oc, icg, kc, kcoff, ocbase, fbase, pidx, paddr;
  logic [OW-1:0] off;
  logic signed [17:0] tup;
  logic [15:0] xi;
  logic        xvalid, emit, last_pass;
  logic [15:0] g;
  // final process counters
  logic [15:0] fa, fp, foc, flbase;
  logic [OW-1:0] flane;
  logic [3:0]  dcnt;

  assign g  = 16'(1) << cfg_q.glog;
  assign ns = (cfg_q.l_out - 16'd1) * 16'(cfg_q.stride) + 16'(MULTS);

  // input sample for the current stream position
  always_comb begin
    xi     = 16'(tup >>> cfg_q.ulog);
    xvalid = (tup >= 0) && ((tup & ((18'sd1 <<< cfg_q.ulog) - 18'sd1)) == 0) && (xi < cfg_q.l_in);
    emit   = (state == S_STREAM) && (n >= 16'(MULTS - 1)) && (sc == 0);
    last_pass = (kc == cfg_q.nkc - 1) && (icg == cfg_q.nicg - 1) && (oc == cfg_q.oc - 1);
  end

  assign busy     = (state != S_IDLE);
  assign glog     = GW'(cfg_q.glog);
  assign f_off    = off;
  assign f_raddr  = FAW'(fbase + xi);
  assign f_zero   = !xvalid;
  assign au_shift = (state == S_STREAM);
  assign au_clr   = (state == S_STREAM) && (n == 0);
  assign au_tag   = {emit, (icg == 0) && (kc == 0), PAW'(paddr)};
  assign k_swap   = (state == S_STREAM) && (n == 0);
  assign k_load   = (state == S_PREP) || ((state == S_STREAM) && (n == 1) && !last_pass);
  assign k_raddr  = (state == S_PREP) ? '0 : KAW'(pidx + 16'd1);

  assign fin_valid  = (state == S_FINAL);
  assign fin_paddr  = PAW'(fa);
  assign fin_baddr  = BAW'(foc);
  assign fin_lbaddr = FAW'(cfg_q.loop_base + flbase + fp);
  assign fin_lane   = flane;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cfg_q <= '0; done <= 1'b0;
      n <= '0; sc <= '0; oc <= '0; icg <= '0; kc <= '0; kcoff <= '0; ocbase <= '0;
      fbase <= '0; pidx <= '0; paddr <= '0; off <= '0; tup <= '0;
      fa <= '0; fp <= '0; foc <= '0; flbase <= '0; flane <= '0; dcnt <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          cfg_q <= cfg;
          state <= S_PREP;
        end
        S_PREP: begin
          n <= '0; sc <= '0; oc <= '0; icg <= '0; kc <= '0; kcoff <= '0; ocbase <= '0;
          fbase <= '0; pidx <= '0; paddr <= '0; off <= '0;
          tup <= -18'(cfg_q.pad);
          state <= S_STREAM;
        end
        S_STREAM: begin
          tup <= tup + 18'sd1;
          if (n >= 16'(MULTS - 1)) sc <= (sc == 0) ? 16'(cfg_q.stride) - 16'd1 : sc - 16'd1;
          if (emit) paddr <= paddr + 16'd1;
          if (n != ns - 16'd1) begin
            n <= n + 16'd1;
          end else begin
            // end of pass: advance kc, icg, oc
            n <= '0; sc <= '0; pidx <= pidx + 16'd1;
            if (kc != cfg_q.nkc - 1) begin
              kc <= kc + 16'd1; kcoff <= kcoff + 16'(MULTS);
              tup <= 18'(kcoff) + 18'(MULTS) - 18'(cfg_q.pad);
              paddr <= ocbase;
            end else begin
              kc <= '0; kcoff <= '0;
              tup <= -18'(cfg_q.pad);
              if (icg != cfg_q.nicg - 1) begin
                icg <= icg + 16'd1;
                paddr <= ocbase;
                if (32'(off) + 32'(g) >= N_AU) begin
                  off <= OW'(32'(off) + 32'(g) - N_AU);
                  fbase <= fbase + cfg_q.l_in;
                end else begin
                  off <= OW'(32'(off) + 32'(g));
                end
              end else begin
                icg <= '0; off <= '0; fbase <= '0;
                ocbase <= ocbase + cfg_q.l_out;
                paddr <= ocbase + cfg_q.l_out;
                if (oc != cfg_q.oc - 1) begin
                  oc <= oc + 16'd1;
                end else begin
                  state <= S_DRAIN; dcnt <= '0;
                end
              end
            end
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 4'd1;
          if (dcnt == 4'(DRAIN_CYC - 1)) begin
            state <= S_FINAL;
            fa <= '0; fp <= '0; foc <= '0; flbase <= '0; flane <= '0;
          end
        end
        S_FINAL: begin
          fa <= fa + 16'd1;
          if (fp != cfg_q.l_out - 1) begin
            fp <= fp + 16'd1;
          end else begin
            fp <= '0;
            foc <= foc + 16'd1;
            if (32'(flane) == N_AU - 1) begin
              flane <= '0; flbase <= flbase + cfg_q.l_out;
            end else begin
              flane <= flane + OW'(1);
            end
            if (foc == cfg_q.oc - 1) begin
              state <= S_TAIL; dcnt <= '0;
            end
          end
        end
        S_TAIL: begin
          dcnt <= dcnt + 4'd1;
          if (dcnt == 4'(FIN_TAIL - 1)) begin
            state <= S_IDLE; done <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
