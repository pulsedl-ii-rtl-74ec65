// pdl_mcast_ctrl: multicast controller between a PE memory and its AUs.
// The memory delivers N lanes per read (one lane per memory bank). Under the
// control of the mapping mode coordinator, output i (feeding AU i) receives
// lane (offset + i) mod N for i < 2^glog, the AUs that take part in the pass.
// The other AUs receive either a copy of lane `offset` (broadcast, used for
// the feature map so that every AU sees the same stream) or zero (used for
// kernels so that idle AUs contribute nothing to the adder tree).
// Purely combinational. The paper states that fmaps and kernels are
// multicast to several AUs by these controllers; the lane rotation rule is
// this implementation's choice.
module pdl_mcast_ctrl #(
  parameter int N  = 4,
  parameter int W  = 8,
  localparam int OW = (N > 1) ? $clog2(N) : 1,
  localparam int GW = $clog2(N) + 1
) (
  input  logic [W-1:0]  lanes [N],
  input  logic [OW-1:0] offset,
  input  logic [GW-1:0] glog,
  input  logic          bcast_idle,
  output logic [W-1:0]  out [N]
);
  always_comb begin
    for (int i = 0; i < N; i++) begin
      if (i < (1 << glog))  out[i] = lanes[(int'(offset) + i) % N];
      else if (bcast_idle)  out[i] = lanes[offset];
      else                  out[i] = '0;
    end
  end
endmodule
