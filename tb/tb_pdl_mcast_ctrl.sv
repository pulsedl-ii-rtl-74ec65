// tb_pdl_mcast_ctrl: exhaustive testbench of the multicast controller: for
// every offset, group size and idle policy, each output must carry the lane
// given by the rotation rule, a copy of the offset lane, or zero.
module tb_pdl_mcast_ctrl;
  localparam int N = 4;
  logic [7:0] lanes [N];
  logic [7:0] out [N];
  logic [1:0] offset;
  logic [2:0] glog;
  logic bcast_idle;
  int checks = 0, failures = 0;

  pdl_mcast_ctrl #(.N(N), .W(8)) dut (.lanes, .offset, .glog, .bcast_idle, .out);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 20; r++)
      for (int o = 0; o < N; o++)
        for (int g = 0; g <= 2; g++)
          for (int b = 0; b < 2; b++) begin
            for (int i = 0; i < N; i++) lanes[i] = 8'($urandom);
            offset = 2'(o); glog = 3'(g); bcast_idle = 1'(b);
            #1;
            for (int i = 0; i < N; i++) begin
              logic [7:0] e;
              if (i < (1 << g)) e = lanes[(o + i) % N];
              else e = b ? lanes[o] : 8'h00;
              checks++;
              if (out[i] !== e) begin failures++; $display("FAIL o=%0d g=%0d b=%0d i=%0d", o, g, b, i); end
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
