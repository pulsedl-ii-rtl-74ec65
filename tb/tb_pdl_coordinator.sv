// tb_pdl_coordinator: testbench of the mapping mode coordinator on its own.
// For random layer descriptors the testbench enumerates, from the loop
// definition, what every streaming cycle must look like (fmap address and
// padding flag, lane offset, window clear, kernel swap/load and address,
// output tag with partial-sum address and first flag) and what every
// final-process cycle must carry (partial-sum, bias and loopback addresses),
// and checks the coordinator cycle by cycle, including the total number of
// cycles from start to done.
module tb_pdl_coordinator;
  import pdl_pkg::*;
  localparam int M = 6, N = 4;
  logic clk = 1'b0, rst_n = 1'b0, start = 0;
  layer_cfg_t cfg, cfg_q;
  logic busy, done, f_zero, au_shift, au_clr, k_load, k_swap, fin_valid;
  logic [7:0] f_raddr, k_raddr, fin_paddr, fin_lbaddr;
  logic [1:0] f_off, fin_lane;
  logic [2:0] glog;
  logic [9:0] au_tag;
  logic [5:0] fin_baddr;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pdl_coordinator #(.N_AU(N), .MULTS(M)) dut (.clk, .rst_n, .start, .cfg, .busy, .done, .cfg_q,
    .f_raddr, .f_zero, .f_off, .glog, .au_shift, .au_clr, .au_tag, .k_raddr, .k_load, .k_swap,
    .fin_valid, .fin_paddr, .fin_baddr, .fin_lbaddr, .fin_lane);

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("FAIL %s: %0d vs %0d", what, got, exp); end
  endtask

  task automatic run(int l_in, l_out, oc, ic, k, glog_i, stride, pad, ulog, lbase);
    int g = 1 << glog_i, nicg = (ic + g - 1) / g, nkc = (k + M - 1) / M;
    int ns = (l_out - 1) * stride + M, np = oc * nicg * nkc, pass = 0, cyc = 0;
    cfg = '0;
    cfg.l_in = 16'(l_in); cfg.l_out = 16'(l_out); cfg.oc = 16'(oc); cfg.nicg = 16'(nicg);
    cfg.nkc = 16'(nkc); cfg.glog = 2'(glog_i); cfg.stride = 4'(stride); cfg.pad = 8'(pad);
    cfg.ulog = 2'(ulog); cfg.loop_base = 16'(lbase);
    @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
    // PREP
    chk("prep load", int'(k_load), 1); chk("prep kaddr", int'(k_raddr), 0);
    @(negedge clk); cyc++;
    for (int o = 0; o < oc; o++) for (int icg = 0; icg < nicg; icg++) for (int kc = 0; kc < nkc; kc++) begin
      for (int n = 0; n < ns; n++) begin
        int t = kc * M - pad + n, xv, x, em;
        x  = (t >= 0) ? (t >> ulog) : -1;
        xv = (t >= 0 && (t % (1 << ulog)) == 0 && x < l_in);
        em = (n >= M - 1) && ((n - (M - 1)) % stride == 0);
        chk("shift", int'(au_shift), 1);
        chk("clr", int'(au_clr), int'(n == 0));
        chk("swap", int'(k_swap), int'(n == 0));
        chk("load", int'(k_load), int'(n == 1 && pass != np - 1));
        if (n == 1 && pass != np - 1) chk("kaddr", int'(k_raddr), pass + 1);
        chk("zero", int'(f_zero), int'(!xv));
        if (xv) chk("faddr", int'(f_raddr), ((icg * g) / N) * l_in + x);
        chk("off", int'(f_off), (icg * g) % N);
        chk("emit", int'(au_tag[9]), em);
        if (em) begin
          chk("first", int'(au_tag[8]), int'(icg == 0 && kc == 0));
          chk("paddr", int'(au_tag[7:0]), o * l_out + (n - (M - 1)) / stride);
        end
        @(negedge clk); cyc++;
      end
      pass++;
    end
    while (!fin_valid && cyc < 100000) begin chk("no shift in drain", int'(au_shift), 0); @(negedge clk); cyc++; end
    chk("drain length", cyc, 2 + np * ns + $clog2(N) + 6);
    for (int o = 0; o < oc; o++) for (int p = 0; p < l_out; p++) begin
      chk("fin valid", int'(fin_valid), 1);
      chk("fin paddr", int'(fin_paddr), o * l_out + p);
      chk("fin baddr", int'(fin_baddr), o);
      chk("fin lb", int'(fin_lbaddr), lbase + (o / N) * l_out + p);
      chk("fin lane", int'(fin_lane), o % N);
      @(negedge clk); cyc++;
    end
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    chk("total cycles", cyc, 2 + np * ns + $clog2(N) + 6 + oc * l_out + 3);
    @(negedge clk);
    chk("idle", int'(busy), 0);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(16, 8, 4, 1, 4, 0, 2, 1, 0, 0);
    run(8, 6, 3, 7, 9, 1, 1, 2, 1, 40);
    for (int r = 0; r < 12; r++)
      run(2 + $urandom_range(10), 1 + $urandom_range(6), 1 + $urandom_range(6), 1 + $urandom_range(8),
          1 + $urandom_range(13), $urandom_range(2), 1 + $urandom_range(2), $urandom_range(3),
          $urandom_range(1), $urandom_range(50));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
