// tb_pulsedl2_soc: full-size end-to-end testbench of the PulseDL-II SoC
// (top instantiated with its default parameters: 15 PEs x 4 AUs x 6
// multipliers, 115200-baud UARTs at 100 MHz).
// The testbench plays the processor through the CPU AHB port, the JTAG
// debug port, the Quad-SPI sample link, the programming UART, the two
// peripheral UARTs, the GPIO pins and the system reset. One event runs the
// whole pulse-processing flow of the design:
//   1. 16 ADC samples arrive over Quad-SPI into the double-port buffer
//      while the JTAG port writes system RAM (auxiliary-bus arbitration);
//   2. the programming UART writes and reads memory words;
//   3. the processor relays the samples into PE 0 and runs the 5-layer
//      network of the test-bench workload (conv1 16 ch, conv2 32 ch,
//      conv3 64 ch on two PEs, fc1 64 on four PEs, fc2 2 outputs),
//      moving feature maps from PE result memories (or, for conv1, from
//      the loopback copy in the PE's own fmap memory) into the next PE's
//      fmap memory and waiting for the accelerator interrupt after each
//      layer; every output is compared with the reference model;
//   4. the two raw 32-bit features are stored in system RAM and sent out
//      through UART3, where a testbench decoder checks them; a debug byte
//      goes out through UART2 and received bytes raise the UART interrupts;
//   5. timer interrupt, GPIO, system registers, APB wait states, and
//      finally a watchdog time-out that resets the system.
// Every mechanism is counted; a mechanism that never happened is a failure.
module tb_pulsedl2_soc;
  import pdl_pkg::*;
  import pdl_ref_pkg::*;

  localparam int DIV = 868;
  localparam logic [31:0] NN = 32'h5000_0000, DPB = 32'h2100_0000, SRAM = 32'h2000_0000,
                          APB = 32'h4000_0000, GPIO = 32'h4001_0000, SYSR = 32'h4002_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  ahb_req_t cpu_req, jtag_req;
  ahb_rsp_t cpu_rsp, jtag_rsp;
  logic [3:0] cpu_irq;
  logic wdog_reset, qspi_cs_n, qspi_sclk, qspi_overflow, prog_txd;
  wire  prog_rxd, uart2_rxd, uart3_rxd;
  logic [3:0] qspi_io;
  logic [15:0] gpio_in, gpio_out, gpio_oe;
  logic [31:0] sys_ctrl;
  logic uart2_txd, uart3_txd;

  always #5 clk = ~clk;

  pulsedl2_soc dut (.*);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_qspi_words = 0, n_aux_stall = 0, n_jtag = 0, n_prog_wr = 0, n_prog_rd = 0;
  int n_layers = 0, n_parallel = 0, n_nn_irq = 0, n_token = 0, n_loopback = 0, n_raw = 0;
  int n_glog [3] = '{0, 0, 0};
  int n_stride = 0, n_pad = 0, n_uart3 = 0, n_uart2 = 0, n_uart_rx_irq = 0;
  int n_timer_irq = 0, n_wdog = 0, n_gpio = 0, n_sysregs = 0, n_apb_wait = 0, n_cycles_ok = 0;

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 30) $display("FAIL %s: %0d (%h) vs %0d (%h)", what, got, got, exp, exp); end
  endtask

  // ---------------- processor bus model ----------------
  task automatic ahb(input bit wr, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    cpu_req.haddr = a; cpu_req.htrans = HT_NONSEQ; cpu_req.hwrite = wr; cpu_req.hsize = 3'b010;
    while (!cpu_rsp.hreadyout) @(negedge clk);
    @(negedge clk);
    cpu_req.htrans = HT_IDLE; cpu_req.hwdata = wd;
    while (!cpu_rsp.hreadyout) begin
      if (a[31:16] == APB[31:16]) n_apb_wait++;
      @(negedge clk);
    end
    rd = cpu_rsp.hrdata;
  endtask
  task automatic wr32(input logic [31:0] a, input logic [31:0] d); logic [31:0] x; ahb(1, a, d, x); endtask
  task automatic rd32(input logic [31:0] a, output logic [31:0] d); ahb(0, a, 0, d); endtask

  // ---------------- JTAG debug port model ----------------
  task automatic jtag(input bit wr, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    jtag_req.haddr = a; jtag_req.htrans = HT_NONSEQ; jtag_req.hwrite = wr; jtag_req.hsize = 3'b010;
    @(posedge clk);
    while (!jtag_rsp.hreadyout) begin n_aux_stall++; @(posedge clk); end
    @(negedge clk);
    jtag_req.htrans = HT_IDLE; jtag_req.hwdata = wd;
    @(posedge clk);
    while (!jtag_rsp.hreadyout) @(posedge clk);
    rd = jtag_rsp.hrdata;
  endtask

  // ---------------- serial models ----------------
  // serial lines: index 0 programming UART, 1 UART2, 2 UART3
  logic [2:0] rx_drv = 3'b111;
  wire  [2:0] tx_mon = {uart3_txd, uart2_txd, prog_txd};
  assign prog_rxd  = rx_drv[0];
  assign uart2_rxd = rx_drv[1];
  assign uart3_rxd = rx_drv[2];
  byte unsigned got [3][$];
  task automatic uart_send(int line, byte unsigned b);
    rx_drv[line] = 0; repeat (DIV) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx_drv[line] = b[i]; repeat (DIV) @(posedge clk); end
    rx_drv[line] = 1; repeat (DIV) @(posedge clk);
  endtask
  // independent 8N1 decoders, sampling at mid-bit
  for (genvar g = 0; g < 3; g++) begin : g_dec
    initial forever begin
      byte unsigned b;
      @(negedge tx_mon[g]);
      repeat (DIV / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (DIV) @(posedge clk); b[i] = tx_mon[g]; end
      repeat (DIV) @(posedge clk);
      got[g].push_back(b);
    end
  end

  task automatic qspi_nibbles(logic [31:0] w);
    for (int i = 7; i >= 0; i--) begin
      qspi_io = w[4*i +: 4];
      repeat (3) @(posedge clk); qspi_sclk = 1;
      repeat (3) @(posedge clk); qspi_sclk = 0;
    end
  endtask

  // ---------------- accelerator helpers ----------------
  int act [MAXC][MAXL];    // current activations (channel, position)
  int nxt [MAXC][MAXL];

  function automatic logic [31:0] pe_base(int pe); return NN + (32'(pe) << 16); endfunction

  // program one PE for layer l (weights/bias from the reference package,
  // feature map from the activations held by the processor)
  task automatic setup_pe(int pe, lay_t l, int token);
    logic [31:0] base = pe_base(pe);
    for (int wi = 0; wi < fmap_words(l); wi++) begin
      logic [31:0] d = '0;
      int grp = wi / l.l_in, t = wi % l.l_in;
      for (int ln = 0; ln < 4; ln++) if (grp * 4 + ln < l.ic) d[8*ln +: 8] = 8'(act[grp * 4 + ln][t]);
      wr32(base + 32'h4000 + 32'(4 * wi), d);
    end
    for (int i = 0; i < kern_words(l); i++) wr32(base + 32'h8000 + 32'(4 * i), kern_word(l, i));
    for (int o = 0; o < l.oc; o++) wr32(base + 32'h1000 + 32'(4 * o), b[o]);
    for (int r = 3; r <= 15; r++) wr32(base + 32'(4 * r), reg_value(l, r));
    wr32(base + 32'h8, 32'(token));
    n_glog[l.glog]++;
    if (l.stride > 1) n_stride++;
    if (l.pad > 0) n_pad++;
  endtask

  // reference: x from activations, random weights, requantisation scaled so
  // the outputs use the int8 range
  task automatic make_layer(inout lay_t l);
    int mx = 1;
    randomize_layer(l, 1, 12);
    for (int c = 0; c < MAXC; c++) for (int t = 0; t < MAXL; t++)
      x[c][t] = (c < l.ic && t < l.l_in) ? byte'(act[c][t]) : 8'sd0;
    if (!l.raw) begin
      lay_t r = l;
      r.raw = 1;
      compute(r);
      for (int i = 0; i < l.oc * l.l_out; i++) if (ref_out[i] > mx) mx = ref_out[i];
      l.mult = $urandom_range(64, 127);
      l.shift = 0;
      while ((longint'(mx) * l.mult) >>> l.shift > 127) l.shift++;
    end
    compute(l);
  endtask

  task automatic start_pes(int pes [$]);
    foreach (pes[i]) wr32(pe_base(pes[i]), 32'h3);    // start + irq enable
    if (pes.size() > 1) n_parallel++;
  endtask

  // wait for the accelerator interrupt until all given PEs are done
  task automatic wait_pes(int pes [$]);
    logic [31:0] mask, want = '0, rd;
    int t = 0;
    foreach (pes[i]) want[pes[i]] = 1'b1;
    mask = '0;
    while ((mask & want) != want && t < 2000000) begin
      while (!cpu_irq[0] && t < 2000000) begin @(posedge clk); t++; end
      n_nn_irq++;
      rd32(NN + 32'hF_0000, rd);
      mask |= rd;
      for (int p = 0; p < 15; p++) if (rd[p]) wr32(pe_base(p) + 32'h4, 32'h2);   // clear done
    end
    chk("layer done before timeout", (mask & want) == want, 1);
    rd32(NN + 32'hF_0004, rd);
    chk("busy mask idle", rd & want, 0);
  endtask

  // read the results of PE pe (layer l) into nxt[], channel offset oc0, check
  task automatic collect(int pe, lay_t l, int oc0, int token);
    logic [31:0] rd;
    for (int o = 0; o < l.oc; o++) for (int p = 0; p < l.l_out; p++) begin
      rd32(pe_base(pe) + 32'h2000 + 32'(4 * (o * l.l_out + p)), rd);
      chk($sformatf("PE%0d out[%0d][%0d]", pe, o, p), rd, ref_out[o * l.l_out + p]);
      nxt[oc0 + o][p] = int'(signed'(rd));
    end
    rd32(pe_base(pe) + 32'h8, rd);
    chk("token returned", rd, token);
    if (rd == 32'(token)) n_token++;
    rd32(pe_base(pe) + 32'h40, rd);
    chk("CYCLES", rd, layer_cycles(l));
    if (rd == 32'(layer_cycles(l))) n_cycles_ok++;
    if (l.raw) n_raw++;
    n_layers++;
  endtask

  task automatic advance(int c, int len);
    for (int i = 0; i < MAXC; i++) for (int t = 0; t < MAXL; t++)
      act[i][t] = (i < c && t < len) ? nxt[i][t] : 0;
  endtask

  lay_t L1, L2, L3a, L3b, F1 [4], F2;
  int   ref3 [64][2], refF1 [64];

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog: simulation timed out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd, c0, c1;
    int tok = 100, samples [16], stall0;
    longint t_inf0, t_inf1;
    cpu_req = '0; jtag_req = '0;
    qspi_cs_n = 1; qspi_sclk = 0; qspi_io = 0;
    gpio_in = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);

    // ---- system registers and accelerator information ----
    rd32(SYSR, rd); chk("sysregs ID", rd, 32'h5044_4C32);
    wr32(SYSR + 4, 32'hCAFE_F00D); rd32(SYSR + 4, rd); chk("sysregs SCRATCH", rd, 32'hCAFE_F00D);
    wr32(SYSR + 8, 32'h0000_00A5); @(posedge clk); #1 chk("sys_ctrl pins", sys_ctrl, 32'hA5);
    if (sys_ctrl == 32'hA5) n_sysregs++;
    rd32(NN + 32'hF_0008, rd); chk("accelerator INFO", rd, {8'd0, 8'd6, 8'd4, 8'd15});

    // ---- 1. samples over Quad-SPI while JTAG writes system RAM ----
    stall0 = n_aux_stall;
    fork
      begin
        qspi_cs_n = 0; repeat (4) @(posedge clk);
        qspi_nibbles(DPB + 32'h40);
        for (int i = 0; i < 16; i++) begin
          samples[i] = $urandom_range(120) - 60;
          qspi_nibbles(32'(samples[i]));
        end
        repeat (4) @(posedge clk); qspi_cs_n = 1;
      end
      begin
        for (int i = 0; i < 300; i++) begin
          logic [31:0] j;
          jtag(1, SRAM + 32'h100 + 32'(4 * (i % 64)), 32'hD0 + 32'(i), j);
          n_jtag++;
        end
      end
    join
    repeat (40) @(posedge clk);
    chk("qspi overflow", qspi_overflow, 0);
    for (int i = 0; i < 16; i++) begin
      rd32(DPB + 32'h40 + 32'(4 * i), rd);
      chk("double-port buffer sample", rd, samples[i]);
      if (rd == 32'(samples[i])) n_qspi_words++;
    end
    for (int i = 0; i < 64; i++) begin
      rd32(SRAM + 32'h100 + 32'(4 * i), rd);
      chk("JTAG write", rd, 32'hD0 + 32'(i + ((i < 44) ? 256 : 192)));
    end
    if (n_aux_stall == stall0) $display("note: no auxiliary bus stall");

    // ---- 2. programming UART: write system RAM, read program memory ----
    begin
      logic [31:0] a = SRAM + 32'h200, d = 32'h1234_ABCD, r;
      uart_send(0, 8'h57);
      for (int i = 3; i >= 0; i--) uart_send(0, a[8*i +: 8]);
      for (int i = 3; i >= 0; i--) uart_send(0, d[8*i +: 8]);
      repeat (12 * DIV) @(posedge clk);
      chk("prog ack", got[0].size() == 1 && got[0][0] == 8'h4B, 1);
      got[0].delete();
      rd32(a, r); chk("prog write landed", r, d);
      if (r == d) n_prog_wr++;
      wr32(32'h0000_0300, 32'h5EED_0001);
      a = 32'h0000_0300;
      uart_send(0, 8'h52);
      for (int i = 3; i >= 0; i--) uart_send(0, a[8*i +: 8]);
      repeat (45 * DIV) @(posedge clk);
      r = {got[0][0], got[0][1], got[0][2], got[0][3]};
      chk("prog read", r, 32'h5EED_0001);
      if (r == 32'h5EED_0001) n_prog_rd++;
      got[0].delete();
    end

    // ---- 3. the network ----
    wr32(GPIO + 4, 32'h00FF);              // status pins as outputs
    wr32(GPIO + 12, 32'h0001);             // "inference running"
    @(posedge clk); #1;
    chk("gpio busy pin", gpio_out[0], 1);
    rd32(SYSR + 12, c0);
    t_inf0 = $time;
    // relay samples from the double-port buffer
    for (int t = 0; t < 16; t++) begin
      rd32(DPB + 32'h40 + 32'(4 * t), rd);
      act[0][t] = int'(signed'(rd[7:0]));
    end
    for (int c = 1; c < MAXC; c++) for (int t = 0; t < MAXL; t++) act[c][t] = 0;

    // conv1: 1 -> 16 channels, kernel 4, stride 2, pad 1: 16 -> 8, loopback
    L1 = '{ic: 1, oc: 16, k: 4, l_in: 16, l_out: 8, stride: 2, pad: 1, ulog: 0, glog: 0,
           relu: 1, raw: 0, loopback: 1, loop_base: 64, mult: 1, shift: 0};
    make_layer(L1);
    setup_pe(0, L1, tok);
    start_pes('{0});
    wait_pes('{0});
    collect(0, L1, 0, tok);
    // take conv1's output from the loopback copy in PE 0's fmap memory
    for (int g = 0; g < 4; g++) for (int p = 0; p < 8; p++) begin
      rd32(pe_base(0) + 32'h4000 + 32'(4 * (64 + g * 8 + p)), rd);
      for (int ln = 0; ln < 4; ln++) begin
        chk("loopback fmap copy", 32'(signed'(rd[8*ln +: 8])), ref_out[(g * 4 + ln) * 8 + p]);
        nxt[g * 4 + ln][p] = int'(signed'(rd[8*ln +: 8]));
      end
    end
    n_loopback++;
    advance(16, 8);

    // conv2: 16 -> 32, kernel 4, stride 2, pad 1: 8 -> 4 (4 channels per group)
    L2 = '{ic: 16, oc: 32, k: 4, l_in: 8, l_out: 4, stride: 2, pad: 1, ulog: 0, glog: 2,
           relu: 1, raw: 0, loopback: 0, loop_base: 0, mult: 1, shift: 0};
    make_layer(L2);
    setup_pe(1, L2, tok);
    start_pes('{1});
    wait_pes('{1});
    collect(1, L2, 0, tok);
    advance(32, 4);

    // conv3: 32 -> 64, kernel 4, stride 2, pad 1: 4 -> 2, split over PEs 2,3
    L3a = '{ic: 32, oc: 32, k: 4, l_in: 4, l_out: 2, stride: 2, pad: 1, ulog: 0, glog: 2,
            relu: 1, raw: 0, loopback: 0, loop_base: 0, mult: 1, shift: 0};
    L3b = L3a;
    make_layer(L3a); setup_pe(2, L3a, tok);
    for (int i = 0; i < 64; i++) ref3[i / 2][i % 2] = ref_out[i];
    make_layer(L3b); setup_pe(3, L3b, tok + 1);
    start_pes('{2, 3});
    wait_pes('{2, 3});
    collect(3, L3b, 32, tok + 1);
    for (int i = 0; i < 64; i++) ref_out[i] = ref3[i / 2][i % 2];
    collect(2, L3a, 0, tok);
    advance(64, 2);

    // fc1: 128 -> 64 (64 channels x 2 positions), split over PEs 4..7,
    // mapped as a kernel-2 convolution with one output position
    for (int q = 0; q < 4; q++) begin
      F1[q] = '{ic: 64, oc: 16, k: 2, l_in: 2, l_out: 1, stride: 1, pad: 0, ulog: 0,
               glog: 2, relu: 1, raw: 0, loopback: 0, loop_base: 0, mult: 1, shift: 0};
      make_layer(F1[q]);
      setup_pe(4 + q, F1[q], tok + q);
      for (int o = 0; o < 16; o++) refF1[16 * q + o] = ref_out[o];
    end
    start_pes('{4, 5, 6, 7});
    wait_pes('{4, 5, 6, 7});
    for (int q = 0; q < 4; q++) begin
      for (int o = 0; o < 16; o++) ref_out[o] = refF1[16 * q + o];
      collect(4 + q, F1[q], 16 * q, tok + q);
    end
    advance(64, 1);

    // fc2: 64 -> 2, raw 32-bit outputs (the extracted features)
    F2 = '{ic: 64, oc: 2, k: 1, l_in: 1, l_out: 1, stride: 1, pad: 0, ulog: 0, glog: 1,
           relu: 0, raw: 1, loopback: 0, loop_base: 0, mult: 1, shift: 0};
    make_layer(F2);
    setup_pe(8, F2, tok);
    start_pes('{8});
    wait_pes('{8});
    collect(8, F2, 0, tok);
    rd32(SYSR + 12, c1);
    t_inf1 = $time;
    wr32(GPIO + 16, 32'h0001);             // clear "inference running"
    @(posedge clk); #1;
    chk("gpio busy pin cleared", gpio_out[0], 0);
    n_gpio++;
    $display("inference (incl. processor data movement) took %0d cycles", c1 - c0);
    chk("CYCLE register timing", c1 - c0, 32'((t_inf1 - t_inf0) / 10));

    // ---- 4. store features in system RAM and send them over UART3 ----
    for (int o = 0; o < 2; o++) wr32(SRAM + 32'h400 + 32'(4 * o), 32'(nxt[o][0]));
    for (int o = 0; o < 2; o++) begin
      rd32(SRAM + 32'h400 + 32'(4 * o), rd);
      chk("feature in system RAM", rd, ref_out[o]);
      for (int i = 0; i < 4; i++) begin
        logic [31:0] st;
        do rd32(APB + 32'h3004, st); while (st[0]);       // wait while FIFO full
        wr32(APB + 32'h3000, 32'(rd[8*i +: 8]));
      end
    end
    wr32(APB + 32'h2000, 32'h44);                        // 'D' debug byte on UART2
    repeat (10 * 10 * DIV) @(posedge clk);
    chk("UART3 byte count", got[2].size(), 8);
    if (got[2].size() == 8)
      for (int o = 0; o < 2; o++) begin
        logic [31:0] f;
        f = {got[2][4*o+3], got[2][4*o+2], got[2][4*o+1], got[2][4*o]};
        chk("UART3 feature", f, ref_out[o]);
        if (f == 32'(ref_out[o])) n_uart3++;
      end
    chk("UART2 debug byte", got[1].size() == 1 && got[1][0] == 8'h44, 1);
    if (got[1].size() == 1) n_uart2++;
    // received bytes raise the UART interrupts
    fork uart_send(1, 8'h3C); uart_send(2, 8'hC3); join
    repeat (4) @(posedge clk);
    chk("UART2/3 rx irq", cpu_irq[3:2], 2'b11);
    rd32(APB + 32'h2000, rd); chk("UART2 rx", rd, 8'h3C);
    rd32(APB + 32'h3000, rd); chk("UART3 rx", rd, 8'hC3);
    @(posedge clk); #1;
    chk("rx irq cleared", cpu_irq[3:2], 2'b00);
    if (rd == 8'hC3) n_uart_rx_irq++;


    // ---- 5. timer, GPIO input, watchdog ----
    wr32(APB + 32'h0008, 32'd300);
    wr32(APB + 32'h0004, 32'd300);
    wr32(APB + 32'h0000, 32'h3);
    begin
      int t = 0;
      while (!cpu_irq[1] && t < 1000) begin @(posedge clk); t++; end
      chk("timer irq time", t >= 290 && t <= 310, 1);
      if (cpu_irq[1]) n_timer_irq++;
      wr32(APB + 32'h000C, 0);
      @(posedge clk); #1;
      chk("timer irq cleared", cpu_irq[1], 0);
      wr32(APB + 32'h0000, 0);
    end
    gpio_in = 16'hBEEF;
    repeat (3) @(posedge clk);
    rd32(GPIO + 8, rd); chk("gpio input", rd, 16'hBEEF);
    if (rd == 32'hBEEF) n_gpio++;
    wr32(APB + 32'h1008, 32'd2000);
    wr32(APB + 32'h1000, 32'h1);
    for (int k = 0; k < 3; k++) begin
      repeat (1000) @(posedge clk);
      wr32(APB + 32'h100C, 32'h5A5A_5A5A);
      chk("watchdog kicked, no reset", wdog_reset, 0);
    end
    begin
      int t = 0;
      while (!wdog_reset && t < 5000) begin @(posedge clk); t++; end
      chk("watchdog fired", wdog_reset, 1);
      if (wdog_reset) n_wdog++;
    end
    // the board applies the watchdog reset to the system
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    chk("wdog_reset cleared by reset", wdog_reset, 0);
    rd32(SYSR + 4, rd); chk("SCRATCH after reset", rd, 0);
    rd32(SRAM + 32'h400, rd); chk("system RAM keeps contents", rd, ref_out[0]);

    // ---- mechanism summary ----
    begin
      string names [$];
      int cnt [$];
      names = '{"qspi samples", "aux-bus stalls", "jtag writes", "uart-prog write",
        "uart-prog read", "layers", "parallel PEs", "nn irq", "token", "loopback", "raw output",
        "glog0", "glog1", "glog2", "stride", "padding", "uart3 features", "uart2 debug",
        "uart rx irq", "timer irq", "watchdog reset", "gpio", "sysregs", "apb wait states",
        "cycle count"};
      cnt = '{n_qspi_words, n_aux_stall, n_jtag, n_prog_wr, n_prog_rd, n_layers, n_parallel,
        n_nn_irq, n_token, n_loopback, n_raw, n_glog[0], n_glog[1], n_glog[2], n_stride, n_pad,
        n_uart3, n_uart2, n_uart_rx_irq, n_timer_irq, n_wdog, n_gpio, n_sysregs, n_apb_wait,
        n_cycles_ok};
      foreach (names[i]) begin
        $display("mechanism %-16s %0d", names[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", names[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
