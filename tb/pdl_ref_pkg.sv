// pdl_ref_pkg: reference model shared by the accelerator testbenches.
// It holds one layer (int8 inputs, weights, int32 bias), computes the
// expected outputs directly from the definition of a strided, padded,
// optionally zero-inserted 1-D convolution followed by bias, ReLU and
// requantisation, and produces the host memory images of a PE (feature map
// words, kernel words in pass order, bias words) and its register values.
package pdl_ref_pkg;
  import pdl_pkg::*;

  localparam int MAXC = 64, MAXL = 64, MAXK = 16, MAXO = 256;
  localparam int N_AU = 4, MULTS = 6;

  typedef struct {
    int ic, oc, k, l_in, l_out, stride, pad, ulog, glog;
    bit relu, raw, loopback;
    int loop_base, mult, shift;
  } lay_t;

  byte signed x   [MAXC][MAXL];
  byte signed w   [MAXC][MAXC][MAXK];
  int         b   [MAXC];
  int         ref_out [MAXO];

  function automatic int nicg(lay_t l); return (l.ic + (1 << l.glog) - 1) / (1 << l.glog); endfunction
  function automatic int nkc(lay_t l);  return (l.k + MULTS - 1) / MULTS;                  endfunction
  function automatic int passes(lay_t l); return l.oc * nicg(l) * nkc(l);                  endfunction
  function automatic int stream_len(lay_t l); return (l.l_out - 1) * l.stride + MULTS;     endfunction

  function automatic void randomize_layer(lay_t l, int xmag, int wmag);
    for (int c = 0; c < MAXC; c++) for (int t = 0; t < MAXL; t++)
      x[c][t] = (c < l.ic && t < l.l_in) ? byte'(int'($urandom_range(2*xmag)) - xmag) : 8'sd0;
    for (int o = 0; o < MAXC; o++) begin
      b[o] = int'($urandom_range(2000)) - 1000;
      for (int c = 0; c < MAXC; c++) for (int j = 0; j < MAXK; j++)
        w[o][c][j] = (o < l.oc && c < l.ic && j < l.k) ? byte'(int'($urandom_range(2*wmag)) - wmag) : 8'sd0;
    end
  endfunction

  function automatic int xup(lay_t l, int c, int t);
    int u = 1 << l.ulog;
    if (t < 0 || (t % u) != 0 || (t / u) >= l.l_in) return 0;
    return int'(x[c][t / u]);
  endfunction

  function automatic int requant(lay_t l, longint y);
    longint p, r;
    p = y * longint'(l.mult);
    r = (l.shift == 0) ? p : ((p + (64'sd1 <<< (l.shift - 1))) >>> l.shift);
    if (r > 127) return 127;
    if (r < -128) return -128;
    return int'(r);
  endfunction

  function automatic void compute(lay_t l);
    for (int o = 0; o < l.oc; o++) for (int p = 0; p < l.l_out; p++) begin
      longint acc = 0, y;
      for (int c = 0; c < l.ic; c++) for (int j = 0; j < l.k; j++)
        acc += longint'(w[o][c][j]) * longint'(xup(l, c, p * l.stride + j - l.pad));
      y = acc + longint'(b[o]);
      if (y > 64'sd2147483647) y = 64'sd2147483647;
      if (y < -64'sd2147483648) y = -64'sd2147483648;
      if (l.relu && y < 0) y = 0;
      ref_out[o * l.l_out + p] = l.raw ? int'(y) : requant(l, y);
    end
  endfunction

  // fmap memory word w (byte offset 0x4000 + 4*w)
  function automatic logic [31:0] fmap_word(lay_t l, int wi);
    logic [31:0] d = '0;
    int grp = wi / l.l_in, t = wi % l.l_in;
    for (int ln = 0; ln < N_AU; ln++) begin
      int c = grp * N_AU + ln;
      if (c < MAXC) d[8*ln +: 8] = x[c][t];
    end
    return d;
  endfunction
  function automatic int fmap_words(lay_t l); return ((l.ic + N_AU - 1) / N_AU) * l.l_in; endfunction

  // kernel memory word i (byte offset 0x8000 + 4*i): pass k, AU a, half h
  function automatic logic [31:0] kern_word(lay_t l, int i);
    logic [31:0] d = '0;
    int h = i % 2, a = (i / 2) % N_AU, k = i / (2 * N_AU);
    int kc = k % nkc(l), icg = (k / nkc(l)) % nicg(l), o = k / (nkc(l) * nicg(l));
    int c = icg * (1 << l.glog) + a;
    for (int bt = 0; bt < 4; bt++) begin
      int jr = 4 * h + bt;                      // register index
      int tap = kc * MULTS + (MULTS - 1 - jr);  // kernel tap (reversed)
      if (jr < MULTS && a < (1 << l.glog) && c < l.ic && tap < l.k) d[8*bt +: 8] = w[o][c][tap];
    end
    return d;
  endfunction
  function automatic int kern_words(lay_t l); return passes(l) * N_AU * 2; endfunction

  // register value at word index r (0x0C.. 0x3C)
  function automatic logic [31:0] reg_value(lay_t l, int r);
    case (r)
      3: return l.l_in;      4: return l.l_out;   5: return l.oc;
      6: return nicg(l);     7: return nkc(l);    8: return l.glog;
      9: return l.stride;   10: return l.pad;    11: return l.ulog;
      12: return {29'b0, l.loopback, l.raw, l.relu};
      13: return l.loop_base; 14: return l.mult;  15: return l.shift;
      default: return 0;
    endcase
  endfunction

  // busy cycles of a layer as counted by the PE CYCLES register
  function automatic int layer_cycles(lay_t l);
    return 1 + passes(l) * stream_len(l) + ($clog2(N_AU) + 6) + l.oc * l.l_out + 3;
  endfunction
endpackage
