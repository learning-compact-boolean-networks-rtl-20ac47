// cbn_ref_pkg: behavioural reference model of the Boolean network, used by the
// testbenches to compute expected outputs.
//
// It evaluates the network layer by layer on dynamic bit arrays, with its own
// copy of the 16-function truth table (typed in from the published table,
// rows 00/01/10/11, columns B1..B16), its own padding and stride arithmetic,
// its own thermometer thresholds (real numbers) and its own population count
// and arg max. Only the wiring (which function and which two inputs each
// neuron uses) is taken from cbn_pkg, since that is the network's data.
package cbn_ref_pkg;
  import cbn_pkg::*;

  typedef bit bits_t [];
  typedef int ints_t [];

  localparam logic [15:0] ROW00 = 16'b0000_0000_1111_1111;
  localparam logic [15:0] ROW01 = 16'b0000_1111_0000_1111;
  localparam logic [15:0] ROW10 = 16'b0011_0011_0011_0011;
  localparam logic [15:0] ROW11 = 16'b0101_0101_0101_0101;

  // B_i(x1, x2), i = 1..16.
  function automatic bit ref_fn(input int unsigned i, input bit x1, input bit x2);
    case ({x1, x2})
      2'b00:   return ROW00[16 - i];
      2'b01:   return ROW01[16 - i];
      2'b10:   return ROW10[16 - i];
      default: return ROW11[16 - i];
    endcase
  endfunction

  // Thermometer code of pixels given as pix[(c*h + i)*w + j]; output order
  // channel (c*n + t-1), row, column.
  function automatic bits_t ref_thermo(input ints_t pix, input int ch, input int h, input int w,
                                       input int n, input int pix_w);
    bits_t y = new[ch * n * h * w];
    real   pmax = real'((1 << pix_w) - 1);
    for (int c = 0; c < ch; c++)
      for (int t = 1; t <= n; t++)
        for (int i = 0; i < h; i++)
          for (int j = 0; j < w; j++)
            y[((c*n + t - 1)*h + i)*w + j] =
              (real'(pix[(c*h + i)*w + j]) / pmax) >= (real'(t) / real'(n + 1));
    return y;
  endfunction

  // Counts taps that fall into the zero padding (for coverage statistics).
  int unsigned pad_taps = 0;

  function automatic bit tap(input bits_t x, input int h, input int w, input int c,
                             input int r, input int col);
    if (r < 0 || r >= h || col < 0 || col >= w) begin
      pad_taps++;
      return 1'b0;
    end
    return x[(c*h + r)*w + col];
  endfunction

  function automatic bits_t ref_conv(input bits_t x, input int cin, input int h, input int w,
                                     input int cout, input int stride, input int layer,
                                     input logic [31:0] seed);
    int    ho = (h - 1) / stride + 1;
    int    wo = (w - 1) / stride + 1;
    bits_t y  = new[cout * ho * wo];
    for (int oc = 0; oc < cout; oc++) begin
      conv_kernel_t k = conv_cfg(seed, layer, oc, cin);
      int c  = int'(k.ch);
      int pr = int'(k.p) / 3, pc = int'(k.p) % 3;
      int qr = int'(k.q) / 3, qc = int'(k.q) % 3;
      for (int i = 0; i < ho; i++)
        for (int j = 0; j < wo; j++) begin
          // window top-left corner is (i*stride - 1, j*stride - 1)
          bit a = tap(x, h, w, c, i*stride - 1 + pr, j*stride - 1 + pc);
          bit b = tap(x, h, w, c, i*stride - 1 + qr, j*stride - 1 + qc);
          y[(oc*ho + i)*wo + j] = ref_fn(int'(k.op) + 1, a, b);
        end
    end
    return y;
  endfunction

  function automatic bits_t ref_fc(input bits_t x, input int din, input int dout,
                                   input int layer, input logic [31:0] seed);
    bits_t           y    = new[dout];
    longint unsigned mult = fc_perm_mult(seed, layer, 2 * dout);
    longint unsigned ofs  = fc_perm_ofs(seed, layer, 2 * dout);
    for (int n = 0; n < dout; n++) begin
      fc_neuron_t f = fc_cfg(seed, layer, din, dout, mult, ofs, n);
      y[n] = ref_fn(int'(f.op) + 1, x[f.p], x[f.q]);
    end
    return y;
  endfunction

  // Population count per class; returns the counts, arg max (lowest index on a tie)
  // in cls and whether the maximum was shared in tie.
  function automatic ints_t ref_groupsum(input bits_t x, input int classes,
                                         output int cls, output bit tie);
    ints_t cnt   = new[classes];
    int    group = x.size() / classes;
    int    best  = -1;
    for (int c = 0; c < classes; c++) begin
      cnt[c] = 0;
      for (int i = 0; i < group; i++) cnt[c] += int'(x[c*group + i]);
    end
    cls = 0;
    tie = 1'b0;
    for (int c = 0; c < classes; c++) begin
      if (cnt[c] > best) begin
        best = cnt[c];
        cls  = c;
        tie  = 1'b0;
      end else if (cnt[c] == best) begin
        tie = 1'b1;
      end
    end
    return cnt;
  endfunction

endpackage
