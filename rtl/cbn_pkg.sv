// cbn_pkg: shared types, the Boolean-function table and the wiring generator of
// the compact Boolean network.
//
// What it holds
//   * bool_op_e   - the 16 bivariate Boolean functions B1..B16. The 4-bit code of
//                   B_i is i-1, and that code is also the function's truth table:
//                   output for inputs (x1,x2) = code[3 - {x1,x2}], i.e. the code
//                   read MSB-first lists the outputs for (0,0),(0,1),(1,0),(1,1),
//                   exactly the column order of the published truth table
//                   (B2 = AND = 0001, B7 = XOR = 0110, B8 = OR = 0111).
//   * bool_eval() - evaluates a function code on two bits.
//   * wiring generator - every neuron of a trained network is one triple
//                   (k, p, q): a function and two input indices. Trained triples
//                   are model data, not part of the architecture, so this design
//                   derives them at elaboration time from a 32-bit SEED with the
//                   same sampling rules that are used to draw candidate triples
//                   during training:
//                     - k uniform over the 16 functions;
//                     - convolution: p, q uniform with replacement over the 3x3
//                       receptive field; the kernel sees one input channel;
//                     - logic layer: the 2*DOUT input slots first list every input
//                       r = floor(2*DOUT/DIN) times, the remaining slots are drawn
//                       uniformly, then the slots are shuffled; neuron j takes
//                       slots 2j and 2j+1.
//                   The shuffle is an affine permutation s -> (A*s + B) mod S with
//                   gcd(A, S) = 1, and the random draws come from a 32-bit integer
//                   hash; both are this design's own choices. To run a trained
//                   network, replace conv_cfg()/fc_cfg() by look-ups of the trained
//                   triples; nothing else changes.
package cbn_pkg;

  // B_i has code i-1 (B1 = constant 0 ... B16 = constant 1).
  typedef enum logic [3:0] {
    B1  = 4'd0,  B2  = 4'd1,  B3  = 4'd2,  B4  = 4'd3,
    B5  = 4'd4,  B6  = 4'd5,  B7  = 4'd6,  B8  = 4'd7,
    B9  = 4'd8,  B10 = 4'd9,  B11 = 4'd10, B12 = 4'd11,
    B13 = 4'd12, B14 = 4'd13, B15 = 4'd14, B16 = 4'd15
  } bool_op_e;

  // Kernel size of every convolutional layer (3x3 receptive field).
  localparam int unsigned KSIZE = 3;
  localparam int unsigned KAREA = KSIZE * KSIZE;

  // Output of function `op` for inputs x1 = a, x2 = b.
  function automatic logic bool_eval(input bool_op_e op, input logic a, input logic b);
    logic [3:0] tt;
    tt = 4'(op);
    return tt[3 - {a, b}];
  endfunction

  // One convolutional kernel: function, observed input channel, and the two
  // tap positions inside the 3x3 window (0..8, row-major, 4 = centre).
  typedef struct packed {
    bool_op_e    op;
    logic [31:0] ch;
    logic [3:0]  p;
    logic [3:0]  q;
  } conv_kernel_t;

  // One logic-layer neuron: function and two input indices.
  typedef struct packed {
    bool_op_e    op;
    logic [31:0] p;
    logic [31:0] q;
  } fc_neuron_t;

  // 32-bit integer mixing hash (xor-shift / multiply).
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Independent random word for (seed, layer, index, salt).
  function automatic logic [31:0] draw(input logic [31:0] seed, input int unsigned layer,
                                       input int unsigned idx, input int unsigned salt);
    return mix32(seed ^ mix32(32'(layer) * 32'h9e3779b9 ^ mix32(32'(idx) * 32'd8 + 32'(salt))));
  endfunction

  // Kernel of output channel `oc` of convolutional layer `layer` with `cin` input channels.
  function automatic conv_kernel_t conv_cfg(input logic [31:0] seed, input int unsigned layer,
                                            input int unsigned oc, input int unsigned cin);
    conv_kernel_t k;
    k.op = bool_op_e'(draw(seed, layer, oc, 0) % 16);
    k.ch = draw(seed, layer, oc, 1) % cin;
    k.p  = 4'(draw(seed, layer, oc, 2) % KAREA);
    k.q  = 4'(draw(seed, layer, oc, 3) % KAREA);
    return k;
  endfunction

  function automatic longint unsigned gcd(input longint unsigned a, input longint unsigned b);
    longint unsigned x, y, t;
    x = a;
    y = b;
    while (y != 0) begin
      t = x % y;
      x = y;
      y = t;
    end
    return x;
  endfunction

  // Multiplier of the slot shuffle of a logic layer with `slots` input slots:
  // the first value >= a seed-dependent start that is coprime with `slots`.
  function automatic longint unsigned fc_perm_mult(input logic [31:0] seed, input int unsigned layer,
                                                   input int unsigned slots);
    longint unsigned a;
    a = (longint'(draw(seed, layer, 0, 6)) % longint'(slots)) | 64'd1;
    while (gcd(a, longint'(slots)) != 1) a = (a + 2) % longint'(slots);
    return a;
  endfunction

  // Offset of the slot shuffle of a logic layer with `slots` input slots.
  function automatic longint unsigned fc_perm_ofs(input logic [31:0] seed, input int unsigned layer,
                                                  input int unsigned slots);
    return longint'(draw(seed, layer, 0, 7)) % longint'(slots);
  endfunction

  // Input index held by shuffled slot `t` of a logic layer: slot s = (mult*t + ofs) mod 2*dout;
  // slots below r*din hold s mod din (every input r times), the others a uniform draw.
  function automatic int unsigned fc_slot(input logic [31:0] seed, input int unsigned layer,
                                          input int unsigned din, input int unsigned dout,
                                          input longint unsigned mult, input longint unsigned ofs,
                                          input int unsigned t);
    longint unsigned slots, s;
    int unsigned     r;
    slots = 2 * longint'(dout);
    r     = int'(slots / longint'(din));
    s     = (mult * longint'(t) + ofs) % slots;
    if (s < longint'(r) * longint'(din)) return int'(s % longint'(din));
    else                                 return draw(seed, layer, int'(s), 5) % din;
  endfunction

  // Neuron `j` of logic layer `layer` (din inputs, dout outputs).
  function automatic fc_neuron_t fc_cfg(input logic [31:0] seed, input int unsigned layer,
                                        input int unsigned din, input int unsigned dout,
                                        input longint unsigned mult, input longint unsigned ofs,
                                        input int unsigned j);
    fc_neuron_t n;
    n.op = bool_op_e'(draw(seed, layer, j, 4) % 16);
    n.p  = fc_slot(seed, layer, din, dout, mult, ofs, 2 * j);
    n.q  = fc_slot(seed, layer, din, dout, mult, ofs, 2 * j + 1);
    return n;
  endfunction

  // Output size of a 3x3 convolution with padding 1.
  function automatic int unsigned conv_out_dim(input int unsigned d, input int unsigned stride);
    return (d + 2 - KSIZE) / stride + 1;
  endfunction

endpackage
