// conv_logic_layer: convolutional Boolean layer with single-operation kernels.
//
// Every output channel oc owns one kernel (k, ch, p, q): a bivariate Boolean
// function k and two taps p, q inside the 3x3 receptive field of one input
// channel ch. The same kernel is applied at every output position (stride
// STRIDE, zero padding of 1 pixel), so output neuron (oc, i, j) is
//     y = B_k( x[ch][i*STRIDE + p/3 - 1][j*STRIDE + p%3 - 1],
//              x[ch][i*STRIDE + q/3 - 1][j*STRIDE + q%3 - 1] )
// with out-of-image taps reading 0. Output size is (H+2-3)/STRIDE + 1 per side.
// Per output channel, the two tap planes are gathered and fed to one
// bool_gate row of HO*WO neurons that all use the kernel's function.
//
// Interface: x flat, channel-major then row then column (CIN*H*W bits);
// y flat in the same order (COUT*HO*WO bits). Purely combinational.
// Follows the paper: one Boolean operation per kernel, 3x3 field, padding 1,
// one visible input channel per kernel, strides 2/1 set by the instantiating
// network. Own choices: the kernels are drawn from SEED by cbn_pkg::conv_cfg
// (trained kernels are model data), zero as the padding value, and the bit
// order.
module conv_logic_layer
  import cbn_pkg::*;
#(
  parameter int unsigned CIN    = 1,
  parameter int unsigned H      = 28,
  parameter int unsigned W      = 28,
  parameter int unsigned COUT   = 256,
  parameter int unsigned STRIDE = 2,
  parameter int unsigned LAYER  = 1,
  parameter logic [31:0] SEED   = 32'h2b7e1516,
  localparam int unsigned HO    = conv_out_dim(H, STRIDE),
  localparam int unsigned WO    = conv_out_dim(W, STRIDE)
) (
  input  logic [CIN*H*W-1:0]     x,
  output logic [COUT*HO*WO-1:0]  y
);

  for (genvar oc = 0; oc < COUT; oc++) begin : g_oc
    localparam conv_kernel_t KRN  = conv_cfg(SEED, LAYER, oc, CIN);
    localparam int           PR   = int'(KRN.p) / KSIZE - 1;  // tap offsets in -1..1
    localparam int           PC   = int'(KRN.p) % KSIZE - 1;
    localparam int           QR   = int'(KRN.q) / KSIZE - 1;
    localparam int           QC   = int'(KRN.q) % KSIZE - 1;
    localparam int unsigned  BASE = int'(KRN.ch) * H * W;

    logic [HO*WO-1:0] ta, tb;
    bool_op_e         op [HO*WO];

    // Gather the two tap planes, reading 0 outside the image.
    always_comb begin
      for (int i = 0; i < int'(HO); i++) begin
        for (int j = 0; j < int'(WO); j++) begin
          int ar, ac, br, bc;
          ar = i * int'(STRIDE) + PR;
          ac = j * int'(STRIDE) + PC;
          br = i * int'(STRIDE) + QR;
          bc = j * int'(STRIDE) + QC;
          ta[i*WO + j] = (ar >= 0 && ar < int'(H) && ac >= 0 && ac < int'(W))
                         ? x[BASE + ar*W + ac] : 1'b0;
          tb[i*WO + j] = (br >= 0 && br < int'(H) && bc >= 0 && bc < int'(W))
                         ? x[BASE + br*W + bc] : 1'b0;
          op[i*WO + j] = KRN.op;
        end
      end
    end

    bool_gate #(.WIDTH(HO*WO)) u_gates (.op(op), .a(ta), .b(tb), .y(y[oc*HO*WO +: HO*WO]));
  end

endmodule
