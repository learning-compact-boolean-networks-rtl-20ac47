// cbn_top: complete compact Boolean-network image classifier.
//
// Data path (all combinational between two register stages):
//   pixels -> thermo_encoder (N thresholds per pixel)
//          -> conv 1: 3x3, stride 2  (C0 -> K channels,   H -> H/2)
//          -> conv 2: 3x3, stride 1  (K  -> K channels)
//          -> conv 3: 3x3, stride 2  (K  -> 4K channels,  H/2 -> H/4)
//          -> conv 4: 3x3, stride 1  (4K -> 4K channels)
//          -> flatten (wiring only)
//          -> logic layer 6 (4K*H/4*W/4 -> 625K neurons)
//          -> logic layer 7 (625K -> 625K neurons)
//          -> group_sum (10 class counts, arg max)
// Defaults are the medium MNIST model (K = 256, N = 1, 1x28x28 input):
// 520,704 neurons, each one two-input Boolean gate.
//
// Timing: in_pix is captured on a clock edge where in_valid is high; the
// network evaluates combinationally from that register; the class, the
// counts and out_valid are registered on the next edge. One image per clock,
// latency 2 clocks from the sampling edge to out_valid. No back-pressure.
// rst_n is synchronous, active low, and clears all registers.
//
// Follows the paper: layer order, kernel size, strides, padding, channel
// counts (K, 4K), the 625K-neuron logic layers, the 10-class group-sum, and
// one Boolean operation per neuron. Own choices: the two register stages and
// valid flag around the combinational network, the pixel format, and the
// wiring of each layer, which is drawn from SEED (see cbn_pkg) because the
// trained wiring is model data that the architecture does not fix.
module cbn_top
  import cbn_pkg::*;
#(
  parameter int unsigned IMG_C   = 1,
  parameter int unsigned IMG_H   = 28,
  parameter int unsigned IMG_W   = 28,
  parameter int unsigned PIX_W   = 8,
  parameter int unsigned N_THR   = 1,
  parameter int unsigned K       = 256,
  parameter int unsigned FC_MULT = 625,
  parameter int unsigned CLASSES = 10,
  parameter logic [31:0] SEED    = 32'h2b7e1516,
  // derived sizes
  localparam int unsigned C0     = IMG_C * N_THR,
  localparam int unsigned H1     = conv_out_dim(IMG_H, 2),
  localparam int unsigned W1     = conv_out_dim(IMG_W, 2),
  localparam int unsigned H3     = conv_out_dim(H1, 2),
  localparam int unsigned W3     = conv_out_dim(W1, 2),
  localparam int unsigned FC_IN  = 4 * K * H3 * W3,
  localparam int unsigned FC_OUT = FC_MULT * K,
  localparam int unsigned CW     = $clog2(FC_OUT / CLASSES + 1),
  localparam int unsigned IW     = (CLASSES > 1) ? $clog2(CLASSES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [PIX_W-1:0] in_pix     [IMG_C][IMG_H][IMG_W],
  output logic             out_valid,
  output logic [IW-1:0]    out_class,
  output logic [CW-1:0]    out_counts [CLASSES]
);

  // ---- input register -----------------------------------------------------
  logic [PIX_W-1:0] pix_q [IMG_C][IMG_H][IMG_W];
  logic             vld_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld_q <= 1'b0;
      for (int c = 0; c < IMG_C; c++)
        for (int i = 0; i < IMG_H; i++)
          for (int j = 0; j < IMG_W; j++)
            pix_q[c][i][j] <= '0;
    end else begin
      vld_q <= in_valid;
      if (in_valid) pix_q <= in_pix;
    end
  end

  // ---- combinational Boolean network -------------------------------------
  logic [C0*IMG_H*IMG_W-1:0] enc;
  logic [K*H1*W1-1:0]        l1, l2;
  logic [4*K*H3*W3-1:0]      l3, l4;
  logic [FC_OUT-1:0]         l6, l7;
  logic [CW-1:0]             counts [CLASSES];
  logic [IW-1:0]             cls;

  thermo_encoder #(.CH(IMG_C), .H(IMG_H), .W(IMG_W), .N(N_THR), .PIX_W(PIX_W))
    u_enc (.pix(pix_q), .bits(enc));

  conv_logic_layer #(.CIN(C0), .H(IMG_H), .W(IMG_W), .COUT(K), .STRIDE(2), .LAYER(1), .SEED(SEED))
    u_conv1 (.x(enc), .y(l1));
  conv_logic_layer #(.CIN(K), .H(H1), .W(W1), .COUT(K), .STRIDE(1), .LAYER(2), .SEED(SEED))
    u_conv2 (.x(l1), .y(l2));
  conv_logic_layer #(.CIN(K), .H(H1), .W(W1), .COUT(4*K), .STRIDE(2), .LAYER(3), .SEED(SEED))
    u_conv3 (.x(l2), .y(l3));
  conv_logic_layer #(.CIN(4*K), .H(H3), .W(W3), .COUT(4*K), .STRIDE(1), .LAYER(4), .SEED(SEED))
    u_conv4 (.x(l3), .y(l4));

  // Layer 5 (flatten) is the identity on the flat channel-major vector l4.
  logic_layer #(.DIN(FC_IN), .DOUT(FC_OUT), .LAYER(6), .SEED(SEED))
    u_fc6 (.x(l4), .y(l6));
  logic_layer #(.DIN(FC_OUT), .DOUT(FC_OUT), .LAYER(7), .SEED(SEED))
    u_fc7 (.x(l6), .y(l7));

  group_sum #(.DIN(FC_OUT), .CLASSES(CLASSES))
    u_gsum (.x(l7), .counts(counts), .cls(cls));

  // ---- output register ----------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_class <= '0;
      for (int c = 0; c < CLASSES; c++) out_counts[c] <= '0;
    end else begin
      out_valid <= vld_q;
      if (vld_q) begin
        out_class  <= cls;
        out_counts <= counts;
      end
    end
  end

endmodule
