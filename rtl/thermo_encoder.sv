// thermo_encoder: thermometer encoding of image pixels into Boolean channels.
//
// Each PIX_W-bit pixel x (read as x / (2**PIX_W - 1) in [0,1]) becomes N bits;
// bit t (t = 1..N) is 1 when x >= t / (N+1), i.e. the thresholds split [0,1]
// into N+1 equal parts (N = 1 gives the single threshold 0.5, rounding to the
// nearest Boolean value; N = 3 gives 0.25, 0.50, 0.75). The comparison is done
// exactly in integers: x * (N+1) >= t * (2**PIX_W - 1).
// The N bits of input channel c become output channels c*N .. c*N+N-1
// (strings concatenated along the channel dimension).
//
// Interface: pix[c][row][col] in; bits out as a flat vector, channel-major,
// then row, then column: bit ((c*N + t-1)*H + row)*W + col.
// Purely combinational.
// Follows the paper: equal thresholds, N thresholds per pixel, channel
// concatenation, N = 1 for the default (MNIST) configuration. Own choices:
// the 8-bit integer pixel format, the ">=" at a threshold, and the bit order.
module thermo_encoder #(
  parameter int unsigned CH    = 1,
  parameter int unsigned H     = 28,
  parameter int unsigned W     = 28,
  parameter int unsigned N     = 1,
  parameter int unsigned PIX_W = 8
) (
  input  logic [PIX_W-1:0]      pix  [CH][H][W],
  output logic [CH*N*H*W-1:0]   bits
);

  localparam int unsigned PMAX = (1 << PIX_W) - 1;
  localparam int unsigned PRODW = PIX_W + $clog2(N + 2) + 1;

  always_comb begin
    for (int unsigned c = 0; c < CH; c++)
      for (int unsigned t = 1; t <= N; t++)
        for (int unsigned i = 0; i < H; i++)
          for (int unsigned j = 0; j < W; j++)
            bits[((c*N + t - 1)*H + i)*W + j] =
              (PRODW'(pix[c][i][j]) * PRODW'(N + 1)) >= PRODW'(t * PMAX);
  end

endmodule
