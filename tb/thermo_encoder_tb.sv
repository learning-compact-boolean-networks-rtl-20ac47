// thermo_encoder_tb: checks the thermometer encoder with 3 thresholds
// (0.25, 0.50, 0.75 on a 3-channel image) and with 1 threshold (0.5), using
// a floating-point reference: bit t of a pixel is set when pix/255 >= t/(N+1).
// Random pixels plus the values on both sides of every threshold are applied.
module thermo_encoder_tb;

  localparam int unsigned CH = 3, H = 4, W = 5, N3 = 3;
  localparam int unsigned H1 = 3, W1 = 3;

  logic [7:0]            pix3 [CH][H][W];
  logic [CH*N3*H*W-1:0]  bits3;
  logic [7:0]            pix1 [1][H1][W1];
  logic [H1*W1-1:0]      bits1;
  int                    checks = 0, failures = 0;

  thermo_encoder #(.CH(CH), .H(H), .W(W), .N(N3), .PIX_W(8)) dut3 (.pix(pix3), .bits(bits3));
  thermo_encoder #(.CH(1), .H(H1), .W(W1), .N(1), .PIX_W(8))  dut1 (.pix(pix1), .bits(bits1));

  function automatic logic ref_bit(input int unsigned p, input int unsigned t, input int unsigned n);
    real x, thr;
    x   = real'(p) / 255.0;
    thr = real'(t) / real'(n + 1);
    return x >= thr;
  endfunction

  task automatic check();
    for (int c = 0; c < CH; c++)
      for (int t = 1; t <= N3; t++)
        for (int i = 0; i < H; i++)
          for (int j = 0; j < W; j++) begin
            checks++;
            if (bits3[((c*N3 + t - 1)*H + i)*W + j] !== ref_bit(int'(pix3[c][i][j]), t, N3)) begin
              failures++;
              $display("FAIL N=3 c=%0d t=%0d (%0d,%0d) pix=%0d", c, t, i, j, pix3[c][i][j]);
            end
          end
    for (int i = 0; i < H1; i++)
      for (int j = 0; j < W1; j++) begin
        checks++;
        if (bits1[i*W1 + j] !== ref_bit(int'(pix1[0][i][j]), 1, 1)) begin
          failures++;
          $display("FAIL N=1 (%0d,%0d) pix=%0d", i, j, pix1[0][i][j]);
        end
      end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Values around the thresholds: 63/64 (0.25), 127/128 (0.5), 191/192 (0.75), 0, 255.
    static int edges [10] = '{0, 63, 64, 127, 128, 191, 192, 255, 1, 254};
    for (int r = 0; r < 10; r++) begin
      for (int c = 0; c < CH; c++)
        for (int i = 0; i < H; i++)
          for (int j = 0; j < W; j++)
            pix3[c][i][j] = 8'(edges[(r + c + i + j) % 10]);
      for (int i = 0; i < H1; i++)
        for (int j = 0; j < W1; j++)
          pix1[0][i][j] = 8'(edges[(r + i + j) % 10]);
      #1 check();
    end
    // Explicit values from the definition.
    pix1[0][0][0] = 8'd127; pix1[0][0][1] = 8'd128;
    pix3[0][0][0] = 8'd64;
    #1;
    checks += 4;
    if (bits1[0] !== 1'b0) failures++;                      // 127/255 < 0.5
    if (bits1[1] !== 1'b1) failures++;                      // 128/255 >= 0.5
    if (bits3[0] !== 1'b1) failures++;                      // 64/255 >= 0.25
    if (bits3[(1*H + 0)*W + 0] !== 1'b0) failures++;        // 64/255 < 0.5
    repeat (200) begin
      for (int c = 0; c < CH; c++)
        for (int i = 0; i < H; i++)
          for (int j = 0; j < W; j++)
            pix3[c][i][j] = 8'($urandom_range(255));
      for (int i = 0; i < H1; i++)
        for (int j = 0; j < W1; j++)
          pix1[0][i][j] = 8'($urandom_range(255));
      #1 check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
