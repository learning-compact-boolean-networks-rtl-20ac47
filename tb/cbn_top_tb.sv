// cbn_top_tb: end-to-end test of the classifier at a reduced size.
//
// Configuration: 3-channel 8x8 images, 3 thresholds (9 encoded channels),
// K = 4 (conv channels 4, 4, 16, 16), logic layers 64 -> 2500 -> 2500,
// 10 classes of 250 bits. A stream of random images is driven with random
// idle cycles and back-to-back runs; every result is compared with the
// behavioural reference (class index and all ten counts) and must appear
// exactly 2 clock cycles after the edge that sampled its image. A reset in
// the middle of the stream must drop the image in flight.
// The test also counts how often each mechanism of the design was exercised
// (every threshold level, zero padding, back-to-back and idle cycles, at
// least two different classes, the in-flight drop on reset) and fails if
// one never happened.
module cbn_top_tb;
  import cbn_pkg::*;
  import cbn_ref_pkg::*;

  localparam int unsigned IMG_C = 3, IMG_H = 8, IMG_W = 8, PIX_W = 8, N_THR = 3;
  localparam int unsigned K = 4, FC_MULT = 625, CLASSES = 10;
  localparam logic [31:0] SEED = 32'h2b7e1516;
  localparam int unsigned H1 = (IMG_H - 1) / 2 + 1, W1 = (IMG_W - 1) / 2 + 1;
  localparam int unsigned H3 = (H1 - 1) / 2 + 1,    W3 = (W1 - 1) / 2 + 1;
  localparam int unsigned FC_IN = 4 * K * H3 * W3, FC_OUT = FC_MULT * K;
  localparam int unsigned CW = $clog2(FC_OUT / CLASSES + 1);
  localparam int unsigned IW = $clog2(CLASSES);
  localparam int          N_IMAGES = 60;

  logic             clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [PIX_W-1:0] in_pix [IMG_C][IMG_H][IMG_W];
  logic             out_valid;
  logic [IW-1:0]    out_class;
  logic [CW-1:0]    out_counts [CLASSES];

  cbn_top #(.IMG_C(IMG_C), .IMG_H(IMG_H), .IMG_W(IMG_W), .PIX_W(PIX_W), .N_THR(N_THR),
            .K(K), .FC_MULT(FC_MULT), .CLASSES(CLASSES), .SEED(SEED)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_pix(in_pix),
    .out_valid(out_valid), .out_class(out_class), .out_counts(out_counts));

  always #5 clk = ~clk;

  typedef struct {
    int    cls;
    ints_t cnt;
    longint cycle;
  } exp_t;

  exp_t   expq [$];
  longint cycle = 0;
  int     checks = 0, failures = 0, results = 0;
  // mechanism counters
  int     thr_set [N_THR];
  int     back_to_back = 0, idle = 0, ties = 0, dropped = 0;
  bit [CLASSES-1:0] classes_seen = '0;

  always @(posedge clk) cycle <= cycle + 1;

  // Reference result of the current in_pix.
  function automatic exp_t model();
    exp_t  e;
    ints_t pix = new[IMG_C * IMG_H * IMG_W];
    bits_t v;
    bit    tie;
    for (int c = 0; c < int'(IMG_C); c++)
      for (int i = 0; i < int'(IMG_H); i++)
        for (int j = 0; j < int'(IMG_W); j++)
          pix[(c*IMG_H + i)*IMG_W + j] = int'(in_pix[c][i][j]);
    v = ref_thermo(pix, IMG_C, IMG_H, IMG_W, N_THR, PIX_W);
    for (int c = 0; c < int'(IMG_C); c++)
      for (int t = 0; t < int'(N_THR); t++)
        for (int p = 0; p < int'(IMG_H * IMG_W); p++)
          thr_set[t] += int'(v[(c*N_THR + t)*IMG_H*IMG_W + p]);
    v = ref_conv(v, IMG_C * N_THR, IMG_H, IMG_W, K, 2, 1, SEED);
    v = ref_conv(v, K, H1, W1, K, 1, 2, SEED);
    v = ref_conv(v, K, H1, W1, 4 * K, 2, 3, SEED);
    v = ref_conv(v, 4 * K, H3, W3, 4 * K, 1, 4, SEED);
    v = ref_fc(v, FC_IN, FC_OUT, 6, SEED);
    v = ref_fc(v, FC_OUT, FC_OUT, 7, SEED);
    e.cnt = ref_groupsum(v, CLASSES, e.cls, tie);
    if (tie) ties++;
    return e;
  endfunction

  task automatic random_image();
    int style = $urandom_range(3);
    for (int c = 0; c < int'(IMG_C); c++)
      for (int i = 0; i < int'(IMG_H); i++)
        for (int j = 0; j < int'(IMG_W); j++)
          case (style)
            0: in_pix[c][i][j] = PIX_W'($urandom_range(255));
            1: in_pix[c][i][j] = PIX_W'((i * 32 + j * 16 + c * 64) % 256);  // gradients
            2: in_pix[c][i][j] = ($urandom_range(1) != 0) ? 8'd250 : 8'd10;  // high contrast
            default: in_pix[c][i][j] = PIX_W'($urandom_range(255) / 2 + 64);
          endcase
  endtask

  // Output checker.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected result at cycle %0d", cycle);
      end else begin
        e = expq.pop_front();
        results++;
        classes_seen[out_class] = 1'b1;
        checks += 2 + CLASSES;
        if (cycle - e.cycle != 2) begin
          failures++;
          $display("FAIL latency %0d cycles, expected 2", cycle - e.cycle);
        end
        if (int'(out_class) != e.cls) begin
          failures++;
          $display("FAIL class %0d expected %0d", out_class, e.cls);
        end
        for (int c = 0; c < int'(CLASSES); c++)
          if (int'(out_counts[c]) != e.cnt[c]) begin
            failures++;
            $display("FAIL count[%0d] = %0d expected %0d", c, out_counts[c], e.cnt[c]);
          end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exp_t e;
    bit   prev_valid = 1'b0;
    foreach (thr_set[t]) thr_set[t] = 0;
    random_image();
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < N_IMAGES; n++) begin
      // random idle cycles, but keep runs of back-to-back images
      if ($urandom_range(2) == 0) begin
        in_valid = 1'b0;
        random_image();
        idle++;
        @(posedge clk);
        #1;
        prev_valid = 1'b0;
      end
      random_image();
      in_valid = 1'b1;
      e = model();
      e.cycle = cycle;   // sampled on the coming edge
      expq.push_back(e);
      if (prev_valid) back_to_back++;
      prev_valid = 1'b1;
      @(posedge clk);
      #1;
    end
    in_valid = 1'b0;
    repeat (4) @(posedge clk);
    // Reset while an image is in flight: it must not come out.
    #1 in_valid = 1'b1;
    random_image();
    @(posedge clk);
    #1 in_valid = 1'b0;
    rst_n = 1'b0;
    @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (4) @(posedge clk);
    #1;
    checks++;
    if (out_valid !== 1'b0) failures++;
    else dropped++;
    checks++;
    if (results != N_IMAGES || expq.size() != 0) begin
      failures++;
      $display("FAIL %0d results for %0d images", results, N_IMAGES);
    end
    // mechanism coverage
    $display("results=%0d back_to_back=%0d idle=%0d ties=%0d padding_taps=%0d drops_on_reset=%0d classes=%b",
             results, back_to_back, idle, ties, pad_taps, dropped, classes_seen);
    for (int t = 0; t < int'(N_THR); t++) begin
      $display("threshold %0d set %0d times", t + 1, thr_set[t]);
      checks++;
      if (thr_set[t] == 0 || thr_set[t] == N_IMAGES * IMG_C * IMG_H * IMG_W) failures++;
    end
    checks += 4;
    if (back_to_back == 0) failures++;
    if (idle == 0) failures++;
    if (pad_taps == 0) failures++;
    if ($countones(classes_seen) < 2) begin
      failures++;
      $display("FAIL only one class ever predicted");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
