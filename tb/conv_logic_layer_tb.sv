// conv_logic_layer_tb: checks two convolutional Boolean layers, one with
// stride 2 (3 -> 8 channels, 7x7 -> 4x4) and one with stride 1 (8 -> 6
// channels, 5x5 -> 5x5), against the reference model on random inputs and on
// all-ones inputs (which make the zero padding visible). It also checks the
// output sizes and that some taps did fall into the padding.
module conv_logic_layer_tb;
  import cbn_pkg::*;
  import cbn_ref_pkg::*;

  localparam logic [31:0] SEED = 32'h1234abcd;
  localparam int CA = 3, HA = 7, WA = 7, OA = 8, SA = 2;
  localparam int CB = 8, HB = 5, WB = 5, OB = 6, SB = 1;
  localparam int HOA = (HA - 1) / SA + 1, WOA = (WA - 1) / SA + 1;
  localparam int HOB = (HB - 1) / SB + 1, WOB = (WB - 1) / SB + 1;

  logic [CA*HA*WA-1:0]   xa;
  logic [OA*HOA*WOA-1:0] ya;
  logic [CB*HB*WB-1:0]   xb;
  logic [OB*HOB*WOB-1:0] yb;
  int checks = 0, failures = 0;

  conv_logic_layer #(.CIN(CA), .H(HA), .W(WA), .COUT(OA), .STRIDE(SA), .LAYER(1), .SEED(SEED))
    dut_a (.x(xa), .y(ya));
  conv_logic_layer #(.CIN(CB), .H(HB), .W(WB), .COUT(OB), .STRIDE(SB), .LAYER(2), .SEED(SEED))
    dut_b (.x(xb), .y(yb));

  task automatic check();
    bits_t ina = new[CA*HA*WA], inb = new[CB*HB*WB], ea, eb;
    foreach (ina[i]) ina[i] = xa[i];
    foreach (inb[i]) inb[i] = xb[i];
    ea = ref_conv(ina, CA, HA, WA, OA, SA, 1, SEED);
    eb = ref_conv(inb, CB, HB, WB, OB, SB, 2, SEED);
    checks += 2;
    if (ea.size() != OA*HOA*WOA) failures++;
    if (eb.size() != OB*HOB*WOB) failures++;
    foreach (ea[i]) begin
      checks++;
      if (ya[i] !== ea[i]) begin
        failures++;
        $display("FAIL stride-2 layer bit %0d: got %b expected %b", i, ya[i], ea[i]);
      end
    end
    foreach (eb[i]) begin
      checks++;
      if (yb[i] !== eb[i]) begin
        failures++;
        $display("FAIL stride-1 layer bit %0d: got %b expected %b", i, yb[i], eb[i]);
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
    xa = '1; xb = '1;
    #1 check();
    xa = '0; xb = '0;
    #1 check();
    repeat (300) begin
      for (int i = 0; i < CA*HA*WA; i++) xa[i] = 1'($urandom_range(1));
      for (int i = 0; i < CB*HB*WB; i++) xb[i] = 1'($urandom_range(1));
      #1 check();
    end
    checks++;
    if (pad_taps == 0) begin
      failures++;
      $display("FAIL no kernel tap ever fell into the padding");
    end
    $display("padding taps seen: %0d", pad_taps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
