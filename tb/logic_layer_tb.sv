// logic_layer_tb: checks fully connected Boolean layers against the reference
// model on random inputs: a 40 -> 50 layer (every input must feed at least
// floor(100/40) = 2 gate inputs) and a 300 -> 700 layer that spans several
// neuron groups, including a partial last group. It also checks the coverage
// rule and that all 16 functions occur in the larger layer.
module logic_layer_tb;
  import cbn_pkg::*;
  import cbn_ref_pkg::*;

  localparam logic [31:0] SEED = 32'h0badcafe;
  localparam int DA = 40,  OA = 50;
  localparam int DB = 300, OB = 700;

  logic [DA-1:0] xa;
  logic [OA-1:0] ya;
  logic [DB-1:0] xb;
  logic [OB-1:0] yb;
  int checks = 0, failures = 0;

  logic_layer #(.DIN(DA), .DOUT(OA), .LAYER(6), .SEED(SEED)) dut_a (.x(xa), .y(ya));
  logic_layer #(.DIN(DB), .DOUT(OB), .LAYER(7), .SEED(SEED), .BLOCK(64)) dut_b (.x(xb), .y(yb));

  task automatic check();
    bits_t ina = new[DA], inb = new[DB], ea, eb;
    foreach (ina[i]) ina[i] = xa[i];
    foreach (inb[i]) inb[i] = xb[i];
    ea = ref_fc(ina, DA, OA, 6, SEED);
    eb = ref_fc(inb, DB, OB, 7, SEED);
    foreach (ea[i]) begin
      checks++;
      if (ya[i] !== ea[i]) begin
        failures++;
        $display("FAIL 40->50 neuron %0d: got %b expected %b", i, ya[i], ea[i]);
      end
    end
    foreach (eb[i]) begin
      checks++;
      if (yb[i] !== eb[i]) begin
        failures++;
        $display("FAIL 300->700 neuron %0d: got %b expected %b", i, yb[i], eb[i]);
      end
    end
  endtask

  // Coverage rule: each input used at least floor(2*dout/din) times.
  task automatic check_coverage(input int din, input int dout, input int layer);
    int              use_cnt [] = new[din];
    longint unsigned mult = fc_perm_mult(SEED, layer, 2 * dout);
    longint unsigned ofs  = fc_perm_ofs(SEED, layer, 2 * dout);
    bit [15:0]       ops  = '0;
    foreach (use_cnt[i]) use_cnt[i] = 0;
    for (int n = 0; n < dout; n++) begin
      fc_neuron_t f = fc_cfg(SEED, layer, din, dout, mult, ofs, n);
      use_cnt[f.p]++;
      use_cnt[f.q]++;
      ops[f.op] = 1'b1;
    end
    foreach (use_cnt[i]) begin
      checks++;
      if (use_cnt[i] < (2 * dout) / din) begin
        failures++;
        $display("FAIL input %0d used %0d times", i, use_cnt[i]);
      end
    end
    if (dout >= 200) begin
      checks++;
      if (ops != 16'hffff) begin
        failures++;
        $display("FAIL not every function used: %b", ops);
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
    check_coverage(DA, OA, 6);
    check_coverage(DB, OB, 7);
    repeat (200) begin
      for (int i = 0; i < DA; i++) xa[i] = 1'($urandom_range(1));
      for (int i = 0; i < DB; i++) xb[i] = 1'($urandom_range(1));
      #1 check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
