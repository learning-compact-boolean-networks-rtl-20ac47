// group_sum_tb: checks the population-count decoder with 10 classes of 6 bits
// against the reference counts and arg max, on random inputs, on inputs with a
// planted winner, and on ties (the lowest class index must win).
module group_sum_tb;
  import cbn_ref_pkg::*;

  localparam int DIN = 60, CLASSES = 10, GROUP = DIN / CLASSES;

  logic [DIN-1:0] x;
  logic [2:0]     counts [CLASSES];
  logic [3:0]     cls;
  int checks = 0, failures = 0, ties = 0;

  group_sum #(.DIN(DIN), .CLASSES(CLASSES)) dut (.x(x), .counts(counts), .cls(cls));

  task automatic check();
    bits_t in = new[DIN];
    ints_t exp_cnt;
    int    exp_cls;
    bit    tie;
    foreach (in[i]) in[i] = x[i];
    exp_cnt = ref_groupsum(in, CLASSES, exp_cls, tie);
    if (tie) ties++;
    for (int c = 0; c < CLASSES; c++) begin
      checks++;
      if (int'(counts[c]) != exp_cnt[c]) begin
        failures++;
        $display("FAIL count[%0d] = %0d expected %0d", c, counts[c], exp_cnt[c]);
      end
    end
    checks++;
    if (int'(cls) != exp_cls) begin
      failures++;
      $display("FAIL class %0d expected %0d (x=%h)", cls, exp_cls, x);
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
    x = '0;                       // all tied at 0: class 0
    #1 check();
    checks++; if (cls !== 4'd0) failures++;
    for (int w = 0; w < CLASSES; w++) begin
      x = '0;
      x[w*GROUP +: GROUP] = '1;   // planted winner
      #1 check();
      checks++; if (int'(cls) != w) failures++;
    end
    x = '0;
    x[3*GROUP +: 2] = '1;         // tie between class 3 and class 7
    x[7*GROUP +: 2] = '1;
    #1 check();
    checks++; if (cls !== 4'd3) failures++;
    repeat (500) begin
      for (int i = 0; i < DIN; i++) x[i] = 1'($urandom_range(1));
      #1 check();
    end
    $display("ties seen: %0d", ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
