// bool_gate_tb: checks a row of Boolean neurons against the published truth
// table of the 16 bivariate functions.
//
// The reference table below is typed in row by row (inputs 00, 01, 10, 11,
// columns B1..B16) independently of cbn_pkg. The test drives every function
// with every input pair in one 64-lane instance, then runs random lanes, and
// spot-checks the named functions (B2 AND, B7 XOR, B8 OR, B4 identity).
module bool_gate_tb;
  import cbn_pkg::*;

  localparam int unsigned W = 64;

  // Rows of the truth table, bit 15 = B1 ... bit 0 = B16.
  localparam logic [15:0] ROW00 = 16'b0000_0000_1111_1111;
  localparam logic [15:0] ROW01 = 16'b0000_1111_0000_1111;
  localparam logic [15:0] ROW10 = 16'b0011_0011_0011_0011;
  localparam logic [15:0] ROW11 = 16'b0101_0101_0101_0101;

  function automatic logic ref_fn(input int unsigned i, input logic x1, input logic x2);
    // i = 1..16 (B_i)
    case ({x1, x2})
      2'b00:   return ROW00[16 - i];
      2'b01:   return ROW01[16 - i];
      2'b10:   return ROW10[16 - i];
      default: return ROW11[16 - i];
    endcase
  endfunction

  bool_op_e         op [W];
  logic [W-1:0]     a, b, y;
  int               checks = 0, failures = 0;

  bool_gate #(.WIDTH(W)) dut (.op(op), .a(a), .b(b), .y(y));

  task automatic check_all();
    for (int l = 0; l < W; l++) begin
      checks++;
      if (y[l] !== ref_fn(int'(op[l]) + 1, a[l], b[l])) begin
        failures++;
        $display("FAIL lane %0d: B%0d(%b,%b) = %b", l, int'(op[l]) + 1, a[l], b[l], y[l]);
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
    // Exhaustive: lane l tests function l/4 on input pair l%4.
    for (int l = 0; l < W; l++) begin
      op[l] = bool_op_e'(l / 4);
      a[l]  = 1'((l % 4) >> 1);
      b[l]  = 1'((l % 4) & 1);
    end
    #1 check_all();
    // Named functions from the text.
    for (int v = 0; v < 4; v++) begin
      op[0] = B2; op[1] = B7; op[2] = B8; op[3] = B4;
      a[3:0] = {4{v[1]}}; b[3:0] = {4{v[0]}};
      #1;
      checks += 4;
      if (y[0] !== (v[1] & v[0])) failures++;
      if (y[1] !== (v[1] ^ v[0])) failures++;
      if (y[2] !== (v[1] | v[0])) failures++;
      if (y[3] !== v[1])          failures++;
    end
    // Random lanes.
    repeat (200) begin
      for (int l = 0; l < W; l++) begin
        op[l] = bool_op_e'($urandom_range(15));
        a[l]  = 1'($urandom_range(1));
        b[l]  = 1'($urandom_range(1));
      end
      #1 check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
