// bool_gate: a row of discretized Boolean neurons.
//
// After training, every neuron of the network is a single bivariate Boolean
// function of two wires of the previous layer. This module holds WIDTH such
// neurons side by side: lane i computes y[i] = B_op[i](a[i], b[i]), where
// op[i] selects one of the 16 functions B1..B16 of the published truth table
// (B1 = constant 0, B2 = AND, B4 = pass a, B7 = XOR, B8 = OR, B16 = constant
// 1; the full table is in cbn_pkg). Each lane is a 4-to-1 selection of the
// function code by the two input bits, i.e. a 2-input look-up table.
// In this network op is always driven by elaboration-time constants, so
// synthesis reduces each lane to one 2-input gate, a wire, an inverter or a
// constant.
//
// Interface: op[WIDTH] (function codes), a[WIDTH] (x1), b[WIDTH] (x2) in,
// y[WIDTH] out. Purely combinational, no clock.
// Follows the paper: the function set and its numbering. Own choice: the
// function code is a port rather than a parameter, so that one instance can
// serve many neurons with different functions.
module bool_gate
  import cbn_pkg::*;
#(
  parameter int unsigned WIDTH = 1
) (
  input  bool_op_e           op [WIDTH],
  input  logic [WIDTH-1:0]   a,
  input  logic [WIDTH-1:0]   b,
  output logic [WIDTH-1:0]   y
);

  always_comb begin
    for (int unsigned i = 0; i < WIDTH; i++) y[i] = bool_eval(op[i], a[i], b[i]);
  end

endmodule
