// group_sum: population-count (GroupSum) decoder with arg-max class select.
//
// The DIN outputs of the last logic layer are split into CLASSES equal groups
// of GROUP = DIN/CLASSES bits; group c is bits [c*GROUP +: GROUP]. The decoder
// counts the ones in each group and reports the class whose count is highest.
// On a tie the lowest class index wins.
//
// Interface: x (DIN bits) in; counts[c] (one count per class, wide enough for
// GROUP) and cls (winning class index) out. Purely combinational.
// Follows the paper: class score = number of ones in the class's group,
// prediction = arg max over the classes, 10 classes. Own choices: contiguous
// groups and the lowest-index tie break (the paper does not say how ties are
// resolved). The softmax temperature used in training is not needed at
// inference: dividing all counts by the same value does not move the arg max.
module group_sum #(
  parameter int unsigned DIN     = 160000,
  parameter int unsigned CLASSES = 10,
  localparam int unsigned GROUP  = DIN / CLASSES,
  localparam int unsigned CW     = $clog2(GROUP + 1),
  localparam int unsigned IW     = (CLASSES > 1) ? $clog2(CLASSES) : 1
) (
  input  logic [DIN-1:0] x,
  output logic [CW-1:0]  counts [CLASSES],
  output logic [IW-1:0]  cls
);

  // The groups must tile the input exactly.
  initial assert (DIN % CLASSES == 0)
    else $error("group_sum: DIN (%0d) is not a multiple of CLASSES (%0d)", DIN, CLASSES);

  always_comb begin
    for (int unsigned c = 0; c < CLASSES; c++)
      counts[c] = CW'($countones(x[c*GROUP +: GROUP]));
  end

  always_comb begin
    logic [CW-1:0] best;
    best = counts[0];
    cls  = '0;
    for (int unsigned c = 1; c < CLASSES; c++) begin
      if (counts[c] > best) begin
        best = counts[c];
        cls  = IW'(c);
      end
    end
  end

endmodule
