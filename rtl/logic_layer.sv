// logic_layer: fully connected (non-convolutional) Boolean layer.
//
// Each of the DOUT output neurons applies its own bivariate Boolean function
// to two wires chosen anywhere among the DIN inputs: y[j] = B_k(x[p], x[q]).
// The wiring follows the input-coverage rule used for these layers: when
// 2*DOUT >= DIN, every input feeds at least floor(2*DOUT/DIN) gate inputs.
// The neurons are built in groups of BLOCK: each group computes its BLOCK
// (k, p, q) triples at elaboration, gathers its inputs and feeds one
// bool_gate row. Grouping only keeps elaboration cheap; every neuron is
// still an independent two-input gate.
//
// Interface: x (DIN bits) in, y (DOUT bits) out. Purely combinational.
// Follows the paper: two-input neurons with any of the 16 functions, free
// choice of inputs, the coverage rule. Own choices: the triples are drawn
// from SEED by cbn_pkg::fc_cfg (trained triples are model data), with a
// hash and an affine slot shuffle as the random source.
module logic_layer
  import cbn_pkg::*;
#(
  parameter int unsigned DIN   = 50176,
  parameter int unsigned DOUT  = 160000,
  parameter int unsigned LAYER = 6,
  parameter logic [31:0] SEED  = 32'h2b7e1516,
  parameter int unsigned BLOCK = 256
) (
  input  logic [DIN-1:0]  x,
  output logic [DOUT-1:0] y
);

  localparam longint unsigned MULT   = fc_perm_mult(SEED, LAYER, 2 * DOUT);
  localparam longint unsigned OFS    = fc_perm_ofs(SEED, LAYER, 2 * DOUT);
  localparam int unsigned     NBLK   = (DOUT + BLOCK - 1) / BLOCK;

  typedef fc_neuron_t [BLOCK-1:0] blk_cfg_t;

  // Triples of neurons first .. first+n-1 (entries past n are unused).
  function automatic blk_cfg_t block_cfg(input int unsigned first, input int unsigned n);
    blk_cfg_t c;
    for (int unsigned i = 0; i < BLOCK; i++)
      c[i] = (i < n) ? fc_cfg(SEED, LAYER, DIN, DOUT, MULT, OFS, first + i) : '0;
    return c;
  endfunction

  for (genvar g = 0; g < NBLK; g++) begin : g_blk
    localparam int unsigned FIRST = g * BLOCK;
    localparam int unsigned NB    = (DOUT - FIRST < BLOCK) ? DOUT - FIRST : BLOCK;
    localparam blk_cfg_t    CFG   = block_cfg(FIRST, NB);

    logic [NB-1:0] ta, tb;
    bool_op_e      op [NB];

    always_comb begin
      for (int unsigned i = 0; i < NB; i++) begin
        ta[i] = x[CFG[i].p];
        tb[i] = x[CFG[i].q];
        op[i] = CFG[i].op;
      end
    end

    bool_gate #(.WIDTH(NB)) u_gates (.op(op), .a(ta), .b(tb), .y(y[FIRST +: NB]));
  end

endmodule
