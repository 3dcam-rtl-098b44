// xtalk_class -- crosstalk class of the victim TSV of one 3x3 cluster.
//
// Given the nine cluster TSV values before (prev_i) and after (next_i) a
// transfer, it works out the transition of every TSV, weighs the victim's
// coupling with each neighbour (0 for equal transitions, 1 when one of the two
// is quiet, 2 for opposite transitions), adds the direct-neighbour terms with
// weight 1.5 C_beta and the diagonal ones with weight C_beta, and returns the
// class of the resulting effective capacitance: class 0 = C_G, class k =
// C_G + (k+1)/2 C_beta for k >= 1, up to class 39 = C_G + 20 C_beta.
// Weights, neighbour placement and class numbering follow the paper's crosstalk
// model and its worked examples; see cam_pkg for the cluster numbering.
//
// Interface: prev_i, next_i - cluster values, bit k = TSV I(k-4).
//            class_o        - class 0..39 (38 never occurs).
// Timing:    purely combinational.
module xtalk_class
  import cam_pkg::*;
(
  input  cluster_t prev_i,
  input  cluster_t next_i,
  output xclass_t  class_o
);

  trans_e     tr [9];
  logic [3:0] a;      // sum of the direct-neighbour terms, 0..8
  logic [3:0] b;      // sum of the diagonal-neighbour terms, 0..8
  logic [5:0] v;      // C_eff - C_G in units of C_beta / 2, 0..40

  always_comb begin
    for (int k = 0; k < 9; k++) tr[k] = trans_of(prev_i[k], next_i[k]);
    a = '0;
    b = '0;
    for (int k = 0; k < 9; k++) begin
      if (DIRECT_MASK[k]) a = a + 4'(coupling_term(tr[VICTIM_IDX], tr[k]));
      if (DIAG_MASK[k])   b = b + 4'(coupling_term(tr[VICTIM_IDX], tr[k]));
    end
    v       = 6'(3 * a) + 6'(2 * b);
    class_o = (v == 6'd0) ? 6'd0 : v - 6'd1;
  end

endmodule
