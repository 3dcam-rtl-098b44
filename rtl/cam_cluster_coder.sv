// cam_cluster_coder -- the 3DCAM decision for one 3x3 TSV cluster.
//
// The coder compares the cluster's TSV values of the previous transfer
// (prev_i, what the TSVs carry now) with the raw data the next transfer would
// put on them (data_i). If the victim I0 is about to switch and the crosstalk
// class of that pattern is above the switch threshold ST, the victim's
// transition is dropped: I0 keeps its previous value and the cluster's control
// TSV toggles to tell the decoder that I0 is not valid this transfer. In every
// other case I0 carries its data bit and the control TSV keeps its value.
// A dropped transition always lowers the class to 19 or less, because each
// neighbour term then falls to 0 or 1.
// The retain rule, the strict "class > ST" comparison, ST = 20 and the
// control-TSV toggling follow the paper. Only I0 is coded; the eight
// neighbours pass to their TSVs unchanged, as in the paper's coder figure.
//
// Interface: prev_i  - cluster TSV values now driven (bit k = I(k-4))
//            data_i  - cluster data bits of the next transfer
//            ctrl_i  - control TSV value now driven
//            victim_o, ctrl_o - values to drive on I0 and on the control TSV
//            retain_o - the victim's transition was dropped
//            class_o  - class of the uncoded pattern
// Timing:    purely combinational; the caller registers the TSV drivers.
module cam_cluster_coder
  import cam_pkg::*;
#(
  parameter int unsigned ST = ST_DEFAULT
) (
  input  cluster_t prev_i,
  input  cluster_t data_i,
  input  logic     ctrl_i,
  output logic     victim_o,
  output logic     ctrl_o,
  output logic     retain_o,
  output xclass_t  class_o
);

  xtalk_class u_class (
    .prev_i  (prev_i),
    .next_i  (data_i),
    .class_o (class_o)
  );

  always_comb begin
    retain_o = (prev_i[VICTIM_IDX] != data_i[VICTIM_IDX]) && (32'(class_o) > ST);
    victim_o = retain_o ? prev_i[VICTIM_IDX] : data_i[VICTIM_IDX];
    ctrl_o   = ctrl_i ^ retain_o;
  end

endmodule
