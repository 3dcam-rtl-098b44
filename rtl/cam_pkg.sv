// cam_pkg -- types, constants and small helper functions shared by the
// 3DCAM link (a crosstalk-avoidance code for a bus of through-silicon vias).
// The class itself is computed in xtalk_class; the model it implements is
// summarised here.
//
// A 3x3 cluster of TSVs is numbered row by row, I-4 .. I4, with the victim
// I0 in the middle:
//
//        I-4  I-3  I-2          bit 0  bit 1  bit 2
//        I-1  I0   I1     =     bit 3  bit 4  bit 5
//        I2   I3   I4           bit 6  bit 7  bit 8
//
// so cluster bit k holds TSV I(k-4). The four direct neighbours of the victim
// (north I-3, west I-1, east I1, south I3) couple with C_alpha = 1.5 C_beta,
// the four diagonal ones (I-4, I-2, I2, I4) with C_beta.
//
// Crosstalk model: each neighbour adds its coupling capacitance times
// |dV0 - dVi| / Vdd, which is 0 (same transition), 1 (one of the two is
// quiet) or 2 (opposite transitions). In units of C_beta / 2 the effective
// capacitance above C_G is therefore v = 3*a + 2*b, where a is the sum of the
// four direct terms and b that of the four diagonal terms (0 <= v <= 40).
// The classes are the half-C_beta steps of C_eff: class 0 is C_G, class k
// (k >= 1) is C_G + (k+1)/2 C_beta, up to class 39 = C_G + 20 C_beta. So
// class = (v == 0) ? 0 : v - 1. v = 1 and v = 39 cannot occur, so class 0..39
// has 40 names of which 38 is never produced.
package cam_pkg;

  // Number of crosstalk classes and the default switch threshold.
  localparam int unsigned NUM_CLASSES = 40;
  localparam int unsigned ST_DEFAULT  = 20;

  // Index of the victim inside a cluster, and the neighbour masks.
  localparam int unsigned VICTIM_IDX  = 4;
  localparam logic [8:0]  DIRECT_MASK = 9'b0_1010_1010;  // I-3, I-1, I1, I3
  localparam logic [8:0]  DIAG_MASK   = 9'b1_0100_0101;  // I-4, I-2, I2, I4

  typedef logic [8:0] cluster_t;   // one 3x3 cluster, bit k = I(k-4)
  typedef logic [5:0] xclass_t;    // crosstalk class 0..39

  // Transition of one wire between two transfers.
  typedef enum logic [1:0] {
    TR_NONE = 2'd0,
    TR_RISE = 2'd1,
    TR_FALL = 2'd2
  } trans_e;

  function automatic trans_e trans_of(logic prev, logic next);
    if (prev == next) return TR_NONE;
    return next ? TR_RISE : TR_FALL;
  endfunction

  // |dV_victim - dV_neighbour| / Vdd
  function automatic logic [1:0] coupling_term(trans_e victim, trans_e nb);
    if (victim == nb)                         return 2'd0;
    if (victim == TR_NONE || nb == TR_NONE)   return 2'd1;
    return 2'd2;
  endfunction

endpackage
