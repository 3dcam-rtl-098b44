// cam_encoder -- transmit side (die X) of a 3DCAM-coded TSV bus.
//
// The TSVs form a 3 x COLS grid. Data bit b sits on TSV b, in column b/3 and
// row b%3; grid positions past DATA_W are filler TSVs held at 0. Every
// middle-row TSV except the two at the ends of the row is the victim of the
// 3x3 cluster centred on it, so neighbouring clusters overlap by two columns
// and there are NV = COLS-2 victims, each with its own control TSV. One
// cam_cluster_coder per victim decides, from the TSV values now driven and the
// new data word, whether that victim keeps its old value (and its control TSV
// toggles) or carries its data bit. All clusters decide in parallel on the raw
// data of their neighbours. The chosen values are registered into the TSV
// driver flops when en_i is high; with en_i low the bus holds its values, so
// nothing switches.
// From the paper: the 3xN layout, the overlapping clusters with one control
// TSV per middle TSV, the 64-bit data width (COLS = 22, 20 control TSVs,
// 31% extra TSVs). This design's own choices: the bit-to-TSV placement, the
// filler TSVs, the parallel decision, the enable and reset to all zeros.
//
// Interface: data_i       - data word of the next transfer
//            en_i         - a transfer happens at this clock edge
//            tsv_o        - registered TSV drivers, 3*COLS bits
//            ctrl_o       - registered control TSV drivers, NV bits
//            ctrl_next_o  - control values that the next edge will load
//            retain_o     - victims whose transition is dropped by that edge
// Timing:    one cycle from data_i to tsv_o / ctrl_o.
module cam_encoder
  import cam_pkg::*;
#(
  parameter int unsigned DATA_W = 64,
  parameter int unsigned COLS   = (DATA_W + 2) / 3,
  parameter int unsigned NV     = COLS - 2,
  parameter int unsigned TSV_W  = 3 * COLS,
  parameter int unsigned ST     = ST_DEFAULT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en_i,
  input  logic [DATA_W-1:0] data_i,
  output logic [TSV_W-1:0]  tsv_o,
  output logic [NV-1:0]     ctrl_o,
  output logic [NV-1:0]     ctrl_next_o,
  output logic [NV-1:0]     retain_o
);

  initial begin
    assert (COLS >= 3) else $fatal(1, "cam_encoder: a 3xN bus needs N >= 3");
    assert (3 * COLS >= DATA_W) else $fatal(1, "cam_encoder: COLS too small for DATA_W");
  end

  logic [TSV_W-1:0] raw;     // data word placed on the grid, fillers at 0
  logic [TSV_W-1:0] tsv_d;   // values the next edge loads into the drivers
  logic [TSV_W-1:0] tsv_q;
  logic [NV-1:0]    ctrl_q;
  logic [NV-1:0]    victim;

  always_comb begin
    raw = '0;
    raw[DATA_W-1:0] = data_i;
  end

  // One coder per victim: TSV 3c+1 for columns c = 1 .. COLS-2.
  for (genvar v = 0; v < NV; v++) begin : g_cluster
    localparam int unsigned C = v + 1;
    cluster_t prev_c, data_c;
    for (genvar k = 0; k < 9; k++) begin : g_map
      // cluster bit k = row k/3, column C-1+k%3 of the grid
      assign prev_c[k] = tsv_q[3 * (C - 1 + k % 3) + k / 3];
      assign data_c[k] = raw  [3 * (C - 1 + k % 3) + k / 3];
    end
    cam_cluster_coder #(.ST(ST)) u_coder (
      .prev_i   (prev_c),
      .data_i   (data_c),
      .ctrl_i   (ctrl_q[v]),
      .victim_o (victim[v]),
      .ctrl_o   (ctrl_next_o[v]),
      .retain_o (retain_o[v]),
      .class_o  ()
    );
  end

  always_comb begin
    tsv_d = raw;
    for (int v = 0; v < int'(NV); v++) tsv_d[3 * (v + 1) + 1] = victim[v];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tsv_q  <= '0;
      ctrl_q <= '0;
    end else if (en_i) begin
      tsv_q  <= tsv_d;
      ctrl_q <= ctrl_next_o;
    end
  end

  assign tsv_o  = tsv_q;
  assign ctrl_o = ctrl_q;

  // Bus rule: a control TSV switches only in a transfer where its victim
  // holds its value.
  for (genvar v = 0; v < NV; v++) begin : g_rule
    a_ctrl_only_on_hold: assert property (
      @(posedge clk) disable iff (!rst_n)
      (ctrl_q[v] != $past(ctrl_q[v])) |-> (tsv_q[3 * (v + 1) + 1] == $past(tsv_q[3 * (v + 1) + 1])));
  end

endmodule
