// cam_link -- a 3DCAM-coded vertical link between two stacked dies.
//
// Die X holds a cam_encoder, die Y a cam_decoder; between them run the data
// TSVs (a 3 x COLS grid) and the control TSVs. The TSVs are ideal wires here:
// their coupling delay is a physical effect, and the nets are brought out on
// tsv_o and ctrl_tsv_o so that a testbench can measure the crosstalk classes
// the bus actually sees.
//
// With CTRL_CODING = 0 (the default, the configuration whose TSV count the
// paper reports: 64 data bits on 66 TSVs plus 20 control TSVs) the control
// TSVs carry the encoder's control bits directly. With CTRL_CODING = 1 the
// control bits are themselves coded by a second 3DCAM encoder, as the paper
// suggests for coupling among the control TSVs: the NV control bits go on a
// 3 x COLS2 grid with NV2 control-of-control TSVs. The second level codes the
// control values that the first level is about to load, so both levels switch
// at the same clock edge; on die Y the second-level decoder recovers the
// control bits first and the first-level decoder uses them.
//
// Interface: data_i / en_i - word to send and its transfer strobe (die X)
//            data_o        - received word (die Y)
//            tsv_o         - data TSV nets, 3*COLS bits
//            ctrl_tsv_o    - control TSV nets, CTSV_W bits
//            retain_o      - victims whose transition the next edge drops
// Timing:    a word taken at a clock edge with en_i high appears on data_o
//            during the following cycle and stays until the next transfer.
//            Both dies share clk, rst_n and en_i.
module cam_link
  import cam_pkg::*;
#(
  parameter int unsigned DATA_W      = 64,
  parameter int unsigned ST          = ST_DEFAULT,
  parameter bit          CTRL_CODING = 1'b0,
  parameter int unsigned COLS        = (DATA_W + 2) / 3,
  parameter int unsigned NV          = COLS - 2,
  parameter int unsigned TSV_W       = 3 * COLS,
  parameter int unsigned COLS2       = (NV + 2) / 3,
  parameter int unsigned NV2         = (COLS2 >= 2) ? COLS2 - 2 : 0,
  parameter int unsigned CTSV_W      = CTRL_CODING ? 3 * COLS2 + NV2 : NV
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en_i,
  input  logic [DATA_W-1:0] data_i,
  output logic [DATA_W-1:0] data_o,
  output logic [TSV_W-1:0]  tsv_o,
  output logic [CTSV_W-1:0] ctrl_tsv_o,
  output logic [NV-1:0]     retain_o
);

  logic [NV-1:0] ctrl_q;      // first-level control bits, as registered
  logic [NV-1:0] ctrl_next;   // first-level control bits of the next edge
  logic [NV-1:0] ctrl_rx;     // control bits recovered on die Y

  // ---------------------------------------------------------------- die X
  cam_encoder #(
    .DATA_W (DATA_W),
    .COLS   (COLS),
    .ST     (ST)
  ) u_enc (
    .clk         (clk),
    .rst_n       (rst_n),
    .en_i        (en_i),
    .data_i      (data_i),
    .tsv_o       (tsv_o),
    .ctrl_o      (ctrl_q),
    .ctrl_next_o (ctrl_next),
    .retain_o    (retain_o)
  );

  if (CTRL_CODING) begin : g_ctrl_coded
    logic [3*COLS2-1:0] ctsv;
    logic [NV2-1:0]     cctrl;

    cam_encoder #(
      .DATA_W (NV),
      .COLS   (COLS2),
      .ST     (ST)
    ) u_ctrl_enc (
      .clk         (clk),
      .rst_n       (rst_n),
      .en_i        (en_i),
      .data_i      (ctrl_next),
      .tsv_o       (ctsv),
      .ctrl_o      (cctrl),
      .ctrl_next_o (),
      .retain_o    ()
    );

    assign ctrl_tsv_o = {cctrl, ctsv};

    // ------------------------------------------------------------ die Y
    cam_decoder #(
      .DATA_W (NV),
      .COLS   (COLS2)
    ) u_ctrl_dec (
      .clk    (clk),
      .rst_n  (rst_n),
      .en_i   (en_i),
      .tsv_i  (ctrl_tsv_o[3*COLS2-1:0]),
      .ctrl_i (ctrl_tsv_o[CTSV_W-1:3*COLS2]),
      .data_o (ctrl_rx)
    );
  end else begin : g_ctrl_plain
    assign ctrl_tsv_o = ctrl_q;
    assign ctrl_rx    = ctrl_tsv_o;
  end

  // ---------------------------------------------------------------- die Y
  cam_decoder #(
    .DATA_W (DATA_W),
    .COLS   (COLS)
  ) u_dec (
    .clk    (clk),
    .rst_n  (rst_n),
    .en_i   (en_i),
    .tsv_i  (tsv_o),
    .ctrl_i (ctrl_rx),
    .data_o (data_o)
  );

endmodule
