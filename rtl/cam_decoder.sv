// cam_decoder -- receive side (die Y) of a 3DCAM-coded TSV bus.
//
// The non-victim TSVs carry their data bits unchanged. For each victim (the
// middle-row TSV of each 3x3 cluster, see cam_encoder for the layout) the
// decoder compares the control TSV with its value at the previous transfer.
// If it toggled, the encoder dropped the victim's transition, so the data bit
// is the complement of the value the victim still carries; otherwise the
// victim carries its data bit. The previous control values sit in one
// register per victim, loaded at every transfer (en_i high) and reset to 0,
// matching the encoder's reset.
// The paper gives the decoder's function (recover the victim from the
// control signal); the toggle detection with a register of the previous
// control values is this design's choice, the simplest circuit that does it.
// Most output bits are therefore plain wires from the TSV inputs, and the two
// filler TSVs of the 64-bit grid are received but unused; both are intended.
//
// Interface: tsv_i  - the 3*COLS received TSVs
//            ctrl_i - the NV received control TSVs
//            en_i   - the encoder loads a new transfer at this edge
//            data_o - decoded data word
// Timing:    data_o is combinational in tsv_i / ctrl_i; it shows a word in the
//            cycle after the encoder's clock edge that sent it.
module cam_decoder
  import cam_pkg::*;
#(
  parameter int unsigned DATA_W = 64,
  parameter int unsigned COLS   = (DATA_W + 2) / 3,
  parameter int unsigned NV     = COLS - 2,
  parameter int unsigned TSV_W  = 3 * COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en_i,
  input  logic [TSV_W-1:0]  tsv_i,
  input  logic [NV-1:0]     ctrl_i,
  output logic [DATA_W-1:0] data_o
);

  logic [NV-1:0]    ctrl_prev;
  logic [TSV_W-1:0] word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    ctrl_prev <= '0;
    else if (en_i) ctrl_prev <= ctrl_i;
  end

  always_comb begin
    word = tsv_i;
    for (int v = 0; v < int'(NV); v++)
      word[3 * (v + 1) + 1] = tsv_i[3 * (v + 1) + 1] ^ (ctrl_i[v] ^ ctrl_prev[v]);
    data_o = word[DATA_W-1:0];
  end

endmodule
