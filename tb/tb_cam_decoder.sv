// tb_cam_decoder -- self-checking testbench for cam_decoder at its default
// size (64 data bits, 3 x 22 TSVs, 20 control TSVs).
//
// The testbench plays the transmit side itself with the reference coder: it
// codes a stream of words, drives the resulting TSV and control values into
// the decoder, and checks in every cycle that the decoder returns the word
// that was coded, including cycles with the transfer strobe low. A directed
// part first toggles single control TSVs by hand and checks that exactly the
// matching victim bit is inverted.
module tb_cam_decoder;
  import cam_pkg::*;
  import cam_ref_pkg::*;

  localparam int DATA_W = 64;
  localparam int COLS   = 22;
  localparam int NV     = 20;
  localparam int TSV_W  = 66;
  localparam int NWORDS = 20000;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              en = 1'b0;
  logic [TSV_W-1:0]  tsv = '0;
  logic [NV-1:0]     ctrl = '0;
  logic [DATA_W-1:0] data;

  int checks = 0, failures = 0, n_toggle = 0;

  cam_decoder dut (
    .clk(clk), .rst_n(rst_n), .en_i(en), .tsv_i(tsv), .ctrl_i(ctrl), .data_o(data));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (NWORDS + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rbus_t raw, tsv_r, ctrl_r, nt, nc, nr;
    logic [DATA_W-1:0] word, sent;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // Directed: toggling control TSV v inverts exactly data bit 3(v+1)+1.
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      tsv  = {$urandom, $urandom, $urandom};
      ctrl = '0;
      en   = 1'b1;
      @(negedge clk);
      check(data == tsv[DATA_W-1:0], "no toggle");
      @(negedge clk);
      ctrl[v] = 1'b1;
      #1;
      begin
        logic [DATA_W-1:0] e;
        e = tsv[DATA_W-1:0];
        e[3*(v+1)+1] = ~e[3*(v+1)+1];
        check(data == e, $sformatf("toggle of control %0d", v));
      end
      @(negedge clk);
      #1;
      check(data == tsv[DATA_W-1:0], "toggle seen only once");
    end
    // Stream through the reference coder.
    @(negedge clk);
    rst_n = 1'b0;
    en    = 1'b0;
    tsv   = '0;
    ctrl  = '0;
    @(negedge clk);
    rst_n = 1'b1;
    tsv_r  = '0;
    ctrl_r = '0;
    sent   = '0;
    word   = '0;
    for (int i = 0; i < NWORDS; i++) begin
      en = ($urandom_range(0, 9) != 0);
      if (en) begin
        word = ($urandom_range(0, 3) == 0) ? ~word : {$urandom, $urandom};
        raw = '0;
        raw[DATA_W-1:0] = word;
        ref_encode(COLS, 20, raw, tsv_r, ctrl_r, nt, nc, nr);
        n_toggle += $countones(nr[NV-1:0]);
      end
      @(posedge clk);
      #1;
      // The coder's edge: the TSVs now carry the new transfer.
      if (en) begin
        tsv_r = nt;
        ctrl_r = nc;
        sent = word;
      end
      tsv  = tsv_r[TSV_W-1:0];
      ctrl = ctrl_r[NV-1:0];
      @(negedge clk);
      check(data == sent, "decoded word");
    end
    $display("control toggles decoded=%0d", n_toggle);
    check(n_toggle > 0, "some control toggles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
