// tb_cam_encoder -- self-checking testbench for cam_encoder at its default
// size (64 data bits on a 3 x 22 TSV grid, 20 control TSVs, ST = 20).
//
// A stream of words (random, repeated, complemented, stripe and single-bit
// patterns) is sent with transfer strobes that are sometimes low. Before each
// clock edge the combinational retain and next-control outputs are compared
// with the reference coder; after it the registered TSV and control drivers
// are compared, which also checks the one-cycle latency and that nothing
// moves while the strobe is low. It also checks the reset state and counts
// how many transitions were dropped and how many victim transitions were let
// through at or below the threshold; both must happen.
module tb_cam_encoder;
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
  logic [DATA_W-1:0] data = '0;
  logic [TSV_W-1:0]  tsv;
  logic [NV-1:0]     ctrl, ctrl_next, retain;

  int checks = 0, failures = 0;
  int n_retain = 0, n_below = 0, n_idle = 0;

  rbus_t ref_tsv = '0, ref_ctrl = '0;

  cam_encoder dut (
    .clk(clk), .rst_n(rst_n), .en_i(en), .data_i(data),
    .tsv_o(tsv), .ctrl_o(ctrl), .ctrl_next_o(ctrl_next), .retain_o(retain));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [DATA_W-1:0] next_word(int i, logic [DATA_W-1:0] last);
    case ($urandom_range(0, 7))
      0:       return last;
      1:       return ~last;
      2:       return {32{2'(i)}};
      3:       return last ^ (64'(1) << $urandom_range(0, DATA_W - 1));
      default: return {$urandom, $urandom};
    endcase
  endfunction

  initial begin : watchdog
    repeat (NWORDS * 2 + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rbus_t raw, exp_tsv, exp_ctrl, exp_ret;
    repeat (3) @(posedge clk);
    #1;
    check(tsv == '0 && ctrl == '0, "reset state");
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < NWORDS; i++) begin
      @(negedge clk);
      en   = ($urandom_range(0, 9) != 0);
      data = next_word(i, data);
      #1;
      raw = '0;
      raw[DATA_W-1:0] = data;
      ref_encode(COLS, 20, raw, ref_tsv, ref_ctrl, exp_tsv, exp_ctrl, exp_ret);
      check(retain == exp_ret[NV-1:0], "retain_o");
      check(ctrl_next == exp_ctrl[NV-1:0], "ctrl_next_o");
      if (en) begin
        n_retain += $countones(exp_ret[NV-1:0]);
        for (int c = 1; c <= COLS - 2; c++)
          if (raw[3*c+1] != ref_tsv[3*c+1] && !exp_ret[c-1]) n_below++;
        ref_tsv  = exp_tsv;
        ref_ctrl = exp_ctrl;
      end else n_idle++;
      @(posedge clk);
      #1;
      check(tsv == ref_tsv[TSV_W-1:0], "tsv_o");
      check(ctrl == ref_ctrl[NV-1:0], "ctrl_o");
    end
    $display("dropped transitions=%0d passed at or below threshold=%0d idle cycles=%0d",
             n_retain, n_below, n_idle);
    check(n_retain > 0, "some transition dropped");
    check(n_below > 0, "some transition passed at or below the threshold");
    check(n_idle > 0, "some idle cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
