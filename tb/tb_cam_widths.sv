// tb_cam_widths -- the 3DCAM link at the bus widths of the TSV-overhead
// comparison: 9, 18, 27, 36, 45, 54 and 63 data bits.
//
// Each width is a 3 x (W/3) grid with W/3 - 2 control TSVs. The testbench
// checks that every link has that many control TSVs and no filler TSV, that
// every link returns every word one cycle later, and that each drops at least
// one victim transition. It prints the control-TSV overhead of every width
// (1/9 = 11% at 9 bits rising to 19/63 = 30% at 63 bits).
module tb_cam_widths;
  import cam_pkg::*;

  localparam int NW = 7;
  localparam int WS [NW] = '{9, 18, 27, 36, 45, 54, 63};
  localparam int NWORDS = 3000;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        en = 1'b0;
  logic [63:0] data_in = '0;
  logic [63:0] sent = '0;

  int checks = 0, failures = 0;
  int n_ctrl [NW];
  int n_tsv  [NW];
  int n_drop [NW];
  bit ok_rt  [NW];

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  for (genvar w = 0; w < NW; w++) begin : g_link
    localparam int W = WS[w];
    logic [W-1:0] dout;
    logic [W-1:0] tsv;
    logic [W/3-3:0] ctsv, retain;
    cam_link #(.DATA_W(W)) dut (
      .clk(clk), .rst_n(rst_n), .en_i(en), .data_i(data_in[W-1:0]), .data_o(dout),
      .tsv_o(tsv), .ctrl_tsv_o(ctsv), .retain_o(retain));
    initial begin
      n_ctrl[w] = $bits(ctsv);
      n_tsv[w]  = $bits(tsv);
      n_drop[w] = 0;
      ok_rt[w]  = 1'b1;
    end
    always @(negedge clk) if (rst_n && dout != sent[W-1:0]) ok_rt[w] = 1'b0;
    always @(posedge clk) if (rst_n && en) n_drop[w] += $countones(retain);
  end

  initial begin : watchdog
    repeat (NWORDS * 2 + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < NWORDS; i++) begin
      en      = ($urandom_range(0, 7) != 0);
      data_in = {$urandom, $urandom};
      @(posedge clk);
      if (en) sent = data_in;
      @(negedge clk);
    end
    #1;
    for (int w = 0; w < NW; w++) begin
      $display("%0d bits: %0d TSVs + %0d control TSVs, overhead %0.1f%%, dropped %0d",
               WS[w], n_tsv[w], n_ctrl[w], 100.0 * n_ctrl[w] / WS[w], n_drop[w]);
      check(n_ctrl[w] == WS[w] / 3 - 2, "control TSV count");
      check(n_tsv[w] == WS[w], "no filler TSVs");
      check(ok_rt[w], "round trip");
      check(n_drop[w] > 0, "some transition dropped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
