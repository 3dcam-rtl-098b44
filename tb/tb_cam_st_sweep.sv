// tb_cam_st_sweep -- switch-threshold sweep of the 3DCAM link.
//
// Eight 64-bit links with ST = 0, 5, 10, 15, 20, 25, 30 and 39 receive the
// same stream of random words. Every link must return every word one cycle
// later. For each threshold the testbench reports how many victim
// transitions were dropped and the mean per-transfer worst victim class of
// the coded bus, measured on the link's own TSV nets; the run without coding
// is the ST = 39 link, which can never drop a transition (no class is above
// 39). The reported numbers are the counterpart of the threshold sweep used
// to pick ST = 20, with one difference: they count only the data victims, not
// the extra switching of the control TSVs, which is what makes a low
// threshold costly. The checks are on the round trip, on ST = 39 dropping
// nothing, and on ST = 0 dropping more than ST = 20.
module tb_cam_st_sweep;
  import cam_pkg::*;
  import cam_ref_pkg::*;

  localparam int DATA_W = 64;
  localparam int COLS   = 22;
  localparam int NV     = 20;
  localparam int TSV_W  = 66;
  localparam int NST    = 8;
  localparam int STS [NST] = '{0, 5, 10, 15, 20, 25, 30, 39};
  localparam int NWORDS = 3000;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              en = 1'b0;
  logic [DATA_W-1:0] data_in = '0;
  logic [DATA_W-1:0] sent = '0;

  logic [DATA_W-1:0] data_out [NST];
  logic [TSV_W-1:0]  tsv      [NST];
  logic [NV-1:0]     retain   [NST];

  int  checks = 0, failures = 0;
  int  n_drop  [NST];
  real sum_max [NST];

  for (genvar s = 0; s < NST; s++) begin : g_link
    cam_link #(.ST(STS[s])) dut (
      .clk(clk), .rst_n(rst_n), .en_i(en), .data_i(data_in), .data_o(data_out[s]),
      .tsv_o(tsv[s]), .ctrl_tsv_o(), .retain_o(retain[s]));
  end

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (NWORDS * 2 + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rbus_t bus_old [NST];
    int mx, sm;
    for (int s = 0; s < NST; s++) begin
      n_drop[s] = 0;
      sum_max[s] = 0.0;
      bus_old[s] = '0;
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < NWORDS; i++) begin
      en      = ($urandom_range(0, 7) != 0);
      data_in = {$urandom, $urandom};
      #1;
      if (en) for (int s = 0; s < NST; s++) n_drop[s] += $countones(retain[s]);
      @(posedge clk);
      if (en) sent = data_in;
      @(negedge clk);
      for (int s = 0; s < NST; s++) begin
        rbus_t bus_new;
        bus_new = '0;
        check(data_out[s] == sent, $sformatf("round trip at ST=%0d", STS[s]));
        bus_new[TSV_W-1:0] = tsv[s];
        if (en) begin
          victim_classes(COLS, bus_old[s], bus_new, mx, sm);
          sum_max[s] += mx;
        end
        bus_old[s] = bus_new;
      end
    end
    for (int s = 0; s < NST; s++)
      $display("ST=%0d: dropped transitions %0d, mean worst victim class %0.2f",
               STS[s], n_drop[s], sum_max[s] / NWORDS);
    check(n_drop[NST-1] == 0, "ST = 39 drops nothing");
    check(n_drop[0] > n_drop[4], "ST = 0 drops more than ST = 20");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
