// tb_cam_link_ctrl -- end-to-end testbench of the 3DCAM link with its control
// TSVs coded as well (CTRL_CODING = 1): the 20 control bits travel on a
// 3 x 7 grid of control TSVs with 5 control-of-control TSVs. Otherwise the
// same as tb_cam_link (64 data bits, 3 x 22 data TSVs, ST = 20).
//
// Words are sent from die X and compared on die Y one cycle later, in every
// cycle, including cycles with the transfer strobe low. The TSV and control
// TSV nets are compared with the reference coder, so the coded bus itself is
// checked, not only the round trip. Four synthetic traffic kinds are sent in
// turn: uniform random words, small signed integers, slowly moving addresses
// and repeated/inverted words; for each the testbench reports the mean and
// the mean per-transfer maximum of the victim crosstalk classes on the
// uncoded and on the coded bus, and a histogram of the classes over the whole
// run. The mechanisms of the design are counted and each must occur: a
// dropped victim transition with its control toggle, a victim transition
// kept because its class is at or below ST, an idle cycle with the strobe
// low, and a reset in the middle of traffic. It also checks that coding lowers
// the mean and the worst victim class of every traffic kind, and that the
// victim transfers above ST become far fewer.
module tb_cam_link_ctrl;
  import cam_pkg::*;
  import cam_ref_pkg::*;

  localparam bit CTRL   = 1'b1;
  localparam int DATA_W = 64;
  localparam int COLS   = 22;
  localparam int NV     = 20;
  localparam int TSV_W  = 66;
  localparam int COLS2  = 7;
  localparam int NV2    = 5;
  localparam int CTSV_W = CTRL ? 3 * COLS2 + NV2 : NV;
  localparam int NWORDS = 4000;   // per traffic kind
  localparam int NKINDS = 4;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              en = 1'b0;
  logic [DATA_W-1:0] data_in = '0;
  logic [DATA_W-1:0] data_out;
  logic [TSV_W-1:0]  tsv;
  logic [CTSV_W-1:0] ctsv;
  logic [NV-1:0]     retain;

  cam_link #(.CTRL_CODING(1'b1)) dut (
    .clk(clk), .rst_n(rst_n), .en_i(en), .data_i(data_in), .data_o(data_out),
    .tsv_o(tsv), .ctrl_tsv_o(ctsv), .retain_o(retain));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_retain = 0, n_kept = 0, n_idle = 0, n_reset = 0, n_retain2 = 0;
  int hist_raw [NUM_CLASSES];
  int hist_cod [NUM_CLASSES];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [DATA_W-1:0] gen(int kind, int i, logic [DATA_W-1:0] last);
    case (kind)
      0: return {$urandom, $urandom};
      1: return 64'($signed(32'($urandom_range(0, 2000)) - 32'sd1000));
      2: return last + 64'($urandom_range(0, 3) * 8);
      default: return ($urandom_range(0, 1) == 1) ? ~last : {$urandom, $urandom};
    endcase
  endfunction

  initial begin : watchdog
    repeat (NKINDS * NWORDS * 2 + 2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference state of both coding levels.
  rbus_t r_tsv, r_ctrl, r_ctsv, r_cctrl;

  task automatic ref_reset();
    r_tsv = '0; r_ctrl = '0; r_ctsv = '0; r_cctrl = '0;
  endtask

  function automatic logic [CTSV_W-1:0] ref_ctrl_nets();
    rbus_t b = CTRL ? (r_ctsv | (r_cctrl << (3 * COLS2))) : r_ctrl;
    return b[CTSV_W-1:0];
  endfunction

  initial begin
    logic [DATA_W-1:0] sent;
    rbus_t raw, nt, nc, nr, ct, cc, cr;
    int mx, sm, mx_c, sm_c;
    real raw_sum, cod_sum, raw_max, cod_max;
    foreach (hist_raw[k]) begin hist_raw[k] = 0; hist_cod[k] = 0; end
    ref_reset();
    sent = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int kind = 0; kind < NKINDS; kind++) begin
      raw_sum = 0; cod_sum = 0; raw_max = 0; cod_max = 0;
      for (int i = 0; i < NWORDS; i++) begin
        // Reset once in the middle of the run.
        if (kind == 2 && i == NWORDS / 2) begin
          rst_n = 1'b0;
          #1;
          ref_reset();
          sent = '0;
          check(tsv == '0 && ctsv == '0, "bus cleared by reset");
          check(data_out == '0, "output cleared by reset");
          n_reset++;
          @(negedge clk) rst_n = 1'b1;
        end
        en      = ($urandom_range(0, 7) != 0);
        data_in = gen(kind, i, data_in);
        #1;
        if (en) begin
          raw = '0;
          raw[DATA_W-1:0] = data_in;
          ref_encode(COLS, 20, raw, r_tsv, r_ctrl, nt, nc, nr);
          check(retain == nr[NV-1:0], "retain_o");
          n_retain += $countones(nr[NV-1:0]);
          for (int c = 1; c <= COLS - 2; c++)
            if (raw[3*c+1] != r_tsv[3*c+1] && !nr[c-1]) n_kept++;
          // Crosstalk seen by the victims without and with coding.
          victim_classes(COLS, r_tsv, raw, mx, sm);
          victim_classes(COLS, r_tsv, nt, mx_c, sm_c);
          raw_sum += sm;  cod_sum += sm_c;
          raw_max += mx;  cod_max += mx_c;
          for (int c = 1; c <= COLS - 2; c++) begin
            hist_raw[ref_class(cluster_at(r_tsv, c), cluster_at(raw, c))]++;
            hist_cod[ref_class(cluster_at(r_tsv, c), cluster_at(nt, c))]++;
          end
          if (CTRL) begin
            ref_encode(COLS2, 20, nc, r_ctsv, r_cctrl, ct, cc, cr);
            n_retain2 += $countones(cr[NV2-1:0]);
            r_ctsv = ct; r_cctrl = cc;
          end
          r_tsv = nt; r_ctrl = nc;
          sent = data_in;
        end else n_idle++;
        @(negedge clk);
        check(data_out == sent, "received word");
        check(tsv == r_tsv[TSV_W-1:0], "data TSV nets");
        check(ctsv == ref_ctrl_nets(), "control TSV nets");
      end
      $display("traffic %0d: mean victim class uncoded %0.3f coded %0.3f; mean worst class uncoded %0.2f coded %0.2f",
               kind, raw_sum / (NWORDS * NV), cod_sum / (NWORDS * NV),
               raw_max / NWORDS, cod_max / NWORDS);
      check(cod_max < raw_max && cod_sum < raw_sum, "coding lowers the crosstalk classes");
    end
    $write("class histogram uncoded:");
    foreach (hist_raw[k]) $write(" %0d", hist_raw[k]);
    $write("\nclass histogram coded:  ");
    foreach (hist_cod[k]) $write(" %0d", hist_cod[k]);
    $display("");
    $display("dropped=%0d kept=%0d idle=%0d resets=%0d control-level drops=%0d",
             n_retain, n_kept, n_idle, n_reset, n_retain2);
    check(n_retain > 0, "mechanism: victim transition dropped");
    check(n_kept > 0, "mechanism: transition kept at or below ST");
    check(n_idle > 0, "mechanism: idle cycle");
    check(n_reset > 0, "mechanism: reset");
    if (CTRL) check(n_retain2 > 0, "mechanism: control TSV transition dropped");
    begin
      int top_raw = 0, top_cod = 0;
      for (int k = 21; k < NUM_CLASSES; k++) begin top_raw += hist_raw[k]; top_cod += hist_cod[k]; end
      $display("victim transfers above ST: uncoded %0d coded %0d", top_raw, top_cod);
      // Each cluster alone can always get below ST, but overlapping clusters
      // decide in parallel, so a neighbour's dropped transition can lift a
      // victim back above ST: the coded count is lower, not zero.
      check(top_raw > 0 && top_cod < top_raw / 4, "classes above ST pushed down");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
