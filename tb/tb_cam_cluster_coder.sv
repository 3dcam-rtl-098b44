// tb_cam_cluster_coder -- self-checking testbench for cam_cluster_coder.
//
// Two coders are checked, one at the default switch threshold ST = 20 and one
// at ST = 30. For every (previous cluster, data, control) combination
// (2^19 of them) it checks the retain decision (victim switches and the
// reference class exceeds ST), the victim value, the control toggle and the
// reported class, and that a dropped transition leaves the victim with a
// class of 19 or less. The worked examples of the paper are checked by name:
// four patterns of classes 24, 24, 31 and 39 are coded to classes 12, 8, 11
// and 19 with the control TSV toggled, and a class-5 pattern is left alone.
module tb_cam_cluster_coder;
  import cam_pkg::*;
  import cam_ref_pkg::*;

  cluster_t prev, data;
  logic     ctrl;
  logic     victim_a, ctrl_a, retain_a;
  logic     victim_b, ctrl_b, retain_b;
  xclass_t  cls_a, cls_b;
  int       checks   = 0;
  int       failures = 0;

  cam_cluster_coder dut_a (
    .prev_i(prev), .data_i(data), .ctrl_i(ctrl),
    .victim_o(victim_a), .ctrl_o(ctrl_a), .retain_o(retain_a), .class_o(cls_a));

  cam_cluster_coder #(.ST(30)) dut_b (
    .prev_i(prev), .data_i(data), .ctrl_i(ctrl),
    .victim_o(victim_b), .ctrl_o(ctrl_b), .retain_o(retain_b), .class_o(cls_b));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s: prev=%b data=%b ctrl=%b", what, prev, data, ctrl);
    end
  endtask

  task automatic check_one(input int st, input logic v, input logic c, input logic r, input int cls);
    int        ref_cls = ref_class(rcluster_t'(prev), rcluster_t'(data));
    bit        exp_r   = (prev[4] != data[4]) && (ref_cls > st);
    rcluster_t coded   = rcluster_t'(data);
    coded[4] = exp_r ? prev[4] : data[4];
    check(cls == ref_cls, $sformatf("class ST=%0d", st));
    check(r == exp_r, $sformatf("retain ST=%0d", st));
    check(v == coded[4], $sformatf("victim ST=%0d", st));
    check(c == (ctrl ^ exp_r), $sformatf("control ST=%0d", st));
    if (exp_r) check(ref_class(rcluster_t'(prev), coded) <= 19, "class after retain");
  endtask

  task automatic example(input string s, input bit exp_retain, input int exp_after);
    rcluster_t coded;
    for (int k = 0; k < 9; k++) begin
      prev[k] = (s[k] == "d");
      data[k] = (s[k] == "u");
    end
    ctrl = 1'b0;
    #1;
    coded    = rcluster_t'(data);
    coded[4] = victim_a;
    check(retain_a == exp_retain, {"example retain ", s});
    check(ctrl_a == exp_retain, {"example control ", s});
    check(ref_class(rcluster_t'(prev), coded) == exp_after, {"example class after ", s});
  endtask

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    example("-ud-du-ud", 1'b1, 12);
    example("dd--u-u-d", 1'b1, 8);
    example("-d-dud-d-", 1'b1, 11);
    example("ddddudddd", 1'b1, 19);
    example("ddduddddd", 1'b0, 5);
    for (int p = 0; p < 512; p++)
      for (int d = 0; d < 512; d++)
        for (int c = 0; c < 2; c++) begin
          prev = cluster_t'(p);
          data = cluster_t'(d);
          ctrl = c[0];
          #1;
          check_one(20, victim_a, ctrl_a, retain_a, int'(cls_a));
          check_one(30, victim_b, ctrl_b, retain_b, int'(cls_b));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
