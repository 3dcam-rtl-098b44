// cam_ref_pkg -- reference model of the 3DCAM link for the testbenches.
//
// It is written independently of the RTL: the crosstalk class comes from the
// geometric, real-valued form of the coupling model (direct neighbours at
// squared distance 1 weigh 1.5 C_beta, diagonal ones at squared distance 2
// weigh 1.0 C_beta; C_eff = C_G + x C_beta is class 0 for x = 0 and class
// 2x - 1 otherwise), and the bus coder is a plain loop over victims on
// unpacked arrays indexed by (row, column).
package cam_ref_pkg;

  localparam int MAXW = 256;

  typedef bit [8:0]      rcluster_t;
  typedef bit [MAXW-1:0] rbus_t;

  function automatic int ref_class(rcluster_t p, rcluster_t n);
    real x  = 0.0;
    int  d0 = int'(n[4]) - int'(p[4]);
    for (int k = 0; k < 9; k++) begin
      int r2 = (k / 3 - 1) * (k / 3 - 1) + (k % 3 - 1) * (k % 3 - 1);
      int dk = int'(n[k]) - int'(p[k]);
      int t  = (d0 > dk) ? d0 - dk : dk - d0;
      if (r2 == 1) x += 1.5 * t;
      if (r2 == 2) x += 1.0 * t;
    end
    if (x == 0.0) return 0;
    return int'(2.0 * x) - 1;
  endfunction

  // Cluster around the middle-row TSV of column c, from a bus whose TSV at
  // (row r, column col) is bit 3*col + r.
  function automatic rcluster_t cluster_at(rbus_t bus, int c);
    rcluster_t cl;
    for (int r = 0; r < 3; r++)
      for (int dc = -1; dc <= 1; dc++)
        cl[r * 3 + dc + 1] = bus[3 * (c + dc) + r];
    return cl;
  endfunction

  // One transfer of the coder: raw word -> TSV values and control values.
  task automatic ref_encode(input int cols, input int st, input rbus_t raw,
                            input rbus_t tsv_prev, input rbus_t ctrl_prev,
                            output rbus_t tsv_next, output rbus_t ctrl_next,
                            output rbus_t retain);
    tsv_next  = raw;
    ctrl_next = ctrl_prev;
    retain    = '0;
    for (int c = 1; c <= cols - 2; c++) begin
      int v   = 3 * c + 1;
      int cls = ref_class(cluster_at(tsv_prev, c), cluster_at(raw, c));
      if (raw[v] != tsv_prev[v] && cls > st) begin
        tsv_next[v]      = tsv_prev[v];
        ctrl_next[c - 1] = !ctrl_prev[c - 1];
        retain[c - 1]    = 1'b1;
      end
    end
  endtask

  // Highest and summed victim class of one transfer on a bus.
  task automatic victim_classes(input int cols, input rbus_t bus_old, input rbus_t bus_new,
                                output int max_cls, output int sum_cls);
    max_cls = 0;
    sum_cls = 0;
    for (int c = 1; c <= cols - 2; c++) begin
      int cls = ref_class(cluster_at(bus_old, c), cluster_at(bus_new, c));
      sum_cls += cls;
      if (cls > max_cls) max_cls = cls;
    end
  endtask

endpackage
