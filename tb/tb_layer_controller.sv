// tb_layer_controller -- checks the layer sequence: configuration latched on
// start, offset cache started, stages launched only after it is done, done
// only after all three stages have reported (in any order), err for a
// rejected configuration, start ignored while busy, and the cycle counter.
module tb_layer_controller;
  import deconv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, oc_done = 0, cfg_ok = 0, ir_done = 0, wr_done = 0, ow_done = 0;
  layer_cfg_t cfg, cfg_q;
  logic oc_start, go, busy, done, err;
  logic [31:0] cycles;

  layer_controller dut (.*);

  int checks = 0, failures = 0;
  int n_oc_start = 0, n_go = 0, n_done = 0;
  int edge_n = 0, start_edge = 0, done_edge = 0;
  always @(posedge clk) if (rst_n) begin
    edge_n++;
    n_oc_start += oc_start;
    n_go       += go;
    n_done     += done;
    if (start && !busy) start_edge = edge_n;
    if (done) done_edge = edge_n - 1;     // done was set at the previous edge
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one layer: offset cache takes pre cycles, stages finish d0, d1, d2 cycles after go
  task automatic layer(bit ok, int pre, int d0, int d1, int d2);
    layer_cfg_t c;
    c = layer_cfg_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
    cfg = c;
    n_oc_start = 0; n_go = 0; n_done = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cfg = '0;
    check(cfg_q == c, "configuration not latched");
    check(oc_start && busy, "offset cache not started");
    repeat (pre) @(negedge clk);
    check(n_go == 0 && !go, "stages launched before the offsets were ready");
    // a second start while busy must be ignored
    start = 1; @(negedge clk); start = 0;
    cfg_ok = ok; oc_done = 1; @(negedge clk); oc_done = 0;
    if (!ok) begin
      @(negedge clk);
      check(n_done == 1 && err && !busy && n_go == 0, "rejected configuration not reported");
      check(int'(cycles) == done_edge - start_edge + 1, $sformatf("cycles %0d, expected %0d", cycles, done_edge - start_edge + 1));
      return;
    end
    check(go, "stages not launched");
    for (int i = 1; i <= 60; i++) begin
      ir_done = (i == d0); wr_done = (i == d1); ow_done = (i == d2);
      @(negedge clk);
      ir_done = 0; wr_done = 0; ow_done = 0;
      if (i < d0 || i < d1 || i < d2) check(!done && n_done == 0, "done before all stages finished");
    end
    check(n_done == 1 && !busy && !err, "done not reported once");
    check(n_oc_start == 1, "second start not ignored");
    check(int'(cycles) == done_edge - start_edge + 1, $sformatf("cycles %0d, expected %0d", cycles, done_edge - start_edge + 1));
    check(done_edge - start_edge == pre + 2 + ((d0 > d1) ? ((d0 > d2) ? d0 : d2) : ((d1 > d2) ? d1 : d2)),
          $sformatf("layer length %0d", done_edge - start_edge));
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    layer(1, 4, 10, 3, 20);
    layer(1, 2, 30, 30, 5);
    layer(0, 3, 0, 0, 0);
    layer(1, 6, 1, 2, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
