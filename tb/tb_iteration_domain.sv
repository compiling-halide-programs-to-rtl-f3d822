// Self-checking test of iteration_domain: a 3-level nest (4 x 3 x 2) is
// stepped with random gaps; the counters, the reported increment level, the
// last-point flag and done are compared with a software loop nest. A second
// pass after `clear` uses a 1-level domain of extent 5.
module tb_iteration_domain;
  import ub_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, step = 0;
  id_cfg_t cfg;
  lvl_t level;
  logic last, done;
  logic [MAX_DIMS-1:0][CNT_W-1:0] iter;
  int checks = 0, failures = 0;

  iteration_domain dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic run_nest(int dims, int e0, int e1, int e2);
    int i0, i1, i2, exp_lvl, npts;
    cfg = '0;
    cfg.dims = 3'(dims);
    cfg.extent[0] = CNT_W'(e0); cfg.extent[1] = CNT_W'(e1); cfg.extent[2] = CNT_W'(e2);
    for (int k = 3; k < int'(MAX_DIMS); k++) cfg.extent[k] = 1;
    npts = e0 * (dims > 1 ? e1 : 1) * (dims > 2 ? e2 : 1);
    i0 = 0; i1 = 0; i2 = 0;
    for (int n = 0; n < npts; n++) begin
      @(negedge clk);
      check(iter[0] == CNT_W'(i0) && iter[1] == CNT_W'(i1) && iter[2] == CNT_W'(i2), "counters");
      exp_lvl = (i0 != e0 - 1) ? 0 : (dims > 1 && i1 != e1 - 1) ? 1 : (dims > 2 && i2 != e2 - 1) ? 2 : 0;
      check(level == lvl_t'(exp_lvl), "level");
      check(last == (n == npts - 1), "last");
      check(!done, "not done");
      step = 1;
      @(negedge clk);
      step = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
      i0++;
      if (i0 == e0) begin i0 = 0; i1++; end
      if (i1 == e1 && dims > 1) begin i1 = 0; i2++; end
    end
    @(negedge clk);
    check(done, "done after last point");
    check(iter[0] == 0 && iter[1] == 0 && iter[2] == 0, "wrapped to zero");
    step = 1; @(negedge clk); step = 0;
    check(done && iter[0] == 0, "done holds");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_nest(3, 4, 3, 2);
    clear = 1; @(negedge clk); clear = 0;
    check(!done, "clear resets done");
    run_nest(1, 5, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
