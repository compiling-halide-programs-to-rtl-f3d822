// Self-checking test of address_gen, the recurrence affine generator.
// The loop nest is modelled in the testbench, which supplies `step` and the
// increment level; the output is compared with the explicit affine function
// s0*i0 + s1*i1 + s2*i2 + offset. Cases: the downsample-by-2 walk over an
// 8x8 image (extents 4,4, strides 2,16, deltas 2,10) and a random 3-level
// case with negative strides.
module tb_address_gen;
  import ub_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, step = 0;
  lvl_t level;
  logic [MAX_DIMS-1:0][ADDR_W-1:0] delta;
  logic [ADDR_W-1:0] offset, value;
  int checks = 0, failures = 0;

  address_gen #(.W(ADDR_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic run(int e0, int e1, int e2, int s0, int s1, int s2, int off, bit show);
    int i0 = 0, i1 = 0, i2 = 0, expv;
    delta = '0;
    delta[0] = ADDR_W'(s0);
    delta[1] = ADDR_W'(s1 - s0 * (e0 - 1));
    delta[2] = ADDR_W'(s2 - s1 * (e1 - 1) - s0 * (e0 - 1));
    offset = ADDR_W'(off);
    clear = 1; @(negedge clk); clear = 0;
    for (int n = 0; n < e0 * e1 * e2; n++) begin
      expv = s0 * i0 + s1 * i1 + s2 * i2 + off;
      check(value == ADDR_W'(expv), "affine value");
      if (show && n < 6) $display("addr[%0d] = %0d", n, value);
      level = (i0 != e0 - 1) ? lvl_t'(0) : (i1 != e1 - 1) ? lvl_t'(1) : lvl_t'(2);
      step = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (step) begin
        i0++;
        if (i0 == e0) begin i0 = 0; i1++; end
        if (i1 == e1) begin i1 = 0; i2++; end
      end else n--;
      step = 0;
    end
  endtask

  initial begin
    level = '0; delta = '0; offset = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(4, 4, 1, 2, 16, 0, 0, 1);            // ranges (4,4), strides (2,16): d_y = 10
    run(5, 3, 4, 3, -7, 100, 1000, 0);
    run(6, 2, 3, 1, 6, 12, 5, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
