// Self-checking test of schedule_gen. A cycle counter runs from 0; the
// domain is an 8 x 3 nest with schedule 65 + 16*y + x (the output-port
// schedule shape of the 2x2 blur example). The testbench models the nest,
// and checks that `en` fires exactly at every scheduled cycle and nowhere
// else, that a stall cycle suppresses the enable and postpones nothing
// (the counter stops with it), and that the port stays silent once done.
module tb_schedule_gen;
  import ub_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, stall = 0, port_enable = 1, domain_done = 0;
  lvl_t level;
  time_t cycle, sched;
  sg_cfg_t cfg;
  logic en;
  int checks = 0, failures = 0;

  schedule_gen dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s cycle %0d", what, cycle);
    end
  endtask

  int x = 0, y = 0, fired = 0, expt;
  bit stalled_once = 0;

  initial begin
    cfg = '0;
    cfg.delta[0] = 1;
    cfg.delta[1] = TIME_W'(16 - 7);
    cfg.offset   = 65;
    cycle = 0;
    level = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    clear = 1; @(negedge clk); clear = 0;
    for (int c = 0; c < 140; c++) begin
      cycle = time_t'(c);
      level = (x != 7) ? lvl_t'(0) : lvl_t'(1);
      stall = (c == 70) && !stalled_once;
      expt  = 65 + 16 * y + x;
      #1;
      if (stall) begin
        check(!en, "no enable while stalled");
        @(negedge clk);
        c--;            // the cycle counter does not advance in a stall
        stalled_once = 1;
        stall = 0;
        continue;
      end
      check(en == (!domain_done && c == expt), "enable at scheduled cycle");
      if (en) begin
        fired++;
        x++;
        if (x == 8) begin x = 0; y++; end
        if (y == 3) domain_done = 1;
      end
      @(negedge clk);
    end
    check(fired == 24, "all 24 operations fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
