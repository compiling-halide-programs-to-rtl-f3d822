// Self-checking test of the aggregator with the vectorised schedule of the
// 64-word line-delay example: a 64-wide, 3-row stream enters one word per
// cycle (domain xi:4, xo:16, y:3; schedule 64y+4xo+xi; address 4xo+xi) and a
// 4-word vector leaves four cycles after each group started (domain xo:16,
// y:3; schedule 4+64y+4xo; vector slot xo). Every vector is compared with the
// four words that went in, and the number of vectors is counted.
module tb_aggregator;
  import ub_pkg::*;
  import ub_tb_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, stall = 0;
  time_t cycle;
  port_cfg_t in_cfg, out_cfg;
  word_t data_in;
  logic vec_valid;
  vec_t vec_out;
  int checks = 0, failures = 0, nvec = 0, base;

  aggregator dut (.*);

  always #5 clk = ~clk;

  function automatic word_t pix(int n);
    return word_t'(n * 37 + 11);
  endfunction

  initial begin
    in_cfg  = make_port(3, '{4, 16, 3, 1, 1, 1}, '{1, 4, 0, 0, 0, 0}, 0,
                           '{1, 4, 64, 0, 0, 0}, 0);
    out_cfg = make_port(2, '{16, 3, 1, 1, 1, 1}, '{1, 0, 0, 0, 0, 0}, 0,
                           '{4, 64, 0, 0, 0, 0}, 4);
    cycle = 0;
    data_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    clear = 1; @(negedge clk); clear = 0;
    for (int c = 0; c < 64 * 3 + 10; c++) begin
      cycle   = time_t'(c);
      data_in = pix(c);
      #1;
      if (vec_valid) begin
        base = c - 4;
        checks++;
        nvec++;
        for (int k = 0; k < int'(FETCH_W); k++)
          if (vec_out[k] != pix(base + k)) begin
            failures++;
            if (failures < 10) $display("FAIL vector at cycle %0d word %0d", c, k);
          end
        checks++;
        if (base % 4 != 0) failures++;
      end
      @(negedge clk);
    end
    checks++;
    if (nvec != 48) begin failures++; $display("FAIL %0d vectors", nvec); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
