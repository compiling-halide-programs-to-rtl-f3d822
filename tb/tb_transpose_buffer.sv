// Self-checking test of the transpose buffer. Vectors are written with
// `vec_we` every fourth cycle (ownership alternating), as the delayed SRAM
// read would deliver them; the read port (domain xi:4, xo:12; schedule
// 1 + 4xo + xi + first; address 4xo + xi) must emit the words of each vector
// in order one cycle after the vector arrived, each with the vector's
// ownership bit. A word read is checked against the vector written.
module tb_transpose_buffer;
  import ub_pkg::*;
  import ub_tb_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, stall = 0;
  time_t cycle;
  port_cfg_t in_cfg, out_cfg;
  logic vec_we, vec_own, out_valid, out_own;
  vec_t vec_in;
  word_t out_word;
  int checks = 0, failures = 0, nout = 0;
  localparam int FIRST = 3;

  transpose_buffer dut (.*);

  always #5 clk = ~clk;

  function automatic word_t w(int xo, int xi);
    return word_t'(xo * 100 + xi * 7 + 1);
  endfunction

  initial begin
    in_cfg  = make_port(1, '{12, 1, 1, 1, 1, 1}, '{1, 0, 0, 0, 0, 0}, 0,
                           '{0, 0, 0, 0, 0, 0}, 0);
    out_cfg = make_port(2, '{4, 12, 1, 1, 1, 1}, '{1, 4, 0, 0, 0, 0}, 0,
                           '{1, 4, 0, 0, 0, 0}, FIRST + 1);
    cycle = 0; vec_we = 0; vec_in = '0; vec_own = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    clear = 1; @(negedge clk); clear = 0;
    for (int c = 0; c < 60; c++) begin
      int xo, xi;
      cycle  = time_t'(c);
      vec_we = (c >= FIRST) && ((c - FIRST) % 4 == 0) && ((c - FIRST) / 4 < 12);
      xo     = (c - FIRST) / 4;
      for (int k = 0; k < int'(FETCH_W); k++) vec_in[k] = w(xo, k);
      vec_own = xo[0];
      #1;
      if (out_valid) begin
        xo = (c - FIRST - 1) / 4;
        xi = (c - FIRST - 1) % 4;
        nout++;
        checks += 2;
        if (out_word != w(xo, xi)) begin
          failures++;
          if (failures < 10) $display("FAIL word xo=%0d xi=%0d got %0d", xo, xi, out_word);
        end
        if (out_own != xo[0]) failures++;
      end
      @(negedge clk);
    end
    checks++;
    if (nout != 48) begin failures++; $display("FAIL %0d words", nout); end
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
