// Self-checking test of a 2 x 4 CGRA (three PE columns and one memory
// column). Everything is set through the configuration bus:
//   PE (0,0): res = io_in[0] + 100, 1-bit res = (io_in[0] > 100);
//             both results routed east on track 0 of the 16-bit and 1-bit
//             networks;
//   PE (0,1): res = bit ? a : 0 with a and bit from the west tracks;
//             routed north on track 0, i.e. to io_out[1].
// With one register per switch box, a value entering at cycle t must leave
// at cycle t+2. Every output is checked, including the cycle.
module tb_cgra;
  import ub_pkg::*;
  import ub_tb_pkg::*;

  localparam int ROWS = 2, COLS = 4;
  logic clk = 0, rst_n = 0, stall = 0, clear = 0;
  time_t cycle;
  cfg_bus_t cfg_bus;
  word_t [COLS-1:0] io_in, io_out;
  int checks = 0, failures = 0, nsel = 0;
  word_t hist [$];
  word_t v, e;

  cgra #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  task automatic write_cfg(int tile, logic [4095:0] bits, int nbits);
    for (int w = 0; w < (nbits + 31) / 32; w++) begin
      @(negedge clk);
      cfg_bus.we   = 1;
      cfg_bus.tile = CFG_TILE_W'(tile);
      cfg_bus.word = CFG_WORD_W'(w);
      cfg_bus.data = bits[w * 32 +: 32];
    end
    @(negedge clk);
    cfg_bus = '0;
  endtask

  initial begin
    pe_tile_cfg_t t0, t1;
    cfg_bus = '0; io_in = '0; cycle = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    t0 = '0;
    t0.core.op = OP_ADD; t0.core.cmp = CMP_GT;
    t0.core.a_mode = IN_DIRECT; t0.core.b_mode = IN_CONST; t0.core.b_const = 16'd100;
    t0.route.cb16[0] = cb_track(SIDE_N, 0);
    t0.route.sb16[SIDE_E][0] = sb_core(0);
    t0.route.sb1[SIDE_E][0]  = sb_core(0);
    t1 = '0;
    t1.core.op = OP_SEL; t1.core.b_mode = IN_CONST; t1.core.b_const = 16'd0;
    t1.route.cb16[0] = cb_track(SIDE_W, 0);
    t1.route.cb1[0]  = cb_track(SIDE_W, 0);
    t1.route.sb16[SIDE_N][0] = sb_core(0);
    write_cfg(0, 4096'(t0), $bits(pe_tile_cfg_t));
    write_cfg(1, 4096'(t1), $bits(pe_tile_cfg_t));
    for (int t = 0; t < 300; t++) begin
      io_in[0] = word_t'($urandom_range(0, 200));
      hist.push_back(io_in[0]);
      #1;
      if (t >= 2) begin
        v = hist[t - 2];
        e = (v > 100) ? v + 16'd100 : 16'd0;
        checks++;
        if (v > 100) nsel++;
        if (io_out[1] != e) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d in=%0d out=%0d exp=%0d", t, v, io_out[1], e);
        end
      end
      @(negedge clk);
    end
    checks++;
    if (nsel == 0) failures++;
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
