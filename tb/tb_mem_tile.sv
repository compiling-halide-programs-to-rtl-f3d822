// Self-checking test of the memory tile: two chained tiles implementing two
// line delays of a 64-wide, 4-row image.
//
// Port 0 stream: pixel n = 64y + x enters both tiles at cycle n. The logical
// circular buffer occupies SRAM addresses 504..519 (vector xo at 504 + xo),
// so vectors 0..7 live in tile 0 (TileID 0) and vectors 8..15 in tile 1
// (TileID 1); tile 1's output feeds tile 0's chain input. Port 1 stream
// (pixel n at cycle n+2) uses addresses 96..111 in tile 0 only.
// Schedules (per vector xo of row y, port p):
//   AGG in      : 64y + 4xo + xi + 2p
//   SRAM write  : 64y + 4xo + 4 + 2p      (shared AGG-read schedule)
//   SRAM read   : 64y + 4xo + 65 + 2p     (TB select = p)
//   TB out      : 64y + 4xo + xi + 67 + 2p
// So tile 0's output p must equal input p delayed by exactly 67 cycles,
// with half of port 0's words supplied through the chain. Both the value
// and the cycle of every output word are checked, and chain use is counted.
module tb_mem_tile;
  import ub_pkg::*;
  import ub_tb_pkg::*;

  localparam int H = 4;

  logic clk = 0, rst_n = 0, clear = 0, stall = 0;
  time_t cycle;
  mem_cfg_t cfg0, cfg1;
  word_t [1:0] din, out0, out1, chain0;
  logic [1:0] v0, v1;
  int checks = 0, failures = 0, nchain = 0, nout = 0, n;

  mem_tile u_t0 (.clk, .rst_n, .clear, .stall, .cycle, .cfg(cfg0), .data_in(din),
                 .chain_in(out1), .data_out(out0), .out_valid(v0));
  mem_tile u_t1 (.clk, .rst_n, .clear, .stall, .cycle, .cfg(cfg1), .data_in(din),
                 .chain_in('0), .data_out(out1), .out_valid(v1));

  always #5 clk = ~clk;

  function automatic word_t pix(int p, int n);
    return word_t'(p * 20000 + n * 3 + 1);
  endfunction

  initial begin
    mem_cfg_t c;
    c = '0;
    for (int p = 0; p < 2; p++) begin
      c.agg_in[p]  = make_port(3, '{4, 16, H, 1, 1, 1}, '{1, 4, 0, 0, 0, 0}, 0,
                                  '{1, 4, 64, 0, 0, 0}, 2 * p);
      c.agg_out[p] = make_port(2, '{16, H, 1, 1, 1, 1}, '{1, 0, 0, 0, 0, 0}, 0,
                                  '{4, 64, 0, 0, 0, 0}, 4 + 2 * p);
      c.tb_in[p]   = make_port(2, '{16, H, 1, 1, 1, 1}, '{1, 0, 0, 0, 0, 0}, 0,
                                  '{0, 0, 0, 0, 0, 0}, 0);
      c.tb_out[p]  = make_port(3, '{4, 16, H, 1, 1, 1}, '{1, 4, 0, 0, 0, 0}, 0,
                                  '{1, 4, 64, 0, 0, 0}, 67 + 2 * p);
    end
    // shared SRAM write address: (p, xo, y) -> 504 + xo + p*(96-504)
    c.sram_wr = make_port(3, '{2, 16, H, 1, 1, 1}, '{96 - 504, 1, 0, 0, 0, 0}, 504,
                             '{0, 0, 0, 0, 0, 0}, 0);
    c.sram_rd = make_port(3, '{2, 16, H, 1, 1, 1}, '{96 - 504, 1, 0, 0, 0, 0}, 504,
                             '{2, 4, 64, 0, 0, 0}, 65);
    c.tb_sel.delta[0] = 1;
    c.tb_sel.delta[1] = ADDR_W'(-1);
    c.tb_sel.delta[2] = ADDR_W'(-1);
    cfg0 = c; cfg0.tile_id = 0;
    cfg1 = c; cfg1.tile_id = 1;

    cycle = 0; din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    clear = 1; @(negedge clk); clear = 0;
    for (int t = 0; t < 64 * H + 80; t++) begin
      cycle  = time_t'(t);
      din[0] = pix(0, t);
      din[1] = pix(1, t - 2);
      #1;
      for (int p = 0; p < 2; p++) begin
        n = t - 67 - 2 * p;
        if (n >= 0 && n < 64 * H) begin
          checks += 2;
          nout++;
          if (!v0[p]) failures++;
          if (out0[p] != pix(p, n)) begin
            failures++;
            if (failures < 10) $display("FAIL port %0d pixel %0d got %0d", p, n, out0[p]);
          end
          if (p == 0 && ((n % 64) / 4) >= 8) nchain++;
        end else begin
          checks++;
          if (v0[p]) begin failures++; $display("FAIL output outside schedule t=%0d", t); end
        end
      end
      @(negedge clk);
    end
    checks++;
    if (nchain != 32 * H) begin failures++; $display("FAIL chain words %0d", nchain); end
    $display("mem_tile: %0d output words, %0d through the chain", nout, nchain);
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
