// End-to-end test of the accelerator at full size (16 x 32 CGRA, 4 MB global
// buffer, every parameter at its default).
//
// Application: the two-stage pipeline brighten + 2x2 box blur on 64 x 64
// images of 8-bit pixels:
//   b(x,y) = 2 * in(x,y)
//   o(x,y) = (b(x,y) + b(x+1,y) + b(x,y+1) + b(x+1,y+1)) >> 2,  x,y in 0..62
// Mapping (tile (row,col), all set through the configuration bus):
//   GLB bank 0 load   : pixel n = 64y+x read at cycle n, on io_in[0] at n+1
//   PE (0,0)          : b = in * 2, sent south
//   PE (1,0)          : h(n) = b(n) + b(n-1) (second operand from the input
//                       register), sent east along row 1
//   MEM (1,3) + (2,3) : 64-word line buffer h(n-64), built from two chained
//                       memory tiles (TileID 0 and 1, SRAM addresses
//                       504..519 straddle the tile boundary at 512)
//   PE (2,2)          : s = h(n) + h(n-64)
//   PE (3,2)          : o = s >> 2, returned to io_out[1] through column 1
//   GLB bank 0 store  : o(x,y) written at cycle 64y+x+76, address 4096+63y+x
// Two images are processed as two data tiles through the two halves of the
// global buffer. The host preloads image 0, starts, writes image 1 into the
// other half while image 0 is computed (double buffering), but declares it
// ready only 50 cycles after the first run ends, forcing a stall. During
// run 1 it reads the results of run 0 back, and after the end those of run 1.
// Checked: every output word on io_out[1] at its exact cycle, every stored
// result, the tile count and the stall cycle count. Mechanisms counted (each
// must occur): stall cycles, chained output words, SRAM wide writes and
// reads, host accesses overlapping a run, runs, and shared write-port use.
module tb_accel_top;
  import ub_pkg::*;
  import ub_tb_pkg::*;

  localparam int IMG = 64, OUT = 63, ROWS = 16, COLS = 32;
  localparam int HAW = 4 + 17;
  localparam int OUT_BASE = 4096;
  localparam int LAT = 76;          // o(x,y) on io_out[1] at run cycle 64y+x+LAT
  localparam int RUN = 64 * 62 + 62 + LAT + 4;

  logic clk = 0, rst_n = 0;
  cfg_bus_t cfg_bus;
  logic host_we = 0, host_re = 0;
  logic [HAW-1:0] host_addr;
  word_t host_wdata, host_rdata;
  logic start = 0;
  logic [15:0] num_tiles;
  time_t run_cycles;
  logic [1:0] half_ready_set;
  logic busy, done, stalled, active_half;
  logic [15:0] tiles_done;
  logic [31:0] stall_cycles;

  int checks = 0, failures = 0;
  int n_stall = 0, n_chain = 0, n_sram_wr = 0, n_sram_rd = 0, n_overlap = 0;
  int n_stream = 0, n_runs = 0, n_wr_share = 0;
  int exp_stall = 0, ended_at = 0, cyc = 0;
  word_t img [2][IMG*IMG];
  word_t res [2][OUT*OUT];
  int x, y, k, idx;
  word_t e;

  accel_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  function automatic logic [HAW-1:0] haddr(int half, int word);
    return HAW'(half * 65536 + word);   // bank 0
  endfunction

  task automatic write_cfg(int tile, logic [4095:0] bits, int nbits);
    for (int w = 0; w < (nbits + 31) / 32; w++) begin
      @(negedge clk);
      cfg_bus.we = 1; cfg_bus.tile = CFG_TILE_W'(tile);
      cfg_bus.word = CFG_WORD_W'(w); cfg_bus.data = bits[w*32 +: 32];
    end
    @(negedge clk);
    cfg_bus = '0;
  endtask

  function automatic int tix(int r, int c);
    return r * COLS + c;
  endfunction

  // configuration of one of the two line-buffer memory tiles
  function automatic mem_cfg_t lb_cfg(int id, int in_lat);
    mem_cfg_t c;
    c = '0;
    c.tile_id   = TILEID_W'(id);
    c.agg_in[0] = make_port(3, '{4, 16, IMG, 1, 1, 1}, '{1, 4, 0, 0, 0, 0}, 0,
                               '{1, 4, 64, 0, 0, 0}, in_lat);
    c.agg_out[0] = make_port(2, '{16, IMG, 1, 1, 1, 1}, '{1, 0, 0, 0, 0, 0}, 0,
                                '{4, 64, 0, 0, 0, 0}, in_lat + 4);
    c.tb_in[0]  = make_port(2, '{16, IMG, 1, 1, 1, 1}, '{1, 0, 0, 0, 0, 0}, 0,
                               '{0, 0, 0, 0, 0, 0}, 0);
    c.tb_out[0] = make_port(3, '{4, 16, IMG, 1, 1, 1}, '{1, 4, 0, 0, 0, 0}, 0,
                               '{1, 4, 64, 0, 0, 0}, 67);
    c.sram_wr   = make_port(2, '{16, IMG, 1, 1, 1, 1}, '{1, 0, 0, 0, 0, 0}, 504,
                               '{0, 0, 0, 0, 0, 0}, 0);
    c.sram_rd   = make_port(2, '{16, IMG, 1, 1, 1, 1}, '{1, 0, 0, 0, 0, 0}, 504,
                               '{4, 64, 0, 0, 0, 0}, 64);
    return c;
  endfunction

  task automatic configure();
    pe_tile_cfg_t p;
    mem_tile_cfg_t m;
    glb_bank_cfg_t g;
    // PE (0,0): in * 2, south
    p = '0;
    p.core.op = OP_MUL; p.core.b_mode = IN_CONST; p.core.b_const = 16'd2;
    p.route.cb16[0] = cb_track(SIDE_N, 0);
    p.route.sb16[SIDE_S][0] = sb_core(0);
    write_cfg(tix(0, 0), 4096'(p), $bits(p));
    // PE (1,0): b(n) + b(n-1), east
    p = '0;
    p.core.op = OP_ADD; p.core.b_mode = IN_REG;
    p.route.cb16[0] = cb_track(SIDE_N, 0);
    p.route.cb16[1] = cb_track(SIDE_N, 0);
    p.route.sb16[SIDE_E][0] = sb_core(0);
    write_cfg(tix(1, 0), 4096'(p), $bits(p));
    // (1,1): pass row 1 east, pass column 1 north
    p = '0;
    p.route.sb16[SIDE_E][0] = sb_from(SIDE_E, SIDE_W);
    p.route.sb16[SIDE_N][0] = sb_from(SIDE_N, SIDE_S);
    write_cfg(tix(1, 1), 4096'(p), $bits(p));
    // (1,2): pass east and turn a copy south
    p = '0;
    p.route.sb16[SIDE_E][0] = sb_from(SIDE_E, SIDE_W);
    p.route.sb16[SIDE_S][0] = sb_from(SIDE_S, SIDE_W);
    write_cfg(tix(1, 2), 4096'(p), $bits(p));
    // MEM (1,3): TileID 0, input from west, output south on track 1,
    // input stream forwarded south to (2,3)
    m = '0;
    m.core = lb_cfg(0, 5);
    m.route.cb16[0] = cb_track(SIDE_W, 0);
    m.route.sb16[SIDE_S][0] = sb_from(SIDE_S, SIDE_W);
    m.route.sb16[SIDE_S][1] = sb_core(0);
    write_cfg(tix(1, 3), 4096'(m), $bits(m));
    // MEM (2,3): TileID 1, input from north, passes (1,3)'s output west
    m = '0;
    m.core = lb_cfg(1, 6);
    m.route.cb16[0] = cb_track(SIDE_N, 0);
    m.route.sb16[SIDE_W][1] = sb_from(SIDE_W, SIDE_N);
    write_cfg(tix(2, 3), 4096'(m), $bits(m));
    // PE (2,2): h(n) + h(n-64), south
    p = '0;
    p.core.op = OP_ADD;
    p.route.cb16[0] = cb_track(SIDE_N, 0);
    p.route.cb16[1] = cb_track(SIDE_E, 1);
    p.route.sb16[SIDE_S][0] = sb_core(0);
    write_cfg(tix(2, 2), 4096'(p), $bits(p));
    // PE (3,2): >> 2, west
    p = '0;
    p.core.op = OP_SHR; p.core.b_mode = IN_CONST; p.core.b_const = 16'd2;
    p.route.cb16[0] = cb_track(SIDE_N, 0);
    p.route.sb16[SIDE_W][0] = sb_core(0);
    write_cfg(tix(3, 2), 4096'(p), $bits(p));
    // column 1 back to the north edge
    p = '0;
    p.route.sb16[SIDE_N][0] = sb_from(SIDE_N, SIDE_E);
    write_cfg(tix(3, 1), 4096'(p), $bits(p));
    p = '0;
    p.route.sb16[SIDE_N][0] = sb_from(SIDE_N, SIDE_S);
    write_cfg(tix(2, 1), 4096'(p), $bits(p));
    write_cfg(tix(0, 1), 4096'(p), $bits(p));
    // global buffer bank 0
    g = '0;
    g.load  = make_port(2, '{IMG, IMG, 1, 1, 1, 1}, '{1, IMG, 0, 0, 0, 0}, 0,
                           '{1, 64, 0, 0, 0, 0}, 0);
    g.store = make_port(2, '{OUT, OUT, 1, 1, 1, 1}, '{1, OUT, 0, 0, 0, 0}, OUT_BASE,
                           '{1, 64, 0, 0, 0, 0}, LAT);
    write_cfg(GLB_CFG_BASE, 4096'(g), $bits(g));
  endtask

  function automatic word_t expect_o(int t, int xx, int yy);
    int s;
    s = 2 * (int'(img[t][64*yy+xx]) + int'(img[t][64*yy+xx+1]) +
             int'(img[t][64*(yy+1)+xx]) + int'(img[t][64*(yy+1)+xx+1]));
    return word_t'(s >> 2);
  endfunction

  // ---- monitors ----------------------------------------------------------
  always @(negedge clk) begin
    if (rst_n) begin
      if (stalled && tiles_done != 0 && !dut.clear) n_stall++;
      if (dut.u_cgra.g_row[1].g_col[3].u_tile.g_mem.u_mem.tb_valid[0] &&
          !dut.u_cgra.g_row[1].g_col[3].u_tile.g_mem.u_mem.tb_own[0]) n_chain++;
      for (int r = 1; r <= 2; r++) begin
        if (r == 1 && dut.u_cgra.g_row[1].g_col[3].u_tile.g_mem.u_mem.wr_match) n_sram_wr++;
        if (r == 2 && dut.u_cgra.g_row[2].g_col[3].u_tile.g_mem.u_mem.wr_match) n_sram_wr++;
        if (r == 1 && dut.u_cgra.g_row[1].g_col[3].u_tile.g_mem.u_mem.rd_match) n_sram_rd++;
        if (r == 2 && dut.u_cgra.g_row[2].g_col[3].u_tile.g_mem.u_mem.rd_match) n_sram_rd++;
      end
      if (dut.u_cgra.g_row[1].g_col[3].u_tile.g_mem.u_mem.wr_en) n_wr_share++;
      if (dut.run && (host_we || host_re)) n_overlap++;
      // stream check of io_out[1]
      if (dut.run) begin
        k = int'(dut.cycle) - LAT;
        if (k >= 0 && k % 64 < OUT && k / 64 < OUT) begin
          e = expect_o(int'(active_half), k % 64, k / 64);
          check(dut.from_cgra[1] == e, "stream output");
          n_stream++;
        end
      end
    end
  end

  always @(posedge clk) if (done) ended_at <= cyc;

  // ---- host --------------------------------------------------------------
  initial begin
    cfg_bus = '0; host_addr = '0; host_wdata = '0; half_ready_set = '0;
    num_tiles = 16'd2; run_cycles = time_t'(RUN);
    for (int t = 0; t < 2; t++)
      for (int i = 0; i < IMG * IMG; i++) img[t][i] = word_t'($urandom_range(0, 255));
    repeat (3) @(negedge clk);
    rst_n = 1;
    configure();
    // preload image 0 into half 0
    for (int i = 0; i < IMG * IMG; i++) begin
      host_we = 1; host_addr = haddr(0, i); host_wdata = img[0][i];
      @(negedge clk);
    end
    host_we = 0;
    half_ready_set = 2'b01;
    start = 1;
    @(negedge clk);
    half_ready_set = '0;
    start = 0;
    // image 1 into half 1 while run 0 is computing
    wait (dut.run);
    @(negedge clk);
    for (int i = 0; i < IMG * IMG; i++) begin
      host_we = 1; host_addr = haddr(1, i); host_wdata = img[1][i];
      @(negedge clk);
    end
    host_we = 0;
    // declare it ready late
    wait (tiles_done == 16'd1);
    repeat (50) @(negedge clk);
    half_ready_set = 2'b10;
    @(negedge clk);
    half_ready_set = '0;
    // read back the results of run 0 during run 1
    wait (dut.run);
    @(negedge clk);
    for (int i = 0; i < OUT * OUT; i++) begin
      host_re = 1;
      host_addr = haddr(0, OUT_BASE + i);
      @(negedge clk);
      res[0][i] = host_rdata;
    end
    host_re = 0;
    wait (!busy);
    @(negedge clk);
    for (int i = 0; i < OUT * OUT; i++) begin
      host_re = 1;
      host_addr = haddr(1, OUT_BASE + i);
      @(negedge clk);
      res[1][i] = host_rdata;
    end
    host_re = 0;
    for (int t = 0; t < 2; t++)
      for (int i = 0; i < OUT * OUT; i++) begin
        x = i % OUT; y = i / OUT;
        check(res[t][i] == expect_o(t, x, y), "stored result");
      end
    check(tiles_done == 16'd2, "tiles_done");
    check(stall_cycles == 32'(n_stall), "stall cycle count");
    $display("mechanisms: stall cycles %0d, chained words %0d, SRAM writes %0d, reads %0d,",
             n_stall, n_chain, n_sram_wr, n_sram_rd);
    $display("  shared write-port steps %0d, host accesses during runs %0d, streamed outputs %0d",
             n_wr_share, n_overlap, n_stream);
    check(n_stall > 0, "stall happened");
    check(n_chain > 0, "chaining happened");
    check(n_sram_wr > 0 && n_sram_rd > 0, "wide SRAM access happened");
    check(n_wr_share > 0, "shared write port used");
    check(n_overlap > 0, "double buffering happened");
    check(n_stream == 2 * OUT * OUT, "all outputs streamed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
