// Self-checking test of a small global buffer (2 banks of 128 words).
//  1. The host fills half 0 of both banks and reads it back.
//  2. Bank 0 and bank 1 are configured over the configuration bus: each loads
//     32 words from the active half (address n at cycle 2+n, a 2-D pattern
//     for bank 1) and stores 32 words (address 32+n at cycle 5+n).
//  3. A run over half 0: the streamed words are checked on to_cgra at the
//     expected cycles while the host writes and reads back half 1 at the same
//     time (double buffering).
//  4. After the run the host reads the stored words back.
//  5. A second run over half 1 checks the data the host wrote in step 3.
module tb_global_buffer;
  import ub_pkg::*;
  import ub_tb_pkg::*;

  localparam int BANKS = 2, BW = 128, COLS = 2 * BANKS;
  localparam int HAW = $clog2(BANKS) + $clog2(BW);
  logic clk = 0, rst_n = 0, clear = 0, stall = 0, run = 0, active_half = 0;
  time_t cycle;
  cfg_bus_t cfg_bus;
  logic host_we = 0, host_re = 0;
  logic [HAW-1:0] host_addr;
  word_t host_wdata, host_rdata;
  word_t [COLS-1:0] to_cgra, from_cgra;
  int checks = 0, failures = 0, overlap = 0;
  word_t img [2][2][32];   // [bank][half][word]
  word_t stored [2][2][32];
  int b, n, a;

  global_buffer #(.BANKS(BANKS), .BANK_WORDS(BW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [HAW-1:0] haddr(int bank, int half, int word);
    return HAW'((bank * 2 + half) * (BW / 2) + word);
  endfunction

  task automatic host_write(int bank, int half, int word, word_t v);
    @(negedge clk);
    host_we = 1; host_addr = haddr(bank, half, word); host_wdata = v;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic host_read_check(int bank, int half, int word, word_t v);
    @(negedge clk);
    host_re = 1; host_addr = haddr(bank, half, word);
    @(negedge clk);
    host_re = 0;
    check(host_rdata == v, "host read");
  endtask

  task automatic write_cfg(int tile, logic [1023:0] bits, int nbits);
    for (int w = 0; w < (nbits + 31) / 32; w++) begin
      @(negedge clk);
      cfg_bus.we = 1; cfg_bus.tile = CFG_TILE_W'(tile);
      cfg_bus.word = CFG_WORD_W'(w); cfg_bus.data = bits[w*32 +: 32];
    end
    @(negedge clk);
    cfg_bus = '0;
  endtask

  // load address of word n of bank bk: bank 0 linear, bank 1 a 4x8 transpose
  function automatic int ld_addr(int bk, int k);
    return bk == 0 ? k : (k % 8) * 4 + k / 8;
  endfunction

  task automatic do_run(bit half);
    active_half = half;
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0; run = 1; cycle = 0;
    for (int t = 0; t < 140; t++) begin
      for (int bk = 0; bk < 2; bk++) from_cgra[2*bk+1] = word_t'($urandom);
      from_cgra[0] = '0; from_cgra[2] = '0;
      // stores happen at cycles 5..36
      if (t >= 5 && t < 37)
        for (int bk = 0; bk < 2; bk++) stored[bk][half][t-5] = from_cgra[2*bk+1];
      // host activity on the other half while streaming
      host_we = (t % 2 == 0); host_re = (t % 2 == 1);
      b = (t / 2) % 2; n = (t / 4) % 32;
      host_addr = haddr(b, !half, n);
      host_wdata = word_t'(1000 * (b + 1) + n + 100 * half);
      if (host_we) img[b][!half][n] = host_wdata;
      #1;
      // loads scheduled at cycle 2+k, data visible at 3+k
      if (t >= 3 && t < 35)
        for (int bk = 0; bk < 2; bk++)
          check(to_cgra[2*bk] == img[bk][half][ld_addr(bk, t - 3)], "stream load");
      if (t > 0 && t % 2 == 0) begin
        check(host_rdata == img[(t-1)/2 % 2][!half][((t-1)/4) % 32], "host read during run");
        overlap++;
      end
      @(negedge clk);
      cycle = cycle + 1;
    end
    host_we = 0; host_re = 0;
    run = 0;
  endtask

  initial begin
    port_cfg_t ld0, ld1, st;
    glb_bank_cfg_t c0, c1;
    cfg_bus = '0; from_cgra = '0; cycle = 0; host_addr = '0; host_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int bk = 0; bk < 2; bk++)
      for (int k = 0; k < 32; k++) begin
        img[bk][0][k] = word_t'($urandom);
        host_write(bk, 0, k, img[bk][0][k]);
      end
    for (int bk = 0; bk < 2; bk++)
      for (int k = 0; k < 32; k += 5) host_read_check(bk, 0, k, img[bk][0][k]);
    ld0 = make_port(1, '{32, 1, 1, 1, 1, 1}, '{1, 0, 0, 0, 0, 0}, 0, '{1, 0, 0, 0, 0, 0}, 2);
    ld1 = make_port(2, '{8, 4, 1, 1, 1, 1}, '{4, 1, 0, 0, 0, 0}, 0, '{1, 8, 0, 0, 0, 0}, 2);
    st  = make_port(1, '{32, 1, 1, 1, 1, 1}, '{1, 0, 0, 0, 0, 0}, 32, '{1, 0, 0, 0, 0, 0}, 5);
    c0.load = ld0; c0.store = st;
    c1.load = ld1; c1.store = st;
    write_cfg(GLB_CFG_BASE + 0, 1024'(c0), $bits(glb_bank_cfg_t));
    write_cfg(GLB_CFG_BASE + 1, 1024'(c1), $bits(glb_bank_cfg_t));
    do_run(1'b0);
    for (int bk = 0; bk < 2; bk++)
      for (int k = 0; k < 32; k++) host_read_check(bk, 0, 32 + k, stored[bk][0][k]);
    // run 1 streams the data the host wrote into half 1 during run 0
    do_run(1'b1);
    for (int bk = 0; bk < 2; bk++)
      for (int k = 0; k < 32; k++) host_read_check(bk, 1, 32 + k, stored[bk][1][k]);
    check(overlap > 0, "overlap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
