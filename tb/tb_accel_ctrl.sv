// Self-checking test of the tile sequencer. A host model marks a half ready
// a random number of cycles (0..40) after the controller released it, so
// some tiles arrive late and force stalls. Checked every cycle against a
// reference model: state outputs (run/stall/busy), the run cycle counter,
// the clear pulse before every run, the half alternation, the released
// ready flags, tiles_done, the stall cycle count and the final done pulse.
// Three sequences with different tile counts and run lengths are run.
module tb_accel_ctrl;
  import ub_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] num_tiles;
  time_t run_cycles;
  logic [1:0] half_ready_set;
  logic run, clear, stall, active_half, busy, done;
  time_t cycle;
  logic [15:0] tiles_done;
  logic [31:0] stall_cycles;
  logic [1:0] half_ready;
  int checks = 0, failures = 0;
  int delay [2];
  int exp_stalls, exp_cycle, runs, clears, n_dones, nstall_events;
  logic exp_half, prev_run;

  accel_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    half_ready_set = '0;
    nstall_events = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int seq = 0; seq < 3; seq++) begin
      num_tiles  = 16'(3 + seq * 2);
      run_cycles = TIME_W'(10 + $urandom_range(0, 20));
      exp_stalls = 0; runs = 0; clears = 0; n_dones = 0;
      exp_half = 0; prev_run = 0;
      @(negedge clk);
      half_ready_set = 2'b11;     // both halves preloaded
      start = 1;
      @(negedge clk);
      half_ready_set = '0;
      start = 0;
      delay[0] = -1; delay[1] = -1;
      while (busy) begin
        // host model: count down and mark ready
        half_ready_set = '0;
        for (int h = 0; h < 2; h++) begin
          if (delay[h] == 0) half_ready_set[h] = 1'b1;
          if (delay[h] >= 0) delay[h]--;
        end
        #1;
        check(stall == !run, "stall");
        if (run) begin
          if (!prev_run) begin
            exp_cycle = 0;
            runs++;
          end
          check(cycle == TIME_W'(exp_cycle), "cycle");
          check(active_half == exp_half, "half");
          exp_cycle++;
        end else begin
          if (half_ready[active_half]) begin
            check(clear, "clear");
            clears++;
          end else begin
            check(!clear, "no clear");
            if (runs > 0) begin
              exp_stalls++;
              if (prev_run) nstall_events++;
            end
          end
        end
        prev_run = run;
        @(posedge clk);
        #1;
        if (prev_run && !run || (prev_run && run && cycle == 0)) begin
          // a run just ended: the half was released
          check(!half_ready[exp_half], "release");
          delay[exp_half] = $urandom_range(0, 40);
          exp_half = !exp_half;
          if (tiles_done == num_tiles) begin
            check(done, "done pulse");
            n_dones++;
          end
        end
        @(negedge clk);
      end
      check(n_dones == 1, "one done");
      check(runs == int'(num_tiles) && clears == runs, "runs");
      check(tiles_done == num_tiles, "tiles_done");
      check(stall_cycles == 32'(exp_stalls), "stall count");
      $display("seq %0d: %0d tiles of %0d cycles, %0d stall cycles", seq, num_tiles,
               run_cycles, stall_cycles);
      rst_n = 0;
      @(negedge clk);
      rst_n = 1;
    end
    check(nstall_events > 0, "stalls happened");
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
