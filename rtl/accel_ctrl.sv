// Tile sequencer of the accelerator.
//
// The CGRA runs a fully static schedule over one data tile at a time; the
// global buffer is double-buffered so the host can load the next tile while
// the current one is processed. This controller walks through `num_tiles`
// data tiles, alternating the global-buffer half. The host announces that a
// half holds a complete tile with a pulse on `half_ready_set[h]`.
//
//   IDLE --start--> WAIT --half ready--> RUN (run_cycles cycles) --> WAIT/IDLE
//
// In WAIT the whole CGRA is stalled (`stall` high, nothing advances) until
// the half it needs is ready; this is the coarse-grained stall of the
// reference design. Leaving WAIT pulses `clear` (restarting every port
// controller) and starts `cycle` at 0; in RUN `cycle` counts up each cycle.
// At the end of a run the half is released (its ready flag drops), the
// active half toggles and `tiles_done` increments; `done` pulses after the
// last tile. `stall_cycles` counts the WAIT cycles spent after the first
// tile, i.e. stalls caused by a late tile. Sequencing details (the FSM, the
// ready flags, the fixed run length) are this design's choices.
module accel_ctrl
  import ub_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] num_tiles,
  input  time_t       run_cycles,
  input  logic [1:0]  half_ready_set,
  output logic        run,
  output logic        clear,
  output logic        stall,
  output time_t       cycle,
  output logic        active_half,
  output logic        busy,
  output logic        done,
  output logic [15:0] tiles_done,
  output logic [31:0] stall_cycles,
  output logic [1:0]  half_ready
);

  typedef enum logic [1:0] { S_IDLE, S_WAIT, S_RUN } state_t;
  state_t state;

  assign run   = (state == S_RUN);
  assign busy  = (state != S_IDLE);
  assign stall = (state != S_RUN);
  assign clear = (state == S_WAIT) && half_ready[active_half];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cycle        <= '0;
      active_half  <= 1'b0;
      tiles_done   <= '0;
      stall_cycles <= '0;
      half_ready   <= '0;
      done         <= 1'b0;
    end else begin
      done <= 1'b0;
      for (int h = 0; h < 2; h++)
        if (half_ready_set[h]) half_ready[h] <= 1'b1;
      unique case (state)
        S_IDLE: begin
          if (start && num_tiles != '0) begin
            state       <= S_WAIT;
            active_half <= 1'b0;
            tiles_done  <= '0;
          end
        end
        S_WAIT: begin
          if (half_ready[active_half]) begin
            state <= S_RUN;
            cycle <= '0;
          end else if (tiles_done != '0) begin
            stall_cycles <= stall_cycles + 1;
          end
        end
        S_RUN: begin
          cycle <= cycle + TIME_W'(1);
          if (cycle == run_cycles - TIME_W'(1)) begin
            half_ready[active_half] <= 1'b0;
            active_half <= !active_half;
            tiles_done  <= tiles_done + 16'd1;
            if (tiles_done + 16'd1 == num_tiles) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_WAIT;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
