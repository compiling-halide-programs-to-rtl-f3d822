// IterationDomain (ID): the loop counters of one buffer port.
//
// Implements up to MAX_DIMS perfectly nested counters (level 0 innermost).
// Each `step` advances the nest by one point, like one trip through the body
// of the loop nest. The combinational `level` output names the outermost loop
// level that the next step increments (all levels below it wrap to zero); this
// is the "encode" input of the recurrence address/schedule generators. `last`
// is high when the counters sit on the final point of the domain; stepping
// there sets `done`, which holds until `clear`.
//
// Timing: counters update on the rising edge when `step` is high; `level` and
// `last` are combinational in the current counter state. `clear` (synchronous)
// has priority over `step`. Reset is asynchronous, active low.
// Counters per loop and their inc/clr behaviour follow the reference design;
// the depth, widths and the done/clear handshake are this design's choices.
module iteration_domain
  import ub_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          step,
  input  id_cfg_t                       cfg,
  output lvl_t                          level,
  output logic                          last,
  output logic                          done,
  output logic [MAX_DIMS-1:0][CNT_W-1:0] iter
);

  always_comb begin
    level = '0;
    last  = 1'b1;
    for (int i = MAX_DIMS - 1; i >= 0; i--) begin
      if (i < int'(cfg.dims) && iter[i] != cfg.extent[i] - CNT_W'(1)) begin
        level = lvl_t'(i);
        last  = 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iter <= '0;
      done <= 1'b0;
    end else if (clear) begin
      iter <= '0;
      done <= 1'b0;
    end else if (step && !done) begin
      if (last) begin
        iter <= '0;
        done <= 1'b1;
      end else begin
        for (int i = 0; i < MAX_DIMS; i++) begin
          if (i < int'(level))       iter[i] <= '0;
          else if (i == int'(level)) iter[i] <= iter[i] + CNT_W'(1);
        end
      end
    end
  end

endmodule
