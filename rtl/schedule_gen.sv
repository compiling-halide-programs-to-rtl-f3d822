// ScheduleGenerator (SG): produces the enable of a buffer port.
//
// The schedule is an affine function from the port's iteration domain to the
// cycle, counted from the start of the run, at which each operation happens.
// It is computed with the same recurrence as the address generator (a running
// register stepped by per-level deltas, plus an offset). The enable `en` is
// high in the cycle where the global cycle counter equals the scheduled time
// of the current point, the domain is not finished, the port is enabled and
// the array is not stalled. The enable is also the step of the port's ID and
// AG, so all three advance together.
//
// Timing: `en` is combinational from `cycle`; the schedule value advances on
// the edge that ends an enabled cycle. This follows the reference ID/AG/SG
// arrangement; the equality comparison against a shared cycle counter is this
// design's choice.
module schedule_gen
  import ub_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,
  input  logic     stall,
  input  logic     port_enable,
  input  logic     domain_done,
  input  lvl_t     level,
  input  time_t    cycle,
  input  sg_cfg_t  cfg,
  output logic     en,
  output time_t    sched
);

  address_gen #(.W(TIME_W)) u_affine (
    .clk, .rst_n, .clear,
    .step   (en),
    .level,
    .delta  (cfg.delta),
    .offset (cfg.offset),
    .value  (sched)
  );

  assign en = port_enable && !domain_done && !stall && (sched == cycle);

endmodule
