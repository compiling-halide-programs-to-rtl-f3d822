// Port controller: one IterationDomain driving an AddressGenerator and,
// when USE_SG is set, a ScheduleGenerator.
//
// With USE_SG = 1 the port runs on its own schedule: `valid` is the SG enable
// and `addr` the address of that operation. With USE_SG = 0 the port has no
// schedule of its own and is stepped by `ext_step` (used where a schedule is
// shared with another controller, e.g. the SRAM write address stepped by the
// aggregator read schedule). `valid` is then `ext_step` qualified by the
// port's enable. `addr` is combinational and belongs to the current `valid`.
module port_ctrl
  import ub_pkg::*;
#(
  parameter bit USE_SG = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       stall,
  input  time_t      cycle,
  input  logic       ext_step,
  input  port_cfg_t  cfg,
  output logic       valid,
  output addr_t      addr,
  output lvl_t       level,
  output logic       done
);

  logic last;
  logic [MAX_DIMS-1:0][CNT_W-1:0] iter;

  iteration_domain u_id (
    .clk, .rst_n, .clear,
    .step  (valid),
    .cfg   (cfg.id),
    .level, .last, .done, .iter
  );

  address_gen #(.W(ADDR_W)) u_ag (
    .clk, .rst_n, .clear,
    .step   (valid),
    .level,
    .delta  (cfg.ag.delta),
    .offset (cfg.ag.offset),
    .value  (addr)
  );

  if (USE_SG) begin : g_sg
    time_t sched;
    schedule_gen u_sg (
      .clk, .rst_n, .clear, .stall,
      .port_enable (cfg.enable),
      .domain_done (done),
      .level,
      .cycle,
      .cfg         (cfg.sg),
      .en          (valid),
      .sched
    );
  end else begin : g_ext
    assign valid = ext_step && cfg.enable && !done && !stall;
  end

endmodule
