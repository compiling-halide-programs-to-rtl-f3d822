// AddressGenerator (AG): an affine function of the loop iterators, computed
// as a recurrence.
//
// Instead of s0*i0 + s1*i1 + ... + offset, the generator keeps one running
// register. On every step of its iteration domain it adds the delta of the
// outermost loop level being incremented, d[level] = s[level] -
// sum_{j<level} s[j]*(extent[j]-1), so only one adder, one register and one
// delta multiplexer are needed; the configured offset is added at the output.
// This is the final, recurrence-based generator of the reference design
// (single adder + register + delta mux + offset adder). The deltas are
// precomputed by the compiler and held in configuration.
//
// Interface: `step`/`level` come from the iteration domain; `value` is valid
// in the same cycle as the step it belongs to and advances on the clock edge
// that consumes the step. `clear` returns the running sum to zero. The width
// is a parameter so that the same unit serves addresses and schedules.
module address_gen
  import ub_pkg::*;
#(
  parameter int unsigned W = ADDR_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        step,
  input  lvl_t                        level,
  input  logic [MAX_DIMS-1:0][W-1:0]  delta,
  input  logic [W-1:0]                offset,
  output logic [W-1:0]                value
);

  logic [W-1:0] running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     running <= '0;
    else if (clear) running <= '0;
    else if (step)  running <= running + delta[level];
  end

  assign value = running + offset;

endmodule
