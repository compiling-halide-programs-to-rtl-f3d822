// Accelerator subsystem: global buffer + CGRA + tile sequencer.
//
// The host side of the SoC (processor, DMA, system interconnect, off-chip
// link) is outside this module: it reaches the accelerator through
//   - the configuration bus (`cfg_bus`): CGRA tiles at indices
//     r*COLS + c, global-buffer banks at GLB_CFG_BASE + b;
//   - the global-buffer host port (`host_*`), one 16-bit word per cycle;
//   - the sequencer controls (`start`, `num_tiles`, `run_cycles`,
//     `half_ready_set`) and status outputs.
// Data path: global buffer bank b -> CGRA column 2b (north edge, track 0);
// CGRA column 2b+1 -> bank b. The CGRA and the global-buffer streams share
// the sequencer's cycle counter, clear and stall, so the compiled static
// schedule holds across the boundary and the whole array freezes while a
// data tile is late.
module accel_top
  import ub_pkg::*;
#(
  parameter int unsigned ROWS       = 16,
  parameter int unsigned COLS       = 32,
  parameter int unsigned BANK_WORDS = 131072,
  parameter int unsigned BANKS      = COLS / 2,
  parameter int unsigned HOST_AW    = $clog2(BANKS) + $clog2(BANK_WORDS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_bus_t           cfg_bus,
  input  logic               host_we,
  input  logic               host_re,
  input  logic [HOST_AW-1:0] host_addr,
  input  word_t              host_wdata,
  output word_t              host_rdata,
  input  logic               start,
  input  logic [15:0]        num_tiles,
  input  time_t              run_cycles,
  input  logic [1:0]         half_ready_set,
  output logic               busy,
  output logic               done,
  output logic               stalled,
  output logic               active_half,
  output logic [15:0]        tiles_done,
  output logic [31:0]        stall_cycles
);

  logic       run, clear, stall;
  time_t      cycle;
  logic [1:0] half_ready;
  word_t [COLS-1:0] to_cgra, from_cgra;

  accel_ctrl u_ctrl (
    .clk, .rst_n, .start, .num_tiles, .run_cycles, .half_ready_set,
    .run, .clear, .stall, .cycle, .active_half, .busy, .done,
    .tiles_done, .stall_cycles, .half_ready
  );

  global_buffer #(.BANKS(BANKS), .BANK_WORDS(BANK_WORDS), .COLS(COLS)) u_glb (
    .clk, .rst_n, .clear, .stall, .run, .active_half, .cycle, .cfg_bus,
    .host_we, .host_re, .host_addr, .host_wdata, .host_rdata,
    .to_cgra, .from_cgra
  );

  cgra #(.ROWS(ROWS), .COLS(COLS)) u_cgra (
    .clk, .rst_n, .stall, .clear, .cycle, .cfg_bus,
    .io_in  (to_cgra),
    .io_out (from_cgra)
  );

  assign stalled = stall && busy;

endmodule
