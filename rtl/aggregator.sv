// Aggregator (AGG): serial-to-parallel buffer in front of the wide SRAM.
//
// A small register file of DEPTH words. The write side is a full port
// controller (ID/AG/SG) attached to a tile input port: when it fires, the
// input word is stored at its address (modulo DEPTH). The read side is a
// second port controller whose schedule is the SRAM write schedule: when it
// fires, `vec_valid` is high and `vec_out` holds the FETCH_W words of vector
// slot (address modulo DEPTH/FETCH_W). The read is combinational, so a word
// written in cycle t can be read from cycle t+1 on.
// The reference design gives the AGG's role and size (four to eight words
// with a four-word SRAM); the register-file organisation is this design's.
module aggregator
  import ub_pkg::*;
#(
  parameter int unsigned DEPTH = AGG_DEPTH
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clear,
  input  logic      stall,
  input  time_t     cycle,
  input  port_cfg_t in_cfg,
  input  port_cfg_t out_cfg,
  input  word_t     data_in,
  output logic      vec_valid,
  output vec_t      vec_out
);

  localparam int unsigned SLOTS = DEPTH / FETCH_W;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1;

  word_t mem [DEPTH];

  logic  wr_valid;
  addr_t wr_addr, rd_addr;
  lvl_t  wr_level, rd_level;
  logic  wr_done, rd_done;

  port_ctrl #(.USE_SG(1'b1)) u_wr (
    .clk, .rst_n, .clear, .stall, .cycle,
    .ext_step (1'b0),
    .cfg      (in_cfg),
    .valid    (wr_valid),
    .addr     (wr_addr),
    .level    (wr_level),
    .done     (wr_done)
  );

  port_ctrl #(.USE_SG(1'b1)) u_rd (
    .clk, .rst_n, .clear, .stall, .cycle,
    .ext_step (1'b0),
    .cfg      (out_cfg),
    .valid    (vec_valid),
    .addr     (rd_addr),
    .level    (rd_level),
    .done     (rd_done)
  );

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wr_addr[AW-1:0]] <= data_in;
  end

  logic [SW-1:0] slot;
  assign slot = SW'(rd_addr % SLOTS);

  always_comb begin
    for (int k = 0; k < FETCH_W; k++) vec_out[k] = mem[int'(slot) * FETCH_W + k];
  end

endmodule
