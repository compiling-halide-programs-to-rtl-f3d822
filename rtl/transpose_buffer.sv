// Transpose buffer (TB): parallel-to-serial buffer behind the wide SRAM.
//
// A register file of DEPTH words organised as DEPTH/FETCH_W vector slots.
// The write side has an ID+AG but no schedule of its own: it is stepped by
// `vec_we`, the SRAM read enable delayed by one cycle to match the SRAM read
// latency (the shared-schedule arrangement of the reference design), and
// stores the FETCH_W words of `vec_in` into slot (address mod slots). Each
// slot also records `vec_own`, whether the vector came from this tile's SRAM
// (tile-ID match when chaining). The read side is a full ID/AG/SG port: when
// it fires, `out_valid` is high, `out_word` is the word at (address mod DEPTH)
// and `out_own` the slot's ownership bit. Reads are combinational; a vector
// written in cycle t is readable from t+1.
module transpose_buffer
  import ub_pkg::*;
#(
  parameter int unsigned DEPTH = TB_DEPTH
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clear,
  input  logic      stall,
  input  time_t     cycle,
  input  port_cfg_t in_cfg,
  input  port_cfg_t out_cfg,
  input  logic      vec_we,
  input  vec_t      vec_in,
  input  logic      vec_own,
  output logic      out_valid,
  output word_t     out_word,
  output logic      out_own
);

  localparam int unsigned SLOTS = DEPTH / FETCH_W;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1;

  vec_t mem [SLOTS];
  logic [SLOTS-1:0] own;

  logic  wr_valid;
  addr_t wr_addr, rd_addr;
  lvl_t  wr_level, rd_level;
  logic  wr_done, rd_done;

  port_ctrl #(.USE_SG(1'b0)) u_wr (
    .clk, .rst_n, .clear, .stall, .cycle,
    .ext_step (vec_we),
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
    .valid    (out_valid),
    .addr     (rd_addr),
    .level    (rd_level),
    .done     (rd_done)
  );

  logic [SW-1:0] wslot, rslot;
  localparam int unsigned LW = $clog2(FETCH_W);
  logic [AW-1:0] rword;
  logic [LW-1:0] rlane;
  assign wslot = SW'(wr_addr % SLOTS);
  assign rword = rd_addr[AW-1:0];
  assign rslot = SW'(rword / FETCH_W);
  assign rlane = rword[LW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        own <= '0;
    else if (wr_valid) own[wslot] <= vec_own;
  end

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wslot] <= vec_in;
  end

  assign out_word = mem[rslot][rlane];
  assign out_own  = own[rslot];

endmodule
