// One tile of the CGRA: a PE or a memory tile core with its switch boxes,
// connection boxes and configuration register.
//
// Routing: a 16-bit and a 1-bit switch box (NUM_TRACKS tracks per side,
// registered outputs) and connection boxes that select the core inputs from
// the incoming tracks. A PE tile has two 16-bit and three 1-bit core inputs
// and one output of each width; a memory tile has two 16-bit inputs and two
// 16-bit outputs and passes the 1-bit tracks through only.
//
// Configuration: the tile holds its whole configuration (routing + core) as
// one packed struct, written 32 bits at a time from the broadcast
// configuration bus when `cfg_bus.tile == tile_index`; word k sets bits
// [32k+31:32k] of the struct. Configuration is cleared by reset. The tile
// index is a constant input rather than a parameter so that all tiles of a
// kind share one module definition.
// A PE tile drives `chain_out` with zero: only memory tiles chain.
// Memory tiles also connect their output ports along a column for chaining:
// `chain_in` comes from the memory tile below, `chain_out` goes to the one
// above. The tile mix and the chaining wires follow the reference design;
// the bus and the exact routing topology are this design's choices.
module cgra_tile
  import ub_pkg::*;
#(
  parameter bit IS_MEM = 1'b0
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   stall,
  input  logic                                   clear,
  input  time_t                                  cycle,
  input  cfg_bus_t                               cfg_bus,
  input  logic [CFG_TILE_W-1:0]                  tile_index,  // tied off by the array
  input  logic [3:0][NUM_TRACKS-1:0][DATA_W-1:0] in16,
  input  logic [3:0][NUM_TRACKS-1:0]             in1,
  output logic [3:0][NUM_TRACKS-1:0][DATA_W-1:0] out16,
  output logic [3:0][NUM_TRACKS-1:0]             out1,
  input  word_t [1:0]                            chain_in,
  output word_t [1:0]                            chain_out
);

  localparam int unsigned CFG_BITS  = IS_MEM ? $bits(mem_tile_cfg_t) : $bits(pe_tile_cfg_t);
  localparam int unsigned CFG_WORDS = (CFG_BITS + CFG_W - 1) / CFG_W;

  logic [CFG_WORDS*CFG_W-1:0] cfg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg_q <= '0;
    else if (cfg_bus.we && cfg_bus.tile == tile_index &&
             int'(cfg_bus.word) < int'(CFG_WORDS))
      cfg_q[int'(cfg_bus.word) * CFG_W +: CFG_W] <= cfg_bus.data;
  end

  route_cfg_t route;
  word_t [1:0] core_in16;
  logic  [2:0] core_in1;

  for (genvar k = 0; k < 2; k++) begin : g_cb16
    connection_box #(.W(DATA_W), .NT(NUM_TRACKS)) u_cb (
      .sel (route.cb16[k]), .in (in16), .out (core_in16[k])
    );
  end

  if (IS_MEM) begin : g_mem
    mem_tile_cfg_t tcfg;
    word_t [1:0]   data_out;
    logic  [1:0]   out_valid;
    assign tcfg  = mem_tile_cfg_t'(cfg_q[$bits(mem_tile_cfg_t)-1:0]);
    assign route = tcfg.route;
    assign core_in1 = '0;

    mem_tile u_mem (
      .clk, .rst_n, .clear, .stall, .cycle,
      .cfg      (tcfg.core),
      .data_in  (core_in16),
      .chain_in,
      .data_out,
      .out_valid
    );
    assign chain_out = data_out;

    switch_box #(.W(DATA_W), .NT(NUM_TRACKS), .NCORE(2)) u_sb16 (
      .clk, .rst_n, .stall, .sel (route.sb16), .in (in16), .core (data_out), .out (out16)
    );
    switch_box #(.W(1), .NT(NUM_TRACKS), .NCORE(1)) u_sb1 (
      .clk, .rst_n, .stall, .sel (route.sb1), .in (in1), .core (1'b0), .out (out1)
    );
  end else begin : g_pe
    pe_tile_cfg_t tcfg;
    word_t        res;
    logic         res_bit;
    assign tcfg  = pe_tile_cfg_t'(cfg_q[$bits(pe_tile_cfg_t)-1:0]);
    assign route = tcfg.route;

    for (genvar k = 0; k < 3; k++) begin : g_cb1
      connection_box #(.W(1), .NT(NUM_TRACKS)) u_cb (
        .sel (route.cb1[k]), .in (in1), .out (core_in1[k])
      );
    end

    pe u_pe (
      .clk, .rst_n, .stall,
      .cfg    (tcfg.core),
      .a_in   (core_in16[0]),
      .b_in   (core_in16[1]),
      .bit_in (core_in1),
      .res,
      .res_bit
    );
    assign chain_out = '0;

    switch_box #(.W(DATA_W), .NT(NUM_TRACKS), .NCORE(1)) u_sb16 (
      .clk, .rst_n, .stall, .sel (route.sb16), .in (in16), .core (res), .out (out16)
    );
    switch_box #(.W(1), .NT(NUM_TRACKS), .NCORE(1)) u_sb1 (
      .clk, .rst_n, .stall, .sel (route.sb1), .in (in1), .core (res_bit), .out (out1)
    );
  end

endmodule
