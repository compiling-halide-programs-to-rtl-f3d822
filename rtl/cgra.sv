// Coarse-grained reconfigurable array: ROWS x COLS tiles, one quarter of
// them memory tiles (every fourth column, columns 3, 7, 11, ...), the rest PE
// tiles, connected island-style through the tiles' switch boxes.
//
// Neighbouring tiles exchange NUM_TRACKS 16-bit and NUM_TRACKS 1-bit tracks
// on each side. The array's edge tracks are tied to zero, except that along
// the north edge track 0 of every column is the array I/O: `io_in[c]` enters
// tile (0,c) from the north and `io_out[c]` is what tile (0,c) drives north on
// track 0. Memory tiles of a column form a chain from bottom to top
// (`chain_out` of row r+1 feeds `chain_in` of row r).
//
// All tiles share the run signals: `clear` restarts every port controller,
// `cycle` is the cycle count of the current run, `stall` freezes all state.
// Configuration is a broadcast bus; tile (r,c) answers to tile index
// r*COLS + c. The 16 x 32 size and the quarter of memory tiles are the
// reference design's; the I/O edge and chain wiring are this design's.
module cgra
  import ub_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   stall,
  input  logic                   clear,
  input  time_t                  cycle,
  input  cfg_bus_t               cfg_bus,
  input  word_t [COLS-1:0]       io_in,
  output word_t [COLS-1:0]       io_out
);

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_row
    for (genvar c = 0; c < int'(COLS); c++) begin : g_col
      logic [3:0][NUM_TRACKS-1:0][DATA_W-1:0] in16, out16;
      logic [3:0][NUM_TRACKS-1:0]             in1,  out1;
      word_t [1:0]                            chain_in, chain_out;

      cgra_tile #(
        .IS_MEM ((c % 4) == 3)
      ) u_tile (
        .clk, .rst_n, .stall, .clear, .cycle, .cfg_bus,
        .tile_index (CFG_TILE_W'(r * COLS + c)),
        .in16, .in1, .out16, .out1, .chain_in, .chain_out
      );
    end
  end

  // Wiring between neighbours (sides: 0 N, 1 E, 2 S, 3 W)
  for (genvar r = 0; r < int'(ROWS); r++) begin : g_wr
    for (genvar c = 0; c < int'(COLS); c++) begin : g_wc
      if (r == 0) begin : g_n_edge
        always_comb begin
          g_row[r].g_col[c].in16[SIDE_N]    = '0;
          g_row[r].g_col[c].in16[SIDE_N][0] = io_in[c];
        end
        assign g_row[r].g_col[c].in1[SIDE_N] = '0;
        assign io_out[c] = g_row[r].g_col[c].out16[SIDE_N][0];
      end else begin : g_n
        assign g_row[r].g_col[c].in16[SIDE_N] = g_row[r-1].g_col[c].out16[SIDE_S];
        assign g_row[r].g_col[c].in1[SIDE_N]  = g_row[r-1].g_col[c].out1[SIDE_S];
      end
      if (r == ROWS - 1) begin : g_s_edge
        assign g_row[r].g_col[c].in16[SIDE_S] = '0;
        assign g_row[r].g_col[c].in1[SIDE_S]  = '0;
        assign g_row[r].g_col[c].chain_in     = '0;
      end else begin : g_s
        assign g_row[r].g_col[c].in16[SIDE_S] = g_row[r+1].g_col[c].out16[SIDE_N];
        assign g_row[r].g_col[c].in1[SIDE_S]  = g_row[r+1].g_col[c].out1[SIDE_N];
        assign g_row[r].g_col[c].chain_in     = g_row[r+1].g_col[c].chain_out;
      end
      if (c == 0) begin : g_w_edge
        assign g_row[r].g_col[c].in16[SIDE_W] = '0;
        assign g_row[r].g_col[c].in1[SIDE_W]  = '0;
      end else begin : g_w
        assign g_row[r].g_col[c].in16[SIDE_W] = g_row[r].g_col[c-1].out16[SIDE_E];
        assign g_row[r].g_col[c].in1[SIDE_W]  = g_row[r].g_col[c-1].out1[SIDE_E];
      end
      if (c == COLS - 1) begin : g_e_edge
        assign g_row[r].g_col[c].in16[SIDE_E] = '0;
        assign g_row[r].g_col[c].in1[SIDE_E]  = '0;
      end else begin : g_e
        assign g_row[r].g_col[c].in16[SIDE_E] = g_row[r].g_col[c+1].out16[SIDE_W];
        assign g_row[r].g_col[c].in1[SIDE_E]  = g_row[r].g_col[c+1].out1[SIDE_W];
      end
    end
  end

endmodule
