// Switch box (SB) of one tile and one track width.
//
// NT tracks leave the tile on each of the four sides (N, E, S, W). Each
// outgoing track t of side s is a configurable multiplexer over
//   code 0..2 : incoming track t of side (s+1)%4, (s+2)%4, (s+3)%4
//   code 3..  : output k = code-3 of the tile core
// followed by a pipeline register, so every hop through the interconnect
// costs one cycle and no configuration can close a combinational loop. The
// register holds while `stall` is high. Codes beyond the last core output
// drive zero.
// The reference design only names the switch box and shows that it routes
// core outputs onto the routing tracks; the track count, the same-index
// ("disjoint") topology and the output registers are this design's choices.
module switch_box
  import ub_pkg::*;
#(
  parameter int unsigned W     = DATA_W,
  parameter int unsigned NT    = 5,
  parameter int unsigned NCORE = 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      stall,
  input  logic [3:0][NT-1:0][2:0]   sel,
  input  logic [3:0][NT-1:0][W-1:0] in,
  input  logic [NCORE-1:0][W-1:0]   core,
  output logic [3:0][NT-1:0][W-1:0] out
);

  logic [3:0][NT-1:0][W-1:0] nxt;

  always_comb begin
    for (int s = 0; s < 4; s++) begin
      for (int t = 0; t < NT; t++) begin
        nxt[s][t] = '0;
        if (sel[s][t] < 3'd3) begin
          nxt[s][t] = in[(s + 1 + int'(sel[s][t])) % 4][t];
        end else begin
          for (int k = 0; k < int'(NCORE); k++)
            if (int'(sel[s][t]) == 3 + k) nxt[s][t] = core[k];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      out <= '0;
    else if (!stall) out <= nxt;
  end

endmodule
