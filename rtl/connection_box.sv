// Connection box (CB): chooses one tile-core input from the routing tracks.
//
// The candidates are the 4*NT tracks entering the tile, numbered
// side*NT + track (sides N, E, S, W). `sel` picks one of them; values past the
// last track give zero. Purely combinational. The reference design names the
// connection box ("gets inputs"); its full-crossbar reach is this design's
// choice.
module connection_box
  import ub_pkg::*;
#(
  parameter int unsigned W  = DATA_W,
  parameter int unsigned NT = 5,
  parameter int unsigned SW = $clog2(4 * NT + 1)
) (
  input  logic [SW-1:0]             sel,
  input  logic [3:0][NT-1:0][W-1:0] in,
  output logic [W-1:0]              out
);

  always_comb begin
    out = '0;
    for (int s = 0; s < 4; s++)
      for (int t = 0; t < NT; t++)
        if (int'(sel) == s * NT + t) out = in[s][t];
  end

endmodule
