// Testbench helpers: building port-controller configurations the way the
// compiler does.
//
// make_port() takes a loop nest (extents, level 0 innermost), the affine
// address and schedule strides and offsets, and converts the strides to the
// recurrence deltas the hardware stores:
//   d[0] = s[0],  d[k] = s[k] - sum_{j<k} s[j] * (extent[j] - 1).
// Unused levels get extent 1 and delta 0.
package ub_tb_pkg;
  import ub_pkg::*;

  typedef int int6_t [6];

  function automatic port_cfg_t make_port(int dims, int6_t ext, int6_t astr, int aoff,
                                          int6_t sstr, int soff);
    port_cfg_t p;
    int asum, ssum;
    p = '0;
    p.enable  = 1'b1;
    p.id.dims = 3'(dims);
    asum = 0;
    ssum = 0;
    for (int k = 0; k < int'(MAX_DIMS); k++) begin
      if (k < dims) begin
        p.id.extent[k] = CNT_W'(ext[k]);
        p.ag.delta[k]  = ADDR_W'(astr[k] - asum);
        p.sg.delta[k]  = TIME_W'(sstr[k] - ssum);
        asum += astr[k] * (ext[k] - 1);
        ssum += sstr[k] * (ext[k] - 1);
      end else begin
        p.id.extent[k] = CNT_W'(1);
      end
    end
    p.ag.offset = ADDR_W'(aoff);
    p.sg.offset = TIME_W'(soff);
    return p;
  endfunction

  // Switch-box select code that drives side `out_side` from the incoming
  // tracks of side `from_side` (sides 0 N, 1 E, 2 S, 3 W).
  function automatic logic [2:0] sb_from(int out_side, int from_side);
    return 3'((from_side - out_side - 1 + 8) % 4);
  endfunction

  // Switch-box select code for core output k.
  function automatic logic [2:0] sb_core(int k);
    return 3'(3 + k);
  endfunction

  // Connection-box select code of incoming track t on side s.
  function automatic logic [CB_SEL_W-1:0] cb_track(int s, int t);
    return CB_SEL_W'(s * NUM_TRACKS + t);
  endfunction

endpackage
