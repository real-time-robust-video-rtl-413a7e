// region_calc: propagates a masked region through one layer to find which
// neurons a masked-image inference must recompute and which neighbouring
// neurons it needs as padding.
//
// A layer with kernel K, stride S and zero padding P computes output o from
// inputs [o*S - P, o*S - P + K - 1] in each dimension. Given the masked
// (changed) input region [a, b]:
//   affected outputs  lo = ceil((a + P - K + 1) / S),  hi = floor((b + P) / S)
//   padded input area [lo*S - P, hi*S - P + K - 1]
// both clipped to the map. The affected outputs are the masked region of the
// next map; the padded input area minus the masked input region is the ring
// of unchanged neurons that the masked neuron buffer keeps from the
// original-image inference. With the paper's 224x224 example (3x3 stride-2
// convolution, 2x2 pooling) a 50x50 masked input region gives a 53x53 padded
// area and a 26x26 first-layer region, as in the paper's computing-flow
// figure. A fully connected layer is a kernel as large as its input map, so
// its padded area is the whole map. The formula itself is this design's
// reading of that figure; the paper gives only the resulting sizes.
//
// Purely combinational; x and y are handled by the same arithmetic.
module region_calc
  import themis_pkg::*;
(
  input  rect_t      mrect_in,    // masked region of the layer input map
  input  layer_cfg_t cfg,
  output rect_t      mrect_out,   // affected region of the layer output map
  output rect_t      prect_in,    // padded area of the layer input map
  output logic       empty        // no output neuron depends on the region
);

  localparam int SW = COORD_W + 6;  // signed working width

  function automatic void span(input coord_t a, input coord_t b, input layer_cfg_t c,
                               output coord_t olo, output coord_t ohi,
                               output coord_t plo, output coord_t phi,
                               output logic   none);
    logic signed [SW-1:0] n_lo, n_hi, lo, hi, s, k, p, pl, ph, omax, imax;
    s    = SW'(c.s);
    k    = SW'(c.k);
    p    = SW'(c.p);
    omax = SW'(c.out_size) - 1;
    imax = SW'(c.in_size) - 1;
    n_lo = SW'(a) + p - k + 1;
    n_hi = SW'(b) + p;
    lo   = (n_lo <= 0) ? '0 : (n_lo + s - 1) / s;
    hi   = n_hi / s;
    if (hi > omax) hi = omax;
    none = (lo > hi);
    pl   = lo * s - p;
    ph   = hi * s - p + k - 1;
    if (pl < 0)    pl = '0;
    if (ph > imax) ph = imax;
    olo = coord_t'(lo);
    ohi = coord_t'(hi);
    plo = coord_t'(pl);
    phi = coord_t'(ph);
  endfunction

  always_comb begin
    logic ny, nx;
    span(mrect_in.y0, mrect_in.y1, cfg, mrect_out.y0, mrect_out.y1,
         prect_in.y0, prect_in.y1, ny);
    span(mrect_in.x0, mrect_in.x1, cfg, mrect_out.x0, mrect_out.x1,
         prect_in.x0, prect_in.x1, nx);
    empty = ny || nx;
  end

endmodule
