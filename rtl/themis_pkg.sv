// themis_pkg: types, constants and small helper functions shared by the
// adversarial-patch defence blocks (candidate search, masked neuron buffer,
// feature splice, voting, region warp, controller).
//
// Conventions used throughout the design:
//  * Coordinates are unsigned, COORD_W bits, row (y) and column (x) of a
//    feature-map position. Rectangles are inclusive on both ends.
//  * A "map" index m names a feature map of the network: m = 0 is the input
//    image, m = 1 the output of the first layer, and so on.
//  * Activations are INT8 (the data type of the accelerator configuration).
//  * Class labels are LABEL_W bits wide.
// The numeric defaults follow the paper where it gives them (beta = 0.75,
// theta = 0.85, 30 % overlap, 8 KB masked neuron buffer, 64 KB global buffer,
// 2x2 PE arrays, INT8, 112x112x32 first-layer map, 26x26 masked region at the
// first layer, key frame rate 10 %). Widths, encodings and the candidate
// limit are this design's choices.
package themis_pkg;

  localparam int COORD_W   = 8;   // up to 256x256 maps (224x224 input)
  localparam int LABEL_W   = 8;   // class label width
  localparam int DATA_W    = 8;   // INT8 activations
  localparam int MAX_CAND  = 8;   // patch candidates held per frame
  localparam int MAX_MAPS  = 8;   // feature maps tracked for computation reuse
  localparam int CAND_W    = $clog2(MAX_CAND + 1);
  localparam int MAP_W     = $clog2(MAX_MAPS);
  localparam int CH_W      = 8;   // channel index width
  localparam int MNB_AW    = 13;  // 8 KB masked neuron buffer
  localparam int GB_AW     = 16;  // 64 KB global buffer

  // Fixed-point Q0.8 thresholds of the candidate search.
  localparam logic [8:0] BETA_Q8_DEFAULT  = 9'd192;  // 0.75
  localparam logic [8:0] THETA_Q8_DEFAULT = 9'd218;  // 0.85 (218/256 = 0.852)
  localparam int         OVERLAP_PCT      = 30;      // merge windows above 30 %

  typedef logic [COORD_W-1:0] coord_t;
  typedef logic [LABEL_W-1:0] label_t;
  typedef logic [DATA_W-1:0]  data_t;

  typedef struct packed {
    coord_t y0;
    coord_t x0;
    coord_t y1;
    coord_t x1;
  } rect_t;

  // Geometry of one layer (conv or pool): kernel, stride, zero padding,
  // input and output map sizes (square maps) and output channel count.
  typedef struct packed {
    logic [COORD_W-1:0] k;
    logic [3:0]         s;
    logic [3:0]         p;
    coord_t             in_size;
    coord_t             out_size;
    logic [CH_W:0]      out_ch;
  } layer_cfg_t;

  // Per candidate and per map: where the masked features and the padding
  // ring around them live.
  typedef struct packed {
    logic              valid;     // descriptor in use
    logic              fits;      // ring stored in the MNB (else recompute)
    rect_t             mrect;     // masked (affected) region
    rect_t             prect;     // padded bounding region, contains mrect
    logic [MNB_AW:0]   mnb_base;  // ring start in the MNB
    logic [GB_AW-1:0]  gb_base;   // masked-feature start in the GB
    logic [CH_W:0]     nch;       // channels held by one PE array
  } region_desc_t;

  // Commands the controller issues to the (external) DNN accelerator.
  typedef enum logic [2:0] {
    OP_FIRST_LAYER = 3'd0,  // compute layer 1, stream heat map (max pass)
    OP_HEAT_REREAD = 3'd1,  // re-stream layer-1 heat map (binarize pass)
    OP_COMPLETE    = 3'd2,  // finish the original-image inference, label L0
    OP_MASKED      = 3'd3,  // masked-image inference of one candidate
    OP_FULL_MASKED = 3'd4,  // AO non-key frame: full inference, warped mask
    OP_WARP_FEAT   = 3'd5   // PO non-key frame: warp key features + suffix
  } op_e;

  typedef struct packed {
    op_e                op;
    logic [CAND_W-1:0]  cand;      // candidate index for OP_MASKED
    logic               mask_en;   // OP_FULL_MASKED: apply mask_rect
    rect_t              mask_rect; // region to occlude (map 0 coordinates)
    logic               reuse;     // OP_MASKED: padding ring is in the MNB
  } accel_cmd_t;

  typedef enum logic [1:0] {
    SRC_NONE = 2'd0,  // position not used by a masked-image layer
    SRC_ZERO = 2'd1,  // masked input pixel, occluded to zero
    SRC_GB   = 2'd2,  // recomputed candidate feature in the global buffer
    SRC_MNB  = 2'd3   // reused padding neuron in the masked neuron buffer
  } src_e;

  function automatic logic in_rect(input rect_t r, input coord_t y, input coord_t x);
    return (y >= r.y0) && (y <= r.y1) && (x >= r.x0) && (x <= r.x1);
  endfunction

  function automatic logic [2*COORD_W:0] rect_area(input rect_t r);
    logic [COORD_W:0] h, w;
    h = {1'b0, r.y1} - {1'b0, r.y0} + 1'b1;
    w = {1'b0, r.x1} - {1'b0, r.x0} + 1'b1;
    return (2*COORD_W+1)'(h * w);
  endfunction

  // Number of positions of the ring prect \ mrect, per channel.
  function automatic logic [2*COORD_W:0] ring_size(input rect_t p, input rect_t m);
    return rect_area(p) - rect_area(m);
  endfunction

  // Raster-order index of (y, x) inside the ring prect \ mrect.
  // Rows above the masked region hold the full padded width, rows beside it
  // hold the left and right strips only, rows below hold the full width.
  function automatic logic [2*COORD_W:0] ring_offset(input rect_t p, input rect_t m,
                                                     input coord_t y, input coord_t x);
    logic [2*COORD_W:0] pw, mw, mh, top, mid, res;
    pw  = (2*COORD_W+1)'(p.x1) - (2*COORD_W+1)'(p.x0) + (2*COORD_W+1)'(1);
    mw  = (2*COORD_W+1)'(m.x1) - (2*COORD_W+1)'(m.x0) + (2*COORD_W+1)'(1);
    mh  = (2*COORD_W+1)'(m.y1) - (2*COORD_W+1)'(m.y0) + (2*COORD_W+1)'(1);
    top = (2*COORD_W+1)'(m.y0 - p.y0) * pw;
    mid = mh * (pw - mw);
    if (y < m.y0)
      res = (2*COORD_W+1)'(y - p.y0) * pw + (2*COORD_W+1)'(x - p.x0);
    else if (y <= m.y1) begin
      if (x < m.x0)
        res = top + (2*COORD_W+1)'(y - m.y0) * (pw - mw) + (2*COORD_W+1)'(x - p.x0);
      else
        res = top + (2*COORD_W+1)'(y - m.y0) * (pw - mw)
            + (2*COORD_W+1)'(m.x0 - p.x0) + (2*COORD_W+1)'(coord_t'(x - m.x1 - 1'b1));
    end else
      res = top + mid + (2*COORD_W+1)'(coord_t'(y - m.y1 - 1'b1)) * pw + (2*COORD_W+1)'(x - p.x0);
    return res;
  endfunction

endpackage
