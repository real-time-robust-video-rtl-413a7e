// region_warp: image-based warping of an adversarial region for a non-key
// frame of the accuracy-oriented (AO) flow. The patch found in the key frame
// is moved by the optical flow, V(x + dx, y + dy, k + 1) = V(x, y, k), and
// the moved region is occluded in the non-key frame instead of repeating the
// full detection.
//
// The optical flow is computed outside this design (a CNN or a pixel-matching
// method); this block takes one flow vector (dy, dx) for the region, in
// flow-map pixels, and rescales it to the mask map by an arithmetic shift
// (scale_sh > 0 multiplies, scale_sh < 0 divides, rounding to nearest), as
// the paper notes the flow must be resized to the map it warps. The region
// keeps its size and is clamped to stay inside a SIZE x SIZE map. Using a
// single vector per region and the shift-based resize are this design's
// choices. The result is registered: out_valid follows in_valid by one cycle.
module region_warp
  import themis_pkg::*;
#(
  parameter int SIZE   = 224,
  parameter int FLOW_W = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  rect_t                    rect_in,
  input  logic signed [FLOW_W-1:0] flow_dy,
  input  logic signed [FLOW_W-1:0] flow_dx,
  input  logic signed [3:0]        scale_sh,
  output logic                     out_valid,
  output rect_t                    rect_out
);

  localparam int SW = COORD_W + FLOW_W + 8;

  function automatic logic signed [SW-1:0] rescale(input logic signed [FLOW_W-1:0] d,
                                                   input logic signed [3:0] sh);
    logic signed [SW-1:0] v;
    int unsigned n;
    v = SW'(d);
    if (sh >= 0) begin
      n = unsigned'(int'(sh));
      return v <<< n;
    end
    n = unsigned'(-int'(sh));
    return (v + (SW'(1) <<< (n - 1))) >>> n;
  endfunction

  function automatic void shift1(input coord_t lo, input coord_t hi, input logic signed [SW-1:0] d,
                                 output coord_t olo, output coord_t ohi);
    logic signed [SW-1:0] l, h, len;
    len = SW'(hi) - SW'(lo);
    l   = SW'(lo) + d;
    if (l < 0) l = '0;
    if (l + len > SW'(SIZE - 1)) l = SW'(SIZE - 1) - len;
    h   = l + len;
    olo = coord_t'(l);
    ohi = coord_t'(h);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      rect_out  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        coord_t y0, y1, x0, x1;
        shift1(rect_in.y0, rect_in.y1, rescale(flow_dy, scale_sh), y0, y1);
        shift1(rect_in.x0, rect_in.x1, rescale(flow_dx, scale_sh), x0, x1);
        rect_out <= '{y0: y0, x0: x0, y1: y1, x1: x1};
      end
    end
  end

endmodule
