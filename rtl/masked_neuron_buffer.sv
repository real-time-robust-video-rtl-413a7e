// masked_neuron_buffer (MNB): keeps, from the original-image inference, the
// unchanged neurons that surround each patch candidate, so that the later
// masked-image inferences recompute only the candidate regions and reuse
// everything else.
//
// How it works. For every candidate c and feature map m a region descriptor
// (from the controller) gives the masked region mrect and the padded area
// prect around it. The ring prect \ mrect of every channel is stored
// contiguously from the descriptor's mnb_base:
//     addr = mnb_base + ch * ring_size(prect, mrect) + ring_offset(y, x)
// where ring_offset is the raster index of (y, x) inside the ring.
//  * Capture (paper's data-reuse step 1): the activations the PE array
//    produces during the original-image inference are snooped on the cap_*
//    stream. An activation that lies in the ring of several candidates is
//    written once per candidate, one write per cycle; cap_ready drops while
//    such a multi-candidate activation is being written (a stall).
//  * Read (step 2): during a masked-image inference rd_* looks up a ring
//    neuron of one candidate; rd_data and rd_hit follow one cycle later.
// The paper fixes the size (8 KB per PE array) and the role; the ring
// layout, the snooping interface and the stall are this design's choices.
// Descriptors whose `fits` bit is clear are ignored (the controller found no
// room for them).
module masked_neuron_buffer
  import themis_pkg::*;
#(
  parameter int BYTES = 8192,
  parameter int NCAND = MAX_CAND,
  parameter int NMAPS = MAX_MAPS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  region_desc_t      desc [NCAND][NMAPS],
  // capture stream from the PE array (original-image inference)
  input  logic              cap_valid,
  output logic              cap_ready,
  input  logic [MAP_W-1:0]  cap_map,
  input  logic [CH_W-1:0]   cap_ch,
  input  coord_t            cap_y,
  input  coord_t            cap_x,
  input  data_t             cap_data,
  output logic              cap_stall,     // multi-candidate write in progress
  // ring read port (masked-image inference)
  input  logic              rd_valid,
  input  logic [CAND_W-1:0] rd_cand,
  input  logic [MAP_W-1:0]  rd_map,
  input  logic [CH_W-1:0]   rd_ch,
  input  coord_t            rd_y,
  input  coord_t            rd_x,
  output data_t             rd_data,
  output logic              rd_hit
);

  localparam int AW = $clog2(BYTES);
  localparam int OW = 2 * COORD_W + 1;

  data_t mem [BYTES];

  typedef struct packed {
    logic [MAP_W-1:0] map;
    logic [CH_W-1:0]  ch;
    coord_t           y;
    coord_t           x;
    data_t            data;
  } cap_item_t;

  cap_item_t        item_q;
  logic [NCAND-1:0] pend_q, match, lowest;

  function automatic logic in_ring(input region_desc_t d, input coord_t y, input coord_t x);
    return d.valid && d.fits && in_rect(d.prect, y, x) && !in_rect(d.mrect, y, x);
  endfunction

  function automatic logic [AW-1:0] ring_addr(input region_desc_t d, input logic [CH_W-1:0] ch,
                                              input coord_t y, input coord_t x);
    logic [OW+CH_W:0] a;
    a = (OW+CH_W+1)'(d.mnb_base)
      + (OW+CH_W+1)'(ch) * (OW+CH_W+1)'(ring_size(d.prect, d.mrect))
      + (OW+CH_W+1)'(ring_offset(d.prect, d.mrect, y, x));
    return a[AW-1:0];
  endfunction

  // candidates whose ring holds the incoming activation
  always_comb begin
    for (int c = 0; c < NCAND; c++) match[c] = in_ring(desc[c][cap_map], cap_y, cap_x);
    lowest = pend_q & (~pend_q + 1'b1);
  end

  assign cap_ready = ((pend_q & (pend_q - 1'b1)) == '0);
  assign cap_stall = !cap_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q <= '0;
      item_q <= '0;
    end else if (cap_valid && cap_ready) begin
      pend_q <= match;
      item_q <= '{map: cap_map, ch: cap_ch, y: cap_y, x: cap_x, data: cap_data};
    end else begin
      pend_q <= pend_q & ~lowest;
    end
  end

  // one ring write per cycle, lowest pending candidate first
  region_desc_t wdesc;
  always_comb begin
    wdesc = '0;
    for (int c = 0; c < NCAND; c++)
      if (lowest[c]) wdesc = desc[c][item_q.map];
  end

  always_ff @(posedge clk) begin
    if (pend_q != '0)
      mem[ring_addr(wdesc, item_q.ch, item_q.y, item_q.x)] <= item_q.data;
  end

  region_desc_t rdesc;
  assign rdesc = desc[rd_cand[$clog2(NCAND)-1:0]][rd_map];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        rd_hit <= 1'b0;
    else if (rd_valid) rd_hit <= in_ring(rdesc, rd_y, rd_x);
  end

  always_ff @(posedge clk) begin
    if (rd_valid) rd_data <= mem[ring_addr(rdesc, rd_ch, rd_y, rd_x)];
  end

  // the capture stream must hold its item while it is stalled
  property p_cap_hold;
    @(posedge clk) disable iff (!rst_n)
      (cap_valid && !cap_ready) |=> cap_valid && $stable({cap_map, cap_ch, cap_y, cap_x, cap_data});
  endproperty
  a_cap_hold: assert property (p_cap_hold);

endmodule
