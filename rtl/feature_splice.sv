// feature_splice: assembles the input neurons of a masked-image layer from
// two sources (the "+" node of the paper's data-reuse figure) and places the
// recomputed candidate features in the global buffer.
//
// For a requested neuron (candidate, map, channel, y, x) the descriptor of
// that candidate and map decides the source:
//   inside the masked region, map 0   -> zero (the occluded input pixels)
//   inside the masked region, map > 0 -> global buffer, where the previous
//                                        masked layer wrote it back
//   in the padding ring               -> masked neuron buffer (reused)
//   elsewhere                         -> not needed (SRC_NONE, data 0)
// The global-buffer address of a masked feature is
//   gb_base + ch * area(mrect) + (y - mrect.y0) * width(mrect) + (x - mrect.x0).
// The write-back port (paper's data-reuse step 3) uses the same address
// for the PE array's results; results outside the masked region are dropped.
//
// Timing: rq_* is accepted every cycle; rs_valid, rs_src and rs_data follow
// one cycle later, matching the one-cycle reads of both buffers. The paper
// describes the combination and the two sources; the address layout is this
// design's choice. The coordinates of the masked neuron buffer read and the
// write data of the global buffer are the request's and the PE array's own
// fields passed on unchanged: only the enables and addresses are decided here.
module feature_splice
  import themis_pkg::*;
#(
  parameter int NCAND    = MAX_CAND,
  parameter int NMAPS    = MAX_MAPS,
  parameter int GB_BYTES = 65536
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  region_desc_t                desc [NCAND][NMAPS],
  // read request from the PE array
  input  logic                        rq_valid,
  input  logic [CAND_W-1:0]           rq_cand,
  input  logic [MAP_W-1:0]            rq_map,
  input  logic [CH_W-1:0]             rq_ch,
  input  coord_t                      rq_y,
  input  coord_t                      rq_x,
  output logic                        rs_valid,
  output src_e                        rs_src,
  output data_t                       rs_data,
  // write-back of recomputed candidate features from the PE array
  input  logic                        wb_valid,
  input  logic [CAND_W-1:0]           wb_cand,
  input  logic [MAP_W-1:0]            wb_map,
  input  logic [CH_W-1:0]             wb_ch,
  input  coord_t                      wb_y,
  input  coord_t                      wb_x,
  input  data_t                       wb_data,
  output logic                        wb_drop,
  // masked neuron buffer read port
  output logic                        mnb_rd_valid,
  output logic [CAND_W-1:0]           mnb_rd_cand,
  output logic [MAP_W-1:0]            mnb_rd_map,
  output logic [CH_W-1:0]             mnb_rd_ch,
  output coord_t                      mnb_rd_y,
  output coord_t                      mnb_rd_x,
  input  data_t                       mnb_rd_data,
  // global buffer port B
  output logic                        gb_en,
  output logic                        gb_we,
  output logic [$clog2(GB_BYTES)-1:0] gb_addr,
  output data_t                       gb_wdata,
  input  data_t                       gb_rdata
);

  localparam int GW = $clog2(GB_BYTES);
  localparam int AW = 2 * COORD_W + CH_W + 2;

  function automatic logic [GW-1:0] gb_feat_addr(input region_desc_t d, input logic [CH_W-1:0] ch,
                                                 input coord_t y, input coord_t x);
    logic [AW-1:0] a, w;
    w = AW'(d.mrect.x1) - AW'(d.mrect.x0) + AW'(1);
    a = AW'(d.gb_base) + AW'(ch) * AW'(rect_area(d.mrect))
      + AW'(y - d.mrect.y0) * w + AW'(x - d.mrect.x0);
    return a[GW-1:0];
  endfunction

  region_desc_t rd, wd;
  src_e         src;
  logic         wb_ok;

  assign rd = desc[rq_cand[$clog2(NCAND)-1:0]][rq_map];
  assign wd = desc[wb_cand[$clog2(NCAND)-1:0]][wb_map];

  always_comb begin
    src = SRC_NONE;
    if (rd.valid && in_rect(rd.mrect, rq_y, rq_x))
      src = (rq_map == '0) ? SRC_ZERO : SRC_GB;
    else if (rd.valid && rd.fits && in_rect(rd.prect, rq_y, rq_x))
      src = SRC_MNB;
  end

  assign wb_ok   = wb_valid && wd.valid && (wb_map != '0) && in_rect(wd.mrect, wb_y, wb_x);
  assign wb_drop = wb_valid && !wb_ok;

  assign mnb_rd_valid = rq_valid && (src == SRC_MNB);
  assign mnb_rd_cand  = rq_cand;
  assign mnb_rd_map   = rq_map;
  assign mnb_rd_ch    = rq_ch;
  assign mnb_rd_y     = rq_y;
  assign mnb_rd_x     = rq_x;

  // write-back has priority on port B; a read in the same cycle is not
  // allowed (see assertion), the PE array interleaves the two phases.
  always_comb begin
    gb_en    = wb_ok || (rq_valid && src == SRC_GB);
    gb_we    = wb_ok;
    gb_addr  = wb_ok ? gb_feat_addr(wd, wb_ch, wb_y, wb_x) : gb_feat_addr(rd, rq_ch, rq_y, rq_x);
    gb_wdata = wb_data;
  end

  src_e src_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs_valid <= 1'b0;
      src_q    <= SRC_NONE;
    end else begin
      rs_valid <= rq_valid;
      src_q    <= src;
    end
  end

  assign rs_src = src_q;
  always_comb begin
    unique case (src_q)
      SRC_GB:  rs_data = gb_rdata;
      SRC_MNB: rs_data = mnb_rd_data;
      default: rs_data = '0;
    endcase
  end

  a_no_rd_wb_clash: assert property (@(posedge clk) disable iff (!rst_n)
    !(wb_ok && rq_valid && src == SRC_GB));

endmodule
