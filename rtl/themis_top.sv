// themis_top: the adversarial-patch defence hardware added to a DNN
// accelerator for real-time video object detection.
//
// Contents (the blue part of the paper's hardware block diagram plus the
// global buffers it shares with the accelerator):
//   themis_controller     frame schedule, key/non-key frames, AO/PO flows,
//                         region build (region_calc) and patch warp
//                         (region_warp)
//   lisf_search           candidate searching logic on the first-layer map
//   voting_logic          monopolist-occluded voting
//   per PE array (NARRAYS = 2x2 = 4):
//     masked_neuron_buffer  8 KB padding-ring store (computation reuse)
//     feature_splice        combines MNB and GB neurons for masked layers
//     global_buffer         64 KB global buffer of that array
// The PE arrays, the scalar function unit, DRAM and the optical-flow
// computation belong to the baseline accelerator and its software and are
// not part of this RTL; their connections are the ports below:
//   cmd_* / rsp_*      commands to the accelerator and the labels it returns
//   heat_*             first-layer activations streamed to the search
//   cap_*  [array]     activations snooped during the original inference
//   rq_*/rs_* [array]  masked-layer input neurons read by the PE array
//   wb_*   [array]     masked-layer results written back by the PE array
//   gba_*  [array]     the accelerator's own port of each global buffer
//   flow_*             optical flow of the kept patch for non-key frames
// res_* reports each frame: label, whether a patch was found (key frame) or
// occluded (non-key frame) and its region in input-image coordinates.
// Default sizes follow the paper (224x224 input, 112x112x32 first layer,
// beta 0.75, theta 0.85, 30 % overlap, 10 % key frames, 8 KB MNB and 64 KB
// GB per array, 2x2 arrays, INT8). The search window size is not published:
// the default S = 26 is this design's choice, the first-layer size of the
// paper's 50x50 example region; with theta 0.85 it flags patches of about
// 48 to 52 input pixels.
module themis_top
  import themis_pkg::*;
#(
  parameter int H            = 112,
  parameter int W            = 112,
  parameter int CH           = 32,
  parameter int S            = 26,
  parameter int NCAND        = MAX_CAND,
  parameter int NMAPS        = MAX_MAPS,
  parameter int NARRAYS      = 4,
  parameter int KEY_INTERVAL = 10,
  parameter int FIRST_SH     = 1,
  parameter int IMG_SIZE     = 224,
  parameter int MNB_BYTES    = 8192,
  parameter int GB_BYTES     = 65536,
  parameter int GB_MASK_BASE = 32768,
  parameter int FLOW_W       = 10
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // frame control and configuration
  input  logic                       frame_start,
  input  logic                       po_mode,
  output logic                       frame_busy,
  input  layer_cfg_t                 layer_cfg [NMAPS],
  input  logic [MAP_W:0]             n_layers,
  input  logic [CH_W:0]              in_ch,
  input  logic [8:0]                 beta_q8,
  input  logic [8:0]                 theta_q8,
  input  logic signed [FLOW_W-1:0]   flow_dy,
  input  logic signed [FLOW_W-1:0]   flow_dx,
  input  logic signed [3:0]          flow_scale_sh,
  // accelerator commands
  output logic                       cmd_valid,
  input  logic                       cmd_ready,
  output accel_cmd_t                 cmd,
  input  logic                       rsp_valid,
  input  label_t                     rsp_label,
  // first-layer heat stream
  input  logic                       heat_valid,
  input  logic signed [DATA_W-1:0]   heat_data,
  // per PE array: capture stream
  input  logic                       cap_valid [NARRAYS],
  output logic                       cap_ready [NARRAYS],
  input  logic [MAP_W-1:0]           cap_map   [NARRAYS],
  input  logic [CH_W-1:0]            cap_ch    [NARRAYS],
  input  coord_t                     cap_y     [NARRAYS],
  input  coord_t                     cap_x     [NARRAYS],
  input  data_t                      cap_data  [NARRAYS],
  // per PE array: masked-layer reads
  input  logic                       rq_valid  [NARRAYS],
  input  logic [CAND_W-1:0]          rq_cand   [NARRAYS],
  input  logic [MAP_W-1:0]           rq_map    [NARRAYS],
  input  logic [CH_W-1:0]            rq_ch     [NARRAYS],
  input  coord_t                     rq_y      [NARRAYS],
  input  coord_t                     rq_x      [NARRAYS],
  output logic                       rs_valid  [NARRAYS],
  output src_e                       rs_src    [NARRAYS],
  output data_t                      rs_data   [NARRAYS],
  // per PE array: masked-layer write-back
  input  logic                       wb_valid  [NARRAYS],
  input  logic [CAND_W-1:0]          wb_cand   [NARRAYS],
  input  logic [MAP_W-1:0]           wb_map    [NARRAYS],
  input  logic [CH_W-1:0]            wb_ch     [NARRAYS],
  input  coord_t                     wb_y      [NARRAYS],
  input  coord_t                     wb_x      [NARRAYS],
  input  data_t                      wb_data   [NARRAYS],
  // per PE array: accelerator port of the global buffer
  input  logic                       gba_en    [NARRAYS],
  input  logic                       gba_we    [NARRAYS],
  input  logic [$clog2(GB_BYTES)-1:0] gba_addr [NARRAYS],
  input  data_t                      gba_wdata [NARRAYS],
  output data_t                      gba_rdata [NARRAYS],
  // results and status
  output logic                       res_valid,
  output logic                       res_key,
  output logic                       res_patched,
  output label_t                     res_label,
  output rect_t                      res_region,
  output logic                       search_overflow,
  output logic                       mnb_overflow,
  output logic                       cap_stall [NARRAYS]
);

  localparam int KW = $clog2(NCAND + 1);

  // search
  logic              srch_pass_start, srch_pass, srch_busy, srch_done;
  logic [KW-1:0]     srch_count;
  rect_t             srch_rect [NCAND];

  // voting
  logic              vote_lab_we, vote_start, vote_busy, vote_done, vote_patched;
  logic [KW-1:0]     vote_lab_idx, vote_k, vote_orphan;
  label_t            vote_lab_data, vote_label;

  region_desc_t      desc [NCAND][NMAPS];

  themis_controller #(
    .NCAND(NCAND), .NMAPS(NMAPS), .NARRAYS(NARRAYS), .KEY_INTERVAL(KEY_INTERVAL),
    .FIRST_SH(FIRST_SH), .IMG_SIZE(IMG_SIZE), .MNB_BYTES(MNB_BYTES),
    .GB_BYTES(GB_BYTES), .GB_MASK_BASE(GB_MASK_BASE), .FLOW_W(FLOW_W)
  ) u_ctrl (
    .clk, .rst_n, .frame_start, .po_mode, .frame_busy,
    .layer_cfg, .n_layers, .in_ch, .flow_dy, .flow_dx, .flow_scale_sh,
    .cmd_valid, .cmd_ready, .cmd, .rsp_valid, .rsp_label,
    .srch_pass_start, .srch_pass, .srch_done, .srch_count, .srch_rect,
    .desc,
    .vote_lab_we, .vote_lab_idx, .vote_lab_data, .vote_start, .vote_k,
    .vote_done, .vote_patched, .vote_orphan, .vote_label,
    .res_valid, .res_key, .res_patched, .res_label, .res_region, .mnb_overflow
  );

  lisf_search #(.H(H), .W(W), .CH(CH), .S(S), .NCAND(NCAND)) u_search (
    .clk, .rst_n, .beta_q8, .theta_q8,
    .pass_start(srch_pass_start), .pass(srch_pass),
    .in_valid(heat_valid), .in_data(heat_data),
    .busy(srch_busy), .done(srch_done),
    .cand_count(srch_count), .cand_rect(srch_rect), .overflow(search_overflow)
  );

  voting_logic #(.NCAND(NCAND)) u_vote (
    .clk, .rst_n, .lab_we(vote_lab_we), .lab_idx(vote_lab_idx), .lab_data(vote_lab_data),
    .start(vote_start), .k(vote_k), .busy(vote_busy), .done(vote_done),
    .patched(vote_patched), .orphan(vote_orphan), .label(vote_label)
  );

  for (genvar a = 0; a < NARRAYS; a++) begin : g_array
    logic              mnb_rd_valid;
    logic [CAND_W-1:0] mnb_rd_cand;
    logic [MAP_W-1:0]  mnb_rd_map;
    logic [CH_W-1:0]   mnb_rd_ch;
    coord_t            mnb_rd_y, mnb_rd_x;
    data_t             mnb_rd_data;
    logic              mnb_rd_hit;
    logic              gb_en, gb_we, wb_drop;
    logic [$clog2(GB_BYTES)-1:0] gb_addr;
    data_t             gb_wdata, gb_rdata;

    masked_neuron_buffer #(.BYTES(MNB_BYTES), .NCAND(NCAND), .NMAPS(NMAPS)) u_mnb (
      .clk, .rst_n, .desc,
      .cap_valid(cap_valid[a]), .cap_ready(cap_ready[a]), .cap_map(cap_map[a]),
      .cap_ch(cap_ch[a]), .cap_y(cap_y[a]), .cap_x(cap_x[a]), .cap_data(cap_data[a]),
      .cap_stall(cap_stall[a]),
      .rd_valid(mnb_rd_valid), .rd_cand(mnb_rd_cand), .rd_map(mnb_rd_map),
      .rd_ch(mnb_rd_ch), .rd_y(mnb_rd_y), .rd_x(mnb_rd_x),
      .rd_data(mnb_rd_data), .rd_hit(mnb_rd_hit)
    );

    feature_splice #(.NCAND(NCAND), .NMAPS(NMAPS), .GB_BYTES(GB_BYTES)) u_splice (
      .clk, .rst_n, .desc,
      .rq_valid(rq_valid[a]), .rq_cand(rq_cand[a]), .rq_map(rq_map[a]),
      .rq_ch(rq_ch[a]), .rq_y(rq_y[a]), .rq_x(rq_x[a]),
      .rs_valid(rs_valid[a]), .rs_src(rs_src[a]), .rs_data(rs_data[a]),
      .wb_valid(wb_valid[a]), .wb_cand(wb_cand[a]), .wb_map(wb_map[a]),
      .wb_ch(wb_ch[a]), .wb_y(wb_y[a]), .wb_x(wb_x[a]), .wb_data(wb_data[a]),
      .wb_drop,
      .mnb_rd_valid, .mnb_rd_cand, .mnb_rd_map, .mnb_rd_ch, .mnb_rd_y, .mnb_rd_x,
      .mnb_rd_data,
      .gb_en, .gb_we, .gb_addr, .gb_wdata, .gb_rdata
    );

    global_buffer #(.BYTES(GB_BYTES)) u_gb (
      .clk,
      .a_en(gba_en[a]), .a_we(gba_we[a]), .a_addr(gba_addr[a]),
      .a_wdata(gba_wdata[a]), .a_rdata(gba_rdata[a]),
      .b_en(gb_en), .b_we(gb_we), .b_addr(gb_addr), .b_wdata(gb_wdata), .b_rdata(gb_rdata)
    );
  end

endmodule
