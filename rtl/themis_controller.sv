// themis_controller: sequences the defence for every video frame and drives
// the DNN accelerator, the candidate search, the masked neuron buffers and
// the voting logic.
//
// Frame schedule. A frame counter makes every KEY_INTERVAL-th frame a key
// frame (10 % key frames with a fixed period, as in the paper).
//  Key frame (same for the AO and PO flows):
//   1. OP_FIRST_LAYER: the accelerator computes layer 1 and streams its map
//      to the search logic (max pass).
//   2. OP_HEAT_REREAD: the map is streamed again (binarize pass); the window
//      scan then runs by itself.
//   3. Region build: for each candidate and each layer, region_calc gives
//      the masked and padded regions; the padding rings are allocated in the
//      masked neuron buffer (per PE array, channel c kept by array
//      c mod NARRAYS) and the masked features in the upper part of the
//      global buffer (from GB_MASK_BASE), first fit in candidate order. A
//      candidate whose rings or masked features do not fit gets reuse = 0
//      (its masked inference is recomputed in full), later maps of it are
//      not stored, and mnb_overflow is raised.
//   4. OP_COMPLETE: the original-image inference finishes (label L0) while
//      the buffers capture the rings.
//   5. OP_MASKED for each candidate i: masked-image inference, label Li.
//   6. Voting; the result is reported. The patch region (if one was found)
//      is kept for the following non-key frames.
//  Non-key frame, AO flow (po_mode = 0): the kept region is warped by the
//   optical flow and the frame is inferred with that region occluded
//   (OP_FULL_MASKED); without a kept patch the frame is inferred unmasked.
//  Non-key frame, PO flow (po_mode = 1): OP_WARP_FEAT, the accelerator warps
//   the clean key-frame features and runs the network suffix.
//
// Interface to the accelerator: cmd_valid/cmd_ready/cmd issue one command;
// rsp_valid with rsp_label ends it (the label is ignored for the two heat
// passes). All handshakes are valid/ready or single-cycle pulses. The
// per-layer geometry (layer_cfg, n_layers, in_ch) and the thresholds are
// configuration inputs, which the paper calls the framework's design knobs.
// Search-region coordinates are in first-layer units and are scaled to the
// input image by FIRST_SH (log2 of the first layer's stride). The frame
// schedule follows the paper's computing flow; the command set, the
// allocation policy and the counters are this design's choices.
module themis_controller
  import themis_pkg::*;
#(
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
  // frame control
  input  logic                       frame_start,
  input  logic                       po_mode,
  output logic                       frame_busy,
  // configuration
  input  layer_cfg_t                 layer_cfg [NMAPS],
  input  logic [MAP_W:0]             n_layers,
  input  logic [CH_W:0]              in_ch,
  // optical flow for the kept patch region (non-key frames)
  input  logic signed [FLOW_W-1:0]   flow_dy,
  input  logic signed [FLOW_W-1:0]   flow_dx,
  input  logic signed [3:0]          flow_scale_sh,
  // accelerator command / response
  output logic                       cmd_valid,
  input  logic                       cmd_ready,
  output accel_cmd_t                 cmd,
  input  logic                       rsp_valid,
  input  label_t                     rsp_label,
  // candidate search
  output logic                       srch_pass_start,
  output logic                       srch_pass,
  input  logic                       srch_done,
  input  logic [$clog2(NCAND+1)-1:0] srch_count,
  input  rect_t                      srch_rect [NCAND],
  // region descriptors for the buffers
  output region_desc_t               desc [NCAND][NMAPS],
  // voting
  output logic                       vote_lab_we,
  output logic [$clog2(NCAND+1)-1:0] vote_lab_idx,
  output label_t                     vote_lab_data,
  output logic                       vote_start,
  output logic [$clog2(NCAND+1)-1:0] vote_k,
  input  logic                       vote_done,
  input  logic                       vote_patched,
  input  logic [$clog2(NCAND+1)-1:0] vote_orphan,
  input  label_t                     vote_label,
  // result
  output logic                       res_valid,
  output logic                       res_key,
  output logic                       res_patched,
  output label_t                     res_label,
  output rect_t                      res_region,
  output logic                       mnb_overflow
);

  localparam int KW = $clog2(NCAND + 1);
  localparam int FW = $clog2(KEY_INTERVAL + 1);
  localparam int BW = 2 * COORD_W + CH_W + 4;

  typedef enum logic [3:0] {
    C_IDLE, C_FIRST, C_FIRST_W, C_REREAD, C_REREAD_W, C_SEARCH, C_REGION,
    C_COMPLETE, C_COMPLETE_W, C_MASKED, C_MASKED_W, C_VOTE, C_VOTE_W,
    C_WARP, C_NK, C_NK_W
  } cstate_e;

  cstate_e           state_q;
  logic [FW-1:0]     fcnt_q;
  logic              srch_seen_q;         // search finished this frame
  logic [KW-1:0]     k_q, ci_q;
  logic [MAP_W:0]    mi_q;
  rect_t             cur_mrect_q;
  logic [BW-1:0]     mnb_alloc_q, gb_alloc_q;
  logic [NCAND-1:0]  fits_q;
  rect_t             cand_in_q [NCAND];   // candidates in input-image units
  logic              kept_q;
  rect_t             kept_rect_q;

  // ---------------------------------------------------------------- region build
  rect_t   rc_mout, rc_pin;
  logic    rc_empty;
  region_calc u_rc (
    .mrect_in(cur_mrect_q), .cfg(layer_cfg[mi_q[MAP_W-1:0]]),
    .mrect_out(rc_mout), .prect_in(rc_pin), .empty(rc_empty)
  );

  // channels of map m held by one array
  logic [CH_W:0] map_ch, arr_ch;
  always_comb begin
    map_ch = (mi_q == '0) ? in_ch : layer_cfg[mi_q[MAP_W-1:0] - 1'b1].out_ch;
    arr_ch = (CH_W+1)'((map_ch + (CH_W+1)'(NARRAYS - 1)) / (CH_W+1)'(NARRAYS));
  end

  logic [BW-1:0] ring_bytes, mask_bytes;
  assign ring_bytes = BW'(ring_size(rc_pin, cur_mrect_q)) * BW'(arr_ch);
  assign mask_bytes = BW'(rect_area(cur_mrect_q)) * BW'(arr_ch);
  // an entry is stored only if its ring fits in the MNB, its masked
  // features fit in the GB and every earlier map of the candidate fitted
  logic ring_fits, gb_fits, entry_fits;
  assign ring_fits  = (mnb_alloc_q + ring_bytes) <= BW'(MNB_BYTES);
  assign gb_fits    = (mi_q == '0) || (gb_alloc_q + mask_bytes) <= BW'(GB_BYTES);
  assign entry_fits = ring_fits && gb_fits && fits_q[ci_q[$clog2(NCAND)-1:0]];

  function automatic rect_t scale_up(input rect_t r);
    rect_t o;
    o.y0 = r.y0 << FIRST_SH;
    o.x0 = r.x0 << FIRST_SH;
    o.y1 = coord_t'(((COORD_W+4)'(r.y1) << FIRST_SH) + ((COORD_W+4)'(1) << FIRST_SH) - 1'b1);
    o.x1 = coord_t'(((COORD_W+4)'(r.x1) << FIRST_SH) + ((COORD_W+4)'(1) << FIRST_SH) - 1'b1);
    if (o.y1 > coord_t'(IMG_SIZE - 1)) o.y1 = coord_t'(IMG_SIZE - 1);
    if (o.x1 > coord_t'(IMG_SIZE - 1)) o.x1 = coord_t'(IMG_SIZE - 1);
    return o;
  endfunction

  // ---------------------------------------------------------------- warp
  logic  warp_in, warp_out;
  rect_t warp_rect;
  region_warp #(.SIZE(IMG_SIZE), .FLOW_W(FLOW_W)) u_warp (
    .clk, .rst_n, .in_valid(warp_in), .rect_in(kept_rect_q),
    .flow_dy, .flow_dx, .scale_sh(flow_scale_sh),
    .out_valid(warp_out), .rect_out(warp_rect)
  );
  assign warp_in = (state_q == C_WARP) && !warp_out;

  assign frame_busy = (state_q != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q         <= C_IDLE;
      fcnt_q          <= '0;
      srch_seen_q     <= 1'b0;
      k_q             <= '0;
      ci_q            <= '0;
      mi_q            <= '0;
      cur_mrect_q     <= '0;
      mnb_alloc_q     <= '0;
      gb_alloc_q      <= '0;
      fits_q          <= '0;
      kept_q          <= 1'b0;
      kept_rect_q     <= '0;
      cmd_valid       <= 1'b0;
      cmd             <= '0;
      srch_pass_start <= 1'b0;
      srch_pass       <= 1'b0;
      vote_lab_we     <= 1'b0;
      vote_lab_idx    <= '0;
      vote_lab_data   <= '0;
      vote_start      <= 1'b0;
      vote_k          <= '0;
      res_valid       <= 1'b0;
      res_key         <= 1'b0;
      res_patched     <= 1'b0;
      res_label       <= '0;
      res_region      <= '0;
      mnb_overflow    <= 1'b0;
      for (int c = 0; c < NCAND; c++) begin
        cand_in_q[c] <= '0;
        for (int m = 0; m < NMAPS; m++) desc[c][m] <= '0;
      end
    end else begin
      srch_pass_start <= 1'b0;
      vote_lab_we     <= 1'b0;
      vote_start      <= 1'b0;
      res_valid       <= 1'b0;
      if (cmd_valid && cmd_ready) cmd_valid <= 1'b0;
      if (srch_done) srch_seen_q <= 1'b1;

      unique case (state_q)
        C_IDLE: if (frame_start) begin
          fcnt_q <= (fcnt_q == FW'(KEY_INTERVAL - 1)) ? '0 : fcnt_q + 1'b1;
          if (fcnt_q == '0) state_q <= C_FIRST;
          else if (po_mode) state_q <= C_NK;
          else              state_q <= C_WARP;
        end
        // ---------------- key frame
        C_FIRST: begin
          srch_pass_start <= 1'b1;
          srch_pass       <= 1'b0;
          srch_seen_q     <= 1'b0;
          cmd_valid       <= 1'b1;
          cmd             <= '{op: OP_FIRST_LAYER, default: '0};
          state_q         <= C_FIRST_W;
        end
        C_FIRST_W: if (rsp_valid) state_q <= C_REREAD;
        C_REREAD: begin
          srch_pass_start <= 1'b1;
          srch_pass       <= 1'b1;
          cmd_valid       <= 1'b1;
          cmd             <= '{op: OP_HEAT_REREAD, default: '0};
          state_q         <= C_REREAD_W;
        end
        C_REREAD_W: if (rsp_valid) state_q <= C_SEARCH;
        C_SEARCH: if (srch_done || srch_seen_q) begin
          k_q          <= srch_count;
          ci_q         <= '0;
          mi_q         <= '0;
          mnb_alloc_q  <= '0;
          gb_alloc_q   <= BW'(GB_MASK_BASE);
          fits_q       <= '1;
          mnb_overflow <= 1'b0;
          cur_mrect_q  <= scale_up(srch_rect[0]);
          for (int c = 0; c < NCAND; c++) begin
            cand_in_q[c] <= scale_up(srch_rect[c]);
            for (int m = 0; m < NMAPS; m++) desc[c][m] <= '0;
          end
          state_q <= (srch_count == '0) ? C_COMPLETE : C_REGION;
        end
        // one (candidate, map) descriptor per cycle
        C_REGION: begin
          logic [KW-1:0] c;
          c = ci_q;
          desc[c[$clog2(NCAND)-1:0]][mi_q[MAP_W-1:0]] <= '{
            valid:    1'b1,
            fits:     entry_fits,
            mrect:    cur_mrect_q,
            prect:    rc_pin,
            mnb_base: (MNB_AW+1)'(mnb_alloc_q),
            gb_base:  GB_AW'(gb_alloc_q),
            nch:      arr_ch
          };
          if (entry_fits) begin
            mnb_alloc_q <= mnb_alloc_q + ring_bytes;
            if (mi_q != '0) gb_alloc_q <= gb_alloc_q + mask_bytes;
          end else begin
            fits_q[c[$clog2(NCAND)-1:0]] <= 1'b0;
            mnb_overflow <= 1'b1;
          end
          if (mi_q + 1'b1 >= n_layers || rc_empty) begin
            mi_q <= '0;
            if (ci_q + 1'b1 >= k_q) state_q <= C_COMPLETE;
            else begin
              ci_q        <= ci_q + 1'b1;
              cur_mrect_q <= cand_in_q[c[$clog2(NCAND)-1:0] + 1'b1];
            end
          end else begin
            mi_q        <= mi_q + 1'b1;
            cur_mrect_q <= rc_mout;
          end
        end
        C_COMPLETE: begin
          cmd_valid <= 1'b1;
          cmd       <= '{op: OP_COMPLETE, default: '0};
          state_q   <= C_COMPLETE_W;
        end
        C_COMPLETE_W: if (rsp_valid) begin
          vote_lab_we   <= 1'b1;
          vote_lab_idx  <= '0;
          vote_lab_data <= rsp_label;
          ci_q          <= '0;
          state_q       <= (k_q == '0) ? C_VOTE : C_MASKED;
        end
        C_MASKED: begin
          cmd_valid <= 1'b1;
          cmd       <= '{op: OP_MASKED, cand: CAND_W'(ci_q), mask_en: 1'b1,
                         mask_rect: cand_in_q[ci_q[$clog2(NCAND)-1:0]],
                         reuse: fits_q[ci_q[$clog2(NCAND)-1:0]]};
          state_q   <= C_MASKED_W;
        end
        C_MASKED_W: if (rsp_valid) begin
          vote_lab_we   <= 1'b1;
          vote_lab_idx  <= ci_q + 1'b1;
          vote_lab_data <= rsp_label;
          if (ci_q + 1'b1 >= k_q) state_q <= C_VOTE;
          else begin
            ci_q    <= ci_q + 1'b1;
            state_q <= C_MASKED;
          end
        end
        C_VOTE: begin
          vote_start <= 1'b1;
          vote_k     <= k_q;
          state_q    <= C_VOTE_W;
        end
        C_VOTE_W: if (vote_done) begin
          logic [KW-1:0] o;
          o = vote_orphan - 1'b1;
          res_valid   <= 1'b1;
          res_key     <= 1'b1;
          res_patched <= vote_patched;
          res_label   <= vote_label;
          res_region  <= vote_patched ? cand_in_q[o[$clog2(NCAND)-1:0]] : '0;
          kept_q      <= vote_patched;
          kept_rect_q <= cand_in_q[o[$clog2(NCAND)-1:0]];
          state_q     <= C_IDLE;
        end
        // ---------------- non-key frames
        C_WARP: if (warp_out) begin
          cmd_valid <= 1'b1;
          cmd       <= '{op: OP_FULL_MASKED, cand: '0, mask_en: kept_q,
                         mask_rect: warp_rect, reuse: 1'b0};
          if (kept_q) kept_rect_q <= warp_rect;  // track the patch frame to frame
          state_q   <= C_NK_W;
        end
        C_NK: begin
          cmd_valid <= 1'b1;
          cmd       <= '{op: OP_WARP_FEAT, default: '0};
          state_q   <= C_NK_W;
        end
        C_NK_W: if (rsp_valid) begin
          res_valid   <= 1'b1;
          res_key     <= 1'b0;
          res_patched <= kept_q;
          res_label   <= rsp_label;
          res_region  <= (kept_q && !po_mode) ? cmd.mask_rect : '0;
          state_q     <= C_IDLE;
        end
        default: state_q <= C_IDLE;
      endcase
    end
  end

  a_gb_room: assert property (@(posedge clk) disable iff (!rst_n)
    gb_alloc_q <= BW'(GB_BYTES));

  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && !cmd_ready) |=> cmd_valid && $stable(cmd));

endmodule
