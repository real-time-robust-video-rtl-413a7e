// themis_top_env.svh: shared end-to-end environment for the top-level
// testbenches. The including module defines the sizes (IMG, H, CHH, S, NC,
// NM, KEYI, MNBB, GBB, GBMB, IN_CH, NL, LCFG, FLOW_D, PS, GAP, BS), has its
// own watchdog and instantiates the top as `dut` with `.*`. BS is the side of
// each hot region (and patch) in first-layer neurons, at most S: with BS = S
// the region found must be exactly the patch's window, with BS < S it must
// be a window that covers the whole patch.
//
// A behavioural DNN accelerator answers the controller's commands:
//  * heat passes stream an H x H x CHH first-layer map with hot blobs,
//  * the complete inference streams every map of every PE array into the
//    capture ports (valid/ready, so MNB stalls are honoured),
//  * a masked inference with reuse reads the padded area (plus a margin) of
//    every map of the candidate through the splice and checks source and
//    data: zero in the occluded input, the values it wrote back for deeper
//    masked maps, and the original activations from the masked neuron buffer
//    in the padding ring; then it writes back the next map's masked features,
//  * labels follow a simple patch model: a frame with an adversarial patch
//    is classified ADV_L unless the inference occludes the patch centre.
// Frames: KEYI frames after each of three key frames. Key frame A has one
// patch (AO flow follows, the patch moves by FLOW_D per frame), key frame B
// has three hot regions with the patch under the second, the first GAP
// columns to its left so that their padding rings can share neurons, and
// the third one beyond the candidate table (PO flow follows),
// key frame C has one hot region and no patch (AO flow, nothing to warp).
// Every mechanism is counted and one that never happened is a failure.

  localparam label_t TRUE_L = 8'd3, ADV_L = 8'd7;
  localparam int NA = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  logic frame_start = 0, po_mode = 0, frame_busy;
  layer_cfg_t layer_cfg [NM];
  logic [MAP_W:0] n_layers;
  logic [CH_W:0] in_ch;
  logic [8:0] beta_q8 = 9'd192, theta_q8 = 9'd218;
  logic signed [9:0] flow_dy = 0, flow_dx = 0;
  logic signed [3:0] flow_scale_sh = 0;
  logic cmd_valid, cmd_ready = 1;
  accel_cmd_t cmd;
  logic rsp_valid = 0;
  label_t rsp_label = 0;
  logic heat_valid = 0;
  logic signed [7:0] heat_data = 0;
  logic cap_valid [NA], cap_ready [NA], cap_stall [NA];
  logic [MAP_W-1:0] cap_map [NA];
  logic [CH_W-1:0] cap_ch [NA];
  coord_t cap_y [NA], cap_x [NA];
  data_t cap_data [NA];
  logic rq_valid [NA], rs_valid [NA];
  logic [CAND_W-1:0] rq_cand [NA];
  logic [MAP_W-1:0] rq_map [NA];
  logic [CH_W-1:0] rq_ch [NA];
  coord_t rq_y [NA], rq_x [NA];
  src_e rs_src [NA];
  data_t rs_data [NA];
  logic wb_valid [NA];
  logic [CAND_W-1:0] wb_cand [NA];
  logic [MAP_W-1:0] wb_map [NA];
  logic [CH_W-1:0] wb_ch [NA];
  coord_t wb_y [NA], wb_x [NA];
  data_t wb_data [NA];
  logic gba_en [NA], gba_we [NA];
  logic [$clog2(GBB)-1:0] gba_addr [NA];
  data_t gba_wdata [NA], gba_rdata [NA];
  logic res_valid, res_key, res_patched;
  label_t res_label;
  rect_t res_region;
  logic search_overflow, mnb_overflow;

  // mechanism counters
  int n_key = 0, n_nonkey = 0, n_ao_warp = 0, n_po = 0, n_patched = 0, n_benign = 0;
  int n_stall = 0, n_mnb_ovf = 0, n_srch_ovf = 0, n_reuse = 0, n_recompute = 0, n_wb = 0;
  int n_src [4] = '{0, 0, 0, 0};

  // scenario
  int frame = 0;
  int nblob = 0, bly [3], blx [3];
  bit patch_on = 0;
  int pcy = 0, pcx = 0;
  logic signed [7:0] heat_m [H][H][CHH];
  longint last_rsp_cyc = 0;

  function automatic int map_sz(int m);
    return (m == 0) ? IMG : int'(LCFG[m-1].out_size);
  endfunction
  function automatic int map_ch(int m);
    return (m == 0) ? IN_CH : int'(LCFG[m-1].out_ch);
  endfunction
  function automatic data_t act(int f, int m, int c, int y, int x);
    return data_t'(f * 29 + m * 131 + c * 37 + y * 11 + x * 5) ^ 8'h5a;
  endfunction
  function automatic data_t wbv(int f, int cd, int m, int c, int y, int x);
    return data_t'(f * 13 + cd * 71 + m * 17 + c * 3 + y * 7 + x) ^ 8'ha5;
  endfunction
  function automatic rect_t r4(int y0, int x0, int y1, int x1);
    return '{y0: coord_t'(y0), x0: coord_t'(x0), y1: coord_t'(y1), x1: coord_t'(x1)};
  endfunction
  function automatic label_t infer(bit mask_en, rect_t r);
    if (!patch_on) return TRUE_L;
    if (mask_en && in_rect(r, coord_t'(pcy), coord_t'(pcx))) return TRUE_L;
    return ADV_L;
  endfunction
  function automatic int imax(int a, int b); return a > b ? a : b; endfunction
  function automatic int imin(int a, int b); return a < b ? a : b; endfunction

  task automatic fail(string msg);
    failures++;
    $display("FAIL frame %0d: %s", frame, msg);
  endtask

  // ------------------------------------------------------------ accelerator
  task automatic stream_heat();
    for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) for (int c = 0; c < CHH; c++) begin
      heat_valid = 1; heat_data = heat_m[y][x][c];
      @(negedge clk);
    end
    heat_valid = 0;
  endtask

  task automatic capture_array(int a);
    for (int m = 0; m < NL; m++)
      for (int lc = 0; lc * NA + a < map_ch(m); lc++)
        for (int y = 0; y < map_sz(m); y++) for (int x = 0; x < map_sz(m); x++) begin
          cap_valid[a] = 1; cap_map[a] = MAP_W'(m); cap_ch[a] = CH_W'(lc);
          cap_y[a] = coord_t'(y); cap_x[a] = coord_t'(x); cap_data[a] = act(frame, m, lc * NA + a, y, x);
          forever begin
            #1;
            if (cap_ready[a]) begin @(negedge clk); break; end
            n_stall++;
            @(negedge clk);
          end
        end
    cap_valid[a] = 0;
  endtask

  task automatic masked_array(int a, int cd);
    for (int m = 0; m < NL; m++) begin
      region_desc_t d, d2;
      d = dut.desc[cd][m];
      if (!d.valid) break;
      for (int lc = 0; lc * NA + a < map_ch(m); lc++)
        for (int y = imax(0, int'(d.prect.y0) - 1); y <= imin(map_sz(m) - 1, int'(d.prect.y1) + 1); y++)
          for (int x = imax(0, int'(d.prect.x0) - 1); x <= imin(map_sz(m) - 1, int'(d.prect.x1) + 1); x++) begin
            src_e s;
            data_t e;
            int c;
            c = lc * NA + a;
            if (in_rect(d.mrect, coord_t'(y), coord_t'(x))) s = (m == 0) ? SRC_ZERO : SRC_GB;
            else if (d.fits && in_rect(d.prect, coord_t'(y), coord_t'(x))) s = SRC_MNB;
            else s = SRC_NONE;
            e = (s == SRC_GB) ? wbv(frame, cd, m, c, y, x) : (s == SRC_MNB) ? act(frame, m, c, y, x) : '0;
            rq_valid[a] = 1; rq_cand[a] = CAND_W'(cd); rq_map[a] = MAP_W'(m); rq_ch[a] = CH_W'(lc);
            rq_y[a] = coord_t'(y); rq_x[a] = coord_t'(x);
            @(negedge clk);
            n_src[s]++;
            checks++;
            if (!rs_valid[a] || rs_src[a] != s || rs_data[a] != e)
              fail($sformatf("array %0d cand %0d map %0d ch %0d (%0d,%0d): src %0d data %h, exp src %0d data %h",
                             a, cd, m, c, y, x, rs_src[a], rs_data[a], s, e));
          end
      rq_valid[a] = 0;
      if (m + 1 >= NL) break;
      d2 = dut.desc[cd][m+1];
      if (!d2.valid) break;
      for (int lc = 0; lc * NA + a < map_ch(m + 1); lc++)
        for (int y = int'(d2.mrect.y0); y <= int'(d2.mrect.y1); y++)
          for (int x = int'(d2.mrect.x0); x <= int'(d2.mrect.x1); x++) begin
            wb_valid[a] = 1; wb_cand[a] = CAND_W'(cd); wb_map[a] = MAP_W'(m + 1); wb_ch[a] = CH_W'(lc);
            wb_y[a] = coord_t'(y); wb_x[a] = coord_t'(x); wb_data[a] = wbv(frame, cd, m + 1, lc * NA + a, y, x);
            n_wb++;
            @(negedge clk);
          end
      wb_valid[a] = 0;
    end
  endtask

  initial begin
    forever begin
      accel_cmd_t c;
      label_t lab;
      @(negedge clk);
      if (!cmd_valid) continue;
      c = cmd;
      @(negedge clk);
      lab = '0;
      unique case (c.op)
        OP_FIRST_LAYER, OP_HEAT_REREAD: stream_heat();
        OP_COMPLETE: begin
          for (int a = 0; a < NA; a++) fork
            automatic int aa = a;
            capture_array(aa);
          join_none
          wait fork;
          lab = infer(0, '0);
        end
        OP_MASKED: begin
          if (c.reuse) begin
            n_reuse++;
            for (int a = 0; a < NA; a++) fork
              automatic int aa = a;
              masked_array(aa, int'(c.cand));
            join_none
            wait fork;
          end else n_recompute++;
          lab = infer(1, c.mask_rect);
        end
        OP_FULL_MASKED: begin
          if (c.mask_en) n_ao_warp++;
          lab = infer(c.mask_en, c.mask_rect);
        end
        OP_WARP_FEAT: begin
          n_po++;
          lab = TRUE_L;   // suffix on the warped clean key-frame features
        end
        default: fail("unknown command");
      endcase
      rsp_valid = 1; rsp_label = lab; last_rsp_cyc = cyc;
      @(negedge clk);
      rsp_valid = 0;
    end
  end

  // ------------------------------------------------------------ frames
  task automatic make_heat();
    for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) for (int c = 0; c < CHH; c++) begin
      bit hot;
      hot = 0;
      for (int b = 0; b < nblob; b++)
        if (y >= bly[b] && y < bly[b] + BS && x >= blx[b] && x < blx[b] + BS) hot = 1;
      heat_m[y][x][c] = hot ? 8'sd100 + 8'($urandom_range(0, 20)) : 8'($urandom_range(0, 30)) - 8'sd10;
    end
  endtask

  initial begin
    rect_t exp_region;
    bit kept, po;
    foreach (cap_valid[a]) begin
      cap_valid[a] = 0; cap_map[a] = '0; cap_ch[a] = '0; cap_y[a] = '0; cap_x[a] = '0; cap_data[a] = '0;
      rq_valid[a] = 0; rq_cand[a] = '0; rq_map[a] = '0; rq_ch[a] = '0; rq_y[a] = '0; rq_x[a] = '0;
      wb_valid[a] = 0; wb_cand[a] = '0; wb_map[a] = '0; wb_ch[a] = '0; wb_y[a] = '0; wb_x[a] = '0; wb_data[a] = '0;
      gba_en[a] = 0; gba_we[a] = 0; gba_addr[a] = '0; gba_wdata[a] = '0;
    end
    for (int m = 0; m < NM; m++) layer_cfg[m] = LCFG[m];
    n_layers = (MAP_W+1)'(NL);
    in_ch = (CH_W+1)'(IN_CH);
    kept = 0; po = 0; exp_region = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (frame = 0; frame < 3 * KEYI; frame++) begin
      bit key;
      int kf;
      longint t0;
      key = (frame % KEYI == 0);
      kf = frame / KEYI;
      if (key) begin
        unique case (kf)
          0: begin nblob = 1; bly[0] = 5 * PS; blx[0] = 6 * PS; patch_on = 1; pcy = 2 * bly[0] + BS; pcx = 2 * blx[0] + BS; po = 0; end
          1: begin
            nblob = 3; bly[0] = 6 * PS; blx[0] = 9 * PS - S - GAP; bly[1] = 6 * PS; blx[1] = 9 * PS; bly[2] = 11 * PS; blx[2] = 3 * PS;
            patch_on = 1; pcy = 2 * bly[1] + BS; pcx = 2 * blx[1] + BS; po = 1;
          end
          default: begin nblob = 1; bly[0] = 8 * PS; blx[0] = 8 * PS; patch_on = 0; po = 0; end
        endcase
        make_heat();
        flow_dy = 0; flow_dx = 0;
      end else begin
        flow_dy = 10'(FLOW_D); flow_dx = -10'(FLOW_D);
        if (patch_on) begin pcy += FLOW_D; pcx -= FLOW_D; end
      end
      po_mode = po;
      frame_start = 1;
      @(negedge clk);
      frame_start = 0;
      t0 = cyc;
      while (!res_valid) @(negedge clk);
      // result checks
      checks += 3;
      if (res_key != key) fail("key-frame period");
      if (key) begin
        n_key++;
        if (res_label != TRUE_L) fail($sformatf("label %0d", res_label));
        if (cyc - last_rsp_cyc > longint'(NC + 8)) fail($sformatf("vote latency %0d", cyc - last_rsp_cyc));
        if (search_overflow) n_srch_ovf++;
        if (mnb_overflow) n_mnb_ovf++;
        if (patch_on) begin
          int pb;
          pb = (kf == 1) ? 1 : 0;
          n_patched += res_patched;
          checks += 2;
          if (!res_patched) fail("patch not detected");
          if (BS == S) begin
            exp_region = r4(2 * bly[pb], 2 * blx[pb], 2 * bly[pb] + 2 * S - 1, 2 * blx[pb] + 2 * S - 1);
            if (res_region != exp_region) fail($sformatf("region %0d,%0d..%0d,%0d", res_region.y0, res_region.x0, res_region.y1, res_region.x1));
          end else begin
            // one whole window that covers the whole patch
            exp_region = res_region;
            if (int'(res_region.y1) - int'(res_region.y0) != 2 * S - 1 || int'(res_region.x1) - int'(res_region.x0) != 2 * S - 1
                || int'(res_region.y0) > 2 * bly[pb] || int'(res_region.x0) > 2 * blx[pb]
                || int'(res_region.y1) < 2 * (bly[pb] + BS) - 1 || int'(res_region.x1) < 2 * (blx[pb] + BS) - 1)
              fail($sformatf("region %0d,%0d..%0d,%0d does not cover the patch", res_region.y0, res_region.x0, res_region.y1, res_region.x1));
          end
          kept = 1;
        end else begin
          checks++;
          n_benign += !res_patched;
          if (res_patched) fail("benign frame flagged");
          kept = 0;
        end
        checks++;
        if (kf == 0 && mnb_overflow) fail("single candidate should fit the MNB");
      end else begin
        n_nonkey++;
        if (res_label != TRUE_L) fail($sformatf("non-key label %0d", res_label));
        if (cyc - last_rsp_cyc > 3) fail($sformatf("non-key latency %0d", cyc - last_rsp_cyc));
        checks += 2;
        if (res_patched != kept) fail("kept-patch flag");
        if (kept && !po) begin
          exp_region.y0 += coord_t'(FLOW_D); exp_region.y1 += coord_t'(FLOW_D);
          exp_region.x0 -= coord_t'(FLOW_D); exp_region.x1 -= coord_t'(FLOW_D);
          if (res_region != exp_region) fail("warped region");
        end else if (res_region != '0) fail("non-key region should be empty");
      end
      $display("frame %0d key=%0d patched=%0d label=%0d region=%0d,%0d..%0d,%0d cycles=%0d",
               frame, res_key, res_patched, res_label, res_region.y0, res_region.x0,
               res_region.y1, res_region.x1, cyc - t0);
      @(negedge clk);
      while (frame_busy) @(negedge clk);
    end
    // every mechanism must have happened
    begin
      string names [$];
      int cnts [$];
      names = '{"key frame", "non-key frame", "AO warped occlusion", "PO feature warp",
                "patch detected by vote", "benign majority vote",
                "MNB overflow", "masked inference with reuse", "masked inference recomputed",
                "masked feature write-back", "splice zero source", "splice GB source",
                "splice MNB source"};
      cnts = '{n_key, n_nonkey, n_ao_warp, n_po, n_patched, n_benign, n_mnb_ovf,
               n_reuse, n_recompute, n_wb, n_src[SRC_ZERO], n_src[SRC_GB], n_src[SRC_MNB]};
      if (NC < 3) begin names.push_back("search overflow"); cnts.push_back(n_srch_ovf); end
      if (EXPECT_STALL) begin names.push_back("MNB capture stall"); cnts.push_back(n_stall); end
      foreach (names[i]) begin
        checks++;
        $display("mechanism %-28s %0d", names[i], cnts[i]);
        if (cnts[i] == 0) begin failures++; $display("FAIL mechanism never happened: %s", names[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
