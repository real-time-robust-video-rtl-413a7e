// tb_themis_controller: checks the frame schedule of the controller against
// small behavioural stand-ins for the accelerator, the candidate search and
// the voting logic. Responses come after random delays; the search may
// finish before or after the accelerator answers the second heat pass.
// For every key frame it checks the command order (first layer, heat
// re-read, complete, one masked inference per candidate with the candidate
// rectangle scaled to the input and the right reuse flag), every region
// descriptor (masked and padded regions from an independent evaluation of
// the layer formula, MNB and GB allocation, the fit decision), the labels
// handed to the vote and the reported result. For non-key frames it checks
// the AO command (warped occlusion of the kept patch) and the PO command,
// the key-frame period and the non-key latency.
module tb_themis_controller;
  import themis_pkg::*;
  localparam int NC = 4, NM = 4, NA = 4, KEYI = 4, IMG = 64, MNBB = 900, GBB = 1024, GBMB = 512;
  localparam int KW = $clog2(NC + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  logic frame_start = 0, po_mode = 0, frame_busy;
  layer_cfg_t layer_cfg [NM];
  logic [MAP_W:0] n_layers = 3;
  logic [CH_W:0] in_ch = 3;
  logic signed [9:0] flow_dy = 0, flow_dx = 0;
  logic signed [3:0] flow_scale_sh = 0;
  logic cmd_valid, cmd_ready = 0;
  accel_cmd_t cmd;
  logic rsp_valid = 0;
  label_t rsp_label = 0;
  logic srch_pass_start, srch_pass, srch_done = 0;
  logic [KW-1:0] srch_count = 0;
  rect_t srch_rect [NC];
  region_desc_t desc [NC][NM];
  logic vote_lab_we, vote_start, vote_done = 0, vote_patched = 0;
  logic [KW-1:0] vote_lab_idx, vote_k, vote_orphan = 0;
  label_t vote_lab_data, vote_label = 0;
  logic res_valid, res_key, res_patched, mnb_overflow;
  label_t res_label;
  rect_t res_region;

  themis_controller #(
    .NCAND(NC), .NMAPS(NM), .NARRAYS(NA), .KEY_INTERVAL(KEYI), .FIRST_SH(1), .IMG_SIZE(IMG),
    .MNB_BYTES(MNBB), .GB_BYTES(GBB), .GB_MASK_BASE(GBMB), .FLOW_W(10)
  ) dut (.*);

  function automatic rect_t r4(int y0, int x0, int y1, int x1);
    return '{y0: coord_t'(y0), x0: coord_t'(x0), y1: coord_t'(y1), x1: coord_t'(x1)};
  endfunction
  function automatic int area(rect_t r);
    return (int'(r.y1) - int'(r.y0) + 1) * (int'(r.x1) - int'(r.x0) + 1);
  endfunction
  function automatic int cdiv(int a, int b);  // ceiling for any sign, b > 0
    return (a >= 0) ? (a + b - 1) / b : -((-a) / b);
  endfunction
  // one dimension of a layer: affected outputs and padded inputs
  function automatic void span1(int a, int b, layer_cfg_t c, output int lo, output int hi,
                                output int pl, output int ph);
    lo = cdiv(a + int'(c.p) - int'(c.k) + 1, int'(c.s));
    if (lo < 0) lo = 0;
    hi = (b + int'(c.p)) / int'(c.s);
    if (hi > int'(c.out_size) - 1) hi = int'(c.out_size) - 1;
    pl = lo * int'(c.s) - int'(c.p);
    ph = hi * int'(c.s) - int'(c.p) + int'(c.k) - 1;
    if (pl < 0) pl = 0;
    if (ph > int'(c.in_size) - 1) ph = int'(c.in_size) - 1;
  endfunction

  // ------------------------------------------------------------ stand-ins
  accel_cmd_t cmds [$];
  label_t     lab_of_cmd [$];      // label the accelerator will return
  bit         early_done;
  label_t     labs [NC + 1];

  initial begin
    forever begin
      accel_cmd_t c;
      int d;
      @(negedge clk);
      cmd_ready = $urandom_range(0, 1);
      if (!(cmd_valid && cmd_ready)) continue;
      c = cmd;
      cmds.push_back(c);
      @(negedge clk);
      cmd_ready = 0;
      if (c.op == OP_HEAT_REREAD) begin
        // the window scan may end before or after the accelerator's answer
        if (early_done) begin
          repeat ($urandom_range(1, 4)) @(negedge clk);
          srch_done = 1; @(negedge clk); srch_done = 0;
          repeat ($urandom_range(1, 4)) @(negedge clk);
          rsp_valid = 1; @(negedge clk); rsp_valid = 0;
        end else begin
          repeat ($urandom_range(1, 4)) @(negedge clk);
          rsp_valid = 1; @(negedge clk); rsp_valid = 0;
          repeat ($urandom_range(1, 6)) @(negedge clk);
          srch_done = 1; @(negedge clk); srch_done = 0;
        end
      end else begin
        d = $urandom_range(1, 5);
        repeat (d) @(negedge clk);
        rsp_valid = 1;
        rsp_label = (c.op == OP_COMPLETE) ? labs[0] : (c.op == OP_MASKED) ? labs[int'(c.cand) + 1] : 8'd42;
        @(negedge clk);
        rsp_valid = 0;
      end
    end
  end

  // vote stand-in: the rule of the paper, evaluated on what the controller loaded
  label_t vlab [NC + 1];
  int     n_lab_we = 0;
  always @(posedge clk) if (rst_n && vote_lab_we) begin vlab[vote_lab_idx] <= vote_lab_data; n_lab_we++; end
  initial begin
    forever begin
      int k;
      @(negedge clk);
      if (!vote_start) continue;
      k = int'(vote_k);
      repeat (k + 3) @(negedge clk);
      vote_patched = 0; vote_orphan = 0; vote_label = vlab[0];
      for (int i = 1; i <= k; i++) begin
        int agree;
        agree = 0;
        for (int j = 0; j <= k; j++) if (j != i && vlab[j] == vlab[0]) agree++;
        if (!vote_patched && vlab[i] != vlab[0] && agree == k) begin
          vote_patched = 1; vote_orphan = KW'(i); vote_label = vlab[i];
        end
      end
      vote_done = 1; @(negedge clk); vote_done = 0;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ frames
  initial begin
    static int n_ovf = 0, n_fit = 0, n_early = 0, n_late = 0, n_pat = 0;
    rect_t kept;
    bit have_kept;
    layer_cfg[0] = '{k: 8'd3,  s: 4'd2, p: 4'd1, in_size: 8'd64, out_size: 8'd32, out_ch: 9'd8};
    layer_cfg[1] = '{k: 8'd2,  s: 4'd2, p: 4'd0, in_size: 8'd32, out_size: 8'd16, out_ch: 9'd8};
    layer_cfg[2] = '{k: 8'd16, s: 4'd1, p: 4'd0, in_size: 8'd16, out_size: 8'd1,  out_ch: 9'd10};
    layer_cfg[3] = '{k: 8'd1,  s: 4'd1, p: 4'd0, in_size: 8'd1,  out_size: 8'd1,  out_ch: 9'd10};
    foreach (srch_rect[i]) srch_rect[i] = '0;
    have_kept = 0; kept = '0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int f = 0; f < 6 * KEYI; f++) begin
      bit key;
      int k;
      key = (f % KEYI == 0);
      po_mode = (f / KEYI) % 2;
      flow_dy = 10'($urandom_range(0, 6)) - 10'sd3;
      flow_dx = 10'($urandom_range(0, 6)) - 10'sd3;
      cmds.delete();
      if (key) begin
        early_done = $urandom_range(0, 1);
        if (early_done) n_early++; else n_late++;
        k = (f / KEYI) % (NC + 1);
        srch_count = KW'(k);
        for (int i = 0; i < NC; i++) begin
          int y, x, sz;
          y = $urandom_range(2, 20); x = $urandom_range(2, 20); sz = $urandom_range(3, 8);
          srch_rect[i] = r4(y, x, y + sz - 1, x + sz - 1);
        end
        labs[0] = 8'd5;
        for (int i = 1; i <= NC; i++) labs[i] = 8'd5;
        if (k > 0 && $urandom_range(0, 2) != 0) labs[$urandom_range(1, k)] = 8'd9;
      end
      frame_start = 1; @(negedge clk); frame_start = 0;
      while (!res_valid) @(negedge clk);
      checks++;
      if (res_key != key) begin failures++; $display("f%0d key period", f); end
      if (key) begin
        // reference descriptors and allocation
        int mnb, gb;
        bit fit [NC];
        rect_t cin [NC];
        int exp_ops;
        bit exp_pat;
        int exp_orph;
        mnb = 0; gb = GBMB;
        for (int c = 0; c < k; c++) begin
          rect_t m;
          cin[c] = r4(2 * srch_rect[c].y0, 2 * srch_rect[c].x0, 2 * srch_rect[c].y1 + 1, 2 * srch_rect[c].x1 + 1);
          m = cin[c];
          fit[c] = 1;
          for (int mi = 0; mi < int'(n_layers); mi++) begin
            int ylo, yhi, ypl, yph, xlo, xhi, xpl, xph, ach, ring, mb;
            rect_t p;
            region_desc_t d;
            span1(m.y0, m.y1, layer_cfg[mi], ylo, yhi, ypl, yph);
            span1(m.x0, m.x1, layer_cfg[mi], xlo, xhi, xpl, xph);
            p = r4(ypl, xpl, yph, xph);
            ach = ((mi == 0 ? int'(in_ch) : int'(layer_cfg[mi-1].out_ch)) + NA - 1) / NA;
            ring = (area(p) - area(m)) * ach;
            mb = area(m) * ach;
            if (fit[c] && mnb + ring <= MNBB && (mi == 0 || gb + mb <= GBB)) begin
              d = '{valid: 1, fits: 1, mrect: m, prect: p, mnb_base: (MNB_AW+1)'(mnb), gb_base: GB_AW'(gb), nch: (CH_W+1)'(ach)};
              mnb += ring;
              if (mi != 0) gb += mb;
            end else begin
              fit[c] = 0;
              d = '{valid: 1, fits: 0, mrect: m, prect: p, mnb_base: (MNB_AW+1)'(mnb), gb_base: GB_AW'(gb), nch: (CH_W+1)'(ach)};
            end
            checks++;
            if (desc[c][mi] != d) begin
              failures++;
              $display("f%0d desc c%0d m%0d: m %0d,%0d..%0d,%0d p %0d,%0d..%0d,%0d fits %0d base %0d/%0d exp p %0d,%0d..%0d,%0d fits %0d base %0d/%0d",
                       f, c, mi, desc[c][mi].mrect.y0, desc[c][mi].mrect.x0, desc[c][mi].mrect.y1, desc[c][mi].mrect.x1,
                       desc[c][mi].prect.y0, desc[c][mi].prect.x0, desc[c][mi].prect.y1, desc[c][mi].prect.x1,
                       desc[c][mi].fits, desc[c][mi].mnb_base, desc[c][mi].gb_base,
                       p.y0, p.x0, p.y1, p.x1, d.fits, mnb, gb);
            end
            m = r4(ylo, xlo, yhi, xhi);
          end
          if (fit[c]) n_fit++; else n_ovf++;
        end
        // command sequence
        exp_ops = 3 + k;
        checks += 4;
        if (cmds.size() != exp_ops) begin failures++; $display("f%0d %0d commands, exp %0d", f, cmds.size(), exp_ops); end
        else begin
          if (cmds[0].op != OP_FIRST_LAYER || cmds[1].op != OP_HEAT_REREAD || cmds[2].op != OP_COMPLETE) begin
            failures++; $display("f%0d key command order", f);
          end
          for (int c = 0; c < k; c++) begin
            checks++;
            if (cmds[3+c].op != OP_MASKED || int'(cmds[3+c].cand) != c || cmds[3+c].mask_rect != cin[c]
                || cmds[3+c].reuse != fit[c]) begin
              failures++; $display("f%0d masked command %0d", f, c);
            end
          end
        end
        // labels handed to the vote and the result
        if (n_lab_we != k + 1) begin failures++; $display("f%0d %0d labels loaded", f, n_lab_we); end
        exp_pat = 0; exp_orph = 0;
        for (int i = 1; i <= k; i++) if (labs[i] != labs[0]) begin exp_pat = 1; exp_orph = i; end
        if (res_patched != exp_pat) begin failures++; $display("f%0d patched %0d", f, res_patched); end
        checks += 2;
        if (res_label != (exp_pat ? labs[exp_orph] : labs[0])) begin failures++; $display("f%0d label", f); end
        if (exp_pat && res_region != cin[exp_orph - 1]) begin failures++; $display("f%0d region", f); end
        if (exp_pat) n_pat++;
        checks++;
        begin
          bit any_ovf;
          any_ovf = 0;
          for (int c = 0; c < k; c++) if (!fit[c]) any_ovf = 1;
          if (mnb_overflow != any_ovf) begin failures++; $display("f%0d mnb_overflow %0d", f, mnb_overflow); end
        end
        have_kept = exp_pat;
        if (exp_pat) kept = cin[exp_orph - 1];
        n_lab_we = 0;
      end else begin
        checks += 3;
        if (cmds.size() != 1) begin failures++; $display("f%0d non-key commands %0d", f, cmds.size()); end
        else if (po_mode) begin
          if (cmds[0].op != OP_WARP_FEAT) begin failures++; $display("f%0d PO op", f); end
        end else begin
          rect_t w;
          w = kept;
          if (have_kept) begin
            w.y0 = coord_t'(int'(kept.y0) + int'(flow_dy)); w.y1 = coord_t'(int'(kept.y1) + int'(flow_dy));
            w.x0 = coord_t'(int'(kept.x0) + int'(flow_dx)); w.x1 = coord_t'(int'(kept.x1) + int'(flow_dx));
          end
          if (cmds[0].op != OP_FULL_MASKED || cmds[0].mask_en != have_kept || (have_kept && cmds[0].mask_rect != w)) begin
            failures++; $display("f%0d AO command", f);
          end
          if (have_kept) kept = w;
        end
        if (res_label != 8'd42 || res_patched != have_kept) begin failures++; $display("f%0d non-key result", f); end
      end
      @(negedge clk);
      while (frame_busy) @(negedge clk);
    end
    checks += 5;
    if (n_ovf == 0)   begin failures++; $display("allocation overflow never seen"); end
    if (n_fit == 0)   begin failures++; $display("fitting candidate never seen"); end
    if (n_early == 0 || n_late == 0) begin failures++; $display("search/response order not both seen"); end
    if (n_pat == 0)   begin failures++; $display("patched frame never seen"); end
    $display("fit %0d overflow %0d patched %0d", n_fit, n_ovf, n_pat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
