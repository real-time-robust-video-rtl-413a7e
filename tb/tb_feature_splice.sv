// tb_feature_splice: checks source selection, returned data and the global
// buffer layout of the masked-layer splice. The MNB is modelled by a
// one-cycle-latency function of the request (so every ring read is
// recognisable) and the global buffer by a one-cycle synchronous RAM.
// Phase 1 writes recomputed features of map 1 for both candidates through
// the write-back port (checking the address formula and the drop of results
// outside the masked region); phase 2 sweeps random requests over both maps
// and checks rs_src and rs_data one cycle later against a reference.
module tb_feature_splice;
  import themis_pkg::*;
  localparam int NC = 2, NM = 2, GBB = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_src [4] = '{0, 0, 0, 0};

  region_desc_t desc [NC][NM];
  logic rq_valid = 0, rs_valid, wb_valid = 0, wb_drop;
  logic [CAND_W-1:0] rq_cand = 0, wb_cand = 0;
  logic [MAP_W-1:0] rq_map = 0, wb_map = 0;
  logic [CH_W-1:0] rq_ch = 0, wb_ch = 0;
  coord_t rq_y = 0, rq_x = 0, wb_y = 0, wb_x = 0;
  src_e rs_src;
  data_t rs_data, wb_data = 0;
  logic mnb_rd_valid;
  logic [CAND_W-1:0] mnb_rd_cand;
  logic [MAP_W-1:0] mnb_rd_map;
  logic [CH_W-1:0] mnb_rd_ch;
  coord_t mnb_rd_y, mnb_rd_x;
  data_t mnb_rd_data;
  logic gb_en, gb_we;
  logic [$clog2(GBB)-1:0] gb_addr;
  data_t gb_wdata, gb_rdata;

  feature_splice #(.NCAND(NC), .NMAPS(NM), .GB_BYTES(GBB)) dut (.*);

  function automatic data_t mnb_val(int cd, int m, int ch, int y, int x);
    return data_t'(cd * 97 + m * 61 + ch * 31 + y * 7 + x * 3 + 5);
  endfunction

  // behavioural MNB and GB
  data_t gb [GBB];
  always_ff @(posedge clk) begin
    if (mnb_rd_valid) mnb_rd_data <= mnb_val(int'(mnb_rd_cand), int'(mnb_rd_map), int'(mnb_rd_ch),
                                             int'(mnb_rd_y), int'(mnb_rd_x));
    if (gb_en && gb_we) gb[gb_addr] <= gb_wdata;
    if (gb_en && !gb_we) gb_rdata <= gb[gb_addr];
  end

  function automatic rect_t r(int y0, int x0, int y1, int x1);
    return '{y0: coord_t'(y0), x0: coord_t'(x0), y1: coord_t'(y1), x1: coord_t'(x1)};
  endfunction

  data_t feat [NC][2][12][12];

  function automatic src_e ref_src(int cd, int m, int y, int x);
    region_desc_t d;
    d = desc[cd][m];
    if (d.valid && in_rect(d.mrect, coord_t'(y), coord_t'(x))) return (m == 0) ? SRC_ZERO : SRC_GB;
    if (d.valid && d.fits && in_rect(d.prect, coord_t'(y), coord_t'(x))) return SRC_MNB;
    return SRC_NONE;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (desc[c, m]) desc[c][m] = '0;
    desc[0][0] = '{valid: 1, fits: 1, mrect: r(4, 4, 7, 7), prect: r(3, 3, 8, 8), mnb_base: 0, gb_base: 0, nch: 2};
    desc[1][0] = '{valid: 1, fits: 0, mrect: r(0, 6, 2, 9), prect: r(0, 5, 3, 10), mnb_base: 0, gb_base: 0, nch: 2};
    desc[0][1] = '{valid: 1, fits: 1, mrect: r(2, 2, 4, 5), prect: r(1, 1, 5, 6), mnb_base: 0, gb_base: 100, nch: 2};
    desc[1][1] = '{valid: 1, fits: 1, mrect: r(7, 0, 9, 2), prect: r(6, 0, 10, 3), mnb_base: 0, gb_base: 300, nch: 2};
    repeat (2) @(negedge clk); rst_n = 1;
    // phase 1: write-back of map-1 features over a window larger than mrect
    for (int cd = 0; cd < NC; cd++) for (int ch = 0; ch < 2; ch++)
      for (int y = 0; y < 12; y++) for (int x = 0; x < 12; x++) begin
        region_desc_t d;
        bit in_m;
        int exp_addr;
        d = desc[cd][1];
        in_m = in_rect(d.mrect, coord_t'(y), coord_t'(x));
        feat[cd][ch][y][x] = data_t'($urandom);
        wb_valid = 1; wb_cand = CAND_W'(cd); wb_map = 1; wb_ch = CH_W'(ch);
        wb_y = coord_t'(y); wb_x = coord_t'(x); wb_data = feat[cd][ch][y][x];
        #1;
        checks++;
        if (wb_drop == in_m) begin failures++; $display("drop c%0d (%0d,%0d)", cd, y, x); end
        if (in_m) begin
          exp_addr = int'(d.gb_base) + ch * int'(rect_area(d.mrect))
                   + (y - int'(d.mrect.y0)) * (int'(d.mrect.x1) - int'(d.mrect.x0) + 1) + (x - int'(d.mrect.x0));
          checks++;
          if (!gb_en || !gb_we || int'(gb_addr) != exp_addr) begin
            failures++; $display("wb addr c%0d ch%0d (%0d,%0d) %0d exp %0d", cd, ch, y, x, gb_addr, exp_addr);
          end
        end
        @(negedge clk);
      end
    wb_valid = 0;
    // write-back to map 0 is always dropped (map 0 of a masked image is zero)
    wb_valid = 1; wb_cand = 0; wb_map = 0; wb_y = 5; wb_x = 5; #1;
    checks++;
    if (!wb_drop || gb_we) begin failures++; $display("map-0 write-back not dropped"); end
    @(negedge clk); wb_valid = 0;
    // phase 2: random requests, pipelined one per cycle
    begin
      src_e exp_s [$];
      data_t exp_d [$];
      for (int n = 0; n < 1500; n++) begin
        int cd, m, ch, y, x;
        src_e s;
        cd = $urandom_range(0, NC - 1); m = $urandom_range(0, 1); ch = $urandom_range(0, 1);
        y = $urandom_range(0, 11); x = $urandom_range(0, 11);
        s = ref_src(cd, m, y, x);
        n_src[s]++;
        exp_s.push_back(s);
        exp_d.push_back(s == SRC_GB ? feat[cd][ch][y][x] : s == SRC_MNB ? mnb_val(cd, m, ch, y, x) : '0);
        rq_valid = 1; rq_cand = CAND_W'(cd); rq_map = MAP_W'(m); rq_ch = CH_W'(ch);
        rq_y = coord_t'(y); rq_x = coord_t'(x);
        @(negedge clk);
        // the response to this request is visible now (one-cycle latency)
        checks += 3;
        if (!rs_valid) begin failures++; $display("rs_valid missing"); end
        if (rs_src != exp_s[0]) begin failures++; $display("src %0d exp %0d", rs_src, exp_s[0]); end
        if (rs_data != exp_d[0]) begin failures++; $display("data %h exp %h src %0d", rs_data, exp_d[0], exp_s[0]); end
        void'(exp_s.pop_front()); void'(exp_d.pop_front());
      end
      rq_valid = 0;
    end
    foreach (n_src[i]) begin
      checks++;
      if (n_src[i] == 0) begin failures++; $display("source %0d never exercised", i); end
    end
    $display("sources none/zero/gb/mnb: %0d %0d %0d %0d", n_src[0], n_src[1], n_src[2], n_src[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
