// tb_masked_neuron_buffer: two candidates with overlapping padding rings on a
// 12x12x2 map and one candidate on a 6x6x2 second map (the other candidate's
// second-map ring is marked as not fitting). The whole maps are streamed in
// on the capture port with a valid/ready handshake, which stalls where the
// two rings overlap. Every (candidate, map, channel, y, x) is then read back:
// rd_hit must equal "inside that candidate's ring" and the data must be the
// captured activation, one cycle after the request.
module tb_masked_neuron_buffer;
  import themis_pkg::*;
  localparam int NC = 2, NM = 2, BYTES = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, stalls = 0;

  region_desc_t desc [NC][NM];
  logic cap_valid = 0, cap_ready, cap_stall;
  logic [MAP_W-1:0] cap_map = 0;
  logic [CH_W-1:0] cap_ch = 0;
  coord_t cap_y = 0, cap_x = 0;
  data_t cap_data = 0;
  logic rd_valid = 0, rd_hit;
  logic [CAND_W-1:0] rd_cand = 0;
  logic [MAP_W-1:0] rd_map = 0;
  logic [CH_W-1:0] rd_ch = 0;
  coord_t rd_y = 0, rd_x = 0;
  data_t rd_data;

  masked_neuron_buffer #(.BYTES(BYTES), .NCAND(NC), .NMAPS(NM)) dut (.*);

  data_t ref_m [NM][2][12][12];
  localparam int SZ [NM] = '{12, 6};

  function automatic rect_t r(int y0, int x0, int y1, int x1);
    return '{y0: coord_t'(y0), x0: coord_t'(x0), y1: coord_t'(y1), x1: coord_t'(x1)};
  endfunction

  function automatic bit ring(region_desc_t d, int y, int x);
    return d.valid && d.fits && in_rect(d.prect, coord_t'(y), coord_t'(x))
        && !in_rect(d.mrect, coord_t'(y), coord_t'(x));
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (desc[c, m]) desc[c][m] = '0;
    desc[0][0] = '{valid: 1, fits: 1, mrect: r(4, 4, 7, 7), prect: r(3, 3, 8, 8), mnb_base: 0, gb_base: 0, nch: 2};
    desc[1][0] = '{valid: 1, fits: 1, mrect: r(6, 6, 9, 9), prect: r(5, 5, 10, 10), mnb_base: 40, gb_base: 0, nch: 2};
    desc[0][1] = '{valid: 1, fits: 1, mrect: r(2, 2, 3, 3), prect: r(1, 1, 4, 4), mnb_base: 80, gb_base: 0, nch: 2};
    desc[1][1] = '{valid: 1, fits: 0, mrect: r(3, 3, 4, 4), prect: r(2, 2, 5, 5), mnb_base: 200, gb_base: 0, nch: 2};
    repeat (2) @(negedge clk); rst_n = 1;
    // capture with handshake
    for (int m = 0; m < NM; m++)
      for (int y = 0; y < SZ[m]; y++) for (int x = 0; x < SZ[m]; x++) for (int c = 0; c < 2; c++) begin
        ref_m[m][c][y][x] = data_t'($urandom);
        cap_valid = 1; cap_map = MAP_W'(m); cap_ch = CH_W'(c);
        cap_y = coord_t'(y); cap_x = coord_t'(x); cap_data = ref_m[m][c][y][x];
        @(posedge clk);
        while (!cap_ready) begin stalls++; @(posedge clk); end
        @(negedge clk);
      end
    cap_valid = 0;
    repeat (3) @(negedge clk);
    // read back everything
    for (int cd = 0; cd < NC; cd++) for (int m = 0; m < NM; m++)
      for (int c = 0; c < 2; c++) for (int y = 0; y < SZ[m]; y++) for (int x = 0; x < SZ[m]; x++) begin
        bit exp_hit;
        exp_hit = ring(desc[cd][m], y, x);
        rd_valid = 1; rd_cand = CAND_W'(cd); rd_map = MAP_W'(m); rd_ch = CH_W'(c);
        rd_y = coord_t'(y); rd_x = coord_t'(x);
        @(negedge clk);
        rd_valid = 0;
        checks++;
        if (rd_hit != exp_hit) begin failures++; $display("hit c%0d m%0d ch%0d (%0d,%0d)", cd, m, c, y, x); end
        if (exp_hit) begin
          checks++;
          if (rd_data != ref_m[m][c][y][x]) begin
            failures++; $display("data c%0d m%0d ch%0d (%0d,%0d) %h exp %h", cd, m, c, y, x, rd_data, ref_m[m][c][y][x]);
          end
        end
      end
    // the overlap of the two map-0 rings (e.g. (5,5)..(8,8) minus masks) costs stalls
    checks++;
    if (stalls == 0) begin failures++; $display("no capture stall seen"); end
    $display("capture stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
