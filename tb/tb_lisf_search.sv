// tb_lisf_search: end-to-end test of the candidate search on 16x16x2 maps
// with 4x4 windows. Each map has low random background activations and one
// or two hot blobs (the "patch"). A reference of the whole algorithm is
// computed here (heat sums, beta*max threshold, brute-force window counts,
// anchor-based 30 % merge, central window) and the candidate list is
// compared with it. It also checks that every blob is covered by a candidate.
module tb_lisf_search;
  import themis_pkg::*;
  localparam int H = 16, W = 16, CH = 2, S = 4, NC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [8:0] beta_q8 = 9'd192, theta_q8 = 9'd218;
  logic pass_start = 0, pass = 0, in_valid = 0;
  logic signed [7:0] in_data = 0;
  logic busy, done, overflow;
  logic [2:0] cand_count;
  rect_t cand_rect [NC];

  lisf_search #(.H(H), .W(W), .CH(CH), .S(S), .NCAND(NC)) dut (.*);

  logic signed [7:0] act [H][W][CH];

  task automatic stream(input bit p);
    @(negedge clk); pass_start = 1; pass = p;
    @(negedge clk); pass_start = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int c = 0; c < CH; c++) begin
      in_valid = 1; in_data = act[y][x][c]; @(negedge clk);
    end
    in_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int heat [H][W];
      int mx, nb, by[2], bx[2];
      int ay[$], ax[$], ymin[$], ymax[$], xmin[$], xmax[$];
      bit ovf;
      ay.delete(); ax.delete(); ymin.delete(); ymax.delete(); xmin.delete(); xmax.delete();
      nb = (t % 2) + 1;
      for (int b = 0; b < nb; b++) begin
        by[b] = (b == 0) ? $urandom_range(0, 4) : $urandom_range(9, 11);
        bx[b] = (b == 0) ? $urandom_range(0, 11) : $urandom_range(0, 11);
      end
      mx = 0;
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        heat[y][x] = 0;
        for (int c = 0; c < CH; c++) begin
          act[y][x][c] = 8'($urandom_range(0, 40)) - 8'sd10;
          for (int b = 0; b < nb; b++)
            if (y >= by[b] && y < by[b] + 5 && x >= bx[b] && x < bx[b] + 5) act[y][x][c] = 8'sd100 + 8'($urandom_range(0, 20));
          if (act[y][x][c] > 0) heat[y][x] += act[y][x][c];
        end
        if (heat[y][x] > mx) mx = heat[y][x];
      end
      // reference: windows in raster order, merged against anchors
      ovf = 0;
      for (int y = 0; y + S <= H; y++) for (int x = 0; x + S <= W; x++) begin
        int c; bit joined;
        c = 0;
        for (int i = 0; i < S; i++) for (int j = 0; j < S; j++) c += (heat[y+i][x+j] * 256 > 192 * mx);
        if (c * 256 > 218 * S * S) begin
          joined = 0;
          for (int q = 0; q < ay.size() && !joined; q++) begin
            int dy, dx;
            dy = (y > ay[q]) ? y - ay[q] : ay[q] - y;
            dx = (x > ax[q]) ? x - ax[q] : ax[q] - x;
            if (dy < S && dx < S && (S - dy) * (S - dx) * 100 > 30 * S * S) begin
              joined = 1;
              if (y < ymin[q]) ymin[q] = y; if (y > ymax[q]) ymax[q] = y;
              if (x < xmin[q]) xmin[q] = x; if (x > xmax[q]) xmax[q] = x;
            end
          end
          if (!joined) begin
            if (ay.size() < NC) begin
              ay.push_back(y); ax.push_back(x);
              ymin.push_back(y); ymax.push_back(y); xmin.push_back(x); xmax.push_back(x);
            end else ovf = 1;
          end
        end
      end
      stream(0);
      stream(1);
      begin
        int lat;
        lat = 0;
        while (!done) begin @(negedge clk); lat++; end
        // binarizer flush + window scan of 3H + (H-S+1)W + 1 cycles
        checks++;
        if (lat > 3 * H + (H - S + 1) * W + 4) begin failures++; $display("t%0d latency %0d", t, lat); end
      end
      @(negedge clk);
      checks += 2;
      if (cand_count != ay.size()) begin failures++; $display("t%0d count %0d exp %0d", t, cand_count, ay.size()); end
      if (overflow != ovf) begin failures++; $display("t%0d overflow", t); end
      for (int q = 0; q < ay.size() && q < NC; q++) begin
        int cy, cx;
        cy = (ymin[q] + ymax[q]) / 2; cx = (xmin[q] + xmax[q]) / 2;
        checks++;
        if (cand_rect[q].y0 != cy || cand_rect[q].x0 != cx) begin
          failures++; $display("t%0d cand %0d at %0d,%0d exp %0d,%0d", t, q, cand_rect[q].y0, cand_rect[q].x0, cy, cx);
        end
      end
      // every blob centre is inside some candidate
      for (int b = 0; b < nb; b++) begin
        bit hit;
        hit = 0;
        for (int q = 0; q < int'(cand_count); q++)
          if (in_rect(cand_rect[q], coord_t'(by[b] + 2), coord_t'(bx[b] + 2))) hit = 1;
        checks++;
        if (!hit) begin failures++; $display("t%0d blob %0d not covered", t, b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
