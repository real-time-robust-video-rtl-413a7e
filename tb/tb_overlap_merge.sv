// tb_overlap_merge: feeds hand-made window streams and checks the candidate
// list. With S = 10, two windows 2 apart overlap 80 % (merged), windows 8
// apart overlap 20 % (kept apart). Checks the central window of a merged
// cluster, the number of candidates, the overflow flag when more distinct
// clusters arrive than the table holds, and clearing. Then random frames of
// windows scattered around a few random centres are compared with a
// reference model of the merge (anchor test, first match, central window,
// overflow).
module tb_overlap_merge;
  import themis_pkg::*;
  localparam int S = 10, NC = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear = 0, win_valid = 0;
  coord_t win_y = 0, win_x = 0;
  logic [1:0] cand_count;
  rect_t cand_rect [NC];
  logic overflow;

  overlap_merge #(.S(S), .NCAND(NC)) dut (.*);

  task automatic win(input int y, x);
    @(negedge clk); win_valid = 1; win_y = coord_t'(y); win_x = coord_t'(x);
    @(negedge clk); win_valid = 0;
  endtask

  task automatic expect_cand(input int i, y0, x0);
    checks++;
    if (cand_rect[i].y0 != y0 || cand_rect[i].x0 != x0 ||
        cand_rect[i].y1 != y0 + S - 1 || cand_rect[i].x1 != x0 + S - 1) begin
      failures++;
      $display("cand %0d = %0d,%0d..%0d,%0d exp %0d,%0d", i, cand_rect[i].y0, cand_rect[i].x0,
               cand_rect[i].y1, cand_rect[i].x1, y0, x0);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    // cluster A: corners (20,20) (20,22) (22,20) (22,24) -> centre (21,22)
    win(20, 20); win(20, 22); win(22, 20); win(22, 24);
    // cluster B: (20,28) is 8 columns from A's anchor: 20 % overlap -> new
    win(20, 28);
    // (21,25): vs A anchor dx=5 -> 50 % overlap -> joins A (first match)
    win(21, 25);
    checks++; if (cand_count != 2) begin failures++; $display("count %0d", cand_count); end
    expect_cand(0, 21, 22);   // rows 20..22 -> 21, cols 20..25 -> 22
    expect_cand(1, 20, 28);
    checks++; if (overflow) begin failures++; $display("early overflow"); end
    // exactly 30 % is not more than 30 %: (S-dy)(S-dx) = 30 -> dy=5, dx=4 vs B anchor
    win(25, 32);
    checks++; if (cand_count != 3) begin failures++; $display("30%% case count %0d", cand_count); end
    win(100, 100);   // fourth distinct cluster: table full
    checks++; if (!overflow) begin failures++; $display("no overflow"); end
    checks++; if (cand_count != 3) begin failures++; $display("count after overflow %0d", cand_count); end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++; if (cand_count != 0 || overflow) begin failures++; $display("clear failed"); end
    // random frames against the reference model
    for (int f = 0; f < 60; f++) begin
      int ay [$], ax [$], ymn [$], ymx [$], xmn [$], xmx [$];
      int ncl, nwin;
      bit ovf;
      ay.delete(); ax.delete(); ymn.delete(); ymx.delete(); xmn.delete(); xmx.delete();
      ovf = 0;
      ncl = $urandom_range(1, 5);
      nwin = $urandom_range(1, 14);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int w = 0; w < nwin; w++) begin
        int cy, cx, y, x, hit;
        cy = 20 + 40 * ($urandom % ncl);
        cx = 30 + 35 * (($urandom % ncl) % 3);
        y = cy + $urandom_range(0, 8) - 4;
        x = cx + $urandom_range(0, 8) - 4;
        hit = -1;
        foreach (ay[c]) begin
          int dy, dx;
          dy = (y > ay[c]) ? y - ay[c] : ay[c] - y;
          dx = (x > ax[c]) ? x - ax[c] : ax[c] - x;
          if (hit < 0 && dy < S && dx < S && (S - dy) * (S - dx) * 100 > OVERLAP_PCT * S * S) hit = c;
        end
        if (hit >= 0) begin
          if (y < ymn[hit]) ymn[hit] = y;
          if (y > ymx[hit]) ymx[hit] = y;
          if (x < xmn[hit]) xmn[hit] = x;
          if (x > xmx[hit]) xmx[hit] = x;
        end else if (ay.size() < NC) begin
          ay.push_back(y); ax.push_back(x); ymn.push_back(y); ymx.push_back(y); xmn.push_back(x); xmx.push_back(x);
        end else ovf = 1;
        win(y, x);
      end
      checks += 2;
      if (cand_count != 2'(ay.size())) begin failures++; $display("frame %0d count %0d exp %0d", f, cand_count, ay.size()); end
      if (overflow != ovf) begin failures++; $display("frame %0d overflow %0d exp %0d", f, overflow, ovf); end
      foreach (ay[c]) expect_cand(c, (ymn[c] + ymx[c]) / 2, (xmn[c] + xmx[c]) / 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
