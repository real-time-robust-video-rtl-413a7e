// tb_window_counter: scans random 16x16 binary maps (with a dense blob so
// that some windows pass the threshold) with a 4x4 window and compares the
// reported important windows, in order, with a brute-force count of every
// window made here. The map buffer is modelled with its one-cycle read.
// Also checks the scan time, 3*H + (H-S+1)*W + 1 cycles.
module tb_window_counter;
  import themis_pkg::*;
  localparam int H = 16, W = 16, S = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0;
  logic [8:0] theta_q8 = 9'd218;
  logic map_re; logic [3:0] map_raddr_a, map_raddr_b;
  logic [W-1:0] map_rdata_a, map_rdata_b;
  logic win_valid; coord_t win_y, win_x; logic [4:0] win_cnt; logic busy, done;

  window_counter #(.H(H), .W(W), .S(S)) dut (.*);

  logic [W-1:0] bm [H];
  always @(posedge clk) if (rst_n && map_re) begin
    map_rdata_a <= bm[map_raddr_a];
    map_rdata_b <= bm[map_raddr_b];
  end

  int exp_y[$], exp_x[$], exp_c[$];
  int nwin;
  always @(posedge clk) if (rst_n && win_valid) begin
    checks++;
    nwin++;
    if (exp_y.size() == 0) begin failures++; $display("unexpected window %0d,%0d", win_y, win_x); end
    else begin
      int ey, ex, ec;
      ey = exp_y.pop_front(); ex = exp_x.pop_front(); ec = exp_c.pop_front();
      if (win_y != ey || win_x != ex || win_cnt != ec) begin
        failures++; $display("win %0d,%0d c%0d exp %0d,%0d c%0d", win_y, win_x, win_cnt, ey, ex, ec);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      int cyc, tot;
      int by, bx;
      by = $urandom_range(0, H - 6); bx = $urandom_range(0, W - 6);
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
        bm[y][x] = ($urandom_range(0, 99) < 30) ||
                   (y >= by && y < by + 5 && x >= bx && x < bx + 5 && $urandom_range(0, 9) != 0);
      tot = 0;
      for (int y = 0; y + S <= H; y++) for (int x = 0; x + S <= W; x++) begin
        int c;
        c = 0;
        for (int i = 0; i < S; i++) for (int j = 0; j < S; j++) c += bm[y+i][x+j];
        if (c * 256 > 218 * S * S) begin exp_y.push_back(y); exp_x.push_back(x); exp_c.push_back(c); tot++; end
      end
      nwin = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 3;
      if (exp_y.size() != 0) begin failures++; $display("%0d windows missing", exp_y.size()); end
      if (cyc != 3 * H + (H - S + 1) * W + 1) begin failures++; $display("scan took %0d cycles", cyc); end
      if (tot == 0 && t == 0) $display("note: no important window in map %0d", t);
      if (nwin != tot) begin failures++; $display("nwin %0d exp %0d", nwin, tot); end
      exp_y.delete(); exp_x.delete(); exp_c.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
