// tb_region_warp: moves rectangles by flow vectors at several flow scales
// and checks the result against values computed here, including rounding
// of a halved flow, doubling, and clamping at both map borders (the region
// keeps its size), then random rectangles, flows and scales against a
// reference computed here.
module tb_region_warp;
  import themis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  rect_t rect_in = '0, rect_out;
  logic signed [9:0] flow_dy = 0, flow_dx = 0;
  logic signed [3:0] scale_sh = 0;

  region_warp #(.SIZE(224), .FLOW_W(10)) dut (.*);

  task automatic go(input int y0, x0, y1, x1, dy, dx, sh, ey0, ex0);
    @(negedge clk);
    in_valid = 1; rect_in = '{y0: 8'(y0), x0: 8'(x0), y1: 8'(y1), x1: 8'(x1)};
    flow_dy = 10'(dy); flow_dx = 10'(dx); scale_sh = 4'(sh);
    @(negedge clk); in_valid = 0;
    checks += 2;
    if (!out_valid) begin failures++; $display("no out_valid"); end
    if (rect_out.y0 != ey0 || rect_out.x0 != ex0 ||
        rect_out.y1 != ey0 + (y1 - y0) || rect_out.x1 != ex0 + (x1 - x0)) begin
      failures++;
      $display("warp got %0d,%0d..%0d,%0d exp %0d,%0d", rect_out.y0, rect_out.x0, rect_out.y1, rect_out.x1, ey0, ex0);
    end
  endtask

  // scaled flow (rounded to nearest, halves upwards), then kept inside 0..223
  function automatic int warp_ref(int lo, int len, int d, int sh);
    int v, l;
    v = (sh >= 0) ? d * (1 << sh) : (d + (1 << (-sh - 1))) >>> (-sh);
    l = lo + v;
    if (l < 0) l = 0;
    if (l + len > 223) l = 223 - len;
    return l;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    go(100, 100, 149, 149,   5,  -7,  0, 105,  93);
    go(100, 100, 149, 149,   5,  -7, -1, 103,  97);   // 2.5 -> 3, -3.5 -> -3
    go(100, 100, 149, 149,   3,   2,  1, 106, 104);
    go( 10,  10,  59,  59, -20, -30,  0,   0,   0);   // clamp at 0
    go(150, 160, 199, 209,  40,  40,  0, 174, 174);   // clamp at 223
    for (int i = 0; i < 300; i++) begin
      int y0, x0, hy, wx, dy, dx, sh;
      y0 = $urandom_range(0, 200); x0 = $urandom_range(0, 200);
      hy = $urandom_range(0, 223 - y0); wx = $urandom_range(0, 223 - x0);
      dy = $urandom_range(0, 200) - 100; dx = $urandom_range(0, 200) - 100;
      sh = $urandom_range(0, 6) - 3;
      go(y0, x0, y0 + hy, x0 + wx, dy, dx, sh, warp_ref(y0, hy, dy, sh), warp_ref(x0, wx, dx, sh));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
