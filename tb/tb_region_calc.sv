// tb_region_calc: pushes the paper's 224x224 example (50x50 masked input
// region) through a 3x3/2 convolution, 2x2 pooling, 3x3/2 convolution, 2x2
// pooling and a 14x14 fully connected layer and checks the region sizes of
// the example: padded 53, masked 26 / padded 28, masked 14 / padded 17,
// masked 8 / padded 10, masked 5 / padded 14 (whole map). Also checks positions and
// clipping at the map border, then random layers and regions against the
// region formula worked out here.
module tb_region_calc;
  import themis_pkg::*;
  int checks = 0, failures = 0;
  rect_t mi, mo, pi;
  logic empty;
  layer_cfg_t cfg;

  region_calc dut (.mrect_in(mi), .cfg(cfg), .mrect_out(mo), .prect_in(pi), .empty(empty));

  function automatic int wd(rect_t r); return int'(r.x1) - int'(r.x0) + 1; endfunction
  function automatic int ht(rect_t r); return int'(r.y1) - int'(r.y0) + 1; endfunction

  task automatic step(input int k, s, p, isz, osz, exp_pad, exp_out);
    cfg = '{k: 8'(k), s: 4'(s), p: 4'(p), in_size: 8'(isz), out_size: 8'(osz), out_ch: '0};
    #1;
    checks += 3;
    if (wd(pi) != exp_pad || ht(pi) != exp_pad) begin failures++; $display("pad %0d exp %0d", wd(pi), exp_pad); end
    if (exp_out >= 0 && (wd(mo) != exp_out || ht(mo) != exp_out)) begin failures++; $display("out %0d exp %0d", wd(mo), exp_out); end
    if (empty) begin failures++; $display("empty"); end
    mi = mo;
  endtask

  // expected masked output range and padded input range of [a, b]
  task automatic ref1(input int a, b, k, st, p, isz, osz,
                      output int lo, hi, pl, ph);
    int nl;
    nl = a + p - k + 1;
    lo = (nl <= 0) ? 0 : (nl + st - 1) / st;
    hi = (b + p) / st;
    if (hi > osz - 1) hi = osz - 1;
    pl = lo * st - p; if (pl < 0) pl = 0;
    ph = hi * st - p + k - 1; if (ph > isz - 1) ph = isz - 1;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mi = '{y0: 8'd154, x0: 8'd154, y1: 8'd203, x1: 8'd203};
    step(3, 2, 1, 224, 112, 53, 26);
    checks++; if (mi.y0 != 77 || mi.y1 != 102) begin failures++; $display("C1 pos %0d..%0d", mi.y0, mi.y1); end
    step(2, 2, 0, 112, 56, 28, 14);
    step(3, 2, 1, 56, 28, 17, 8);
    step(2, 2, 0, 28, 14, 10, 5);
    step(14, 1, 0, 14, 1, 14, 1);
    // clipping at the top-left corner
    mi = '{y0: 8'd0, x0: 8'd0, y1: 8'd9, x1: 8'd9};
    cfg = '{k: 8'd3, s: 4'd2, p: 4'd1, in_size: 8'd224, out_size: 8'd112, out_ch: '0};
    #1;
    checks += 2;
    if (pi.y0 != 0 || pi.y1 != 11) begin failures++; $display("clip pad %0d..%0d", pi.y0, pi.y1); end
    if (mo.y0 != 0 || mo.y1 != 5) begin failures++; $display("clip out %0d..%0d", mo.y0, mo.y1); end
    // random layers: kernel 1..7, stride 1..3, padding up to k/2
    for (int i = 0; i < 400; i++) begin
      int k, st, p, isz, osz, a, b, c, d, lo, hi, pl, ph, lo2, hi2, pl2, ph2;
      k = $urandom_range(1, 7); st = $urandom_range(1, 3); p = $urandom_range(0, k / 2);
      isz = $urandom_range(k + 8, 224);
      osz = (isz + 2 * p - k) / st + 1;
      a = $urandom_range(0, isz - 1); b = $urandom_range(a, isz - 1);
      c = $urandom_range(0, isz - 1); d = $urandom_range(c, isz - 1);
      mi = '{y0: 8'(a), y1: 8'(b), x0: 8'(c), x1: 8'(d)};
      cfg = '{k: 8'(k), s: 4'(st), p: 4'(p), in_size: 8'(isz), out_size: 8'(osz), out_ch: '0};
      #1;
      ref1(a, b, k, st, p, isz, osz, lo, hi, pl, ph);
      ref1(c, d, k, st, p, isz, osz, lo2, hi2, pl2, ph2);
      checks++;
      if (empty != (lo > hi || lo2 > hi2)) begin
        failures++; $display("empty %0d for %0d..%0d k%0d s%0d p%0d", empty, a, b, k, st, p);
      end else if (!empty) begin
        checks++;
        if (mo.y0 != lo || mo.y1 != hi || mo.x0 != lo2 || mo.x1 != hi2 ||
            pi.y0 != pl || pi.y1 != ph || pi.x0 != pl2 || pi.x1 != ph2) begin
          failures++;
          $display("rows %0d..%0d k%0d s%0d p%0d: out %0d..%0d exp %0d..%0d, pad %0d..%0d exp %0d..%0d",
                   a, b, k, st, p, mo.y0, mo.y1, lo, hi, pi.y0, pi.y1, pl, ph);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
