// tb_themis_workload_window: the paper's patch-size workload at the default
// (paper) size of themis_top, with no parameter overrides. Each patch is
// 48x48 input pixels (24x24 first-layer neurons), smaller than the 52x52
// search window, as the mean patches of the evaluated datasets are. With
// theta = 0.85 a 26x26 window needs at least 576 important neurons, so 24x24
// is the smallest patch that one window still flags; the nine windows that
// contain it overlap and merge into one candidate. The test checks that every
// patch is detected, that the reported region is one whole window covering
// the patch, that the label is recovered, and that the kept region is warped
// or the feature warp is used in the frames that follow. Network, stimulus,
// accelerator model and checks are those of the full-size test
// (themis_top_env.svh).
module tb_themis_workload_window;
  import themis_pkg::*;
  localparam int IMG = 224, H = 112, CHH = 32, S = 26, NC = MAX_CAND, NM = MAX_MAPS, KEYI = 10;
  localparam int MNBB = 8192, GBB = 65536, GBMB = 32768, IN_CH = 3, NL = 5;
  localparam int FLOW_D = 6, PS = 7, GAP = 4;
  localparam int BS = 24;
  localparam bit EXPECT_STALL = 0;
  localparam longint WATCHDOG_CYC = 20000000;
  localparam layer_cfg_t LCFG [NM] = '{
    '{k: 8'd3,  s: 4'd2, p: 4'd1, in_size: 8'd224, out_size: 8'd112, out_ch: 9'd32},
    '{k: 8'd2,  s: 4'd2, p: 4'd0, in_size: 8'd112, out_size: 8'd56,  out_ch: 9'd32},
    '{k: 8'd3,  s: 4'd2, p: 4'd1, in_size: 8'd56,  out_size: 8'd28,  out_ch: 9'd64},
    '{k: 8'd2,  s: 4'd2, p: 4'd0, in_size: 8'd28,  out_size: 8'd14,  out_ch: 9'd64},
    '{k: 8'd14, s: 4'd1, p: 4'd0, in_size: 8'd14,  out_size: 8'd1,   out_ch: 9'd10},
    '{k: 8'd1,  s: 4'd1, p: 4'd0, in_size: 8'd1,   out_size: 8'd1,   out_ch: 9'd10},
    '{k: 8'd1,  s: 4'd1, p: 4'd0, in_size: 8'd1,   out_size: 8'd1,   out_ch: 9'd10},
    '{k: 8'd1,  s: 4'd1, p: 4'd0, in_size: 8'd1,   out_size: 8'd1,   out_ch: 9'd10}
  };

  `include "themis_top_env.svh"

  // watchdog: a stuck frame ends the run as a failure
  initial begin
    #(64'd10 * WATCHDOG_CYC);
    failures++;
    $display("watchdog expired at frame %0d", frame);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  themis_top dut (.*);
endmodule
