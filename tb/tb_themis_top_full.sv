// tb_themis_top_full: the end-to-end test of themis_top at its default
// (paper) size, with no parameter overrides: 224x224x3 input, the network
// of the paper's data-reuse example (3x3/2 conv to 112x112x32, 2x2 pool to
// 56x56x32, 3x3/2 conv to 28x28x64, 2x2 pool to 14x14x64, 14x14 fully
// connected to 10 classes), a 26x26 search window on the 112x112x32 map,
// eight candidates, 8 KB MNB and 64 KB GB per array and a key frame every
// tenth frame. Stimulus, accelerator model and checks are shared with the
// reduced test (themis_top_env.svh). With eight candidate slots the search
// does not overflow here, and the two first candidates are placed four
// columns apart so their 26x26 windows do not merge.
module tb_themis_top_full;
  import themis_pkg::*;
  localparam int IMG = 224, H = 112, CHH = 32, S = 26, NC = MAX_CAND, NM = MAX_MAPS, KEYI = 10;
  localparam int MNBB = 8192, GBB = 65536, GBMB = 32768, IN_CH = 3, NL = 5;
  localparam int FLOW_D = 6, PS = 7, GAP = 4;
  localparam int BS = S;
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
