// tb_themis_top: end-to-end test of the defence on a reduced network: a
// 32x32x2 input, a 3x3 stride-2 convolution to 16x16x4 (the searched map,
// 4x4 window), a 2x2 pooling to 8x8x4 and an 8x8 fully connected layer.
// Two candidates at most, a 200-byte MNB per array (one candidate's rings
// fit, those of a second only partly) and a key frame every third frame. The stimulus,
// the accelerator model and the checks are in themis_top_env.svh.
module tb_themis_top;
  import themis_pkg::*;
  localparam int IMG = 32, H = 16, CHH = 4, S = 4, NC = 2, NM = 4, KEYI = 3;
  localparam int MNBB = 200, GBB = 1024, GBMB = 512, IN_CH = 2, NL = 3;
  localparam int FLOW_D = 2, PS = 1, GAP = 1;
  localparam int BS = S;
  localparam bit EXPECT_STALL = 1;
  localparam longint WATCHDOG_CYC = 200000;
  localparam layer_cfg_t LCFG [NM] = '{
    '{k: 8'd3, s: 4'd2, p: 4'd1, in_size: 8'd32, out_size: 8'd16, out_ch: 9'd4},
    '{k: 8'd2, s: 4'd2, p: 4'd0, in_size: 8'd16, out_size: 8'd8,  out_ch: 9'd4},
    '{k: 8'd8, s: 4'd1, p: 4'd0, in_size: 8'd8,  out_size: 8'd1,  out_ch: 9'd10},
    '{k: 8'd1, s: 4'd1, p: 4'd0, in_size: 8'd1,  out_size: 8'd1,  out_ch: 9'd10}
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

  themis_top #(
    .H(H), .W(H), .CH(CHH), .S(S), .NCAND(NC), .NMAPS(NM), .NARRAYS(NA), .KEY_INTERVAL(KEYI),
    .FIRST_SH(1), .IMG_SIZE(IMG), .MNB_BYTES(MNBB), .GB_BYTES(GBB), .GB_MASK_BASE(GBMB), .FLOW_W(10)
  ) dut (.*);
endmodule
