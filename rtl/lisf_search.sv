// lisf_search: the adversarial-candidate searching logic. It finds the
// regions of the first-layer feature map where important neurons cluster,
// which are the likely locations of an adversarial patch.
//
// It chains the three steps of the search:
//  1. heat_binarizer  - adaptive threshold beta * max, binary map
//  2. window_counter  - incremental S x S sliding-window count, theta test
//  3. overlap_merge   - windows overlapping > 30 % become one candidate
// with lisf_map_buffer holding the binary map between steps 1 and 2.
//
// Interface and timing. The first-layer map is streamed in twice (channel
// innermost, then x, then y): pass_start with pass = 0 before the max pass,
// pass_start with pass = 1 before the binarize pass. When the binarize pass
// ends the window scan starts by itself; done pulses when the candidate list
// (cand_count, cand_rect[], overflow) is final, about H * (W + 2) cycles
// later. The search runs beside the accelerator's inference, off its
// critical path. Candidate rectangles are in first-layer coordinates.
module lisf_search
  import themis_pkg::*;
#(
  parameter int H     = 112,
  parameter int W     = 112,
  parameter int CH    = 32,
  parameter int S     = 26,
  parameter int NCAND = MAX_CAND
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [8:0]                 beta_q8,
  input  logic [8:0]                 theta_q8,
  input  logic                       pass_start,
  input  logic                       pass,
  input  logic                       in_valid,
  input  logic signed [DATA_W-1:0]   in_data,
  output logic                       busy,
  output logic                       done,
  output logic [$clog2(NCAND+1)-1:0] cand_count,
  output rect_t                      cand_rect [NCAND],
  output logic                       overflow
);

  localparam int HEAT_W = DATA_W + $clog2(CH);
  localparam int CNT_W  = $clog2(S * S + 1);

  logic                 row_we;
  logic [$clog2(H)-1:0] row_addr;
  logic [W-1:0]         row_bits;
  logic                 pass_done;
  logic [HEAT_W-1:0]    heat_max;
  logic                 bin_pass_q;

  logic                 map_re;
  logic [$clog2(H)-1:0] raddr_a, raddr_b;
  logic [W-1:0]         rdata_a, rdata_b;

  logic                 win_valid;
  coord_t               win_y, win_x;
  logic [CNT_W-1:0]     win_cnt;
  logic                 scan_start, scan_busy;

  heat_binarizer #(.H(H), .W(W), .CH(CH)) u_bin (
    .clk, .rst_n, .pass_start, .pass, .beta_q8, .in_valid, .in_data,
    .row_we, .row_addr, .row_bits, .pass_done, .heat_max
  );

  lisf_map_buffer #(.H(H), .W(W)) u_map (
    .clk, .we(row_we), .waddr(row_addr), .wdata(row_bits),
    .re(map_re), .raddr_a, .raddr_b, .rdata_a, .rdata_b
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          bin_pass_q <= 1'b0;
    else if (pass_start) bin_pass_q <= pass;
  end

  assign scan_start = pass_done && bin_pass_q;

  window_counter #(.H(H), .W(W), .S(S)) u_win (
    .clk, .rst_n, .start(scan_start), .theta_q8,
    .map_re, .map_raddr_a(raddr_a), .map_raddr_b(raddr_b),
    .map_rdata_a(rdata_a), .map_rdata_b(rdata_b),
    .win_valid, .win_y, .win_x, .win_cnt, .busy(scan_busy), .done
  );

  overlap_merge #(.S(S), .NCAND(NCAND)) u_merge (
    .clk, .rst_n, .clear(scan_start), .win_valid, .win_y, .win_x,
    .cand_count, .cand_rect, .overflow
  );

  assign busy = scan_busy || scan_start;

endmodule
