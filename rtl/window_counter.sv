// window_counter: second step of the LISF candidate search. It slides an
// S x S window with stride 1 over the binary important-neuron map and
// reports every window whose important-neuron count exceeds theta * S * S.
//
// How it works (incremental accumulation, as in the paper's searching-logic
// figure):
//  * W column counters colcnt[j] hold, for the current band of S rows, the
//    number of important bits in column j. Moving the band down by one row
//    updates every column with the 2-bit rule of the figure, where the first
//    bit is the bit of the row that leaves the band and the second the bit of
//    the row that enters it: 00 -> 0, 11 -> 0, 01 -> +1, 10 -> -1.
//  * Along the band, the window count is updated one column per cycle: the
//    count of the column that enters is added and that of the column that
//    leaves is subtracted, so each window costs one adder step instead of
//    S*S additions.
// The band rows are read from lisf_map_buffer (two read ports: entering row
// r and leaving row r-S).
//
// Interface: start begins a scan of the whole map; theta_q8 is the Q0.8
// threshold (0.85 -> 218). Each important window is reported for one cycle
// on win_valid with its top-left corner (win_y, win_x) and its count. done
// pulses when the scan ends. Timing: 3*H + (H-S+1)*W + 1 cycles per scan, one
// window per cycle during a sweep. The window size S is the upper limit of
// the patch size; its value is not published, and the default 26 (this
// design's choice) is the first-layer masked region of the paper's
// 224x224 / 50x50 example.
module window_counter
  import themis_pkg::*;
#(
  parameter int H = 112,
  parameter int W = 112,
  parameter int S = 26,
  parameter int CNT_W = $clog2(S * S + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [8:0]           theta_q8,
  // map buffer read side
  output logic                 map_re,
  output logic [$clog2(H)-1:0] map_raddr_a,   // entering row
  output logic [$clog2(H)-1:0] map_raddr_b,   // leaving row
  input  logic [W-1:0]         map_rdata_a,
  input  logic [W-1:0]         map_rdata_b,
  // important windows
  output logic                 win_valid,
  output coord_t               win_y,
  output coord_t               win_x,
  output logic [CNT_W-1:0]     win_cnt,
  output logic                 busy,
  output logic                 done
);

  localparam int CC_W = $clog2(S + 1);
  localparam int HW   = $clog2(H);
  localparam int WW   = $clog2(W + 1);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_WAIT, S_COL, S_SWEEP, S_DONE} state_e;
  state_e state_q;

  logic [CC_W-1:0]  colcnt [W];
  logic [HW-1:0]    row_q;
  logic [WW-1:0]    j_q;
  logic [CNT_W-1:0] win_q;
  logic [CNT_W+9:0] thr_q;

  logic [CC_W-1:0]  add_c, sub_c;
  logic [CNT_W-1:0] win_next;

  always_comb begin
    add_c = colcnt[j_q[$clog2(W)-1:0]];
    sub_c = (j_q >= WW'(S)) ? colcnt[j_q[$clog2(W)-1:0] - ($clog2(W))'(S)] : '0;
    win_next = win_q + CNT_W'(add_c) - CNT_W'(sub_c);
  end

  assign map_raddr_a = row_q;
  assign map_raddr_b = row_q - HW'(S);
  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      row_q     <= '0;
      j_q       <= '0;
      win_q     <= '0;
      thr_q     <= '0;
      map_re    <= 1'b0;
      win_valid <= 1'b0;
      win_y     <= '0;
      win_x     <= '0;
      win_cnt   <= '0;
      done      <= 1'b0;
      for (int j = 0; j < W; j++) colcnt[j] <= '0;
    end else begin
      map_re    <= 1'b0;
      win_valid <= 1'b0;
      done      <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          row_q   <= '0;
          thr_q   <= (CNT_W+10)'(theta_q8) * (CNT_W+10)'(S * S);
          for (int j = 0; j < W; j++) colcnt[j] <= '0;
          map_re  <= 1'b1;
          state_q <= S_WAIT;
        end
        S_READ: begin
          map_re  <= 1'b1;
          state_q <= S_WAIT;
        end
        S_WAIT: state_q <= S_COL;
        S_COL: begin
          // 2-bit rule per column: {leaving bit, entering bit}
          for (int j = 0; j < W; j++) begin
            logic leave;
            leave = (row_q >= HW'(S)) ? map_rdata_b[j] : 1'b0;
            unique case ({leave, map_rdata_a[j]})
              2'b01:   colcnt[j] <= colcnt[j] + 1'b1;
              2'b10:   colcnt[j] <= colcnt[j] - 1'b1;
              default: colcnt[j] <= colcnt[j];
            endcase
          end
          j_q   <= '0;
          win_q <= '0;
          if (row_q >= HW'(S - 1)) state_q <= S_SWEEP;
          else begin
            row_q   <= row_q + 1'b1;
            state_q <= S_READ;
          end
        end
        S_SWEEP: begin
          win_q <= win_next;
          if (j_q >= WW'(S - 1)) begin
            if ((CNT_W+10)'({win_next, 8'd0}) > thr_q) begin
              win_valid <= 1'b1;
              win_y     <= coord_t'(row_q) - coord_t'(S - 1);
              win_x     <= coord_t'(j_q) - coord_t'(S - 1);
              win_cnt   <= win_next;
            end
          end
          if (j_q == WW'(W - 1)) begin
            if (row_q == HW'(H - 1)) state_q <= S_DONE;
            else begin
              row_q   <= row_q + 1'b1;
              state_q <= S_READ;
            end
          end else begin
            j_q <= j_q + 1'b1;
          end
        end
        S_DONE: begin
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
