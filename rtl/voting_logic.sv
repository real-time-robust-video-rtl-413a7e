// voting_logic: monopolist-occluded voting. From the label of the original
// image (L0) and the labels of the k masked images (L1..Lk, Li with
// candidate Pi occluded) it decides whether the frame carried an
// adversarial patch and which label to report.
//
// Rule (paper): if exactly one masked image Li disagrees with all the other
// labels while those all agree, Pi is the monopolist patch, the frame is
// patched and Li is the recovered label. With k = 1 this reduces to
// L1 != L0. Otherwise (no candidate, all equal, or several different) the
// frame is benign and the label is the majority of L0..Lk.
//
// How it works (as in the paper's voting figure: comparators, counters and a
// final comparator). The labels are loaded into registers. Then, one label
// per cycle, label Li is compared with all k+1 labels in parallel and the
// number of n_match is counted into cnt[i]. Because L0 and the orphan Li
// differ, "Li is an orphan and all others agree" is exactly
// cnt[i] == 1 && cnt[0] == k. The final stage picks the orphan, or else the
// label with the largest count (ties go to the lowest index, so L0 wins a
// tie; the tie rule is this design's choice).
//
// Interface: lab_we/lab_idx/lab_data load labels (index 0 = L0). start with
// k launches a vote; done pulses with patched, orphan (candidate index,
// 1..k) and label exactly k + 3 cycles after start.
module voting_logic
  import themis_pkg::*;
#(
  parameter int NCAND = MAX_CAND
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       lab_we,
  input  logic [$clog2(NCAND+1)-1:0] lab_idx,
  input  label_t                     lab_data,
  input  logic                       start,
  input  logic [$clog2(NCAND+1)-1:0] k,
  output logic                       busy,
  output logic                       done,
  output logic                       patched,
  output logic [$clog2(NCAND+1)-1:0] orphan,
  output label_t                     label
);

  localparam int N  = NCAND + 1;
  localparam int IW = $clog2(NCAND + 1);
  localparam int CW = $clog2(N + 1);

  typedef enum logic [1:0] {V_IDLE, V_COUNT, V_DECIDE, V_OUT} vstate_e;
  vstate_e state_q;

  label_t         lab_q [N];
  logic [CW-1:0]  cnt_q [N];
  logic [IW-1:0]  i_q, k_q;
  logic [CW-1:0]  n_match;

  // comparator row: Li against every loaded label
  always_comb begin
    n_match = '0;
    for (int j = 0; j < N; j++)
      if (IW'(j) <= k_q && lab_q[j] == lab_q[i_q]) n_match = n_match + 1'b1;
  end

  // final stage
  logic          f_patched;
  logic [IW-1:0] f_orphan, f_best;
  always_comb begin
    f_patched = 1'b0;
    f_orphan  = '0;
    f_best    = '0;
    for (int i = 1; i < N; i++) begin
      if (IW'(i) <= k_q && !f_patched && cnt_q[i] == CW'(1) && cnt_q[0] == CW'(k_q)) begin
        f_patched = 1'b1;
        f_orphan  = IW'(i);
      end
    end
    for (int i = 1; i < N; i++)
      if (IW'(i) <= k_q && cnt_q[i] > cnt_q[f_best]) f_best = IW'(i);
  end

  assign busy = (state_q != V_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= V_IDLE;
      i_q     <= '0;
      k_q     <= '0;
      done    <= 1'b0;
      patched <= 1'b0;
      orphan  <= '0;
      label   <= '0;
      for (int j = 0; j < N; j++) begin
        lab_q[j] <= '0;
        cnt_q[j] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (lab_we && state_q == V_IDLE) lab_q[lab_idx] <= lab_data;
      unique case (state_q)
        V_IDLE: if (start) begin
          k_q     <= k;
          i_q     <= '0;
          state_q <= V_COUNT;
        end
        V_COUNT: begin
          cnt_q[i_q] <= n_match;
          if (i_q == k_q) state_q <= V_DECIDE;
          else            i_q <= i_q + 1'b1;
        end
        V_DECIDE: begin
          patched <= f_patched;
          orphan  <= f_orphan;
          label   <= f_patched ? lab_q[f_orphan] : lab_q[f_best];
          state_q <= V_OUT;
        end
        V_OUT: begin
          done    <= 1'b1;
          state_q <= V_IDLE;
        end
        default: state_q <= V_IDLE;
      endcase
    end
  end

endmodule
