// tb_voting_logic: checks the voting rule on the paper's cases (k = 1 with
// L1 != L0 and L1 == L0, an orphan among several candidates, several
// different labels, no candidate) and on random label sets against a
// reference written here, plus the k + 3 cycle latency.
module tb_voting_logic;
  import themis_pkg::*;
  localparam int NC = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic lab_we = 0, start = 0;
  logic [3:0] lab_idx = 0, k = 0;
  label_t lab_data = 0;
  logic busy, done, patched;
  logic [3:0] orphan;
  label_t label;

  voting_logic #(.NCAND(NC)) dut (.*);

  task automatic vote(input int kk, input int labs[], input bit e_p, input int e_o, input int e_l);
    int cyc;
    for (int i = 0; i <= kk; i++) begin
      @(negedge clk); lab_we = 1; lab_idx = 4'(i); lab_data = label_t'(labs[i]);
    end
    @(negedge clk); lab_we = 0; start = 1; k = 4'(kk);
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 3;
    if (cyc != kk + 3) begin failures++; $display("latency %0d k=%0d", cyc, kk); end
    if (patched != e_p || (e_p && orphan != e_o)) begin
      failures++; $display("k=%0d patched %0d orphan %0d exp %0d %0d", kk, patched, orphan, e_p, e_o);
    end
    if (label != e_l) begin failures++; $display("k=%0d label %0d exp %0d", kk, label, e_l); end
  endtask

  // reference rule
  task automatic ref_vote(input int kk, input int labs[], output bit p, output int o, output int l);
    int cnt [9];
    p = 0; o = 0;
    for (int i = 0; i <= kk; i++) begin
      cnt[i] = 0;
      for (int j = 0; j <= kk; j++) if (labs[j] == labs[i]) cnt[i]++;
    end
    for (int i = 1; i <= kk; i++) begin
      bit others_same;
      others_same = 1;
      for (int j = 0; j <= kk; j++) for (int m = 0; m <= kk; m++)
        if (j != i && m != i && labs[j] != labs[m]) others_same = 0;
      if (!p && cnt[i] == 1 && others_same && kk >= 1) begin p = 1; o = i; end
    end
    if (p) l = labs[o];
    else begin
      int b;
      b = 0;
      for (int i = 1; i <= kk; i++) if (cnt[i] > cnt[b]) b = i;
      l = labs[b];
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    vote(1, '{7, 3}, 1, 1, 3);                 // k = 1, L1 != L0: patch
    vote(1, '{7, 7}, 0, 0, 7);                 // k = 1, same: benign
    vote(4, '{5, 5, 5, 9, 5}, 1, 3, 9);        // orphan L3
    vote(4, '{5, 5, 2, 9, 5}, 0, 0, 5);        // two differ: majority 5
    vote(3, '{1, 2, 2, 2}, 0, 0, 2);           // L0 is the odd one: majority 2
    vote(0, '{4}, 0, 0, 4);                    // no candidate
    vote(2, '{6, 6, 8}, 1, 2, 8);
    for (int t = 0; t < 40; t++) begin
      int kk, l[], e_o, e_l;
      bit e_p;
      kk = $urandom_range(0, NC);
      l = new[kk + 1];
      for (int i = 0; i <= kk; i++) l[i] = $urandom_range(0, 2);
      if (t % 3 == 0) begin
        for (int i = 0; i <= kk; i++) l[i] = 4;
        if (kk > 0) l[$urandom_range(1, kk)] = 5;
      end
      ref_vote(kk, l, e_p, e_o, e_l);
      vote(kk, l, e_p, e_o, e_l);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
