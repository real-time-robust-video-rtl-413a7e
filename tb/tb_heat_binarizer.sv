// tb_heat_binarizer: drives an 8x8x4 first-layer map twice (max pass, then
// binarize pass) and compares every written row with a reference computed
// here: heat = sum of ReLU(activations), important = heat*256 > beta*max.
// Also checks the reported maximum and that pass_done pulses once per pass.
module tb_heat_binarizer;
  import themis_pkg::*;
  localparam int H = 8, W = 8, CH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pass_start = 0, pass = 0, in_valid = 0;
  logic signed [7:0] in_data = 0;
  logic [8:0] beta_q8 = 9'd192;
  logic row_we; logic [2:0] row_addr; logic [W-1:0] row_bits; logic pass_done;
  logic [DATA_W+1:0] heat_max;

  heat_binarizer #(.H(H), .W(W), .CH(CH)) dut (.*);

  logic signed [7:0] act [H][W][CH];
  int heat [H][W];
  int mx;
  int done_cnt = 0;
  logic [W-1:0] got [H];
  bit got_v [H];

  always @(posedge clk) begin
    if (rst_n && pass_done) done_cnt++;
    if (rst_n && row_we) begin got[row_addr] <= row_bits; got_v[row_addr] <= 1; end
  end

  task automatic stream(input bit p);
    @(negedge clk); pass_start = 1; pass = p;
    @(negedge clk); pass_start = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int c = 0; c < CH; c++) begin
      in_valid = 1; in_data = act[y][x][c]; @(negedge clk);
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3; t++) begin
      mx = 0;
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        heat[y][x] = 0;
        for (int c = 0; c < CH; c++) begin
          act[y][x][c] = 8'($urandom_range(0, 255));
          if (t == 1 && y >= 2 && y <= 4 && x >= 3 && x <= 5) act[y][x][c] = 8'sd120;
          if (act[y][x][c] > 0) heat[y][x] += act[y][x][c];
        end
        if (heat[y][x] > mx) mx = heat[y][x];
      end
      for (int y = 0; y < H; y++) got_v[y] = 0;
      rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
      done_cnt = 0;
      stream(0);
      checks++; if (heat_max != mx) begin failures++; $display("max %0d exp %0d", heat_max, mx); end
      stream(1);
      checks++; if (done_cnt != 2) begin failures++; $display("done_cnt %0d", done_cnt); end
      for (int y = 0; y < H; y++) begin
        logic [W-1:0] e;
        for (int x = 0; x < W; x++) e[x] = (heat[y][x] * 256 > 192 * mx);
        checks++;
        if (!got_v[y] || got[y] !== e) begin
          failures++; $display("row %0d got %b exp %b", y, got[y], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
