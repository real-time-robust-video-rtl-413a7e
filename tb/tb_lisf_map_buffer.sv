// tb_lisf_map_buffer: writes random rows, then reads pairs of rows through
// both ports and compares them with a copy kept here; checks the one-cycle
// read latency.
module tb_lisf_map_buffer;
  localparam int H = 16, W = 24;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0, re = 0;
  logic [3:0] waddr = 0, raddr_a = 0, raddr_b = 0;
  logic [W-1:0] wdata = 0, rdata_a, rdata_b;
  logic [W-1:0] ref_m [H];

  lisf_map_buffer #(.H(H), .W(W)) dut (.*);

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < H; r++) begin
      @(negedge clk); we = 1; waddr = 4'(r); wdata = W'($urandom); ref_m[r] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 40; t++) begin
      int a, b;
      a = $urandom_range(0, H - 1); b = $urandom_range(0, H - 1);
      @(negedge clk); re = 1; raddr_a = 4'(a); raddr_b = 4'(b);
      @(negedge clk); re = 0;
      checks += 2;
      if (rdata_a !== ref_m[a]) begin failures++; $display("a %0d", a); end
      if (rdata_b !== ref_m[b]) begin failures++; $display("b %0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
