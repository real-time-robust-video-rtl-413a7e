// tb_global_buffer: random reads and writes on both ports against a model
// kept here, including same-address writes on both ports (port B wins).
module tb_global_buffer;
  import themis_pkg::*;
  localparam int BYTES = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [9:0] a_addr = 0, b_addr = 0;
  data_t a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  data_t model [BYTES];

  global_buffer #(.BYTES(BYTES)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < BYTES; i++) begin
      @(negedge clk); a_en = 1; a_we = 1; a_addr = 10'(i); a_wdata = 8'($urandom); model[i] = a_wdata;
    end
    for (int t = 0; t < 1000; t++) begin
      int ea, eb; bit ra, rb;
      @(negedge clk);
      a_en = 1; b_en = 1;
      a_we = $urandom_range(0, 1); b_we = $urandom_range(0, 1);
      a_addr = 10'($urandom_range(0, 15)); b_addr = 10'($urandom_range(0, 15));
      a_wdata = 8'($urandom); b_wdata = 8'($urandom);
      ra = !a_we; rb = !b_we;
      ea = model[a_addr]; eb = model[b_addr];
      if (a_we) model[a_addr] = a_wdata;
      if (b_we) model[b_addr] = b_wdata;
      @(negedge clk);
      a_en = 0; b_en = 0;
      if (ra) begin checks++; if (a_rdata != ea) begin failures++; $display("A %0d", a_addr); end end
      if (rb) begin checks++; if (b_rdata != eb) begin failures++; $display("B %0d", b_addr); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
