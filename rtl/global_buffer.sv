// global_buffer: the on-chip global buffer of one PE array of the baseline
// DNN accelerator (64 KB per array, INT8 words).
//
// Port A belongs to the accelerator's own dataflow (PE array, SFU and DRAM
// traffic, which sit outside this design). Port B is used by the
// masked-image datapath: the feature splice reads recomputed candidate
// features from it and the PE array's write-back of those features lands
// there. Both ports read synchronously (data one cycle after the address)
// and write on the clock edge; if both write the same byte in the same
// cycle, port B wins. The paper gives only the size and the block's place in
// the accelerator; the two-port organisation is this design's choice.
module global_buffer
  import themis_pkg::*;
#(
  parameter int BYTES = 65536
) (
  input  logic                     clk,
  // port A: accelerator dataflow
  input  logic                     a_en,
  input  logic                     a_we,
  input  logic [$clog2(BYTES)-1:0] a_addr,
  input  data_t                    a_wdata,
  output data_t                    a_rdata,
  // port B: masked-image datapath
  input  logic                     b_en,
  input  logic                     b_we,
  input  logic [$clog2(BYTES)-1:0] b_addr,
  input  data_t                    b_wdata,
  output data_t                    b_rdata
);

  data_t mem [BYTES];

  always_ff @(posedge clk) begin
    if (a_en && a_we && !(b_en && b_we && b_addr == a_addr)) mem[a_addr] <= a_wdata;
    if (b_en && b_we) mem[b_addr] <= b_wdata;
  end

  always_ff @(posedge clk) begin
    if (a_en && !a_we) a_rdata <= mem[a_addr];
    if (b_en && !b_we) b_rdata <= mem[b_addr];
  end

endmodule
