// lisf_map_buffer: the buffer of the candidate-search logic that holds the
// binary important-neuron map of the first layer (one bit per position).
//
// It is organised as H rows of W bits so that the window counter can read a
// whole row in one access. It has one row write port (from the binarizer)
// and two synchronous row read ports: the window counter reads the row that
// enters the sliding window and the row that leaves it in the same cycle.
// Read data appears one cycle after the address. The paper only says that
// the map "is stored in the buffer of LISF searching logic"; the row-wide,
// two-read-port organisation is this design's choice. For a 112x112 map the
// buffer is 12,544 bits.
module lisf_map_buffer #(
  parameter int H = 112,
  parameter int W = 112
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [$clog2(H)-1:0] waddr,
  input  logic [W-1:0]         wdata,
  input  logic                 re,
  input  logic [$clog2(H)-1:0] raddr_a,
  input  logic [$clog2(H)-1:0] raddr_b,
  output logic [W-1:0]         rdata_a,
  output logic [W-1:0]         rdata_b
);

  logic [W-1:0] mem [H];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) begin
      rdata_a <= mem[raddr_a];
      rdata_b <= mem[raddr_b];
    end
  end

endmodule
