// heat_binarizer: first step of the LISF (localized important superficial
// feature) candidate search. It turns the first-layer output feature map into
// a binary "important neuron" map.
//
// How it works. The first-layer activations arrive as a stream, channel
// innermost, then column, then row. Each position's heat value is the sum of
// its CH activations after clamping negatives to zero. The map is streamed
// twice:
//  * pass 0 (max pass) keeps the largest heat value of the frame;
//  * pass 1 (binarize pass) marks a position important when
//    heat > beta * max, i.e. heat * 256 > beta_q8 * max,
//    packs one row of W bits and writes it to the map buffer.
// The adaptive threshold beta * max replaces an exact Top-K selection, as the
// paper proposes; beta is a Q0.8 configuration value (0.75 = 192). Combining
// the channels by a sum, the stream order and the two-pass scheme (the map
// itself stays in the global buffer between the passes) are this design's
// choices.
//
// Interface: in_valid/in_data carry one activation per cycle (no back
// pressure). pass_start clears the position counters (and the maximum when
// pass = 0). row_we/row_addr/row_bits write one finished row; pass_done
// pulses one cycle after the last activation of a pass. Latency: a row is
// written the cycle after its last activation.
module heat_binarizer
  import themis_pkg::*;
#(
  parameter int H      = 112,
  parameter int W      = 112,
  parameter int CH     = 32,
  parameter int HEAT_W = DATA_W + $clog2(CH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  pass_start,
  input  logic                  pass,        // 0: max pass, 1: binarize pass
  input  logic [8:0]            beta_q8,
  input  logic                  in_valid,
  input  logic signed [DATA_W-1:0] in_data,
  output logic                  row_we,
  output logic [$clog2(H)-1:0]  row_addr,
  output logic [W-1:0]          row_bits,
  output logic                  pass_done,
  output logic [HEAT_W-1:0]     heat_max
);

  localparam int CW = (CH > 1) ? $clog2(CH) : 1;

  logic [CW-1:0]          ch_q;
  logic [$clog2(W)-1:0]   x_q;
  logic [$clog2(H)-1:0]   y_q;
  logic [HEAT_W-1:0]      acc_q;
  logic [W-1:0]           bits_q;
  logic                   pass_q;

  logic [DATA_W-1:0]      relu;
  logic [HEAT_W-1:0]      heat;
  logic                   last_ch, last_x, last_y;
  logic                   important;

  assign relu    = in_data[DATA_W-1] ? '0 : in_data;
  assign heat    = acc_q + HEAT_W'(relu);
  assign last_ch = (ch_q == CW'(CH - 1));
  assign last_x  = (x_q == ($clog2(W))'(W - 1));
  assign last_y  = (y_q == ($clog2(H))'(H - 1));
  assign important = ({heat, 8'd0} > (HEAT_W+8)'(beta_q8 * heat_max));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch_q      <= '0;
      x_q       <= '0;
      y_q       <= '0;
      acc_q     <= '0;
      bits_q    <= '0;
      pass_q    <= 1'b0;
      heat_max  <= '0;
      row_we    <= 1'b0;
      row_addr  <= '0;
      row_bits  <= '0;
      pass_done <= 1'b0;
    end else begin
      row_we    <= 1'b0;
      pass_done <= 1'b0;
      if (pass_start) begin
        ch_q   <= '0;
        x_q    <= '0;
        y_q    <= '0;
        acc_q  <= '0;
        pass_q <= pass;
        if (!pass) heat_max <= '0;
      end else if (in_valid) begin
        if (!last_ch) begin
          ch_q  <= ch_q + 1'b1;
          acc_q <= heat;
        end else begin
          ch_q  <= '0;
          acc_q <= '0;
          if (!pass_q) begin
            if (heat > heat_max) heat_max <= heat;
          end else begin
            bits_q[x_q] <= important;
          end
          if (!last_x) begin
            x_q <= x_q + 1'b1;
          end else begin
            x_q <= '0;
            if (pass_q) begin
              row_we   <= 1'b1;
              row_addr <= y_q;
              row_bits <= bits_q;
              row_bits[x_q] <= important;
            end
            if (!last_y) y_q <= y_q + 1'b1;
            else begin
              y_q       <= '0;
              pass_done <= 1'b1;
            end
          end
        end
      end
    end
  end

endmodule
