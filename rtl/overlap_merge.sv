// overlap_merge: third step of the LISF candidate search. It folds the
// stream of important windows into at most MAX_CAND patch candidates.
//
// How it works. A table of clusters is kept. Each cluster remembers its
// anchor (the first window that opened it) and the range of top-left
// corners of all windows merged into it. A new important window is compared
// in parallel with every cluster anchor; two S x S windows whose overlap is
// more than OVL_PCT percent of the window area,
//     (S - |dy|) * (S - |dx|) * 100 > OVL_PCT * S * S,
// are taken as one candidate (paper: "more than 30 % of the area
// overlapped"). The window joins the first matching cluster; otherwise it
// opens a new one. When the table is full a non-matching window is dropped
// and `overflow` is raised. Each candidate is reported as the window at the
// centre of its cluster's corner range, which follows the paper's rule that
// the central important window is kept and the others deleted. Comparing
// against the anchor (not every member) and the table size are this
// design's choices.
//
// Interface: clear empties the table at the start of a frame. win_valid /
// win_y / win_x come from window_counter, one window per cycle, no back
// pressure. cand_count and cand_rect[] are valid at any time and final one
// cycle after the last window; rectangles are in first-layer coordinates,
// S x S, inclusive.
module overlap_merge
  import themis_pkg::*;
#(
  parameter int S       = 26,
  parameter int NCAND   = MAX_CAND,
  parameter int OVL_PCT = OVERLAP_PCT
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        win_valid,
  input  coord_t                      win_y,
  input  coord_t                      win_x,
  output logic [$clog2(NCAND+1)-1:0]  cand_count,
  output rect_t                       cand_rect [NCAND],
  output logic                        overflow
);

  localparam int PW = 2 * COORD_W + 8;

  typedef struct packed {
    logic   valid;
    coord_t ay, ax;
    coord_t ymin, ymax, xmin, xmax;
  } cluster_t;

  cluster_t tab_q [NCAND];
  logic [NCAND-1:0] match;
  logic [NCAND-1:0] free;

  function automatic coord_t absdiff(input coord_t a, input coord_t b);
    return (a > b) ? a - b : b - a;
  endfunction

  always_comb begin
    for (int c = 0; c < NCAND; c++) begin
      coord_t dy, dx;
      logic [PW-1:0] ov;
      dy = absdiff(win_y, tab_q[c].ay);
      dx = absdiff(win_x, tab_q[c].ax);
      ov = '0;
      if (dy < coord_t'(S) && dx < coord_t'(S))
        ov = PW'(coord_t'(S) - dy) * PW'(coord_t'(S) - dx) * PW'(100);
      match[c] = tab_q[c].valid && (ov > PW'(OVL_PCT * S * S));
      free[c]  = !tab_q[c].valid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      overflow <= 1'b0;
      for (int c = 0; c < NCAND; c++) tab_q[c] <= '0;
    end else if (clear) begin
      overflow <= 1'b0;
      for (int c = 0; c < NCAND; c++) tab_q[c] <= '0;
    end else if (win_valid) begin
      if (|match) begin
        for (int c = 0; c < NCAND; c++) begin
          // lowest matching index only
          if (match[c] && ((match & ((NCAND)'(1) << c) - 1'b1) == '0)) begin
            if (win_y < tab_q[c].ymin) tab_q[c].ymin <= win_y;
            if (win_y > tab_q[c].ymax) tab_q[c].ymax <= win_y;
            if (win_x < tab_q[c].xmin) tab_q[c].xmin <= win_x;
            if (win_x > tab_q[c].xmax) tab_q[c].xmax <= win_x;
          end
        end
      end else if (|free) begin
        for (int c = 0; c < NCAND; c++) begin
          if (free[c] && ((free & ((NCAND)'(1) << c) - 1'b1) == '0)) begin
            tab_q[c] <= '{valid: 1'b1, ay: win_y, ax: win_x,
                          ymin: win_y, ymax: win_y, xmin: win_x, xmax: win_x};
          end
        end
      end else begin
        overflow <= 1'b1;
      end
    end
  end

  // Clusters fill from index 0 upwards and are never freed within a frame,
  // so the valid entries are always a prefix of the table.
  always_comb begin
    cand_count = '0;
    for (int c = 0; c < NCAND; c++) begin
      coord_t cy, cx;
      logic [COORD_W:0] sy, sx;
      sy = {1'b0, tab_q[c].ymin} + {1'b0, tab_q[c].ymax};
      sx = {1'b0, tab_q[c].xmin} + {1'b0, tab_q[c].xmax};
      cy = sy[COORD_W:1];
      cx = sx[COORD_W:1];
      cand_rect[c] = '{y0: cy, x0: cx, y1: cy + coord_t'(S - 1), x1: cx + coord_t'(S - 1)};
      if (tab_q[c].valid) cand_count = cand_count + 1'b1;
    end
  end

endmodule
