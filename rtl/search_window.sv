// search_window: one Shouji search window (step 2, first half).
//
// It receives the 4-bit segment of every diagonal that falls in a window of
// four neighborhood-map columns, counts the zeros of each with its own
// zeros_counter (2*E_MAX+1 counters, as in the published block diagram) and
// selects the segment with the most zeros as Z. Ties are broken in favour of a
// segment that starts with a zero (a match in the window's first column), as
// the published text says. Remaining ties go, in this design's own order, to
// the main diagonal first, then lower/upper diagonal 1, lower/upper diagonal
// 2, and so on (the lower one first, as in the published pseudo-code).
//
//   seg[k]  : segment of diagonal d = k - E_MAX; bit 0 is the window's first column
//   z       : selected segment
//   z_zeros : its number of zeros
// Purely combinational.
module search_window
  import shouji_pkg::*;
#(
  parameter int unsigned E_MAX = 5,
  localparam int unsigned ND   = 2 * E_MAX + 1
) (
  input  logic [ND-1:0][WIN-1:0] seg,
  output logic [WIN-1:0]         z,
  output logic [ZCW-1:0]         z_zeros
);

  logic [ND-1:0][ZCW-1:0] cnt;

  for (genvar k = 0; k < ND; k++) begin : g_cnt
    zeros_counter u_cnt (.vec(seg[k]), .zeros(cnt[k]));
  end

  // Rank of a segment: zero count first, then a leading zero.
  function automatic logic [ZCW:0] rank(input logic [ZCW-1:0] c, input logic [WIN-1:0] s);
    return {c, ~s[0]};
  endfunction

  always_comb begin
    int unsigned best;
    int unsigned lo;
    int unsigned up;
    best = E_MAX;  // main diagonal
    for (int unsigned j = 1; j <= E_MAX; j++) begin
      lo = E_MAX - j;
      up = E_MAX + j;
      if (rank(cnt[lo], seg[lo]) > rank(cnt[best], seg[best])) best = lo;
      if (rank(cnt[up], seg[up]) > rank(cnt[best], seg[best])) best = up;
    end
    z       = seg[best];
    z_zeros = cnt[best];
  end

endmodule
