// neighborhood_map: builds the 2*E_MAX+1 diagonal bit-vectors of the
// neighborhood map of a pattern P and a text T (step 1 of Shouji).
//
// Entry N[i][j] is 0 when pattern base i equals text base j and 1 otherwise;
// only the diagonals j - i = d with |d| <= E are kept. Following the published
// design, diagonal d is made by shifting the pattern d bases towards higher
// text positions (d > 0, the upper diagonals) or lower ones (d < 0, the lower
// diagonals) and XOR-ing it with the text; the two XOR bits of a base are
// OR-ed into one mismatch bit.
//
// Every diagonal is indexed by text position (map column) j, as in the
// figures of the published design: diag[E_MAX+d][j] = N[j-d][j]. This
// design's own choices: an entry that falls outside the map (j-d < 0 or
// j-d >= M) reads as 1, a diagonal with |d| greater than the run-time
// threshold reads as all ones, and each vector is padded with WIN-1 ones
// beyond column M-1 so that the last search windows see mismatches there.
//
//   pattern, text : M bases each, base i in bits [2i+1:2i]
//   threshold     : edit distance threshold E, 0..E_MAX
//   diag[k]       : diagonal d = k - E_MAX, M+WIN-1 bits
// Purely combinational.
module neighborhood_map
  import shouji_pkg::*;
#(
  parameter int unsigned M     = 100,
  parameter int unsigned E_MAX = 5,
  localparam int unsigned ND   = 2 * E_MAX + 1,
  localparam int unsigned TW   = $clog2(E_MAX + 1),
  localparam int unsigned VL   = M + WIN - 1
) (
  input  logic [2*M-1:0]         pattern,
  input  logic [2*M-1:0]         text,
  input  logic [TW-1:0]          threshold,
  output logic [ND-1:0][VL-1:0]  diag
);

  for (genvar k = 0; k < ND; k++) begin : g_diag
    localparam int D    = k - int'(E_MAX);
    localparam int ABSD = (D < 0) ? -D : D;

    logic [2*M-1:0] p_shift;   // pattern moved by D bases
    logic [2*M-1:0] x;         // per-bit XOR with the text
    logic [M-1:0]   mism;      // per-base mismatch
    logic           enabled;   // diagonal within the run-time threshold

    if (D >= 0) begin : g_up
      assign p_shift = pattern << (2 * ABSD);
    end else begin : g_lo
      assign p_shift = pattern >> (2 * ABSD);
    end

    assign x       = p_shift ^ text;
    assign enabled = (ABSD <= int'(threshold));

    always_comb begin
      for (int j = 0; j < M; j++) begin
        // Entries whose pattern index j-D falls outside 0..M-1 read as 1.
        if ((j - D) >= 0 && (j - D) < int'(M)) mism[j] = x[2*j] | x[2*j+1];
        else                                   mism[j] = 1'b1;
      end
    end

    assign diag[k] = enabled ? {{(WIN-1){1'b1}}, mism} : '1;
  end

endmodule
