// shouji_decision: the accept/reject decision (step 3 of Shouji).
//
// Counts the zeros of the M-bit Shouji bit-vector and accepts the pair
// ("similar", 1) when there are at least M - E of them, that is, when the
// vector holds at most E edits; otherwise the pair is rejected (0). This is
// the published rule for end-to-end (global) filtering. The count is a plain
// adder tree written as a loop.
//
//   bitvec    : Shouji bit-vector, 1 = edit
//   threshold : edit distance threshold E
//   edits     : number of ones in bitvec
//   similar   : 1 when zeros >= M - E
// Purely combinational.
module shouji_decision #(
  parameter int unsigned M     = 100,
  parameter int unsigned E_MAX = 5,
  localparam int unsigned TW   = $clog2(E_MAX + 1),
  localparam int unsigned CW   = $clog2(M + 1)
) (
  input  logic [M-1:0]  bitvec,
  input  logic [TW-1:0] threshold,
  output logic [CW-1:0] edits,
  output logic          similar
);

  logic [CW-1:0] zeros;

  always_comb begin
    zeros = '0;
    for (int unsigned i = 0; i < M; i++) if (!bitvec[i]) zeros += CW'(1);
  end

  assign edits   = CW'(M) - zeros;
  assign similar = ({1'b0, zeros} >= ({1'b0, CW'(M)} - {1'b0, CW'(threshold)}));

endmodule
