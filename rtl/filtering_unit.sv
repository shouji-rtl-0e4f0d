// filtering_unit: one Shouji pre-alignment filtering unit.
//
// Decides for one pattern/text pair of M bases whether it may lie within E
// edits (similar, 1) or surely does not (dissimilar, 0). Its three steps
// follow the published design: neighborhood_map builds the 2E+1 diagonal
// bit-vectors, M search_window blocks (one per map column, all in parallel)
// each pick the 4-bit diagonal segment with the most zeros, shouji_bitvector
// merges them into the Shouji bit-vector and shouji_decision accepts the pair
// when that vector holds at most E ones.
//
// Timing (own choice): fully pipelined, one pair per clock, two stages. Edge
// 1 registers the M window results; edge 2 registers the decision. A pair
// presented with in_valid before clock edge t has its result on the outputs
// with out_valid after edge t+1 (FU_LATENCY = 2). There is no stall: the
// caller only issues a pair when it can take the result. in_last rides along
// with the pair unchanged and marks the last pair of a batch.
//
//   in_pattern, in_text : M bases each, base i in bits [2i+1:2i]
//   in_threshold        : E for this pair, 0..E_MAX
//   out_similar         : 1 = similar (send to alignment), 0 = dissimilar
//   out_edits           : ones in the Shouji bit-vector
// Reset is active-low and clears the valid bits only.
module filtering_unit
  import shouji_pkg::*;
#(
  parameter int unsigned M     = 100,
  parameter int unsigned E_MAX = 5,
  localparam int unsigned ND   = 2 * E_MAX + 1,
  localparam int unsigned TW   = $clog2(E_MAX + 1),
  localparam int unsigned VL   = M + WIN - 1,
  localparam int unsigned CW   = $clog2(M + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [2*M-1:0] in_pattern,
  input  logic [2*M-1:0] in_text,
  input  logic [TW-1:0]  in_threshold,
  input  logic           in_last,
  output logic           out_valid,
  output logic           out_similar,
  output logic [CW-1:0]  out_edits,
  output logic           out_last
);

  // ---- Step 1: neighborhood map -------------------------------------------
  logic [ND-1:0][VL-1:0] diag;

  neighborhood_map #(.M(M), .E_MAX(E_MAX)) u_map (
    .pattern  (in_pattern),
    .text     (in_text),
    .threshold(in_threshold),
    .diag     (diag)
  );

  // ---- Step 2a: M search windows ------------------------------------------
  logic [M-1:0][WIN-1:0] z;
  logic [M-1:0][ZCW-1:0] z_zeros;

  for (genvar i = 0; i < M; i++) begin : g_win
    logic [ND-1:0][WIN-1:0] seg;
    for (genvar k = 0; k < ND; k++) begin : g_seg
      assign seg[k] = diag[k][i +: WIN];
    end
    search_window #(.E_MAX(E_MAX)) u_win (.seg(seg), .z(z[i]), .z_zeros(z_zeros[i]));
  end

  // Pipeline register 1.
  logic                  s1_valid, s1_last;
  logic [TW-1:0]         s1_threshold;
  logic [M-1:0][WIN-1:0] s1_z;
  logic [M-1:0][ZCW-1:0] s1_z_zeros;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_last      <= in_last;
      s1_threshold <= in_threshold;
      s1_z         <= z;
      s1_z_zeros   <= z_zeros;
    end
  end

  // ---- Step 2b: Shouji bit-vector; Step 3: decision -----------------------
  logic [M-1:0]  bitvec;
  logic [CW-1:0] edits;
  logic          similar;

  shouji_bitvector #(.M(M)) u_bv (.z(s1_z), .z_zeros(s1_z_zeros), .bitvec(bitvec));

  shouji_decision #(.M(M), .E_MAX(E_MAX)) u_dec (
    .bitvec   (bitvec),
    .threshold(s1_threshold),
    .edits    (edits),
    .similar  (similar)
  );

  // Pipeline register 2.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s1_valid;
  end

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      out_similar <= similar;
      out_edits   <= edits;
      out_last    <= s1_last;
    end
  end

  a_threshold: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (int'(in_threshold) <= int'(E_MAX)))
    else $error("threshold %0d above E_MAX %0d", in_threshold, E_MAX);

endmodule
