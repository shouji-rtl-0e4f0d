// shouji_bitvector: builds the Shouji bit-vector from the results of the M
// search windows (step 2, second half).
//
// The vector starts as all ones. Window i (covering columns i..i+3) then
// writes its selected segment Z_i over bits i..i+3 of the vector when Z_i has
// more zeros than those four bits hold at that point; windows are applied in
// column order, so window i sees what windows 0..i-1 left. This is the
// published update rule. Here it is unrolled into a chain of M combinational
// stages, each with its own zeros_counter for the vector's current 4 bits (the
// extra counter per window of the published design). The vector carries WIN-1
// extra bits past column M-1 for the last windows; only bits 0..M-1 leave
// the block.
//
//   z[i], z_zeros[i] : selected segment of window i and its zero count
//   bitvec           : final Shouji bit-vector, 1 = edit
// Purely combinational.
module shouji_bitvector
  import shouji_pkg::*;
#(
  parameter int unsigned M   = 100,
  localparam int unsigned VL = M + WIN - 1
) (
  input  logic [M-1:0][WIN-1:0] z,
  input  logic [M-1:0][ZCW-1:0] z_zeros,
  output logic [M-1:0]          bitvec
);

  for (genvar i = 0; i < M; i++) begin : g_stage
    logic [VL-1:0]  v_in;
    logic [VL-1:0]  v_out;
    logic [ZCW-1:0] cur_zeros;

    if (i == 0) begin : g_first
      assign v_in = '1;
    end else begin : g_next
      assign v_in = g_stage[i-1].v_out;
    end

    zeros_counter u_cur (.vec(v_in[i +: WIN]), .zeros(cur_zeros));

    always_comb begin
      v_out = v_in;
      if (z_zeros[i] > cur_zeros) v_out[i +: WIN] = z[i];
    end
  end

  assign bitvec = g_stage[M-1].v_out[M-1:0];

endmodule
