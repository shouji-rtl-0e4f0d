// zeros_counter: counts the zero bits of a 4-bit diagonal segment.
//
// The count is read from a 16-entry look-up table that lists every 4-bit
// pattern with its number of zeros, as the published design does (on an FPGA
// this is three 4-input LUTs, one per output bit). Purely combinational.
//
//   vec   : 4-bit segment, bit 0 is the leftmost column of the window
//   zeros : number of zero bits, 0..4, on 3 bits
module zeros_counter
  import shouji_pkg::*;
(
  input  logic [WIN-1:0] vec,
  output logic [ZCW-1:0] zeros
);

  always_comb begin
    unique case (vec)
      4'b0000: zeros = 3'd4;
      4'b0001: zeros = 3'd3;
      4'b0010: zeros = 3'd3;
      4'b0011: zeros = 3'd2;
      4'b0100: zeros = 3'd3;
      4'b0101: zeros = 3'd2;
      4'b0110: zeros = 3'd2;
      4'b0111: zeros = 3'd1;
      4'b1000: zeros = 3'd3;
      4'b1001: zeros = 3'd2;
      4'b1010: zeros = 3'd2;
      4'b1011: zeros = 3'd1;
      4'b1100: zeros = 3'd2;
      4'b1101: zeros = 3'd1;
      4'b1110: zeros = 3'd1;
      4'b1111: zeros = 3'd0;
      default: zeros = 3'd0;
    endcase
  end

endmodule
