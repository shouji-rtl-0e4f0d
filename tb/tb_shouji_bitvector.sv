// tb_shouji_bitvector: feeds random window results into the Shouji bit-vector
// builder and compares the vector with a sequential software update: start
// from all ones, and for i = 0..M-1 write Z_i over bits i..i+3 when it has
// more zeros than those bits.
module tb_shouji_bitvector;
  import shouji_ref_pkg::*;
  localparam int M = 32;
  logic [M-1:0][3:0] z;
  logic [M-1:0][2:0] z_zeros;
  logic [M-1:0] bitvec;
  int checks = 0, failures = 0;

  shouji_bitvector #(.M(M)) dut (.z(z), .z_zeros(z_zeros), .bitvec(bitvec));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    for (int it = 0; it < 500; it++) begin
      automatic logic [M+2:0] sv;
      for (int i = 0; i < M; i++) begin
        z[i] = 4'($urandom);
        z_zeros[i] = 3'(zeros4(z[i]));
      end
      #1;
      sv = '1;
      for (int i = 0; i < M; i++) if (zeros4(z[i]) > zeros4(sv[i +: 4])) sv[i +: 4] = z[i];
      checks++;
      if (bitvec != sv[M-1:0]) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d got %b expected %b", it, bitvec, sv[M-1:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
