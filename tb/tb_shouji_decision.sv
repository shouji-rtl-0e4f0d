// tb_shouji_decision: random bit-vectors with a controlled number of ones
// near the threshold; checks the edit count and the accept rule
// (zeros >= M - E) for every threshold.
module tb_shouji_decision;
  localparam int M = 100, E_MAX = 5;
  logic [M-1:0] bitvec;
  logic [2:0] threshold;
  logic [6:0] edits;
  logic similar;
  int checks = 0, failures = 0;

  shouji_decision #(.M(M), .E_MAX(E_MAX)) dut (.bitvec(bitvec), .threshold(threshold),
                                               .edits(edits), .similar(similar));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    for (int it = 0; it < 2000; it++) begin
      automatic int ones = (it < 1000) ? $urandom_range(9) : $urandom_range(M);
      bitvec = '0;
      for (int n = 0; n < ones; n++) bitvec[$urandom_range(M - 1)] = 1'b1;
      threshold = 3'($urandom_range(E_MAX));
      #1;
      checks += 2;
      if (int'(edits) != $countones(bitvec)) begin
        failures++;
        $display("FAIL edits=%0d expected %0d", edits, $countones(bitvec));
      end
      if (similar != ($countones(bitvec) <= int'(threshold))) begin
        failures++;
        $display("FAIL similar=%b ones=%0d E=%0d", similar, $countones(bitvec), threshold);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
