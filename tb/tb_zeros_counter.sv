// tb_zeros_counter: exhaustive check of the 4-bit zero counter against a
// bit-by-bit count.
module tb_zeros_counter;
  logic [3:0] vec;
  logic [2:0] zeros;
  int checks = 0, failures = 0;

  zeros_counter dut (.vec(vec), .zeros(zeros));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    for (int v = 0; v < 16; v++) begin
      automatic int exp = 0;
      vec = 4'(v);
      #1;
      for (int q = 0; q < 4; q++) if (!vec[q]) exp++;
      checks++;
      if (int'(zeros) != exp) begin
        failures++;
        $display("FAIL vec=%b zeros=%0d expected %0d", vec, zeros, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
