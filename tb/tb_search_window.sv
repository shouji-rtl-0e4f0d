// tb_search_window: drives random segment sets (biased towards ties) into
// one search window and checks the selected segment and its zero count
// against an independent scan: most zeros, then a leading zero, then the
// order main, lower 1, upper 1, lower 2, upper 2, ...
module tb_search_window;
  import shouji_ref_pkg::*;
  localparam int E_MAX = 5, ND = 2 * E_MAX + 1;
  logic [ND-1:0][3:0] seg;
  logic [3:0] z;
  logic [2:0] z_zeros;
  int checks = 0, failures = 0;

  search_window #(.E_MAX(E_MAX)) dut (.seg(seg), .z(z), .z_zeros(z_zeros));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    for (int it = 0; it < 3000; it++) begin
      automatic int best_c = -1, best_k = -1;
      automatic bit best_l = 0;
      for (int k = 0; k < ND; k++) begin
        // Few distinct values make ties frequent.
        seg[k] = (it % 3 == 0) ? 4'($urandom) : ((it % 3 == 1) ? {3'b111, 1'($urandom)} : 4'($urandom_range(3) << 2 | 4'b0011) ^ 4'($urandom_range(1)));
      end
      #1;
      for (int n = 0; n < ND; n++) begin
        automatic int d = (n == 0) ? 0 : ((n % 2 == 1) ? -((n + 1) / 2) : (n / 2));
        automatic int k = d + E_MAX;
        automatic int c = zeros4(seg[k]);
        if (c > best_c || (c == best_c && !seg[k][0] && !best_l)) begin
          best_c = c; best_l = !seg[k][0]; best_k = k;
        end
      end
      checks++;
      if (z != seg[best_k] || int'(z_zeros) != best_c) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d z=%b/%0d expected %b/%0d", it, z, z_zeros, seg[best_k], best_c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
