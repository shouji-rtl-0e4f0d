// tb_neighborhood_map: checks every diagonal bit of the neighborhood map
// against a direct character comparison, for random and related pairs and
// every threshold 0..E_MAX (diagonals beyond the threshold must read as ones).
module tb_neighborhood_map;
  import shouji_ref_pkg::*;
  localparam int M = 24, E_MAX = 5, ND = 2 * E_MAX + 1, VL = M + 3;
  logic [2*M-1:0] pattern, text;
  logic [2:0] threshold;
  logic [ND-1:0][VL-1:0] diag;
  int checks = 0, failures = 0;

  neighborhood_map #(.M(M), .E_MAX(E_MAX)) dut (.pattern(pattern), .text(text),
                                                .threshold(threshold), .diag(diag));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    for (int it = 0; it < 60; it++) begin
      automatic string t = random_seq(M);
      automatic string p = (it % 2 == 0) ? mutate(t, $urandom_range(4)) : random_seq(M);
      automatic logic [2*MAXM-1:0] pe = encode(p), te = encode(t);
      pattern   = pe[2*M-1:0];
      text      = te[2*M-1:0];
      threshold = 3'(it % (E_MAX + 1));
      #1;
      for (int k = 0; k < ND; k++) begin
        automatic int d = k - E_MAX;
        for (int j = 0; j < VL; j++) begin
          automatic bit exp;
          automatic int row = j - d;
          if (d > int'(threshold) || -d > int'(threshold)) exp = 1'b1;
          else if (j >= M || row < 0 || row >= M) exp = 1'b1;
          else exp = (p[row] != t[j]);
          checks++;
          if (diag[k][j] != exp) begin
            failures++;
            if (failures < 10) $display("FAIL it=%0d d=%0d j=%0d got %b", it, d, j, diag[k][j]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
