// tb_filtering_unit: end-to-end check of one Shouji filtering unit.
//
// Two units are tested: one with M = 12 against the worked example whose
// Shouji bit-vector is 000010000101 (three edits, accepted at E = 3), and one
// at the default size (M = 100, E_MAX = 5) against the reference model on a
// random mix of related pairs (a few random edits) and unrelated pairs, with
// random thresholds, back-to-back and with gaps. Each result must arrive
// exactly two clock edges after its pair (one pair per clock). The number of
// pairs within E edits that the filter rejects is printed for information.
module tb_filtering_unit;
  import shouji_ref_pkg::*;
  localparam int M = 100;
  localparam int NPAIRS = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  // ---- default-size unit ----
  logic in_valid = 0, in_last = 0;
  logic [2*M-1:0] in_pattern = '0, in_text = '0;
  logic [2:0] in_threshold = '0;
  logic out_valid, out_similar, out_last;
  logic [6:0] out_edits;

  filtering_unit dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_pattern(in_pattern),
    .in_text(in_text), .in_threshold(in_threshold), .in_last(in_last),
    .out_valid(out_valid), .out_similar(out_similar), .out_edits(out_edits),
    .out_last(out_last));

  // ---- small unit for the worked example ----
  logic s_valid = 0;
  logic [23:0] s_pattern = '0, s_text = '0;
  logic s_out_valid, s_out_similar, s_out_last;
  logic [3:0] s_out_edits;

  filtering_unit #(.M(12), .E_MAX(5)) dut12 (
    .clk(clk), .rst_n(rst_n), .in_valid(s_valid), .in_pattern(s_pattern),
    .in_text(s_text), .in_threshold(3'd3), .in_last(1'b0),
    .out_valid(s_out_valid), .out_similar(s_out_similar), .out_edits(s_out_edits),
    .out_last(s_out_last));

  typedef struct { int edits; bit similar; bit last; int issue; } exp_t;
  exp_t q[$];
  int nsim = 0, nfr = 0, got = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Result checker for the default-size unit.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin : chk
      exp_t e;
      got++;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL unexpected result");
      end else begin
        e = q.pop_front();
        if (int'(out_edits) != e.edits || out_similar != e.similar || out_last != e.last ||
            cycle - e.issue != 2) begin
          failures++;
          if (failures < 10)
            $display("FAIL edits %0d/%0d similar %b/%b last %b/%b latency %0d",
                     out_edits, e.edits, out_similar, e.similar, out_last, e.last, cycle - e.issue);
        end
      end
    end
  end

  initial begin : stim
    logic [2*MAXM-1:0] pe, te;
    logic [MAXM-1:0] bv;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // Worked example: T = GGTGCAGAGCTC, P = GGTGAGAGTTGT, E = 3.
    pe = encode("GGTGAGAGTTGT");
    te = encode("GGTGCAGAGCTC");
    bv = ref_bitvec("GGTGAGAGTTGT", "GGTGCAGAGCTC", 3);
    checks++;
    if (bv[11:0] != 12'b101000010000) begin
      failures++;
      $display("FAIL reference model disagrees with the worked example: %b", bv[11:0]);
    end
    @(negedge clk);
    s_pattern = pe[23:0];
    s_text    = te[23:0];
    s_valid   = 1;
    @(posedge clk);     // edge 1: pair taken
    #1 s_valid = 0;
    @(posedge clk);     // edge 2: result registered
    #1;
    checks++;
    if (!s_out_valid || s_out_edits != 4'd3 || s_out_similar != 1'b1) begin
      failures++;
      $display("FAIL worked example: valid %b edits %0d similar %b", s_out_valid, s_out_edits, s_out_similar);
    end

    // Random pairs at the default size.
    for (int n = 0; n < NPAIRS; n++) begin : one
      automatic string t = random_seq(M);
      automatic string p;
      automatic int    e = $urandom_range(5);
      automatic exp_t  x;
      automatic int    k;
      case (n % 4)
        0: p = t;
        1, 2: p = mutate(t, $urandom_range(7));
        default: p = random_seq(M);
      endcase
      bv = ref_bitvec(p, t, e);
      k  = $countones(bv[M-1:0]);
      x.edits = k;
      x.similar = (M - k) >= (M - e);
      x.last = (n == NPAIRS - 1);
      if (n % 2 == 1 && edit_distance(p, t) <= e) begin
        nsim++;
        if (!x.similar) nfr++;
      end
      pe = encode(p);
      te = encode(t);
      @(negedge clk);
      in_pattern   = pe[2*M-1:0];
      in_text      = te[2*M-1:0];
      in_threshold = 3'(e);
      in_last      = x.last;
      in_valid     = 1;
      x.issue = cycle + 1;
      q.push_back(x);
      @(posedge clk);
      #1;
      in_valid = 0;
      if (n % 5 == 4) repeat ($urandom_range(3)) @(posedge clk);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (got != NPAIRS || q.size() != 0) begin
      failures++;
      $display("FAIL %0d results for %0d pairs", got, NPAIRS);
    end
    $display("info: %0d sampled pairs within E edits, %0d of them rejected by the filter", nsim, nfr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
