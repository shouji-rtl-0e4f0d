// tb_sequence_controller: sends random pairs as 4-word packets and checks
// that each one comes out of the right unit's FIFO (round robin, restarting
// at unit 0 after a pair flagged last) with the right pattern, text and last
// flag. Credits are withheld at random so the FIFOs fill and the input
// stalls; the number of stall cycles must be above zero.
module tb_sequence_controller;
  localparam int M = 100, N = 4, W = 128, WPP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, in_last = 0, stall;
  logic [W-1:0] in_data = '0;
  logic [N-1:0] unit_credit = '0, unit_valid, unit_last;
  logic [N-1:0][2*M-1:0] unit_pattern, unit_text;
  int checks = 0, failures = 0, nstall = 0;

  typedef struct { logic [2*M-1:0] p, t; bit last; } pair_t;
  pair_t exp_q[N][$];

  sequence_controller #(.M(M), .N_UNITS(N), .IN_W(W), .FIFO_DEPTH(4)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .in_last(in_last), .unit_credit(unit_credit), .unit_valid(unit_valid),
    .unit_pattern(unit_pattern), .unit_text(unit_text), .unit_last(unit_last), .stall(stall));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int received = 0;
  int cyc = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (stall) nstall++;
      for (int u = 0; u < N; u++) if (unit_valid[u]) begin : chk
        pair_t e;
        checks++;
        received++;
        if (exp_q[u].size() == 0) begin
          failures++; $display("FAIL unexpected pair on unit %0d", u);
        end else begin
          e = exp_q[u].pop_front();
          if (unit_pattern[u] != e.p || unit_text[u] != e.t || unit_last[u] != e.last) begin
            failures++;
            if (failures < 10) $display("FAIL unit %0d pair mismatch", u);
          end
        end
      end
      cyc++;
      // Long stretches without credit make the FIFOs fill up.
      unit_credit <= ((cyc / 150) % 2 == 1) ? '0 : (N'($urandom) & N'($urandom));
    end
  end

  localparam int NP = 200;
  initial begin : stim
    int sel = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NP; n++) begin : one
      automatic pair_t x;
      automatic logic [WPP*W-1:0] words = '0;
      for (int b = 0; b < 2 * M; b++) begin x.p[b] = 1'($urandom); x.t[b] = 1'($urandom); end
      x.last = (n % 37 == 36) || (n == NP - 1);
      words[4*M-1:0] = {x.t, x.p};
      exp_q[sel].push_back(x);
      sel = x.last ? 0 : (sel + 1) % N;
      for (int w = 0; w < WPP; w++) begin
        @(negedge clk);
        in_valid = 1;
        in_data  = words[w*W +: W];
        in_last  = x.last && (w == WPP - 1);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        #1 in_valid = 0;
      end
    end
    repeat (200) @(posedge clk);
    checks++;
    if (received != NP) begin failures++; $display("FAIL received %0d of %0d", received, NP); end
    checks++;
    if (nstall == 0) begin failures++; $display("FAIL input never stalled"); end
    $display("info: %0d stall cycles", nstall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
