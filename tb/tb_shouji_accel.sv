// tb_shouji_accel: end-to-end test of the accelerator at its default size
// (M = 100 bases, E_MAX = 5, 16 filtering units, 128-bit host words).
//
// The host model streams three batches of pairs (a mix of identical, lightly
// edited and unrelated pairs) with thresholds 5, 2 and 0, waits for each
// batch's results, and compares every result bit, in order, with the
// reference model. It holds tx_ready low for long stretches so that the
// result FIFOs fill, credits run out and the input stalls, and at random
// otherwise. Mechanisms counted (each must occur): input stall, output
// back-pressure, full result words, flushed partial words at batch ends,
// every unit used, accepted and rejected pairs, threshold changes.
module tb_shouji_accel;
  import shouji_ref_pkg::*;
  localparam int M = 100, W = 128, WPP = 4, N = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [2:0] cfg_threshold = 3'd5;
  logic rx_valid = 0, rx_ready, rx_last = 0, rx_stall;
  logic [W-1:0] rx_data = '0;
  logic tx_valid, tx_ready = 0, tx_last;
  logic [W-1:0] tx_data;
  logic [7:0] tx_count;

  shouji_accel dut (
    .clk(clk), .rst_n(rst_n), .cfg_threshold(cfg_threshold),
    .rx_valid(rx_valid), .rx_ready(rx_ready), .rx_data(rx_data), .rx_last(rx_last),
    .rx_stall(rx_stall), .tx_valid(tx_valid), .tx_ready(tx_ready), .tx_data(tx_data),
    .tx_count(tx_count), .tx_last(tx_last));

  int checks = 0, failures = 0;
  int n_stall = 0, n_bp = 0, n_full = 0, n_flush = 0, n_acc = 0, n_rej = 0, n_mode = 0;
  int unit_used [N];
  int cyc = 0;
  bit exp_q[$];
  bit exp_last_q[$];
  int results = 0, batches_done = 0;
  bit hold_off = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Host receive side.
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (rx_stall) n_stall++;
      if (tx_valid && !tx_ready) n_bp++;
      for (int u = 0; u < N; u++) if (dut.unit_valid[u]) unit_used[u]++;
      if (tx_valid && tx_ready) begin : word
        automatic int cnt = 0;
        automatic bit l = 0;
        automatic logic [W-1:0] expw = '0;
        while (cnt < W && exp_q.size() > 0 && !l) begin
          expw[cnt] = exp_q.pop_front();
          l = exp_last_q.pop_front();
          cnt++;
        end
        checks++;
        if (tx_data != expw || int'(tx_count) != cnt || tx_last != l) begin
          failures++;
          if (failures < 10)
            $display("FAIL word: data %h expected %h, count %0d/%0d, last %b/%b",
                     tx_data, expw, tx_count, cnt, tx_last, l);
        end
        if (cnt == W) n_full++; else n_flush++;
        results += cnt;
        if (l) batches_done++;
      end
      tx_ready <= hold_off ? 1'b0 : ($urandom_range(9) < 7);
    end
  end

  task automatic send_batch(input int npairs, input int e);
    for (int n = 0; n < npairs; n++) begin : one
      automatic string t = random_seq(M);
      automatic string p;
      automatic logic [2*MAXM-1:0] pe, te;
      automatic logic [MAXM-1:0] bv;
      automatic logic [WPP*W-1:0] words = '0;
      automatic bit sim, last;
      case (n % 4)
        0: p = t;
        1, 2: p = mutate(t, $urandom_range(6));
        default: p = random_seq(M);
      endcase
      bv  = ref_bitvec(p, t, e);
      sim = ($countones(bv[M-1:0]) <= e);
      if (sim) n_acc++; else n_rej++;
      last = (n == npairs - 1);
      exp_q.push_back(sim);
      exp_last_q.push_back(last);
      pe = encode(p);
      te = encode(t);
      words[4*M-1:0] = {te[2*M-1:0], pe[2*M-1:0]};
      for (int w = 0; w < WPP; w++) begin
        @(negedge clk);
        rx_valid = 1;
        rx_data  = words[w*W +: W];
        rx_last  = last && (w == WPP - 1);
        @(posedge clk);
        while (!rx_ready) @(posedge clk);
        #1 rx_valid = 0;
      end
    end
  endtask

  initial begin : stim
    int sizes [3] = '{300, 45, 20};
    int thr   [3] = '{5, 2, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 3; b++) begin
      if (int'(cfg_threshold) != thr[b]) n_mode++;
      @(negedge clk);
      cfg_threshold = 3'(thr[b]);
      fork
        send_batch(sizes[b], thr[b]);
        begin
          // Hold the host's receive side off for a while in the first batch.
          if (b == 0) begin
            repeat (200) @(posedge clk);
            hold_off = 1;
            repeat (2500) @(posedge clk);
            hold_off = 0;
          end
        end
      join
      wait (batches_done == b + 1);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (results != 365 || exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results, %0d still expected", results, exp_q.size());
    end
    checks++;
    if (n_stall == 0 || n_bp == 0 || n_full == 0 || n_flush == 0 || n_acc == 0 || n_rej == 0 || n_mode == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    for (int u = 0; u < N; u++) begin
      checks++;
      if (unit_used[u] == 0) begin failures++; $display("FAIL unit %0d never used", u); end
    end
    $display("info: stall %0d, back-pressure %0d, full words %0d, flushed words %0d, accepted %0d, rejected %0d, threshold changes %0d, cycles %0d",
             n_stall, n_bp, n_full, n_flush, n_acc, n_rej, n_mode, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
