// tb_result_controller: plays the role of the units and the host. Results
// are issued to units in round-robin order (restarting at unit 0 after a
// last result), only when the controller grants credit, and arrive two cycles
// later; the host drops tx-ready at random. Checks that the packed words carry
// the results in issue order, that a word is sent when full (OUT_W results)
// or at a last result, with the right count and last flag, and that no result
// FIFO overflows (the FIFO's own assertions would fire).
module tb_result_controller;
  localparam int N = 4, OW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] res_valid = '0, res_similar = '0, res_last = '0, unit_credit;
  logic out_valid, out_ready = 0, out_last;
  logic [OW-1:0] out_data;
  logic [4:0] out_count;
  int checks = 0, failures = 0, nfullword = 0, npartial = 0, nbackpressure = 0;

  result_controller #(.N_UNITS(N), .OUT_W(OW), .FIFO_DEPTH(4)) dut (
    .clk(clk), .rst_n(rst_n), .res_valid(res_valid), .res_similar(res_similar),
    .res_last(res_last), .unit_credit(unit_credit), .out_valid(out_valid), .out_ready(out_ready),
    .out_data(out_data), .out_count(out_count), .out_last(out_last));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NR = 500;
  bit exp_bits[$];
  bit exp_last[$];
  int issued = 0, sel = 0, taken = 0;
  logic [N-1:0] p1_v = '0, p1_s = '0, p1_l = '0;

  // Unit model: fixed two-cycle latency.
  always @(posedge clk) begin
    if (rst_n) begin
      logic [N-1:0] v, s, l;
      v = '0; s = '0; l = '0;
      if (issued < NR && unit_credit[sel] && $urandom_range(3) != 0) begin
        v[sel] = 1;
        s[sel] = 1'($urandom);
        l[sel] = (issued % 23 == 22) || (issued == NR - 1);
        exp_bits.push_back(s[sel]);
        exp_last.push_back(l[sel]);
        issued++;
        sel = l[sel] ? 0 : (sel + 1) % N;
      end
      p1_v <= v; p1_s <= s; p1_l <= l;
      res_valid <= p1_v; res_similar <= p1_s; res_last <= p1_l;
    end
  end

  // Host model.
  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && !out_ready) nbackpressure++;
      if (out_valid && out_ready) begin : word
        automatic int cnt = 0;
        automatic bit l = 0;
        automatic logic [OW-1:0] expw = '0;
        while (cnt < OW && exp_bits.size() > 0 && !l) begin
          expw[cnt] = exp_bits.pop_front();
          l = exp_last.pop_front();
          cnt++;
        end
        checks++;
        if (out_data != expw || int'(out_count) != cnt || out_last != l) begin
          failures++;
          if (failures < 10) $display("FAIL word %h/%h count %0d/%0d last %b/%b", out_data, expw, out_count, cnt, out_last, l);
        end
        if (cnt == OW) nfullword++; else npartial++;
        taken += cnt;
      end
      out_ready <= ($urandom_range(9) < 6);
    end
  end

  initial begin : stim
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (taken == NR);
    repeat (5) @(posedge clk);
    checks++;
    if (nfullword == 0 || npartial == 0 || nbackpressure == 0) begin
      failures++;
      $display("FAIL mechanisms: full %0d partial %0d backpressure %0d", nfullword, npartial, nbackpressure);
    end
    $display("info: %0d full words, %0d flushed words, %0d back-pressure cycles", nfullword, npartial, nbackpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
