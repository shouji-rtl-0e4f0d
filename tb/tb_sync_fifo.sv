// tb_sync_fifo: random pushes and pops (never past full or empty) checked
// against a queue model; also checks count, full and empty every cycle.
module tb_sync_fifo;
  localparam int W = 8, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic full, empty;
  logic [2:0] count;
  int checks = 0, failures = 0;
  int nfull = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_data(wr_data),
    .rd_en(rd_en), .rd_data(rd_data), .full(full), .empty(empty), .count(count));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != model.size() || full != (model.size() == D) || empty != (model.size() == 0) ||
          (model.size() > 0 && rd_data != model[0])) begin
        failures++;
        if (failures < 10) $display("FAIL c=%0d count %0d/%0d head %h", c, count, model.size(), rd_data);
      end
      if (full) nfull++;
      // Phases that favour filling and draining.
      wr_en = !full && ($urandom_range(99) < ((c / 200) % 2 ? 80 : 30));
      rd_en = !empty && ($urandom_range(99) < ((c / 200) % 2 ? 30 : 80));
      wr_data = W'($urandom);
      @(posedge clk);
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
    end
    checks++;
    if (nfull == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
