// result_controller: gathers the one-bit results of the filtering units and
// returns them to the host in the order the pairs arrived.
//
// Every unit has its own result FIFO. Since the sequence controller hands
// pairs to the units in round-robin order 0, 1, ..., N-1, 0, ..., reading the
// FIFOs in the same order restores the arrival order. Results are packed into
// OUT_W-bit words, the first result in bit 0. A word goes out when it is full
// or when it holds the result of a pair flagged last; out_count tells how many
// of its bits are results and out_last marks the end of a batch.
//
// A unit cannot be stalled once it has a pair, so this block grants credit
// (unit_credit) to issue a pair to unit u only while its FIFO has more free
// entries than the FU_LATENCY results that can already be on their way.
//
// The published design gives this block's function and its per-unit FIFOs;
// the packing, the order of reading and the credit rule are this design's own
// choices. The output stream uses valid/ready; out_valid holds with its data
// until out_ready is high on a clock edge.
module result_controller
  import shouji_pkg::*;
#(
  parameter int unsigned N_UNITS    = 16,
  parameter int unsigned OUT_W      = 128,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned UW        = (N_UNITS > 1) ? $clog2(N_UNITS) : 1,
  localparam int unsigned OCW       = $clog2(OUT_W + 1),
  localparam int unsigned FCW       = $clog2(FIFO_DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the filtering units
  input  logic [N_UNITS-1:0] res_valid,
  input  logic [N_UNITS-1:0] res_similar,
  input  logic [N_UNITS-1:0] res_last,
  output logic [N_UNITS-1:0] unit_credit,
  // host-side stream
  output logic               out_valid,
  input  logic               out_ready,
  output logic [OUT_W-1:0]   out_data,
  output logic [OCW-1:0]     out_count,
  output logic               out_last
);

  logic [N_UNITS-1:0]           fifo_empty;
  logic [N_UNITS-1:0][1:0]      fifo_head;   // {last, similar}
  logic [UW-1:0]                rd_sel;
  logic                         take;
  logic                         head_similar, head_last;
  logic [OUT_W-1:0]             pack;
  logic [OCW-1:0]               pack_cnt;

  for (genvar u = 0; u < N_UNITS; u++) begin : g_fifo
    logic [FCW-1:0] cnt;

    sync_fifo #(.WIDTH(2), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk    (clk),
      .rst_n  (rst_n),
      .wr_en  (res_valid[u]),
      .wr_data({res_last[u], res_similar[u]}),
      .rd_en  (take && (int'(rd_sel) == u)),
      .rd_data(fifo_head[u]),
      .full   (),
      .empty  (fifo_empty[u]),
      .count  (cnt)
    );

    assign unit_credit[u] = (int'(FIFO_DEPTH) - int'(cnt)) > int'(FU_LATENCY);
  end

  assign head_similar = fifo_head[rd_sel][0];
  assign head_last    = fifo_head[rd_sel][1];

  // Take the next result in order when it is there and the output register is
  // free (or being emptied this cycle).
  assign take = !fifo_empty[rd_sel] && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_sel    <= '0;
      pack      <= '0;
      pack_cnt  <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_count <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        rd_sel <= (int'(rd_sel) == int'(N_UNITS) - 1) ? '0 : rd_sel + 1'b1;
        if (head_last || int'(pack_cnt) == int'(OUT_W) - 1) begin
          out_valid <= 1'b1;
          out_data  <= pack | (OUT_W'(head_similar) << pack_cnt);
          out_count <= pack_cnt + 1'b1;
          out_last  <= head_last;
          pack      <= '0;
          pack_cnt  <= '0;
          // A batch ends on a word boundary: the next batch starts at unit 0.
          if (head_last) rd_sel <= '0;
        end else begin
          pack           <= pack | (OUT_W'(head_similar) << pack_cnt);
          pack_cnt       <= pack_cnt + 1'b1;
        end
      end
    end
  end

endmodule
