// sequence_controller: feeds sequence pairs from the host link to the
// filtering units.
//
// The host stream carries one pair as WPP = ceil(4M / IN_W) words of IN_W
// bits: the pattern in the low 2M bits of the concatenated words (word 0
// first), the text in the next 2M bits, the rest padding. in_last on the final
// word of a pair marks the last pair of a batch. The controller assembles the
// words of a pair and writes the pair, with its last flag, into the FIFO of
// one filtering unit, going round the units 0, 1, ..., N-1, 0, ... so that
// the result controller can restore the order. If the FIFO whose turn it is
// is full, in_ready drops on the final word of the pair (the host stalls).
// Each unit's FIFO is popped whenever it holds a pair and the result
// controller grants credit for that unit.
//
// The published design gives this block's function and its per-unit FIFOs;
// the word format, the round-robin order, the FIFO depth and the credit
// handshake are this design's own choices. Streams use valid/ready: a word
// moves on a clock edge where in_valid and in_ready are both high.
module sequence_controller
  import shouji_pkg::*;
#(
  parameter int unsigned M          = 100,
  parameter int unsigned N_UNITS    = 16,
  parameter int unsigned IN_W       = 128,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned PAIR_W    = 4 * M,
  localparam int unsigned WPP       = (PAIR_W + IN_W - 1) / IN_W,
  localparam int unsigned UW        = (N_UNITS > 1) ? $clog2(N_UNITS) : 1,
  localparam int unsigned WCW       = (WPP > 1) ? $clog2(WPP) : 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // host-side stream
  input  logic                             in_valid,
  output logic                             in_ready,
  input  logic [IN_W-1:0]                  in_data,
  input  logic                             in_last,
  // towards the filtering units
  input  logic [N_UNITS-1:0]               unit_credit,
  output logic [N_UNITS-1:0]               unit_valid,
  output logic [N_UNITS-1:0][2*M-1:0]      unit_pattern,
  output logic [N_UNITS-1:0][2*M-1:0]      unit_text,
  output logic [N_UNITS-1:0]               unit_last,
  // status
  output logic                             stall
);

  // ---- Word assembly --------------------------------------------------------
  logic [WCW-1:0]            word_idx;
  logic [WPP*IN_W-1:0]       asm_buf;
  logic [WPP*IN_W-1:0]       pair_words;
  logic                      final_word;
  logic [UW-1:0]             wr_sel;
  logic [N_UNITS-1:0]        fifo_full, fifo_empty;
  logic                      push;

  assign final_word = (int'(word_idx) == int'(WPP) - 1);
  assign in_ready   = !(final_word && fifo_full[wr_sel]);
  assign stall      = in_valid && !in_ready;
  assign push       = in_valid && in_ready && final_word;

  always_comb begin
    pair_words = asm_buf;
    pair_words[(WPP-1)*IN_W +: IN_W] = in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word_idx <= '0;
      wr_sel   <= '0;
    end else if (in_valid && in_ready) begin
      if (final_word) begin
        word_idx <= '0;
        // After the last pair of a batch the next batch starts at unit 0.
        if (in_last || int'(wr_sel) == int'(N_UNITS) - 1) wr_sel <= '0;
        else                                             wr_sel <= wr_sel + 1'b1;
      end else begin
        word_idx <= word_idx + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready && !final_word) asm_buf[int'(word_idx)*IN_W +: IN_W] <= in_data;
  end

  // ---- One FIFO per filtering unit -------------------------------------------
  for (genvar u = 0; u < N_UNITS; u++) begin : g_fifo
    logic [PAIR_W:0] wr_data, rd_data;
    logic            pop;

    assign wr_data = {in_last, pair_words[PAIR_W-1:0]};
    assign pop     = !fifo_empty[u] && unit_credit[u];

    sync_fifo #(.WIDTH(PAIR_W + 1), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk    (clk),
      .rst_n  (rst_n),
      .wr_en  (push && (int'(wr_sel) == u)),
      .wr_data(wr_data),
      .rd_en  (pop),
      .rd_data(rd_data),
      .full   (fifo_full[u]),
      .empty  (fifo_empty[u]),
      .count  ()
    );

    assign unit_valid[u]   = pop;
    assign unit_pattern[u] = rd_data[0 +: 2*M];
    assign unit_text[u]    = rd_data[2*M +: 2*M];
    assign unit_last[u]    = rd_data[PAIR_W];
  end

endmodule
