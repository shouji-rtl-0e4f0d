// shouji_accel: the Shouji pre-alignment filter accelerator.
//
// N_UNITS independent Shouji filtering units sit between a sequence controller
// and a result controller, as in the published accelerator. The host sends
// pattern/text pairs of M bases as a stream of IN_W-bit words; every pair gets
// one result bit, 1 when the pair may be within cfg_threshold edits and must
// go to the aligner, 0 when it can be discarded. Results come back packed into
// OUT_W-bit words, in the order the pairs were sent.
//
// In the published system the two streams are the RX and TX channels of a
// PCIe DMA framework on the host link; that framework is not part of this
// RTL, and the top exposes plain valid/ready streams where it would connect.
//
// Interface:
//   cfg_threshold            edit distance threshold E (0..E_MAX), held
//                            stable while pairs are in flight
//   rx_valid/rx_ready/rx_data/rx_last
//                            pair stream, ceil(4M/IN_W) words per pair: the
//                            pattern's 2M bits, then the text's 2M bits, base
//                            i of a sequence in bits [2i+1:2i]; rx_last on the
//                            final word of the last pair of a batch
//   tx_valid/tx_ready/tx_data/tx_count/tx_last
//                            result stream: tx_count results in the low bits
//                            of tx_data, first pair in bit 0; tx_last marks
//                            the word that ends a batch
//   rx_stall                 high while rx_valid is held back by full FIFOs
//
// Timing: a pair leaves its FIFO, enters a unit, and its result reaches the
// result FIFO FU_LATENCY cycles later; every unit accepts a pair per clock.
// With the default 128-bit words a pair takes 4 words, so the host link, not
// the units, bounds the rate, as the published design notes for a saturated
// link. Reset is active-low and asynchronous.
module shouji_accel
  import shouji_pkg::*;
#(
  parameter int unsigned M              = 100,
  parameter int unsigned E_MAX          = 5,
  parameter int unsigned N_UNITS        = 16,
  parameter int unsigned IN_W           = 128,
  parameter int unsigned OUT_W          = 128,
  parameter int unsigned SEQ_FIFO_DEPTH = 4,
  parameter int unsigned RES_FIFO_DEPTH = 4,
  localparam int unsigned TW            = $clog2(E_MAX + 1),
  localparam int unsigned OCW           = $clog2(OUT_W + 1),
  localparam int unsigned CW            = $clog2(M + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [TW-1:0]    cfg_threshold,
  input  logic             rx_valid,
  output logic             rx_ready,
  input  logic [IN_W-1:0]  rx_data,
  input  logic             rx_last,
  output logic             rx_stall,
  output logic             tx_valid,
  input  logic             tx_ready,
  output logic [OUT_W-1:0] tx_data,
  output logic [OCW-1:0]   tx_count,
  output logic             tx_last
);

  logic [N_UNITS-1:0]          unit_credit, unit_valid, unit_last;
  logic [N_UNITS-1:0][2*M-1:0] unit_pattern, unit_text;
  logic [N_UNITS-1:0]          res_valid, res_similar, res_last;

  sequence_controller #(
    .M(M), .N_UNITS(N_UNITS), .IN_W(IN_W), .FIFO_DEPTH(SEQ_FIFO_DEPTH)
  ) u_seq (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (rx_valid),
    .in_ready    (rx_ready),
    .in_data     (rx_data),
    .in_last     (rx_last),
    .unit_credit (unit_credit),
    .unit_valid  (unit_valid),
    .unit_pattern(unit_pattern),
    .unit_text   (unit_text),
    .unit_last   (unit_last),
    .stall       (rx_stall)
  );

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    logic [CW-1:0] edits;

    filtering_unit #(.M(M), .E_MAX(E_MAX)) u_fu (
      .clk         (clk),
      .rst_n       (rst_n),
      .in_valid    (unit_valid[u]),
      .in_pattern  (unit_pattern[u]),
      .in_text     (unit_text[u]),
      .in_threshold(cfg_threshold),
      .in_last     (unit_last[u]),
      .out_valid   (res_valid[u]),
      .out_similar (res_similar[u]),
      .out_edits   (edits),
      .out_last    (res_last[u])
    );
  end

  result_controller #(
    .N_UNITS(N_UNITS), .OUT_W(OUT_W), .FIFO_DEPTH(RES_FIFO_DEPTH)
  ) u_res (
    .clk        (clk),
    .rst_n      (rst_n),
    .res_valid  (res_valid),
    .res_similar(res_similar),
    .res_last   (res_last),
    .unit_credit(unit_credit),
    .out_valid  (tx_valid),
    .out_ready  (tx_ready),
    .out_data   (tx_data),
    .out_count  (tx_count),
    .out_last   (tx_last)
  );

endmodule
