// sync_fifo: single-clock first-in first-out buffer.
//
// Used in front of and behind every filtering unit, as the published block
// diagram shows; its depth and style are this design's own choices. The head
// entry is always visible on rd_data when empty is low (first-word
// fall-through); rd_en pops it at the next clock edge, wr_en pushes wr_data.
// A push and a pop may happen in the same cycle. count gives the number of
// entries held. Active-low asynchronous reset empties the buffer. Pushing when
// full or popping when empty is a caller error and is flagged by assertions.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CNTW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             full,
  output logic             empty,
  output logic [CNTW-1:0]  count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (int'(p) == int'(DEPTH) - 1) ? '0 : p + 1'b1;
  endfunction

  assign full    = (int'(count) == int'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (wr_en) wr_ptr <= next_ptr(wr_ptr);
      if (rd_en) rd_ptr <= next_ptr(rd_ptr);
      unique case ({wr_en, rd_en})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_ptr] <= wr_data;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full)
    else $error("sync_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("sync_fifo: pop while empty");

endmodule
