// shouji_pkg: constants and types shared by the Shouji pre-alignment filter.
//
// A DNA base is carried as a 2-bit code, so a sequence of M bases is a
// 2*M-bit vector with base i in bits [2i+1:2i]. Which code stands for which
// base does not matter to the filter (it only tests codes for equality); the
// code below is this design's own choice. The window width of 4 columns and
// the 3-bit zero count per window follow the published design. The two-cycle
// latency of a filtering unit is this design's own pipelining choice.
package shouji_pkg;

  // 2-bit base code (own choice; any one-to-one code works).
  typedef enum logic [1:0] {
    BASE_A = 2'b00,
    BASE_C = 2'b01,
    BASE_G = 2'b10,
    BASE_T = 2'b11
  } base_t;

  // Width of a search window, in neighborhood-map columns.
  localparam int unsigned WIN = 4;

  // Width of a zero count over one window (0..4 needs 3 bits).
  localparam int unsigned ZCW = 3;

  // Clock edges from a pair entering a filtering unit to its result.
  localparam int unsigned FU_LATENCY = 2;

endpackage
