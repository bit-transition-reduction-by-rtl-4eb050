// ord_pkg: constants, types and helper functions shared by the ordering
// extension.
//
// The sizes are those of the fixed-8 configuration: one convolution task
// carries a 5x5 input window, a 5x5 kernel and one bias (25 + 25 + 1 values of
// 8 bits), the ordering unit sorts 25 values of 8 bits by their 4-bit '1'-bit
// count, and a 128-bit flit carries 16 values, 8 inputs in its left half and 8
// weights in its right half.
//
// place_slot() maps a sort rank onto a buffer slot. Ranks are dealt out across
// the full flits column by column (rank 0 to flit 0, rank 1 to flit 1, ...), so
// that flits that follow each other on a link carry values of neighbouring
// '1'-bit counts in the same lane. The ranks past the full flits keep their
// order in the tail flit. The column-major dealing follows the ordering
// principle (x1 > y1 > x2 > y2 ...); the handling of the tail is this design's
// own choice.
package ord_pkg;

  // Task and flit geometry (paper values)
  localparam int unsigned TASK_N     = 25;  // values per kernel window (5x5)
  localparam int unsigned VAL_W      = 8;   // fixed-8 data
  localparam int unsigned FLIT_LANES = 16;  // values per flit (128-bit link)
  localparam int unsigned FLIT_HALF  = FLIT_LANES / 2;
  localparam int unsigned ONES_W     = $clog2(VAL_W + 1);  // 4 bits for 8-bit data
  localparam int unsigned POS_W      = $clog2(TASK_N);     // original-position index

  // Ordering configurations: O0 baseline (bypass), O1 affiliated, O2 separated
  typedef enum logic [1:0] {
    ORD_NONE       = 2'd0,
    ORD_AFFILIATED = 2'd1,
    ORD_SEPARATED  = 2'd2
  } ord_mode_e;

  // Buffer slot of sort rank r for n values packed half-flit by half-flit.
  function automatic int unsigned place_slot(int unsigned r, int unsigned n,
                                             int unsigned half);
    int unsigned nfull;
    nfull = n / half;
    if (nfull == 0 || r >= nfull * half) return r;
    return (r % nfull) * half + (r / nfull);
  endfunction

endpackage
