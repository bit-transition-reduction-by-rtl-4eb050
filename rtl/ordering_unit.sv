// ordering_unit: '1'-bit count-based ordering of N values.
//
// N SWAR pop-count units count the '1' bits of every value of
// data_unsorted_in (N x DATA_W bits) in parallel, giving bit_ones_count
// (N x CNT_W bits). The counts, as sort keys, and the unsorted values go to the
// bubble sorting unit, which orders the values by descending '1'-bit count.
// data_sorted_out gives the values in that order, count_sorted_out their counts
// and idx_sorted_out the position each value had in data_unsorted_in; the
// index is what a receiver needs to pair values that were ordered separately,
// or what the caller uses to move values affiliated with the sorted ones.
//
// Timing: sampled on the start_i cycle (the counts are combinational, so they
// are loaded in the same cycle); done_o pulses N(N-1)/2 + 1 cycles later and the
// outputs then stay valid until the next start. One unit serves the affiliated
// ordering in one sort and the separated ordering in two.
//
// The structure (25 SWAR pop-count units of 8-bit values giving 4-bit counts,
// feeding a bubble sorting unit with an FSM and two counters) is the one of the
// ordering-unit block diagram; the index output and handshake are this
// design's own.
module ordering_unit #(
  parameter int unsigned N      = 25,
  parameter int unsigned DATA_W = 8,
  localparam int unsigned CNT_W = $clog2(DATA_W + 1),
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  logic [DATA_W-1:0] data_unsorted_in [N],
  output logic              busy_o,
  output logic              done_o,
  output logic [DATA_W-1:0] data_sorted_out  [N],
  output logic [CNT_W-1:0]  count_sorted_out [N],
  output logic [IDX_W-1:0]  idx_sorted_out   [N]
);
  logic [CNT_W-1:0] bit_ones_count [N];

  for (genvar i = 0; i < N; i++) begin : g_popcount
    popcount_swar #(.DATA_W(DATA_W)) u_popcount (
      .data_i (data_unsorted_in[i]),
      .count_o(bit_ones_count[i])
    );
  end

  bubble_sort_unit #(.N(N), .KEY_W(CNT_W), .DATA_W(DATA_W)) u_sort (
    .clk    (clk),
    .rst_n  (rst_n),
    .start_i(start_i),
    .keys_i (bit_ones_count),
    .data_i (data_unsorted_in),
    .busy_o (busy_o),
    .done_o (done_o),
    .keys_o (count_sorted_out),
    .data_o (data_sorted_out),
    .idx_o  (idx_sorted_out)
  );
endmodule
