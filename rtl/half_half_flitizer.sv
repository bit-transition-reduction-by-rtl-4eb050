// half_half_flitizer: packs one task into flits, inputs in the left half of
// each flit and weights in the right half ("half-half flitization").
//
// With N = 25 values per operand and 16 lanes of 8 bits per flit (HALF = 8):
//   flit k (k = 0..2): lanes 0..7 = input[8k..8k+7], lanes 8..15 = weight[8k..8k+7]
//   flit 3 (tail):     lane 0 = input[24], lane 1 = bias, lane 8 = weight[24],
//                      the other 13 lanes zero.
// In general there are NFULL = N / HALF full flits and one tail flit holding
// the REM = N % HALF remaining inputs in lanes 0..REM-1, the bias in lane REM
// and the remaining weights in lanes HALF..HALF+REM-1. Lane i of a flit is
// bits [i*DATA_W +: DATA_W] of flit_data_o. Next to the data, flit_pos_o gives
// for every lane the original position of the value in its task (taken from
// the task's index arrays; 0 for the bias and padding), the small index a
// receiver needs after separated ordering.
//
// Timing: the task is read straight from the prefetch buffer, which holds it
// stable while task_valid_i is high. One flit is offered per cycle
// (valid/ready); task_ready_o rises with the handshake of the tail flit, so a
// task takes NFULL+1 cycles without back-pressure.
//
// The lane layout follows the paper's half-half flitization example; the lane
// bit order, the head/tail flags and the index sideband are this design's own.
module half_half_flitizer
  import ord_pkg::*;
#(
  parameter int unsigned N      = TASK_N,
  parameter int unsigned DATA_W = VAL_W,
  parameter int unsigned LANES  = FLIT_LANES,
  localparam int unsigned HALF  = LANES / 2,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // task from the prefetch buffer
  input  logic              task_valid_i,
  output logic              task_ready_o,
  input  logic [DATA_W-1:0] task_in_i [N],
  input  logic [DATA_W-1:0] task_w_i  [N],
  input  logic [DATA_W-1:0] task_bias_i,
  input  logic [IDX_W-1:0]  task_in_idx_i [N],
  input  logic [IDX_W-1:0]  task_w_idx_i  [N],
  // flits towards the network interface
  output logic                          flit_valid_o,
  input  logic                          flit_ready_i,
  output logic                          flit_head_o,
  output logic                          flit_tail_o,
  output logic [LANES-1:0][DATA_W-1:0]  flit_data_o,
  output logic [LANES-1:0][IDX_W-1:0]   flit_pos_o
);
  localparam int unsigned NFULL  = N / HALF;
  localparam int unsigned REM    = N % HALF;
  localparam int unsigned NFLITS = NFULL + 1;
  localparam int unsigned FCNT_W = (NFLITS > 1) ? $clog2(NFLITS) : 1;

  logic [FCNT_W-1:0] fcnt;
  logic              flit_fire;

  assign flit_valid_o = task_valid_i;
  assign flit_fire    = flit_valid_o && flit_ready_i;
  assign flit_head_o  = fcnt == '0;
  assign flit_tail_o  = int'(fcnt) == int'(NFLITS) - 1;
  assign task_ready_o = flit_fire && flit_tail_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      fcnt <= '0;
    else if (flit_fire) fcnt <= flit_tail_o ? '0 : fcnt + 1'b1;
  end

  always_comb begin
    flit_data_o = '0;
    flit_pos_o  = '0;
    if (!flit_tail_o) begin
      for (int j = 0; j < HALF; j++) begin
        flit_data_o[j]        = task_in_i[int'(fcnt) * HALF + j];
        flit_pos_o[j]         = task_in_idx_i[int'(fcnt) * HALF + j];
        flit_data_o[HALF + j] = task_w_i[int'(fcnt) * HALF + j];
        flit_pos_o[HALF + j]  = task_w_idx_i[int'(fcnt) * HALF + j];
      end
    end else begin
      for (int j = 0; j < REM; j++) begin
        flit_data_o[j]        = task_in_i[NFULL * HALF + j];
        flit_pos_o[j]         = task_in_idx_i[NFULL * HALF + j];
        flit_data_o[HALF + j] = task_w_i[NFULL * HALF + j];
        flit_pos_o[HALF + j]  = task_w_idx_i[NFULL * HALF + j];
      end
      flit_data_o[REM] = task_bias_i;
    end
  end

  initial assert (REM < HALF && LANES % 2 == 0)
    else $error("half_half_flitizer: LANES must be even");
endmodule
