// ordering_ext: ordering extension placed beside a memory controller of a
// NoC-based DNN accelerator (top level).
//
// Convolution tasks (N inputs, N weights, one bias) are read from memory into
// the prefetch buffer. Depending on mode_i the buffer sends the task straight
// on (O0, the bypass path), or first has the ordering unit sort the weights by
// descending '1'-bit count with the inputs following their weights (O1,
// affiliated ordering), or sort weights and inputs each by its own count (O2,
// separated ordering, two sorts). The half-half flitizer then packs the task
// into flits of LANES values, inputs in the left half and weights in the right
// half, for the network interface of the router. The order of values inside
// flits that follow each other is what lowers the number of bit transitions on
// the links; the bit-transition monitor counts those transitions on the
// injected flits (an evaluation aid, not needed for operation).
//
// Interface: memory read stream (one DATA_W value per beat, valid/ready: N
// inputs, N weights, bias), mode_i sampled with a task's first beat, flit
// stream to the NI (valid/ready, head/tail, LANES x DATA_W data and the
// original position of every lane), bit-transition total with a clear.
//
// Timing for the default sizes: 51 load beats; the task is offered to the
// flitizer 1 cycle after the last beat in O0, 303 cycles after it in O1 and
// 605 in O2 (each sort: 1 start cycle, 300 compare cycles, 1 done cycle in
// which the result is written back, plus 1 cycle to the task port); then 4 flits, one per cycle. The layer-level slack of a DNN
// accelerator is what hides this latency; the extension holds one task at a
// time.
//
// What follows the paper: the placement near memory, the prefetch buffer, the
// ordering unit of SWAR pop-counts and a bubble sorter, the two ordering
// modes and the bypass, the half-half flit layout and the way bit transitions
// are recorded. The stream formats and handshakes are this design's own.
module ordering_ext
  import ord_pkg::*;
#(
  parameter int unsigned N       = TASK_N,
  parameter int unsigned DATA_W  = VAL_W,
  parameter int unsigned LANES   = FLIT_LANES,
  parameter int unsigned TOTAL_W = 40,
  localparam int unsigned IDX_W  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CNT_W  = $clog2(DATA_W + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  ord_mode_e                     mode_i,
  // memory read stream
  input  logic                          mem_valid_i,
  output logic                          mem_ready_o,
  input  logic [DATA_W-1:0]             mem_data_i,
  // flits to the network interface
  output logic                          flit_valid_o,
  input  logic                          flit_ready_i,
  output logic                          flit_head_o,
  output logic                          flit_tail_o,
  output logic [LANES-1:0][DATA_W-1:0]  flit_data_o,
  output logic [LANES-1:0][IDX_W-1:0]   flit_pos_o,
  output ord_mode_e                     flit_mode_o,   // ordering mode of the packet
  // status and bit-transition record
  output logic                          sort_busy_o,
  input  logic                          bt_clear_i,
  output logic [TOTAL_W-1:0]            bt_total_o
);
  // prefetch buffer <-> ordering unit
  logic              ou_start, ou_done;
  logic [DATA_W-1:0] ou_data   [N];
  logic [DATA_W-1:0] ou_sorted [N];
  logic [CNT_W-1:0]  ou_count  [N];
  logic [IDX_W-1:0]  ou_idx    [N];

  // prefetch buffer -> flitizer
  logic              task_valid, task_ready;
  ord_mode_e         task_mode;
  logic [DATA_W-1:0] task_in [N];
  logic [DATA_W-1:0] task_w  [N];
  logic [DATA_W-1:0] task_bias;
  logic [IDX_W-1:0]  task_in_idx [N];
  logic [IDX_W-1:0]  task_w_idx  [N];

  prefetch_buffer #(.N(N), .DATA_W(DATA_W), .HALF(LANES / 2)) u_prefetch (
    .clk          (clk),
    .rst_n        (rst_n),
    .mode_i       (mode_i),
    .mem_valid_i  (mem_valid_i),
    .mem_ready_o  (mem_ready_o),
    .mem_data_i   (mem_data_i),
    .ou_start_o   (ou_start),
    .ou_data_o    (ou_data),
    .ou_done_i    (ou_done),
    .ou_sorted_i  (ou_sorted),
    .ou_idx_i     (ou_idx),
    .task_valid_o (task_valid),
    .task_ready_i (task_ready),
    .task_mode_o  (task_mode),
    .task_in_o    (task_in),
    .task_w_o     (task_w),
    .task_bias_o  (task_bias),
    .task_in_idx_o(task_in_idx),
    .task_w_idx_o (task_w_idx)
  );

  ordering_unit #(.N(N), .DATA_W(DATA_W)) u_ordering (
    .clk             (clk),
    .rst_n           (rst_n),
    .start_i         (ou_start),
    .data_unsorted_in(ou_data),
    .busy_o          (sort_busy_o),
    .done_o          (ou_done),
    .data_sorted_out (ou_sorted),
    .count_sorted_out(ou_count),
    .idx_sorted_out  (ou_idx)
  );

  half_half_flitizer #(.N(N), .DATA_W(DATA_W), .LANES(LANES)) u_flitizer (
    .clk          (clk),
    .rst_n        (rst_n),
    .task_valid_i (task_valid),
    .task_ready_o (task_ready),
    .task_in_i    (task_in),
    .task_w_i     (task_w),
    .task_bias_i  (task_bias),
    .task_in_idx_i(task_in_idx),
    .task_w_idx_i (task_w_idx),
    .flit_valid_o (flit_valid_o),
    .flit_ready_i (flit_ready_i),
    .flit_head_o  (flit_head_o),
    .flit_tail_o  (flit_tail_o),
    .flit_data_o  (flit_data_o),
    .flit_pos_o   (flit_pos_o)
  );

  assign flit_mode_o = task_mode;

  bt_monitor #(.P(1), .FLIT_W(LANES * DATA_W), .TOTAL_W(TOTAL_W)) u_bt (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear_i   (bt_clear_i),
    .valid_i   (flit_valid_o && flit_ready_i),
    .flit_i    (flit_data_o),
    .port_bt_o (),
    .total_bt_o(bt_total_o)
  );
endmodule
