// prefetch_buffer: task buffer between memory and the network interface, with
// the control that runs the task through the ordering unit.
//
// A task is 2N+1 values read from memory as a stream of one DATA_W value per
// beat (valid/ready): N inputs, then N weights, then the bias. After the last
// beat the buffer orders the task according to the mode sampled with the first
// beat:
//   ORD_NONE       (O0) no ordering; the task is handed on as read (bypass).
//   ORD_AFFILIATED (O1) the weights are sorted by descending '1'-bit count and
//                  every input moves with the weight it is paired with, so
//                  inputs and weights stay paired position by position.
//   ORD_SEPARATED  (O2) the weights are sorted, then the inputs are sorted by
//                  their own counts in a second run of the same ordering unit.
// The value of sort rank r is written to slot ord_pkg::place_slot(r), which
// deals the ranks across the full flits column by column. Next to every value
// the buffer keeps its original position (5 bits for N = 25), which is all a
// receiver needs to pair inputs and weights again after O2.
// The ordered task is then offered on the task port (valid/ready) until taken;
// the next task is read only after that (one task in the buffer at a time).
//
// Timing: 2N+1 load beats, then for O1 one sort (1 start cycle + N(N-1)/2 + 1),
// for O2 two, then the task is valid. O0 offers the task the cycle after the
// last beat.
//
// The placement of the buffer between memory, ordering unit and NI, the write
// back of ordered data into it, the bypass path and the two ordering modes
// follow the paper; the memory stream format, the single-task capacity and the
// handshakes are this design's own choices.
module prefetch_buffer
  import ord_pkg::*;
#(
  parameter int unsigned N        = TASK_N,
  parameter int unsigned DATA_W   = VAL_W,
  parameter int unsigned HALF     = FLIT_HALF,
  localparam int unsigned IDX_W   = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ord_mode_e         mode_i,
  // memory read stream
  input  logic              mem_valid_i,
  output logic              mem_ready_o,
  input  logic [DATA_W-1:0] mem_data_i,
  // ordering unit
  output logic              ou_start_o,
  output logic [DATA_W-1:0] ou_data_o [N],
  input  logic              ou_done_i,
  input  logic [DATA_W-1:0] ou_sorted_i [N],
  input  logic [IDX_W-1:0]  ou_idx_i [N],
  // ordered task towards the flitizer
  output logic              task_valid_o,
  input  logic              task_ready_i,
  output ord_mode_e         task_mode_o,
  output logic [DATA_W-1:0] task_in_o [N],
  output logic [DATA_W-1:0] task_w_o  [N],
  output logic [DATA_W-1:0] task_bias_o,
  output logic [IDX_W-1:0]  task_in_idx_o [N],
  output logic [IDX_W-1:0]  task_w_idx_o  [N]
);
  localparam int unsigned TASK_LEN = 2 * N + 1;
  localparam int unsigned LCNT_W   = $clog2(TASK_LEN);

  typedef enum logic [2:0] {
    S_LOAD, S_START_W, S_WAIT_W, S_START_I, S_WAIT_I, S_SEND
  } state_e;

  state_e            state;
  ord_mode_e         mode_q;
  logic [LCNT_W-1:0] lcnt;
  logic [DATA_W-1:0] in_buf [N];
  logic [DATA_W-1:0] w_buf  [N];
  logic [DATA_W-1:0] bias_q;
  logic [IDX_W-1:0]  in_idx [N];
  logic [IDX_W-1:0]  w_idx  [N];

  logic mem_fire;
  assign mem_ready_o = state == S_LOAD;
  assign mem_fire    = mem_valid_i && mem_ready_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_LOAD;
      mode_q <= ORD_NONE;
      lcnt   <= '0;
      bias_q <= '0;
      for (int i = 0; i < N; i++) begin
        in_buf[i] <= '0;
        w_buf[i]  <= '0;
        in_idx[i] <= '0;
        w_idx[i]  <= '0;
      end
    end else begin
      unique case (state)
        S_LOAD: if (mem_fire) begin
          if (lcnt == '0) mode_q <= mode_i;
          if (int'(lcnt) < int'(N)) begin
            in_buf[lcnt[IDX_W-1:0]] <= mem_data_i;
            in_idx[lcnt[IDX_W-1:0]] <= lcnt[IDX_W-1:0];
          end else if (int'(lcnt) < int'(2 * N)) begin
            w_buf[IDX_W'(int'(lcnt) - int'(N))] <= mem_data_i;
            w_idx[IDX_W'(int'(lcnt) - int'(N))] <= IDX_W'(int'(lcnt) - int'(N));
          end else begin
            bias_q <= mem_data_i;
          end
          if (int'(lcnt) == int'(TASK_LEN) - 1) begin
            lcnt  <= '0;
            // the mode of a one-value task is the one sampled now
            state <= ((lcnt == '0 ? mode_i : mode_q) == ORD_NONE) ? S_SEND : S_START_W;
          end else begin
            lcnt <= lcnt + 1'b1;
          end
        end
        S_START_W: state <= S_WAIT_W;
        S_WAIT_W: if (ou_done_i) begin
          for (int r = 0; r < N; r++) begin
            w_buf[place_slot(r, N, HALF)] <= ou_sorted_i[r];
            w_idx[place_slot(r, N, HALF)] <= ou_idx_i[r];
            if (mode_q == ORD_AFFILIATED) begin
              // inputs follow their weights
              in_buf[place_slot(r, N, HALF)] <= in_buf[ou_idx_i[r]];
              in_idx[place_slot(r, N, HALF)] <= ou_idx_i[r];
            end
          end
          state <= (mode_q == ORD_SEPARATED) ? S_START_I : S_SEND;
        end
        S_START_I: state <= S_WAIT_I;
        S_WAIT_I: if (ou_done_i) begin
          for (int r = 0; r < N; r++) begin
            in_buf[place_slot(r, N, HALF)] <= ou_sorted_i[r];
            in_idx[place_slot(r, N, HALF)] <= ou_idx_i[r];
          end
          state <= S_SEND;
        end
        S_SEND: if (task_ready_i) state <= S_LOAD;
        default: state <= S_LOAD;
      endcase
    end
  end

  assign ou_start_o = state == S_START_W || state == S_START_I;
  assign ou_data_o  = (state == S_START_I) ? in_buf : w_buf;

  assign task_valid_o  = state == S_SEND;
  assign task_mode_o   = mode_q;
  assign task_in_o     = in_buf;
  assign task_w_o      = w_buf;
  assign task_bias_o   = bias_q;
  assign task_in_idx_o = in_idx;
  assign task_w_idx_o  = w_idx;

  // The ordered task must stay stable while it is offered.
  assert property (@(posedge clk) disable iff (!rst_n)
                   task_valid_o && !task_ready_i |=> task_valid_o)
    else $error("prefetch_buffer: task withdrawn before it was taken");
endmodule
