// bubble_sort_unit: sequential bubble sort of N (key, data) pairs into
// descending key order.
//
// A start pulse loads keys_i and data_i together with each pair's original
// position (0..N-1). The FSM then runs a plain bubble sort with two counters:
// CNT1 counts the passes (0..N-2) and CNT2 walks the pair (CNT2, CNT2+1) of the
// current pass (0..N-2-CNT1). Each cycle one neighbouring pair is compared and
// swapped when the right key is larger, so equal keys keep their original order
// (the sort is stable). After the last compare the unit pulses done_o for one
// cycle; keys_o, data_o and idx_o hold the sorted result until the next start.
//
// Timing: start_i is taken when busy_o is low. The sort takes N(N-1)/2 compare
// cycles (300 for N = 25) and done_o rises in the cycle after the last one, so
// done_o comes N(N-1)/2 + 1 cycles after the start cycle.
//
// The bubble sort, the FSM and the two counters follow the ordering-unit
// block diagram; one compare-and-swap per cycle, the stable tie rule, the
// original-index output and the start/busy/done handshake are this design's
// own choices.
module bubble_sort_unit #(
  parameter int unsigned N      = 25,
  parameter int unsigned KEY_W  = 4,
  parameter int unsigned DATA_W = 8,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  logic [KEY_W-1:0]  keys_i [N],
  input  logic [DATA_W-1:0] data_i [N],
  output logic              busy_o,
  output logic              done_o,
  output logic [KEY_W-1:0]  keys_o [N],
  output logic [DATA_W-1:0] data_o [N],
  output logic [IDX_W-1:0]  idx_o  [N]
);
  typedef enum logic [1:0] {S_IDLE, S_SORT, S_DONE} state_e;

  state_e            state;
  logic [IDX_W-1:0]  cnt1, cnt2;   // pass counter, compare position
  logic [KEY_W-1:0]  key_q  [N];
  logic [DATA_W-1:0] data_q [N];
  logic [IDX_W-1:0]  idx_q  [N];

  logic swap;
  logic last_in_pass, last_pass;

  assign swap         = key_q[cnt2] < key_q[cnt2 + 1'b1];
  assign last_in_pass = int'(cnt2) == int'(N) - 2 - int'(cnt1);
  assign last_pass    = int'(cnt1) == int'(N) - 2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt1  <= '0;
      cnt2  <= '0;
      for (int i = 0; i < N; i++) begin
        key_q[i]  <= '0;
        data_q[i] <= '0;
        idx_q[i]  <= '0;
      end
    end else begin
      unique case (state)
        S_IDLE, S_DONE: begin
          state <= S_IDLE;
          if (start_i) begin
            for (int i = 0; i < N; i++) begin
              key_q[i]  <= keys_i[i];
              data_q[i] <= data_i[i];
              idx_q[i]  <= IDX_W'(i);
            end
            cnt1  <= '0;
            cnt2  <= '0;
            state <= (N > 1) ? S_SORT : S_DONE;
          end
        end
        S_SORT: begin
          if (swap) begin
            key_q[cnt2]         <= key_q[cnt2 + 1'b1];
            key_q[cnt2 + 1'b1]  <= key_q[cnt2];
            data_q[cnt2]        <= data_q[cnt2 + 1'b1];
            data_q[cnt2 + 1'b1] <= data_q[cnt2];
            idx_q[cnt2]         <= idx_q[cnt2 + 1'b1];
            idx_q[cnt2 + 1'b1]  <= idx_q[cnt2];
          end
          if (last_in_pass) begin
            cnt2 <= '0;
            cnt1 <= cnt1 + 1'b1;
            if (last_pass) state <= S_DONE;
          end else begin
            cnt2 <= cnt2 + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy_o = state == S_SORT;
  assign done_o = state == S_DONE;
  assign keys_o = key_q;
  assign data_o = data_q;
  assign idx_o  = idx_q;

  // A start while sorting would be ignored: the user must wait for done_o.
  assert property (@(posedge clk) disable iff (!rst_n) !(start_i && busy_o))
    else $error("bubble_sort_unit: start while busy");
endmodule
