// no_noc_runner: weight-only bit-transition study on the ordering unit, for
// DW-bit values (8: fixed-8, 32: float-32).
//
// Each packet is one 5x5 kernel (25 weights) padded with 7 zero words to
// 4 flits of 8 weights. Baseline: weights in kernel order, row by row, zeros
// last. Ordered: the ordering unit sorts the 25 weights by descending '1'-bit
// count and the testbench deals the ranks column by column over the 4 flits
// (rank 0 to flit 0 lane 0, rank 1 to flit 1 lane 0, ...), the 7 zeros taking
// the last ranks. Bit transitions are counted between the consecutive flits of
// each packet. Two weight sets are used: "random" (uniformly initialised) and
// "trained-like" (bell-shaped around zero); both are synthetic.
//
// Checks: every sort is a stable descending permutation of the kernel and ends
// 301 cycles after start; over all packets, ordering lowers the transitions.
module no_noc_runner #(
  parameter int DW = 8,
  parameter int PACKETS = 10000
) (
  input  logic clk,
  input  logic rst_n,
  output logic done_o,
  output int   checks_o,
  output int   failures_o
);
  import ord_ref_pkg::*;

  localparam int N = 25, LANES = 8, NF = 4;
  localparam int CW = $clog2(DW + 1);

  logic          start = 0, busy, done;
  logic [DW-1:0] din [N], dout [N];
  logic [CW-1:0] cnt [N];
  logic [4:0]    idx [N];

  ordering_unit #(.N(N), .DATA_W(DW)) dut (
    .clk, .rst_n, .start_i(start), .data_unsorted_in(din), .busy_o(busy), .done_o(done),
    .data_sorted_out(dout), .count_sorted_out(cnt), .idx_sorted_out(idx));

  int checks = 0, failures = 0;
  assign checks_o = checks;
  assign failures_o = failures;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL DW=%0d %s", DW, what);
    end
  endtask

  function automatic real bell();
    return (real'($urandom_range(0, 1000)) + real'($urandom_range(0, 1000)) +
            real'($urandom_range(0, 1000)) - 1500.0) / 1500.0;   // about -1..1
  endfunction

  function automatic logic [DW-1:0] weight(bit trained);
    real v;
    v = trained ? 0.1 * bell() : 0.2 * (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0;
    if (DW == 32) return DW'($shortrealtobits(v));
    return DW'($rtoi(v * (trained ? 320.0 : 635.0)));   // int8, full range for random
  endfunction

  function automatic int flit_bt(logic [DW-1:0] a [NF][LANES], int f);
    int n = 0;
    for (int l = 0; l < LANES; l++) n += ones(64'(a[f][l] ^ a[f + 1][l]), DW);
    return n;
  endfunction

  initial begin
    longint bt_base [2], bt_ord [2];
    done_o = 0;
    foreach (din[i]) din[i] = '0;
    @(posedge rst_n);
    for (int set = 0; set < 2; set++) begin
      bt_base[set] = 0;
      bt_ord[set] = 0;
      for (int pk = 0; pk < PACKETS; pk++) begin
        logic [DW-1:0] w [N];
        logic [DW-1:0] base [NF][LANES], ord [NF][LANES];
        int key[], order[], cycles;
        key = new[N];
        for (int i = 0; i < N; i++) begin
          w[i] = weight(set == 1);
          key[i] = ones(64'(w[i]), DW);
          din[i] = w[i];
        end
        ref_sort(key, order);
        @(negedge clk) start = 1;
        @(negedge clk) start = 0;
        cycles = 1;
        while (!done && cycles < 1000) begin
          @(negedge clk);
          cycles++;
        end
        check(cycles == N * (N - 1) / 2 + 1, $sformatf("sort took %0d cycles", cycles));
        for (int r = 0; r < N; r++)
          check(dout[r] == w[order[r]] && int'(idx[r]) == order[r],
                $sformatf("packet %0d rank %0d", pk, r));
        for (int s = 0; s < NF * LANES; s++) begin
          base[s / LANES][s % LANES] = (s < N) ? w[s] : '0;
          // rank s goes to flit s mod NF, lane s / NF
          ord[s % NF][s / NF] = (s < N) ? dout[s] : '0;
        end
        for (int f = 0; f < NF - 1; f++) begin
          bt_base[set] += flit_bt(base, f);
          bt_ord[set]  += flit_bt(ord, f);
        end
      end
      $display("no NoC, %s %s weights, %0d packets, flit %0dx%0d bit: BT per flit %0.2f baseline, %0.2f ordered (-%0.2f%%)",
               DW == 8 ? "fixed-8" : "float-32", set ? "trained-like" : "random", PACKETS, DW, LANES,
               real'(bt_base[set]) / (PACKETS * (NF - 1)), real'(bt_ord[set]) / (PACKETS * (NF - 1)),
               100.0 * real'(bt_base[set] - bt_ord[set]) / real'(bt_base[set]));
      check(bt_ord[set] < bt_base[set], "ordering did not lower the bit transitions");
    end
    done_o = 1;
  end
endmodule
