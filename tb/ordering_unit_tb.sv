// ordering_unit_tb: feeds random 8-bit values (plus all-zero and all-one
// cases) to the 25-lane ordering unit and checks that the output is the
// stable descending order by '1'-bit count, with correct counts and original
// indices, and that done comes 301 cycles after start.
module ordering_unit_tb;
  import ord_ref_pkg::*;

  localparam int N = 25;
  int checks = 0, failures = 0;

  logic       clk = 0, rst_n = 0, start = 0;
  logic [7:0] din  [N];
  logic       busy, done;
  logic [7:0] dout [N];
  logic [3:0] cnt  [N];
  logic [4:0] idx  [N];

  ordering_unit dut (
    .clk, .rst_n, .start_i(start), .data_unsorted_in(din), .busy_o(busy),
    .done_o(done), .data_sorted_out(dout), .count_sorted_out(cnt), .idx_sorted_out(idx));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int pattern);
    int key[], order[], cycles;
    logic [7:0] v [N];
    key = new[N];
    for (int i = 0; i < N; i++) begin
      v[i] = (pattern == 0) ? 8'h00 : (pattern == 1) ? 8'hff : 8'($urandom);
      key[i] = ones(v[i], 8);
      din[i] = v[i];
    end
    ref_sort(key, order);
    @(negedge clk) start = 1;
    @(negedge clk) begin
      start = 0;
      foreach (din[i]) din[i] = 8'($urandom);  // inputs are sampled on start only
    end
    cycles = 1;
    while (!done && cycles < 1000) begin
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (cycles != N * (N - 1) / 2 + 1) begin
      failures++;
      $display("FAIL run %0d: done after %0d cycles", pattern, cycles);
    end
    for (int r = 0; r < N; r++) begin
      checks++;
      if (dout[r] != v[order[r]] || int'(cnt[r]) != key[order[r]] ||
          int'(idx[r]) != order[r]) begin
        failures++;
        $display("FAIL run %0d rank %0d: %h/%0d/%0d want %h/%0d/%0d", pattern, r,
                 dout[r], cnt[r], idx[r], v[order[r]], key[order[r]], order[r]);
      end
    end
  endtask

  initial begin
    foreach (din[i]) din[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 10; p++) run(p);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
