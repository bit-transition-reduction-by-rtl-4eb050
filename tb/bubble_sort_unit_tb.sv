// bubble_sort_unit_tb: sorts random, all-equal, ascending and descending key
// sets of 25 pairs and checks keys, data and original indices against a stable
// descending reference sort, and that done comes N(N-1)/2 + 1 = 301 cycles
// after start.
module bubble_sort_unit_tb;
  import ord_ref_pkg::*;

  localparam int N = 25;
  int checks = 0, failures = 0;

  logic       clk = 0, rst_n = 0, start = 0;
  logic [3:0] keys_i [N];
  logic [7:0] data_i [N];
  logic       busy, done;
  logic [3:0] keys_o [N];
  logic [7:0] data_o [N];
  logic [4:0] idx_o  [N];

  bubble_sort_unit #(.N(N), .KEY_W(4), .DATA_W(8)) dut (
    .clk, .rst_n, .start_i(start), .keys_i, .data_i,
    .busy_o(busy), .done_o(done), .keys_o, .data_o, .idx_o);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int pattern);
    int key[], order[], cycles;
    key = new[N];
    for (int i = 0; i < N; i++) begin
      case (pattern)
        0: key[i] = 5;
        1: key[i] = i % 9;
        2: key[i] = 8 - (i % 9);
        default: key[i] = $urandom_range(0, 8);
      endcase
      keys_i[i] = 4'(key[i]);
      data_i[i] = 8'($urandom);
    end
    ref_sort(key, order);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 1;
    while (!done && cycles < 1000) begin
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (cycles != N * (N - 1) / 2 + 1) begin
      failures++;
      $display("FAIL pattern %0d: done after %0d cycles", pattern, cycles);
    end
    for (int r = 0; r < N; r++) begin
      checks++;
      if (int'(idx_o[r]) != order[r] || int'(keys_o[r]) != key[order[r]] ||
          data_o[r] != data_i[order[r]]) begin
        failures++;
        $display("FAIL pattern %0d rank %0d: idx %0d key %0d data %h, want idx %0d key %0d data %h",
                 pattern, r, idx_o[r], keys_o[r], data_o[r], order[r], key[order[r]],
                 data_i[order[r]]);
      end
    end
  endtask

  initial begin
    foreach (keys_i[i]) begin keys_i[i] = '0; data_i[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 12; p++) run(p);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
