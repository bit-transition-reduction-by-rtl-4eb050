// prefetch_buffer_tb: loads tasks of 25 inputs, 25 weights and a bias through
// the memory stream (with random stalls), lets the buffer run them through an
// ordering unit in each mode and checks the offered task slot by slot:
//   O0: everything in its original place, indices identity;
//   O1: weights by descending count dealt column-major, each input next to
//       the weight it came with;
//   O2: weights and inputs each ordered by their own counts.
// It also checks the cycles from the last beat to task valid (1, 303, 605)
// and holds the task with task_ready low for a while.
module prefetch_buffer_tb;
  import ord_pkg::*;
  import ord_ref_pkg::*;

  localparam int N = 25;
  int checks = 0, failures = 0;

  logic       clk = 0, rst_n = 0;
  ord_mode_e  mode;
  logic       mem_valid = 0, mem_ready;
  logic [7:0] mem_data = 0;
  logic       ou_start, ou_done, ou_busy;
  logic [7:0] ou_data [N], ou_sorted [N];
  logic [3:0] ou_count [N];
  logic [4:0] ou_idx [N];
  logic       task_valid, task_ready = 0;
  ord_mode_e  task_mode;
  logic [7:0] t_in [N], t_w [N], t_bias;
  logic [4:0] t_in_idx [N], t_w_idx [N];

  prefetch_buffer dut (
    .clk, .rst_n, .mode_i(mode), .mem_valid_i(mem_valid), .mem_ready_o(mem_ready),
    .mem_data_i(mem_data), .ou_start_o(ou_start), .ou_data_o(ou_data), .ou_done_i(ou_done),
    .ou_sorted_i(ou_sorted), .ou_idx_i(ou_idx), .task_valid_o(task_valid),
    .task_ready_i(task_ready), .task_mode_o(task_mode), .task_in_o(t_in), .task_w_o(t_w),
    .task_bias_o(t_bias), .task_in_idx_o(t_in_idx), .task_w_idx_o(t_w_idx));

  ordering_unit u_ou (
    .clk, .rst_n, .start_i(ou_start), .data_unsorted_in(ou_data), .busy_o(ou_busy),
    .done_o(ou_done), .data_sorted_out(ou_sorted), .count_sorted_out(ou_count),
    .idx_sorted_out(ou_idx));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run(ord_mode_e m);
    logic [7:0] vin [N], vw [N], vb;
    int kin[], kw[], oin[], ow[], slot[], cycles, want_lat;
    kin = new[N]; kw = new[N];
    for (int i = 0; i < N; i++) begin
      vin[i] = 8'($urandom); vw[i] = 8'($urandom);
      kin[i] = ones(vin[i], 8); kw[i] = ones(vw[i], 8);
    end
    vb = 8'($urandom);
    ref_sort(kin, oin);
    ref_sort(kw, ow);
    ref_slots(N, 8, slot);
    // memory stream with random gaps
    for (int b = 0; b < 2 * N + 1; b++) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin
        mem_valid = 0;
        mode = ord_mode_e'(2'($urandom_range(0, 2)));  // ignored after the first beat
        @(negedge clk);
      end
      mem_valid = 1;
      mode      = (b == 0) ? m : ord_mode_e'(2'($urandom_range(0, 2)));
      mem_data  = (b < N) ? vin[b] : (b < 2 * N) ? vw[b - N] : vb;
      check(mem_ready, "memory beat not accepted while loading");
    end
    @(negedge clk);
    mem_valid = 0;
    cycles = 1;
    while (!task_valid && cycles < 2000) begin
      check(!mem_ready, "reads memory while ordering");
      @(negedge clk);
      cycles++;
    end
    want_lat = (m == ORD_NONE) ? 1 : (m == ORD_AFFILIATED) ? 303 : 605;
    check(cycles == want_lat, $sformatf("mode %0d: task valid after %0d cycles, want %0d",
                                        m, cycles, want_lat));
    check(task_mode == m, "task mode");
    check(t_bias == vb, "bias");
    for (int r = 0; r < N; r++) begin
      int s, wi, ii;
      s  = (m == ORD_NONE) ? r : slot[r];
      wi = (m == ORD_NONE) ? r : ow[r];
      ii = (m == ORD_NONE) ? r : (m == ORD_AFFILIATED) ? ow[r] : oin[r];
      check(t_w[s] == vw[wi] && int'(t_w_idx[s]) == wi,
            $sformatf("mode %0d weight rank %0d slot %0d: %h/%0d want %h/%0d",
                      m, r, s, t_w[s], t_w_idx[s], vw[wi], wi));
      check(t_in[s] == vin[ii] && int'(t_in_idx[s]) == ii,
            $sformatf("mode %0d input rank %0d slot %0d: %h/%0d want %h/%0d",
                      m, r, s, t_in[s], t_in_idx[s], vin[ii], ii));
    end
    // hold, then take
    repeat ($urandom_range(0, 5)) begin
      @(negedge clk);
      check(task_valid, "task dropped while not taken");
    end
    task_ready = 1;
    @(negedge clk);
    task_ready = 0;
    check(!task_valid && mem_ready, "buffer not back to loading after the task was taken");
  endtask

  initial begin
    mode = ORD_NONE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) run(ord_mode_e'(2'(t % 3)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
