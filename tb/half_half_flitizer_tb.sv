// half_half_flitizer_tb: offers random tasks and checks the four flits of each
// against the half-half layout (flits 0-2: inputs 8k..8k+7 | weights 8k..8k+7;
// flit 3: input 24, bias, zeros | weight 24, zeros), the per-lane index
// sideband, head/tail flags, one flit per cycle without back-pressure and
// holding under random back-pressure.
module half_half_flitizer_tb;
  localparam int N = 25;
  int checks = 0, failures = 0;

  logic       clk = 0, rst_n = 0;
  logic       task_valid = 0, task_ready;
  logic [7:0] t_in [N], t_w [N], t_bias;
  logic [4:0] t_in_idx [N], t_w_idx [N];
  logic       flit_valid, flit_ready = 0, head, tail;
  logic [15:0][7:0] fdata;
  logic [15:0][4:0] fpos;

  half_half_flitizer dut (
    .clk, .rst_n, .task_valid_i(task_valid), .task_ready_o(task_ready), .task_in_i(t_in),
    .task_w_i(t_w), .task_bias_i(t_bias), .task_in_idx_i(t_in_idx), .task_w_idx_i(t_w_idx),
    .flit_valid_o(flit_valid), .flit_ready_i(flit_ready), .flit_head_o(head),
    .flit_tail_o(tail), .flit_data_o(fdata), .flit_pos_o(fpos));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  // expected lane value and index, written out from the layout
  function automatic void expect_lane(int f, int l, output logic [7:0] v, output int p);
    v = 0; p = 0;
    if (f < 3) begin
      if (l < 8) begin v = t_in[f * 8 + l]; p = t_in_idx[f * 8 + l]; end
      else       begin v = t_w[f * 8 + l - 8]; p = t_w_idx[f * 8 + l - 8]; end
    end else begin
      if (l == 0)      begin v = t_in[24]; p = t_in_idx[24]; end
      else if (l == 1) v = t_bias;
      else if (l == 8) begin v = t_w[24]; p = t_w_idx[24]; end
    end
  endfunction

  task automatic run(bit stall);
    int f = 0, cycles = 0;
    for (int i = 0; i < N; i++) begin
      t_in[i] = 8'($urandom); t_w[i] = 8'($urandom);
      t_in_idx[i] = 5'($urandom_range(0, 24)); t_w_idx[i] = 5'($urandom_range(0, 24));
    end
    t_bias = 8'($urandom);
    @(negedge clk);
    task_valid = 1;
    while (f < 4 && cycles < 100) begin
      flit_ready = stall ? 1'($urandom_range(0, 1)) : 1'b1;
      #1;
      check(flit_valid, "no flit while a task is offered");
      check(head == (f == 0) && tail == (f == 3), $sformatf("head/tail of flit %0d", f));
      for (int l = 0; l < 16; l++) begin
        logic [7:0] v; int p;
        expect_lane(f, l, v, p);
        check(fdata[l] == v && int'(fpos[l]) == p,
              $sformatf("flit %0d lane %0d: %h/%0d want %h/%0d", f, l, fdata[l], fpos[l], v, p));
      end
      check(task_ready == (flit_ready && f == 3), "task_ready timing");
      @(negedge clk);
      cycles++;
      if (flit_ready) f++;
    end
    if (!stall) check(cycles == 4, $sformatf("task took %0d cycles, want 4", cycles));
    task_valid = 0;
    flit_ready = 0;
    #1;
    check(!flit_valid, "flit without a task");
  endtask

  initial begin
    foreach (t_in[i]) begin t_in[i] = 0; t_w[i] = 0; t_in_idx[i] = 0; t_w_idx[i] = 0; end
    t_bias = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) run(t % 2 == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
