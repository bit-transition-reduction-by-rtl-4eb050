// ordering_ext_tb: end-to-end test of the ordering extension at its default
// sizes (25-value tasks, 8-bit data, 16-lane flits).
//
// A memory model streams convolution tasks (25 inputs, 25 weights, bias) with
// random gaps; a network-interface model takes flits with random
// back-pressure. The same task sequence is sent in O0 (bypass), O1
// (affiliated) and O2 (separated) for two synthetic data sets: uniform random
// bytes, and "trained-like" data (small signed weights, non-negative small
// activations with many zeros). A last phase switches mode on every task.
// For every packet the testbench checks:
//   - 4 flits with head/tail, bias in tail lane 1, zero padding;
//   - every input and weight present exactly once, at the lane its position
//     index says, with its original value;
//   - O0: original order; O1: input and weight in the same lane share their
//     index; O1/O2: weights (and in O2 inputs) dealt in descending '1'-bit
//     count, column by column over flits 0-2;
//   - the dot product a PE computes from the packet equals the original one;
//   - the cycles from the last memory beat to the first flit (1/303/605).
// The bit-transition total is checked against a model of the link, and
// ordering must lower it: O1 below O0 and O2 below O1 for each data set.
// Each mechanism (bypass, affiliated and separated ordering, reordering,
// equal counts, memory stall, NI stall, mode switch) must occur at least once.
module ordering_ext_tb;
  import ord_pkg::*;
  import ord_ref_pkg::*;

  localparam int N = 25, NFLIT = 4, NT = 40;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  ord_mode_e mode = ORD_NONE;
  logic mem_valid = 0, mem_ready;
  logic [7:0] mem_data = 0;
  logic flit_valid, flit_ready = 0, head, tail;
  logic [15:0][7:0] fdata;
  logic [15:0][4:0] fpos;
  ord_mode_e fmode;
  logic sort_busy, bt_clear = 0;
  logic [39:0] bt_total;

  ordering_ext dut (
    .clk, .rst_n, .mode_i(mode), .mem_valid_i(mem_valid), .mem_ready_o(mem_ready),
    .mem_data_i(mem_data), .flit_valid_o(flit_valid), .flit_ready_i(flit_ready),
    .flit_head_o(head), .flit_tail_o(tail), .flit_data_o(fdata), .flit_pos_o(fpos),
    .flit_mode_o(fmode), .sort_busy_o(sort_busy), .bt_clear_i(bt_clear),
    .bt_total_o(bt_total));

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL %s", what);
    end
  endtask

  // ---------------------------------------------------------------- tasks
  typedef struct {
    logic [7:0] in [N];
    logic [7:0] w  [N];
    logic [7:0] bias;
    ord_mode_e  mode;
  } task_t;

  task_t tasks [NT];
  task_t sent_q [$];        // tasks in flight, in order
  int    last_beat_cyc [$]; // cycle of each task's last accepted beat

  function automatic int sdot(task_t t);
    int s = 0;
    for (int i = 0; i < N; i++) s += int'($signed(t.in[i])) * int'($signed(t.w[i]));
    return s;
  endfunction

  function automatic void make_tasks(bit trained);
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < N; i++) begin
        if (!trained) begin
          tasks[t].in[i] = 8'($urandom);
          tasks[t].w[i]  = 8'($urandom);
        end else begin
          tasks[t].in[i] = ($urandom_range(0, 2) == 0) ? 8'd0 : 8'($urandom_range(1, 40));
          tasks[t].w[i]  = 8'($urandom_range(0, 12) + $urandom_range(0, 12) - 12);
        end
        tasks[t].bias = 8'($urandom);
      end
  endfunction

  // ------------------------------------------------------- mechanism counts
  int n_bypass = 0, n_affil = 0, n_sep = 0, n_reordered = 0, n_ties = 0;
  int n_mem_stall = 0, n_ni_stall = 0, n_switch = 0;

  // ------------------------------------------------------------- memory side
  task automatic send_task(task_t t);
    for (int b = 0; b < 2 * N + 1; b++) begin
      @(negedge clk);
      while ($urandom_range(0, 4) == 0) begin
        mem_valid = 0;
        if (mem_ready) n_mem_stall++;
        @(negedge clk);
      end
      mem_valid = 1;
      mode      = t.mode;
      mem_data  = (b < N) ? t.in[b] : (b < 2 * N) ? t.w[b - N] : t.bias;
      #1;
      if (b == 0) sent_q.push_back(t);
      while (!mem_ready) begin
        @(negedge clk);
        #1;
      end
    end
    last_beat_cyc.push_back(cyc);
    @(negedge clk);
    mem_valid = 0;
  endtask

  // ----------------------------------------------------------- NI side model
  logic [127:0] link_last = '0;
  longint bt_model = 0;
  int packets_done = 0;
  ord_mode_e prev_mode = ORD_NONE;
  bit first_packet = 1;

  task automatic check_packet(logic [15:0][7:0] d [NFLIT], logic [15:0][4:0] p [NFLIT],
                              ord_mode_e m, int lat);
    task_t t;
    int slot[], seen_in[], seen_w[], dot, want_lat;
    logic [7:0] rin [N], rw [N];   // operands put back in place by their index
    bit reordered = 0;
    t = sent_q.pop_front();
    ref_slots(N, 8, slot);
    seen_in = new[N]; seen_w = new[N];
    check(m == t.mode, "packet mode");
    want_lat = (t.mode == ORD_NONE) ? 1 : (t.mode == ORD_AFFILIATED) ? 303 : 605;
    check(lat == want_lat, $sformatf("mode %0d latency %0d want %0d", t.mode, lat, want_lat));
    check(d[3][1] == t.bias, "bias in tail lane 1");
    for (int l = 2; l < 16; l++)
      if (l != 8) check(d[3][l] == 0 && p[3][l] == 0, $sformatf("tail lane %0d not zero", l));
    dot = 0;
    for (int s = 0; s < N; s++) begin
      int f, li, pi, pw;
      f  = (s < 24) ? s / 8 : 3;
      li = (s < 24) ? s % 8 : 0;
      pi = int'(p[f][li]);
      pw = int'(p[f][li + 8]);
      check(d[f][li] == t.in[pi] && d[f][li + 8] == t.w[pw],
            $sformatf("slot %0d value does not match its index", s));
      seen_in[pi]++; seen_w[pw]++;
      rin[pi] = d[f][li];
      rw[pw]  = d[f][li + 8];
      if (t.mode == ORD_NONE) check(pi == s && pw == s, "O0 changed the order");
      if (t.mode == ORD_AFFILIATED) check(pi == pw, "O1 broke an input-weight pair");
      if (pi != s || pw != s) reordered = 1;
    end
    for (int i = 0; i < N; i++) check(seen_in[i] == 1 && seen_w[i] == 1, "value lost or doubled");
    // a PE pairing the operands by their indices
    for (int i = 0; i < N; i++) dot += int'($signed(rin[i])) * int'($signed(rw[i]));
    check(dot == sdot(t), "dot product changed");
    if (t.mode == ORD_AFFILIATED) begin
      // a PE that multiplies lane by lane without any index gets the same sum
      int lane_dot = 0;
      for (int f = 0; f < NFLIT; f++)
        for (int l = 0; l < 8; l++)
          if (f < 3 || l == 0)
            lane_dot += int'($signed(d[f][l])) * int'($signed(d[f][l + 8]));
      check(lane_dot == sdot(t), "O1 lane-by-lane dot product changed");
    end
    if (t.mode != ORD_NONE) begin
      for (int r = 1; r < N; r++) begin
        int sa, sb, ka, kb;
        sa = slot[r - 1]; sb = slot[r];
        ka = ones(d[(sa < 24) ? sa / 8 : 3][(sa < 24) ? sa % 8 + 8 : 8], 8);
        kb = ones(d[(sb < 24) ? sb / 8 : 3][(sb < 24) ? sb % 8 + 8 : 8], 8);
        check(ka >= kb, $sformatf("weights rank %0d/%0d not descending", r - 1, r));
        if (ka == kb) n_ties++;
        if (t.mode == ORD_SEPARATED) begin
          ka = ones(d[(sa < 24) ? sa / 8 : 3][(sa < 24) ? sa % 8 : 0], 8);
          kb = ones(d[(sb < 24) ? sb / 8 : 3][(sb < 24) ? sb % 8 : 0], 8);
          check(ka >= kb, $sformatf("inputs rank %0d/%0d not descending", r - 1, r));
        end
      end
    end
    if (reordered) n_reordered++;
    case (t.mode)
      ORD_NONE:       n_bypass++;
      ORD_AFFILIATED: n_affil++;
      default:        n_sep++;
    endcase
    if (!first_packet && t.mode != prev_mode) n_switch++;
    prev_mode = t.mode;
    first_packet = 0;
  endtask

  initial begin : ni_side
    logic [15:0][7:0] d [NFLIT];
    logic [15:0][4:0] p [NFLIT];
    int f = 0, first_valid_cyc = -1;
    forever begin
      @(negedge clk);
      flit_ready = 1'($urandom_range(0, 3) != 0);
      #1;
      if (flit_valid && first_valid_cyc < 0) first_valid_cyc = cyc;
      if (flit_valid && !flit_ready) n_ni_stall++;
      if (flit_valid && flit_ready) begin
        check(head == (f == 0) && tail == (f == NFLIT - 1), "head/tail flags");
        d[f] = fdata;
        p[f] = fpos;
        for (int w = 0; w < 4; w++)
          bt_model += ones(fdata[w * 2 +: 2] ^ link_last[w * 16 +: 16], 16) +
                      ones(fdata[8 + w * 2 +: 2] ^ link_last[64 + w * 16 +: 16], 16);
        link_last = fdata;
        f++;
        if (f == NFLIT) begin
          check_packet(d, p, fmode, first_valid_cyc - last_beat_cyc.pop_front());
          f = 0;
          first_valid_cyc = -1;
          packets_done++;
        end
      end
    end
  end

  // --------------------------------------------------------------- phases
  task automatic run_phase(ord_mode_e m, bit mixed, output longint bt);
    int start = packets_done;
    @(negedge clk) bt_clear = 1;
    bt_model = 0;
    @(negedge clk) bt_clear = 0;
    for (int t = 0; t < NT; t++) begin
      tasks[t].mode = mixed ? ord_mode_e'(2'($urandom_range(0, 2))) : m;
      send_task(tasks[t]);
    end
    while (packets_done < start + NT) @(negedge clk);
    repeat (3) @(negedge clk);
    check(longint'(bt_total) == bt_model,
          $sformatf("bit transitions %0d, link model %0d", bt_total, bt_model));
    bt = bt_model;
  endtask

  initial begin
    longint bt0, bt1, bt2, btm;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int set = 0; set < 2; set++) begin
      make_tasks(set == 1);
      run_phase(ORD_NONE, 0, bt0);
      run_phase(ORD_AFFILIATED, 0, bt1);
      run_phase(ORD_SEPARATED, 0, bt2);
      $display("%s data, %0d tasks: BT O0 %0d, O1 %0d (-%0.2f%%), O2 %0d (-%0.2f%%)",
               set ? "trained-like" : "random", NT, bt0, bt1, 100.0 * (bt0 - bt1) / bt0,
               bt2, 100.0 * (bt0 - bt2) / bt0);
      check(bt1 < bt0, "affiliated ordering did not lower the bit transitions");
      check(bt2 < bt1, "separated ordering did not lower them below affiliated");
    end
    run_phase(ORD_NONE, 1, btm);
    $display("mechanisms: bypass %0d affiliated %0d separated %0d reordered %0d ties %0d",
             n_bypass, n_affil, n_sep, n_reordered, n_ties);
    $display("            memory stalls %0d NI stalls %0d mode switches %0d",
             n_mem_stall, n_ni_stall, n_switch);
    check(n_bypass > 0,    "no bypass (O0) packet");
    check(n_affil > 0,     "no affiliated packet");
    check(n_sep > 0,       "no separated packet");
    check(n_reordered > 0, "no packet was reordered");
    check(n_ties > 0,      "no equal counts met");
    check(n_mem_stall > 0, "no memory stall");
    check(n_ni_stall > 0,  "no NI stall");
    check(n_switch > 2,    "too few mode switches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
