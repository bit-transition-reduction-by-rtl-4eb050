// lenet_conv_runner: runs the first convolution layer of LeNet (32x32x1 image,
// six 5x5 kernels, 28x28 outputs each: 4704 tasks) through one ordering
// extension with DW-bit values, once per ordering mode (O0, O1, O2).
//
// Every task carries a 5x5 image window, one kernel and its bias. The image is
// synthetic: a bright disc on a dark, noisy background. The kernels are
// synthetic small weights around zero, as trained weights are. For DW = 8 the
// pixels are unsigned bytes and the weights signed bytes; for DW = 32 both are
// IEEE single-precision floats.
//
// A PE model receives each packet, puts inputs and weights back in place by
// their position index and checks that every operand arrives unchanged and
// that the convolution output equals the direct computation; for O1 it also
// checks the lane-by-lane sum that needs no index (fixed-8). The bit
// transitions on the link are compared with a model and printed for each mode;
// ordering must lower them. done_o rises when all three modes are through.
module lenet_conv_runner #(
  parameter int DW = 8
) (
  input  logic clk,
  input  logic rst_n,
  output logic done_o,
  output int   checks_o,
  output int   failures_o
);
  import ord_pkg::*;
  import ord_ref_pkg::*;

  localparam int N = 25, IMG = 32, K = 5, OUTW = IMG - K + 1, NK = 6;
  localparam int FW = 16 * DW;

  ord_mode_e mode = ORD_NONE;
  logic mem_valid = 0, mem_ready;
  logic [DW-1:0] mem_data = '0;
  logic flit_valid, flit_ready = 0, head, tail, sort_busy, bt_clear = 0;
  logic [15:0][DW-1:0] fdata;
  logic [15:0][4:0] fpos;
  ord_mode_e fmode;
  logic [39:0] bt_total;

  ordering_ext #(.DATA_W(DW)) dut (
    .clk, .rst_n, .mode_i(mode), .mem_valid_i(mem_valid), .mem_ready_o(mem_ready),
    .mem_data_i(mem_data), .flit_valid_o(flit_valid), .flit_ready_i(flit_ready),
    .flit_head_o(head), .flit_tail_o(tail), .flit_data_o(fdata), .flit_pos_o(fpos),
    .flit_mode_o(fmode), .sort_busy_o(sort_busy), .bt_clear_i(bt_clear),
    .bt_total_o(bt_total));

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

  // ------------------------------------------------------------- data set
  logic [DW-1:0] img [IMG][IMG];
  logic [DW-1:0] ker [NK][N];
  logic [DW-1:0] bias [NK];

  function automatic logic [DW-1:0] enc(real v, bit is_weight);
    if (DW == 32) return DW'($shortrealtobits(v));
    if (is_weight) return DW'($rtoi(v * 64.0));   // signed fixed point, 6 fraction bits
    return DW'($rtoi(v * 255.0));                 // unsigned pixel
  endfunction

  function automatic real dec(logic [DW-1:0] b, bit is_weight);
    if (DW == 32) return $bitstoshortreal(32'(b));
    if (is_weight) return real'(int'($signed(8'(b)))) / 64.0;
    return real'(int'(8'(b))) / 255.0;
  endfunction

  function automatic real small_weight();
    // sum of three uniforms: bell shaped, about +-0.5
    return (real'($urandom_range(0, 1000)) + real'($urandom_range(0, 1000)) +
            real'($urandom_range(0, 1000)) - 1500.0) / 3000.0;
  endfunction

  initial begin
    for (int y = 0; y < IMG; y++)
      for (int x = 0; x < IMG; x++) begin
        real v;
        v = ((x - 15) * (x - 15) + (y - 13) * (y - 13) < 80) ? 0.8 : 0.0;
        v += real'($urandom_range(0, 100)) / 1000.0;
        img[y][x] = enc(v, 0);
      end
    for (int k = 0; k < NK; k++) begin
      for (int i = 0; i < N; i++) ker[k][i] = enc(small_weight(), 1);
      bias[k] = enc(small_weight() / 4.0, 1);
    end
  end

  function automatic real conv_ref(int k, int oy, int ox);
    real s = dec(bias[k], 1);
    for (int i = 0; i < N; i++) s += dec(img[oy + i / K][ox + i % K], 0) * dec(ker[k][i], 1);
    return s;
  endfunction

  // --------------------------------------------------------- memory driver
  int task_k [$], task_oy [$], task_ox [$];

  task automatic send_layer(ord_mode_e m);
    for (int k = 0; k < NK; k++)
      for (int oy = 0; oy < OUTW; oy++)
        for (int ox = 0; ox < OUTW; ox++) begin
          task_k.push_back(k); task_oy.push_back(oy); task_ox.push_back(ox);
          for (int b = 0; b < 2 * N + 1; b++) begin
            @(negedge clk);
            mem_valid = 1;
            mode      = m;
            mem_data  = (b < N) ? img[oy + b / K][ox + b % K] : (b < 2 * N) ? ker[k][b - N] : bias[k];
            #1;
            while (!mem_ready) begin
              @(negedge clk);
              #1;
            end
          end
          @(negedge clk);
          mem_valid = 0;
        end
  endtask

  // ------------------------------------------------------------- PE model
  logic [FW-1:0] link_last = '0;
  longint bt_model = 0;
  int packets = 0;

  task automatic check_packet(logic [15:0][DW-1:0] d [4], logic [15:0][4:0] p [4], ord_mode_e m);
    int k, oy, ox;
    logic [DW-1:0] rin [N], rw [N];
    real s;
    k = task_k.pop_front(); oy = task_oy.pop_front(); ox = task_ox.pop_front();
    check(m == fmode, "packet mode");
    for (int s_ = 0; s_ < N; s_++) begin
      int f, l;
      f = (s_ < 24) ? s_ / 8 : 3;
      l = (s_ < 24) ? s_ % 8 : 0;
      rin[p[f][l]]   = d[f][l];
      rw[p[f][l + 8]] = d[f][l + 8];
      if (m == ORD_AFFILIATED) check(p[f][l] == p[f][l + 8], "O1 pair broken");
    end
    for (int i = 0; i < N; i++)
      check(rin[i] == img[oy + i / K][ox + i % K] && rw[i] == ker[k][i],
            $sformatf("operand %0d of task k%0d (%0d,%0d)", i, k, oy, ox));
    check(d[3][1] == bias[k], "bias");
    s = dec(d[3][1], 1);
    for (int i = 0; i < N; i++) s += dec(rin[i], 0) * dec(rw[i], 1);
    check(s == conv_ref(k, oy, ox), "convolution output");
    if (m == ORD_AFFILIATED && DW == 8) begin
      int is = 0, ir = int'($signed(8'(bias[k])));
      for (int f = 0; f < 4; f++)
        for (int l = 0; l < 8; l++)
          if (f < 3 || l == 0) is += int'(8'(d[f][l])) * int'($signed(8'(d[f][l + 8])));
      for (int i = 0; i < N; i++)
        ir += int'(8'(img[oy + i / K][ox + i % K])) * int'($signed(8'(ker[k][i])));
      check(is + int'($signed(8'(d[3][1]))) == ir, "O1 lane-by-lane output");
    end
  endtask

  initial begin : ni_side
    logic [15:0][DW-1:0] d [4];
    logic [15:0][4:0] p [4];
    logic [FW-1:0] flat;
    int f;
    f = 0;
    forever begin
      @(negedge clk);
      flit_ready = 1;
      #1;
      if (flit_valid) begin
        d[f] = fdata;
        p[f] = fpos;
        flat = fdata;
        for (int w = 0; w < FW / 32; w++)
          bt_model += ones(64'(flat[w * 32 +: 32] ^ link_last[w * 32 +: 32]), 32);
        link_last = flat;
        f++;
        if (f == 4) begin
          check_packet(d, p, fmode);
          f = 0;
          packets++;
        end
      end
    end
  end

  initial begin
    longint bt [3];
    done_o = 0;
    @(posedge rst_n);
    for (int mi = 0; mi < 3; mi++) begin
      int start;
      start = packets;
      @(negedge clk) bt_clear = 1;
      bt_model = 0;
      @(negedge clk) bt_clear = 0;
      send_layer(ord_mode_e'(2'(mi)));
      while (packets < start + NK * OUTW * OUTW) @(negedge clk);
      repeat (3) @(negedge clk);
      check(longint'(bt_total) == bt_model, $sformatf("bit transitions %0d, model %0d", bt_total, bt_model));
      bt[mi] = bt_model;
    end
    $display("LeNet conv1, %s, %0d packets per mode: BT O0 %0d, O1 %0d (-%0.2f%%), O2 %0d (-%0.2f%%)",
             DW == 8 ? "fixed-8, 128-bit link" : "float-32, 512-bit link", NK * OUTW * OUTW,
             bt[0], bt[1], 100.0 * (bt[0] - bt[1]) / bt[0], bt[2], 100.0 * (bt[0] - bt[2]) / bt[0]);
    check(bt[1] < bt[0], "affiliated ordering did not lower the bit transitions");
    check(bt[2] < bt[1], "separated ordering did not lower them below affiliated");
    done_o = 1;
  end
endmodule
