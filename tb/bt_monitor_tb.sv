// bt_monitor_tb: drives random 128-bit flits with random valids on four ports
// and checks the per-port and total bit-transition counts against a model
// that keeps the last flit of each port (starting from an all-zero link),
// including a clear in the middle.
module bt_monitor_tb;
  import ord_ref_pkg::*;

  localparam int P = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, clear = 0;
  logic [P-1:0] valid = 0;
  logic [P-1:0][127:0] flit = '0;
  logic [P-1:0][39:0] port_bt;
  logic [39:0] total_bt;

  bt_monitor #(.P(P)) dut (
    .clk, .rst_n, .clear_i(clear), .valid_i(valid), .flit_i(flit),
    .port_bt_o(port_bt), .total_bt_o(total_bt));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] last [P];
  longint want_port [P];
  longint want_total;

  initial begin
    foreach (last[p]) begin last[p] = '0; want_port[p] = 0; end
    want_total = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      clear = (c == 1000);
      if (clear) begin
        foreach (want_port[p]) want_port[p] = 0;
        want_total = 0;
      end
      for (int p = 0; p < P; p++) begin
        valid[p] = 1'($urandom_range(0, 2) != 0);
        flit[p]  = {$urandom, $urandom, $urandom, $urandom};
        if (c % 7 == 0) flit[p] = last[p];              // repeated flit, no transitions
        if (valid[p]) begin
          int n;
          n = ones(flit[p][63:0] ^ last[p][63:0], 64) +
              ones(flit[p][127:64] ^ last[p][127:64], 64);
          want_port[p] += n;
          want_total   += n;
        end
        if (valid[p]) last[p] = flit[p];
      end
      if (c % 50 == 49) begin
        // counts settle two cycles after the last flit
        @(negedge clk) valid = '0;
        @(negedge clk);
        @(negedge clk);
        for (int p = 0; p < P; p++) begin
          checks++;
          if (longint'(port_bt[p]) != want_port[p]) begin
            failures++;
            $display("FAIL cycle %0d port %0d: %0d want %0d", c, p, port_bt[p], want_port[p]);
          end
        end
        checks++;
        if (longint'(total_bt) != want_total) begin
          failures++;
          $display("FAIL cycle %0d total: %0d want %0d", c, total_bt, want_total);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
