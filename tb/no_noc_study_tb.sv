// no_noc_study_tb: the weight-only bit-transition study without a network,
// 10,000 packets per weight set, on a fixed-8 and a float-32 ordering unit.
// See no_noc_runner for what is measured and checked.
module no_noc_study_tb;
  logic clk = 0, rst_n = 0;
  logic done8, done32;
  int c8, f8, c32, f32;

  no_noc_runner #(.DW(8))  u_fixed8  (.clk, .rst_n, .done_o(done8),  .checks_o(c8),  .failures_o(f8));
  no_noc_runner #(.DW(32)) u_float32 (.clk, .rst_n, .done_o(done32), .checks_o(c32), .failures_o(f32));

  always #5 clk = ~clk;

  initial begin
    repeat (10000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c32, f8 + f32 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done8 && done32);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c32, f8 + f32);
    $finish;
  end
endmodule
