// lenet_conv_tb: the LeNet first convolution layer through the ordering
// extension in both data formats: fixed-8 values on a 128-bit link (the
// extension's default sizes) and float-32 values on a 512-bit link (DATA_W =
// 32), each in O0, O1 and O2. See lenet_conv_runner for what is checked.
module lenet_conv_tb;
  logic clk = 0, rst_n = 0;
  logic done8, done32;
  int c8, f8, c32, f32;

  lenet_conv_runner #(.DW(8))  u_fixed8  (.clk, .rst_n, .done_o(done8),  .checks_o(c8),  .failures_o(f8));
  lenet_conv_runner #(.DW(32)) u_float32 (.clk, .rst_n, .done_o(done32), .checks_o(c32), .failures_o(f32));

  always #5 clk = ~clk;

  initial begin
    repeat (20000000) @(posedge clk);
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
