// popcount_swar_tb: checks the SWAR pop-count for every 8-bit value and for
// random 32-bit and 128-bit words against a bit-by-bit count.
module popcount_swar_tb;
  import ord_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [7:0]   d8;   logic [3:0] c8;
  logic [31:0]  d32;  logic [5:0] c32;
  logic [127:0] d128; logic [7:0] c128;

  popcount_swar #(.DATA_W(8))   dut8   (.data_i(d8),   .count_o(c8));
  popcount_swar #(.DATA_W(32))  dut32  (.data_i(d32),  .count_o(c32));
  popcount_swar #(.DATA_W(128)) dut128 (.data_i(d128), .count_o(c128));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      d8 = 8'(v);
      #1;
      checks++;
      if (int'(c8) != ones(v, 8)) begin
        failures++;
        $display("FAIL 8-bit %02h: got %0d", v, c8);
      end
    end
    for (int t = 0; t < 500; t++) begin
      d32  = $urandom;
      d128 = {$urandom, $urandom, $urandom, $urandom};
      if (t == 0) begin d32 = '1; d128 = '1; end
      #1;
      checks += 2;
      if (int'(c32) != ones(d32, 32)) begin
        failures++;
        $display("FAIL 32-bit %h: got %0d", d32, c32);
      end
      if (int'(c128) != ones(d128[63:0], 64) + ones(d128[127:64], 64)) begin
        failures++;
        $display("FAIL 128-bit %h: got %0d", d128, c128);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
