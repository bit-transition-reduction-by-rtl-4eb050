// popcount_swar: '1'-bit counter for one data word.
//
// Counts the '1' bits of data_i with the classic SWAR (SIMD within a register)
// method: in stage s, neighbouring fields of 2^s bits are added in parallel
// inside the word, so that after log2(DATA_W) stages the lowest field holds
// the count. For 8-bit data this is the well-known sequence
//   x = x - ((x >> 1) & 0x55);  x = (x & 0x33) + ((x >> 2) & 0x33);
//   x = (x + (x >> 4)) & 0x0F;
// written here in its all-additions form. Purely combinational, no latency.
//
// The use of SWAR pop-count units, one per value, and the 4-bit count for 8-bit
// data follow the ordering-unit description. DATA_W must be a power of two.
module popcount_swar #(
  parameter int unsigned DATA_W = 8
) (
  input  logic [DATA_W-1:0]          data_i,
  output logic [$clog2(DATA_W+1)-1:0] count_o
);
  localparam int unsigned STAGES = $clog2(DATA_W);

  // Mask with the low 2^s bits of every 2^(s+1)-bit field set.
  function automatic logic [DATA_W-1:0] field_mask(int unsigned s);
    logic [DATA_W-1:0] m;
    for (int unsigned b = 0; b < DATA_W; b++)
      m[b] = ((b >> s) & 1) == 0;
    return m;
  endfunction

  // Stage s holds the sums of fields of 2^(s+1) bits.
  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    logic [DATA_W-1:0] prev, sum;
    if (s == 0) begin : g_first
      assign prev = data_i;
    end else begin : g_next
      assign prev = g_stage[s-1].sum;
    end
    assign sum = (prev & field_mask(s)) + ((prev >> (1 << s)) & field_mask(s));
  end

  assign count_o = g_stage[STAGES-1].sum[$clog2(DATA_W+1)-1:0];

  initial assert (DATA_W >= 2 && (DATA_W & (DATA_W - 1)) == 0)
    else $error("popcount_swar: DATA_W must be a power of two");
endmodule
