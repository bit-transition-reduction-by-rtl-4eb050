// bt_monitor: bit-transition recorder for P link output ports.
//
// Every monitored port has two flit registers. When a flit leaves the port
// (valid_i), it is written to Flit_current and the flit that was there moves to
// Flit_pre. In the next cycle a Count Flip stage counts the bits that differ
// between the two (pop-count of Flit_pre XOR Flit_current) and the NoC bit
// transition sum adds the counts of all ports to a running total. Per-port
// running totals are kept as well. clear_i zeroes the totals: flits handed in
// from the clear cycle on are counted, earlier ones are not. The flit
// registers keep their contents through a clear, as the wires of a link do.
//
// Timing: a flit handed in on cycle t is counted in port_bt_o and total_bt_o
// from cycle t+2. The first flit of a port is compared with an all-zero link.
//
// Flit_pre / Flit_current, Count Flip and one sum over all output ports follow
// the paper's bit-flipping recording scheme, which serves evaluation only; the
// zero reset value of the link, the pipeline and the counter widths are this
// design's own. FLIT_W must be a power of two (SWAR pop-count).
module bt_monitor #(
  parameter int unsigned P       = 1,
  parameter int unsigned FLIT_W  = 128,
  parameter int unsigned TOTAL_W = 40,
  localparam int unsigned FLIP_W = $clog2(FLIT_W + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear_i,
  input  logic [P-1:0]                  valid_i,
  input  logic [P-1:0][FLIT_W-1:0]      flit_i,
  output logic [P-1:0][TOTAL_W-1:0]     port_bt_o,
  output logic [TOTAL_W-1:0]            total_bt_o
);
  logic [P-1:0][FLIT_W-1:0] flit_pre, flit_cur;
  logic [P-1:0]             fresh;           // Flit_current newly written
  logic [FLIP_W-1:0]        flips [P];       // Count Flip outputs

  for (genvar p = 0; p < P; p++) begin : g_port
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        flit_pre[p] <= '0;
        flit_cur[p] <= '0;
        fresh[p]    <= 1'b0;
      end else begin
        fresh[p] <= valid_i[p];
        if (valid_i[p]) begin
          flit_pre[p] <= flit_cur[p];
          flit_cur[p] <= flit_i[p];
        end
      end
    end

    popcount_swar #(.DATA_W(FLIT_W)) u_count_flip (
      .data_i (flit_pre[p] ^ flit_cur[p]),
      .count_o(flips[p])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)         port_bt_o[p] <= '0;
      else if (clear_i)   port_bt_o[p] <= '0;
      else if (fresh[p])  port_bt_o[p] <= port_bt_o[p] + TOTAL_W'(flips[p]);
    end
  end

  // NoC bit transition sum
  logic [TOTAL_W-1:0] cycle_sum;
  always_comb begin
    cycle_sum = '0;
    for (int p = 0; p < P; p++)
      if (fresh[p]) cycle_sum = cycle_sum + TOTAL_W'(flips[p]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       total_bt_o <= '0;
    else if (clear_i) total_bt_o <= '0;
    else              total_bt_o <= total_bt_o + cycle_sum;
  end
endmodule
