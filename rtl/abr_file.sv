// abr_file: the Address Bound Registers (ABRs) of one core's application context.
//
// Software holds one start/end pair per Property Array, written with the virtual
// address of the array's first and last byte while the graph application starts up.
// A pair counts as set once both of its registers have been written since the last
// clear; with no pair set, GRASP is off for this context and every access is
// classified Default.
//
// From the pairs the block derives, for each set pair, the two LLC-sized regions at
// the start of the array: the High Reuse Region [start, start+R) and the Moderate
// Reuse Region [start+R, start+2R), where R is the LLC capacity divided by the number
// of pairs that are set (both rules are the paper's). R is looked up in a small
// table of constants LLC_BYTES/n built at elaboration, so no divider is needed.
//
// Interface: a write port (wr_en, wr_idx, wr_is_end, wr_data) and a clear that unsets
// every pair (for a context switch or application exit: this design's choice, the
// paper only says ABRs are part of the application context). Outputs are registered.
// Timing: a register write is visible in start_q/end_q the next cycle; the derived
// region bounds and valid flags follow one cycle after that.
module abr_file
  import grasp_pkg::*;
#(
  parameter int unsigned NUM_PA    = 2,          // ABR pairs (paper: at most two arrays instrumented)
  parameter longint unsigned LLC_BYTES = 64'd16777216, // 16MB LLC
  parameter int unsigned IDX_W     = (NUM_PA > 1) ? $clog2(NUM_PA) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [IDX_W-1:0]     wr_idx,
  input  logic                 wr_is_end,   // 0: start register, 1: end register
  input  logic [VA_W-1:0]      wr_data,
  input  logic                 clear,
  output logic [NUM_PA-1:0]    pa_valid,    // pair set and start <= end
  output logic [VA_W-1:0]      start_q [NUM_PA],
  output logic [VA_W-1:0]      end_q   [NUM_PA],
  output logic [VA_W:0]        hr_end  [NUM_PA],  // exclusive end of High Reuse Region
  output logic [VA_W:0]        mr_end  [NUM_PA]   // exclusive end of Moderate Reuse Region
);

  localparam int unsigned CNT_W = $clog2(NUM_PA + 1);

  // R(n) = LLC_BYTES / n, n = number of pairs set; entry 0 is unused.
  function automatic logic [VA_W:0] region_of(input int unsigned n);
    if (n == 0) return '0;
    return (VA_W+1)'(LLC_BYTES / longint'(n));
  endfunction

  logic [NUM_PA-1:0] start_set, end_set;
  logic [CNT_W-1:0]  num_set;
  logic [VA_W:0]     region;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_set <= '0;
      end_set   <= '0;
      for (int i = 0; i < NUM_PA; i++) begin
        start_q[i] <= '0;
        end_q[i]   <= '0;
      end
    end else if (clear) begin
      start_set <= '0;
      end_set   <= '0;
    end else if (wr_en && (int'(wr_idx) < NUM_PA)) begin
      if (wr_is_end) begin
        end_q[wr_idx]   <= wr_data;
        end_set[wr_idx] <= 1'b1;
      end else begin
        start_q[wr_idx]   <= wr_data;
        start_set[wr_idx] <= 1'b1;
      end
    end
  end

  always_comb begin
    num_set = '0;
    for (int i = 0; i < NUM_PA; i++)
      num_set += CNT_W'(start_set[i] & end_set[i]);
    region = '0;
    for (int n = 1; n <= NUM_PA; n++)
      if (int'(num_set) == n) region = region_of(n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pa_valid <= '0;
      for (int i = 0; i < NUM_PA; i++) begin
        hr_end[i] <= '0;
        mr_end[i] <= '0;
      end
    end else begin
      for (int i = 0; i < NUM_PA; i++) begin
        pa_valid[i] <= start_set[i] & end_set[i] & ~clear & (start_q[i] <= end_q[i]);
        hr_end[i]   <= {1'b0, start_q[i]} + region;
        mr_end[i]   <= {1'b0, start_q[i]} + (region << 1);
      end
    end
  end

endmodule
