// tb_abr_file: checks ABR programming, the "pair is set" rule, the region bounds
// (LLC size divided by the number of set pairs), clear, and the write-to-bound timing
// (bounds valid two clock edges after the write).
module tb_abr_file;
  import grasp_pkg::*;

  localparam longint LLC = 64'd16777216;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_is_end = 0, clear = 0;
  logic [0:0] wr_idx = '0;
  logic [VA_W-1:0] wr_data = '0;
  logic [1:0] pa_valid;
  logic [VA_W-1:0] start_q [2];
  logic [VA_W-1:0] end_q   [2];
  logic [VA_W:0]   hr_end  [2];
  logic [VA_W:0]   mr_end  [2];

  int checks = 0, failures = 0;

  abr_file #(.NUM_PA(2), .LLC_BYTES(LLC)) dut (.*);

  always #5 clk = ~clk;

  task automatic wr(input int idx, input bit is_end, input longint data);
    @(negedge clk);
    wr_en = 1; wr_idx = idx[0:0]; wr_is_end = is_end; wr_data = VA_W'(data);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic expect_state(input string what, input logic [1:0] v,
                              input longint s0, input longint r0, input longint s1, input longint r1);
    checks++;
    if (pa_valid !== v ||
        (v[0] && (hr_end[0] != (VA_W+1)'(s0 + r0) || mr_end[0] != (VA_W+1)'(s0 + 2*r0))) ||
        (v[1] && (hr_end[1] != (VA_W+1)'(s1 + r1) || mr_end[1] != (VA_W+1)'(s1 + 2*r1)))) begin
      failures++;
      $display("FAIL %s: valid %b hr0 %h mr0 %h hr1 %h mr1 %h", what, pa_valid, hr_end[0], mr_end[0], hr_end[1], mr_end[1]);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_state("after reset", 2'b00, 0, 0, 0, 0);
    wr(0, 0, 64'h7f00_0000_0000);
    @(negedge clk);
    expect_state("start only", 2'b00, 0, 0, 0, 0);
    wr(0, 1, 64'h7f00_3fff_ffff);
    // write edge + one edge for the derived bounds: the cycle after wr() returns
    checks++;
    if (pa_valid != 2'b00) begin failures++; $display("FAIL bounds visible too early"); end
    @(negedge clk);
    expect_state("one pair", 2'b01, 64'h7f00_0000_0000, LLC, 0, 0);
    wr(1, 0, 64'h1000_0000);
    wr(1, 1, 64'h1fff_ffff);
    repeat (2) @(negedge clk);
    expect_state("two pairs", 2'b11, 64'h7f00_0000_0000, LLC / 2, 64'h1000_0000, LLC / 2);
    checks++;
    if (start_q[1] != VA_W'(64'h1000_0000) || end_q[1] != VA_W'(64'h1fff_ffff)) begin
      failures++; $display("FAIL register readback");
    end
    // end below start: the pair is not used
    wr(1, 1, 64'h0fff_0000);
    repeat (2) @(negedge clk);
    checks++;
    if (pa_valid != 2'b01) begin failures++; $display("FAIL inverted pair accepted: %b", pa_valid); end
    // clear unsets everything
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    repeat (2) @(negedge clk);
    expect_state("cleared", 2'b00, 0, 0, 0, 0);
    // after clear, one new pair on index 1 alone gets the whole LLC
    wr(1, 0, 64'h2000);
    wr(1, 1, 64'h4000_0000);
    repeat (2) @(negedge clk);
    expect_state("pair 1 alone", 2'b10, 0, 0, 64'h2000, LLC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
