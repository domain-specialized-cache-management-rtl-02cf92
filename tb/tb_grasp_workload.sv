// tb_grasp_workload: one pull-based graph iteration (the PageRank-style kernel that
// dominates the evaluated applications) run through grasp_top twice: once with the
// Property Array bounds in the ABRs (GRASP) and once with the ABRs left unset
// (every hint Default, i.e. the plain DRRIP baseline), on the same access trace.
//
// The graph is generated here, already in degree order as a skew-aware reordering
// would leave it: every vertex has 8 in-edges, and the source of each edge is drawn
// as floor(V * u^4) (u uniform), so low vertex IDs have by far the most out-edges,
// i.e. the most reuse of their Property Array element. A second, no-skew graph draws
// sources uniformly. Four cores take contiguous quarters of the destination vertices.
// Per destination vertex the trace holds: the Vertex Array entry and the Edge Array
// entries (one access per 64-byte block, as an L1 would filter a stream), one read
// of the 16-byte Property Array element of each in-neighbour, and the write of the
// vertex's own element (again once per block).
//
// Checks: hints match the region rules; on the skewed graph GRASP misses less than
// the baseline; on the no-skew graph GRASP misses at most 3% more. Reports misses by
// hint class. LLC here: 4 slices x 16 sets x 16 ways = 64KB; Property Array 512KB.
module tb_grasp_workload;
  import grasp_pkg::*;

  localparam int NC = 4, NS = 4, WAYS = 16, SETS = 16, LAT = 10;
  localparam longint LLC = longint'(NS) * SETS * WAYS * 64;
  localparam int V = 32768, DEG = 8, ELEM = 16;
  localparam longint PROP = 64'h0000_1000_0000;
  localparam longint VTX  = 64'h0000_2000_0000;
  localparam longint EDGE = 64'h0000_3000_0000;

  logic clk = 0, rst_n = 0;
  logic                 abr_wr_en     [NC];
  logic [0:0]           abr_wr_idx    [NC];
  logic                 abr_wr_is_end [NC];
  logic [VA_W-1:0]      abr_wr_data   [NC];
  logic                 abr_clear     [NC];
  logic                 acc_valid     [NC];
  logic                 acc_ready     [NC];
  logic [VA_W-1:0]      acc_va        [NC];
  logic [PA_W-1:0]      acc_pa        [NC];
  logic                 resp_valid    [NC];
  logic                 resp_hit      [NC];
  logic                 resp_evict    [NC];
  logic                 resp_aged     [NC];
  reuse_hint_e          resp_hint     [NC];
  logic                 init_done;

  grasp_top #(.NUM_CORES(NC), .NUM_SLICES(NS), .WAYS(WAYS), .SETS(SETS), .ACCESS_LAT(LAT)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int src [];
  bit grasp_on;
  int n_acc [4], n_miss [4];
  int n_done;

  function automatic reuse_hint_e ref_hint(longint va);
    if (!grasp_on) return HINT_DEFAULT;
    if (va >= PROP && va < PROP + longint'(V) * ELEM) begin
      if (va < PROP + LLC) return HINT_HIGH;
      if (va < PROP + 2 * LLC) return HINT_MODERATE;
    end
    return HINT_LOW;
  endfunction

  task automatic access(int c, longint va);
    @(negedge clk);
    acc_valid[c] = 1; acc_va[c] = VA_W'(va); acc_pa[c] = PA_W'(va);
    @(posedge clk);
    while (!acc_ready[c]) @(posedge clk);
    #1 acc_valid[c] = 0;
    while (!resp_valid[c]) @(posedge clk);
    checks++;
    if (resp_hint[c] != ref_hint(va)) begin
      failures++;
      if (failures < 10) $display("FAIL va %h hint %s", va, resp_hint[c].name());
    end
    n_acc[int'(resp_hint[c])]++;
    if (!resp_hit[c]) n_miss[int'(resp_hint[c])]++;
  endtask

  task automatic core(int c);
    int lo, hi;
    lo = c * (V / NC);
    hi = lo + V / NC;
    for (int v = lo; v < hi; v++) begin
      if (v % 8 == 0) access(c, VTX + longint'(v) * 8);
      for (int k = 0; k < DEG; k++) begin
        int e;
        e = v * DEG + k;
        if (e % 16 == 0) access(c, EDGE + longint'(e) * 4);
        access(c, PROP + longint'(src[e]) * ELEM);
      end
      if (v % 4 == 3) access(c, PROP + longint'(v) * ELEM + 8);
    end
    n_done++;
  endtask

  // one complete iteration from reset; returns total misses
  task automatic run(bit with_grasp, output int misses);
    grasp_on = with_grasp;
    for (int k = 0; k < 4; k++) begin n_acc[k] = 0; n_miss[k] = 0; end
    @(negedge clk); rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    while (!init_done) @(posedge clk);
    if (with_grasp)
      for (int c = 0; c < NC; c++) begin
        @(negedge clk);
        abr_wr_en[c] = 1; abr_wr_idx[c] = 0; abr_wr_is_end[c] = 0; abr_wr_data[c] = VA_W'(PROP);
        @(negedge clk);
        abr_wr_is_end[c] = 1; abr_wr_data[c] = VA_W'(PROP + longint'(V) * ELEM - 1);
        @(negedge clk);
        abr_wr_en[c] = 0;
      end
    repeat (3) @(negedge clk);
    n_done = 0;
    for (int c = 0; c < NC; c++)
      fork
        automatic int cc = c;
        core(cc);
      join_none
    while (n_done < NC) @(posedge clk);
    misses = 0;
    for (int k = 0; k < 4; k++) misses += n_miss[k];
    $display("  %s: accesses D/L/M/H %0d/%0d/%0d/%0d misses D/L/M/H %0d/%0d/%0d/%0d total misses %0d",
             with_grasp ? "GRASP " : "DRRIP ", n_acc[0], n_acc[1], n_acc[2], n_acc[3],
             n_miss[0], n_miss[1], n_miss[2], n_miss[3], misses);
  endtask

  initial begin
    #(longint'(400000000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m_base, m_grasp;
    for (int c = 0; c < NC; c++) begin
      abr_wr_en[c] = 0; abr_wr_idx[c] = '0; abr_wr_is_end[c] = 0; abr_wr_data[c] = '0;
      abr_clear[c] = 0; acc_valid[c] = 0; acc_va[c] = '0; acc_pa[c] = '0;
    end
    src = new[V * DEG];
    for (int skew = 1; skew >= 0; skew--) begin
      for (int e = 0; e < V * DEG; e++) begin
        real u;
        u = real'($urandom_range(0, 1 << 24)) / real'(1 << 24);
        src[e] = skew ? int'($floor(real'(V - 1) * u * u * u * u)) : $urandom_range(0, V - 1);
      end
      $display("%s graph, %0d vertices, %0d edges:", skew ? "skewed" : "uniform", V, V * DEG);
      run(1'b0, m_base);
      run(1'b1, m_grasp);
      $display("  miss reduction %0.1f%%", 100.0 * real'(m_base - m_grasp) / real'(m_base));
      checks++;
      if (skew ? (m_grasp >= m_base) : (real'(m_grasp) > 1.03 * real'(m_base))) begin
        failures++;
        $display("FAIL GRASP misses %0d vs baseline %0d", m_grasp, m_base);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
