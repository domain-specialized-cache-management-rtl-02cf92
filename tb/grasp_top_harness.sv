// grasp_top_harness: end-to-end test of grasp_top, shared by the reduced-size and the
// full-size testbench (which differ only in parameters). It plays both the software
// that programs the Address Bound Registers and the cores' L1-D miss streams; the
// TLB is a fixed VA-to-PA map (one high address bit flipped), so set and slice bits
// are those of the virtual address.
//
// Phases:
//  A  one core, two Property Arrays programmed: a random access mix over all reuse
//     classes, every response compared with a reference of the whole LLC (tags, valid
//     bits, RRPVs of every slice), and the returned hint with a reference classifier;
//     each latency must equal ACCESS_LAT + 3 + 4 x (ring distance to the slice).
//  B  protection: a High-Reuse block survives a stream of Low-Reuse fills into its
//     set; after the ABRs are cleared (Default hints, plain DRRIP), the same pattern
//     evicts it.
//  C  all cores run a pull-style graph sweep at once: Vertex/Edge array streams and
//     skewed Property Array reads (hot vertices first, as after degree-based
//     reordering); the last core runs a program that never sets its ABRs. Hints and
//     latencies are checked; slice contention appears here.
// Counted mechanisms: every hint class, hits, misses, evictions, set ageing, accesses
// that cross the ring to a remote slice, requests
// kept waiting by slice arbitration, region halving with two arrays, ABR clear.
// With REQUIRE_ALL, a mechanism that never happened counts as a failure.
module grasp_top_harness
  import grasp_pkg::*;
#(
  parameter bit          USE_DEFAULTS = 1'b0,  // instantiate grasp_top with no parameter list
  parameter int unsigned NC          = 4,
  parameter int unsigned NS          = 4,
  parameter int unsigned WAYS        = 4,
  parameter int unsigned SETS        = 16,
  parameter int unsigned LAT         = 10,
  parameter int unsigned C_ACCESSES  = 400,    // per core in phase C
  parameter int unsigned A_ACCESSES  = 1500,
  parameter bit          REQUIRE_ALL = 1'b1
);

  localparam int OFF_W = 6;
  localparam int SB    = $clog2(NS);
  localparam int SET_W = $clog2(SETS);
  localparam longint LLC = longint'(NS) * SETS * WAYS * 64;
  localparam longint PA_XOR = 64'h4000_0000_0000 >> 2;

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

  if (USE_DEFAULTS) begin : g_full
    grasp_top dut (.*);
  end else begin : g_small
    grasp_top #(.NUM_CORES(NC), .NUM_SLICES(NS), .WAYS(WAYS), .SETS(SETS), .ACCESS_LAT(LAT)) dut (.*);
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // mechanism counters
  int n_hint [4];
  int n_hit = 0, n_miss = 0, n_evict = 0, n_aged = 0, n_wait = 0, n_remote = 0;
  int n_done = 0;
  int n_halved = 0, n_clear = 0, n_protect = 0, n_unprotect = 0;

  // software view of each core's ABRs
  longint sw_start [NC][2];
  longint sw_end   [NC][2];
  bit     sw_set   [NC][2];

  function automatic reuse_hint_e ref_hint(int c, longint va);
    int n;
    longint r;
    reuse_hint_e h;
    n = 0;
    for (int i = 0; i < 2; i++) n += sw_set[c][i];
    if (n == 0) return HINT_DEFAULT;
    r = LLC / n;
    h = HINT_LOW;
    for (int i = 0; i < 2; i++)
      if (sw_set[c][i] && va >= sw_start[c][i] && va <= sw_end[c][i]) begin
        if (va < sw_start[c][i] + r) h = HINT_HIGH;
        else if (va < sw_start[c][i] + 2 * r && h != HINT_HIGH) h = HINT_MODERATE;
      end
    return h;
  endfunction

  // reference LLC for phase A (one requester, so request order is known)
  longint m_tag  [NS][SETS][WAYS];
  bit     m_val  [NS][SETS][WAYS];
  int     m_rrpv [NS][SETS][WAYS];

  function automatic void model(longint pa, reuse_hint_e h, output bit hit, output bit evict, output bit aged);
    int sl, set, way;
    longint tag;
    bit found;
    sl  = int'((pa >> OFF_W) % NS);
    set = int'((pa >> (OFF_W + SB)) % SETS);
    tag = pa >> (OFF_W + SB + SET_W);
    hit = 0; evict = 0; aged = 0; way = 0;
    for (int w = 0; w < WAYS; w++)
      if (m_val[sl][set][w] && m_tag[sl][set][w] == tag) begin hit = 1; way = w; break; end
    if (hit) begin
      if (h == HINT_HIGH) m_rrpv[sl][set][way] = 0;
      else if (m_rrpv[sl][set][way] > 0) m_rrpv[sl][set][way]--;
      return;
    end
    found = 0;
    for (int w = 0; w < WAYS; w++) if (!m_val[sl][set][w]) begin found = 1; way = w; break; end
    if (!found) begin
      evict = 1;
      while (!found) begin
        for (int w = 0; w < WAYS; w++) if (m_rrpv[sl][set][w] == 7) begin found = 1; way = w; break; end
        if (!found) begin
          aged = 1;
          for (int w = 0; w < WAYS; w++) m_rrpv[sl][set][w]++;
        end
      end
    end
    m_val[sl][set][way]  = 1;
    m_tag[sl][set][way]  = tag;
    m_rrpv[sl][set][way] = (h == HINT_HIGH) ? 0 : (h == HINT_MODERATE) ? 6 : 7;
  endfunction

  task automatic abr_write(int c, int idx, bit is_end, longint data);
    @(negedge clk);
    abr_wr_en[c] = 1; abr_wr_idx[c] = idx[0:0]; abr_wr_is_end[c] = is_end; abr_wr_data[c] = VA_W'(data);
    @(negedge clk);
    abr_wr_en[c] = 0;
    if (is_end) sw_end[c][idx] = data; else sw_start[c][idx] = data;
    sw_set[c][idx] = 1;
    repeat (2) @(negedge clk);   // derived bounds settle
  endtask

  task automatic abr_clr(int c);
    @(negedge clk); abr_clear[c] = 1; @(negedge clk); abr_clear[c] = 0;
    sw_set[c][0] = 0; sw_set[c][1] = 0;
    repeat (2) @(negedge clk);
    n_clear++;
  endtask

  // ring distance from core c to the slice holding pa (slice s sits at stop s*NC/NS)
  function automatic int ring_hops(int c, longint pa);
    int st, d;
    st = ((NS > 1) ? int'((pa >> OFF_W) & (NS - 1)) : 0) * int'(NC) / int'(NS);
    d  = (st >= c) ? st - c : c - st;
    if (int'(NC) - d < d) d = int'(NC) - d;
    return d;
  endfunction

  // one LLC-bound access from core c; returns the hit flag
  task automatic access(int c, longint va, bit use_model, output bit hit);
    longint t0, pa, min_lat;
    bit eh, ee, ea;
    reuse_hint_e exp_h;
    pa = va ^ PA_XOR;
    exp_h = ref_hint(c, va);
    // frontend and ring registers, then 2-cycle hops each way around the bank access
    min_lat = LAT + 3 + 4 * ring_hops(c, pa);
    if (ring_hops(c, pa) > 0) n_remote++;
    @(negedge clk);
    acc_valid[c] = 1; acc_va[c] = VA_W'(va); acc_pa[c] = PA_W'(pa);
    @(posedge clk);
    while (!acc_ready[c]) @(posedge clk);
    t0 = cyc;
    #1 acc_valid[c] = 0;
    if (use_model) model(pa, exp_h, eh, ee, ea);
    while (!resp_valid[c]) @(posedge clk);
    checks++;
    if (resp_hint[c] != exp_h || cyc - t0 < min_lat || (use_model && cyc - t0 != min_lat) ||
        (use_model && (resp_hit[c] != eh || resp_evict[c] != ee || resp_aged[c] != ea))) begin
      failures++;
      if (failures < 10)
        $display("FAIL core %0d va %h hint %s/%s lat %0d hit %0b/%0b evict %0b/%0b aged %0b/%0b", c, va,
                 resp_hint[c].name(), exp_h.name(), cyc - t0, resp_hit[c], eh, resp_evict[c], ee, resp_aged[c], ea);
    end
    if (cyc - t0 > min_lat) n_wait++;
    n_hint[int'(resp_hint[c])]++;
    if (resp_hit[c]) n_hit++; else n_miss++;
    n_evict += resp_evict[c];
    n_aged  += resp_aged[c];
    hit = resp_hit[c];
  endtask

  function automatic longint blk(int sl, int set, longint tag);
    return (tag << (OFF_W + SB + SET_W)) | (longint'(set) << (OFF_W + SB)) | (longint'(sl) << OFF_W);
  endfunction

  initial begin
    #(longint'(200000000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam longint PROP0 = 64'h1000_0000_0000 >> 4;  // Property Array 0
  localparam longint PROP1 = 64'h2000_0000_0000 >> 4;  // Property Array 1
  localparam longint VTX   = 64'h3000_0000_0000 >> 4;  // Vertex + Edge arrays

  initial begin
    bit h;
    for (int c = 0; c < NC; c++) begin
      abr_wr_en[c] = 0; abr_wr_idx[c] = '0; abr_wr_is_end[c] = 0; abr_wr_data[c] = '0;
      abr_clear[c] = 0; acc_valid[c] = 0; acc_va[c] = '0; acc_pa[c] = '0;
      for (int i = 0; i < 2; i++) begin sw_set[c][i] = 0; sw_start[c][i] = 0; sw_end[c][i] = 0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!init_done) @(posedge clk);
    checks++;
    if (cyc > SETS + 8) begin failures++; $display("FAIL init took %0d cycles", cyc); end

    // ---- phase A: one core, exact reference ----
    abr_write(0, 0, 0, PROP0);
    abr_write(0, 0, 1, PROP0 + 4 * LLC - 1);
    checks++;
    if (ref_hint(0, PROP0 + LLC - 64) != HINT_HIGH) begin failures++; $display("FAIL sw model"); end
    abr_write(0, 1, 0, PROP1);
    abr_write(0, 1, 1, PROP1 + 3 * LLC - 1);
    // with two arrays the High Reuse Region is LLC/2: this address moved to Moderate
    access(0, PROP0 + LLC / 2 + 64, 1'b1, h);
    if (resp_hint[0] == HINT_MODERATE) n_halved++;
    for (int t = 0; t < int'(A_ACCESSES); t++) begin
      longint va;
      int k;
      k = $urandom_range(0, 9);
      if (k < 4)      va = PROP0 + longint'($urandom_range(0, int'(LLC / 2) - 1) & ~63) ;       // high
      else if (k < 6) va = PROP0 + LLC / 2 + longint'($urandom_range(0, int'(LLC / 2) - 1));     // moderate
      else if (k < 7) va = PROP1 + longint'($urandom_range(0, int'(3 * LLC) - 1));               // all classes
      else            va = VTX + longint'($urandom_range(0, int'(4 * LLC) - 1));                 // low
      access(0, va, 1'b1, h);
    end

    // ---- phase B: protection of a High-Reuse block, then plain DRRIP after clear ----
    begin
      longint hot, tagbase;
      int set;
      set = 5 % SETS;
      hot = PROP0 + blk(1 % NS, set, 0) - (PROP0 & ((longint'(1) << (OFF_W + SB + SET_W)) - 1));
      tagbase = VTX + 64'h100_0000;
      access(0, hot, 1'b1, h);
      access(0, hot, 1'b1, h);
      for (int k = 0; k < 8 * int'(WAYS); k++)
        access(0, blk(1 % NS, set, (tagbase >> (OFF_W + SB + SET_W)) + k), 1'b1, h);
      access(0, hot, 1'b1, h);
      checks++;
      if (h) n_protect++; else begin failures++; $display("FAIL High-Reuse block not protected"); end
      abr_clr(0);
      access(0, hot + 64'h1_0000_0000, 1'b0, h);
      access(0, hot + 64'h1_0000_0000, 1'b0, h);
      for (int k = 0; k < 8 * int'(WAYS); k++)
        access(0, blk(1 % NS, set, (tagbase >> (OFF_W + SB + SET_W)) + 1000 + k), 1'b0, h);
      access(0, hot + 64'h1_0000_0000, 1'b0, h);
      checks++;
      if (!h) n_unprotect++; else begin failures++; $display("FAIL Default-hint block survived the stream"); end
    end

    // ---- phase C: all cores, graph sweep ----
    for (int c = 0; c < int'(NC) - 1; c++) begin
      abr_write(c, 0, 0, PROP0);
      abr_write(c, 0, 1, PROP0 + 8 * LLC - 1);
    end
    for (int c = 0; c < int'(NC); c++) begin
      fork
        automatic int cc = c;
        begin
          for (int t = 0; t < int'(C_ACCESSES); t++) begin
            longint va;
            bit hh;
            real u;
            if (t % 4 == 0) begin
              // Vertex/Edge array streaming, disjoint per core
              va = VTX + longint'(cc) * 64'h10_0000 + longint'(t) * 16;
            end else begin
              // skewed source-vertex property read: low IDs (hot) far more likely
              u  = real'($urandom_range(0, 1000000)) / 1000000.0;
              va = PROP0 + longint'(u * u * u * u * real'(8 * LLC - 8)) & ~longint'(7);
            end
            access(cc, va, 1'b0, hh);
          end
          n_done++;
        end
      join_none
    end
    while (n_done < int'(NC)) @(posedge clk);

    begin
      string names [4] = '{"Default", "Low", "Moderate", "High"};
      $display("hints Default/Low/Moderate/High %0d/%0d/%0d/%0d", n_hint[0], n_hint[1], n_hint[2], n_hint[3]);
      $display("remote-slice (ring) accesses %0d", n_remote);
      $display("hits %0d misses %0d evictions %0d ageing %0d waits %0d halved %0d clear %0d protect %0d unprotect %0d",
               n_hit, n_miss, n_evict, n_aged, n_wait, n_halved, n_clear, n_protect, n_unprotect);
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (n_hint[k] == 0) begin failures++; $display("FAIL no %s hint", names[k]); end
      end
      checks++;
      if (n_hit == 0 || n_miss == 0 || n_remote == 0 || n_halved == 0 || n_clear == 0 || n_protect == 0 || n_unprotect == 0) begin
        failures++; $display("FAIL a mechanism never happened");
      end
      if (REQUIRE_ALL) begin
        checks++;
        if (n_evict == 0 || n_aged == 0 || n_wait == 0) begin
          failures++; $display("FAIL eviction/ageing/arbitration wait never happened");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
