// tb_llc_nuca: four cores issue random requests at once into a four-slice LLC
// (4 sets x 4 ways per slice). A reference cache, updated in the order the slices
// accept requests, predicts hit, eviction and ageing for each response. Checks that
// each response returns to the core that asked, ACCESS_LAT cycles after acceptance,
// that several slices start requests in the same cycle, and that contention for one
// slice is resolved with every core served (no core waits more than NUM_CORES grants).
module tb_llc_nuca;
  import grasp_pkg::*;

  localparam int NC = 4, NS = 4, WAYS = 4, SETS = 4, LAT = 10;
  localparam int OFF_W = 6, SB = 2, SET_W = 2;

  logic clk = 0, rst_n = 0;
  logic              req_valid  [NC];
  logic              req_ready  [NC];
  logic [PA_W-1:0]   req_pa     [NC];
  reuse_hint_e       req_hint   [NC];
  logic              resp_valid [NC];
  logic              resp_hit   [NC];
  logic              resp_evict [NC];
  logic              resp_aged  [NC];
  logic              init_done;

  llc_nuca #(.NUM_CORES(NC), .NUM_SLICES(NS), .WAYS(WAYS), .SETS(SETS), .ACCESS_LAT(LAT)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  longint m_tag  [NS][SETS][WAYS];
  bit     m_val  [NS][SETS][WAYS];
  int     m_rrpv [NS][SETS][WAYS];
  int     n_hit = 0, n_parallel = 0, n_conflict = 0, max_wait = 0;

  // reference for non-Default hints (Default-hint fills are covered in the slice test)
  function automatic void model(input int sl, input int set, input longint tag, input reuse_hint_e h,
                                output bit hit, output bit evict, output bit aged);
    bit found;
    int way;
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
    m_val[sl][set][way] = 1;
    m_tag[sl][set][way] = tag;
    m_rrpv[sl][set][way] = (h == HINT_HIGH) ? 0 : (h == HINT_MODERATE) ? 6 : 7;
  endfunction

  // count same-cycle acceptances and waiting requests
  always @(posedge clk) begin
    int acc, waiting;
    acc = 0; waiting = 0;
    for (int c = 0; c < NC; c++) begin
      if (req_valid[c] && req_ready[c]) acc++;
      if (req_valid[c] && !req_ready[c]) waiting++;
    end
    if (acc > 1) n_parallel++;
    if (waiting > 0 && acc > 0) n_conflict++;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic core(input int c);
    for (int t = 0; t < 600; t++) begin
      int sl, set, waited;
      longint tag, t_acc;
      bit eh, ee, ea;
      reuse_hint_e h;
      sl  = (t % 50 < 25) ? 0 : $urandom_range(0, NS - 1);    // bursts onto slice 0
      set = $urandom_range(0, SETS - 1);
      tag = $urandom_range(0, 6);
      h   = reuse_hint_e'($urandom_range(1, 3));
      @(negedge clk);
      req_valid[c] = 1;
      req_pa[c]    = PA_W'((tag << (OFF_W + SB + SET_W)) | (longint'(set) << (OFF_W + SB)) |
                           (longint'(sl) << OFF_W) | longint'($urandom_range(0, 63)));
      req_hint[c]  = h;
      waited = 0;
      @(posedge clk);
      while (!req_ready[c]) begin waited++; @(posedge clk); end
      t_acc = cyc;
      model(sl, set, tag, h, eh, ee, ea);
      if (waited > max_wait) max_wait = waited;
      #1 req_valid[c] = 0;
      while (!resp_valid[c]) @(posedge clk);
      checks++;
      if (cyc - t_acc != LAT || resp_hit[c] != eh || resp_evict[c] != ee || resp_aged[c] != ea) begin
        failures++;
        if (failures < 10)
          $display("FAIL core %0d t %0d lat %0d hit %0b/%0b evict %0b/%0b aged %0b/%0b", c, t, cyc - t_acc, resp_hit[c], eh, resp_evict[c], ee, resp_aged[c], ea);
      end
      n_hit += eh;
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin req_valid[c] = 0; req_pa[c] = '0; req_hint[c] = HINT_DEFAULT; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (init_done);
    fork
      core(0); core(1); core(2); core(3);
    join
    checks++;
    if (n_parallel == 0 || n_conflict == 0 || n_hit == 0) begin
      failures++; $display("FAIL coverage parallel %0d conflict %0d hits %0d", n_parallel, n_conflict, n_hit);
    end
    // a core waits at most for the other NC-1 cores' accesses to its slice
    checks++;
    if (max_wait > (NC - 1) * LAT + 1) begin failures++; $display("FAIL starvation: waited %0d", max_wait); end
    $display("hits %0d, cycles with parallel starts %0d, with contention %0d, longest wait %0d",
             n_hit, n_parallel, n_conflict, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
