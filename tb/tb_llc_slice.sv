// tb_llc_slice: runs random request streams with all four hints through a small
// slice (8 sets x 4 ways) and compares hit, way, eviction and ageing of every response
// with a reference cache kept in the testbench (tags, valid bits, RRPVs, and a model
// of the DRRIP selector for Default-hint fills). Checks the post-reset clearing time
// (SETS cycles) and that every response comes exactly ACCESS_LAT cycles after its
// request was accepted.
module tb_llc_slice;
  import grasp_pkg::*;

  localparam int WAYS = 4, SETS = 8, LAT = 10, SB = 3;
  localparam int SET_W = 3, OFF_W = 6;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  logic [PA_W-1:0] req_pa = '0;
  reuse_hint_e req_hint = HINT_DEFAULT;
  logic [2:0] req_id = '0;
  logic resp_valid, resp_hit, resp_evict, resp_aged, init_done;
  logic [2:0] resp_id;
  logic [1:0] resp_way;

  llc_slice #(.WAYS(WAYS), .SETS(SETS), .SLICE_BITS(SB), .ACCESS_LAT(LAT)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // reference model
  longint m_tag [SETS][WAYS];
  bit     m_val [SETS][WAYS];
  int     m_rrpv [SETS][WAYS];
  int     m_psel = 511, m_bip = 0;
  int     n_hit = 0, n_evict = 0, n_aged = 0;

  task automatic model(input longint tag, input int set, input reuse_hint_e h,
                       output bit hit, output int way, output bit evict, output bit aged);
    bit found;
    int ins;
    hit = 0; way = 0; evict = 0; aged = 0;
    for (int w = 0; w < WAYS; w++)
      if (m_val[set][w] && m_tag[set][w] == tag) begin hit = 1; way = w; break; end
    if (hit) begin
      if (h == HINT_HIGH || h == HINT_DEFAULT) m_rrpv[set][way] = 0;
      else if (m_rrpv[set][way] > 0) m_rrpv[set][way]--;
      return;
    end
    found = 0;
    for (int w = 0; w < WAYS; w++) if (!m_val[set][w]) begin found = 1; way = w; break; end
    if (!found) begin
      evict = 1;
      while (!found) begin
        for (int w = 0; w < WAYS; w++) if (m_rrpv[set][w] == 7) begin found = 1; way = w; break; end
        if (!found) begin
          aged = 1;
          for (int w = 0; w < WAYS; w++) m_rrpv[set][w]++;
        end
      end
    end
    case (h)
      HINT_HIGH: ins = 0;
      HINT_MODERATE: ins = 6;
      HINT_LOW: ins = 7;
      default: begin
        bit b;
        b = (set % 8 == 0) ? 0 : (set % 8 == 1) ? 1 : (m_psel >= 512);
        ins = (!b || m_bip == 0) ? 6 : 7;
        if (b) m_bip = (m_bip + 1) % 32;
        if (set % 8 == 0 && m_psel < 1023) m_psel++;
        if (set % 8 == 1 && m_psel > 0) m_psel--;
      end
    endcase
    m_val[set][way] = 1;
    m_tag[set][way] = tag;
    m_rrpv[set][way] = ins;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t_rel;
    for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) m_val[s][w] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    t_rel = cyc;
    wait (init_done);
    checks++;
    if (cyc - t_rel != SETS) begin failures++; $display("FAIL init took %0d cycles", cyc - t_rel); end
    for (int t = 0; t < 3000; t++) begin
      longint tag, t_acc;
      int set, ewy;
      bit eh, ee, ea;
      reuse_hint_e h;
      set = $urandom_range(0, SETS - 1);
      tag = $urandom_range(0, (t < 1500) ? 5 : 9);
      h = reuse_hint_e'($urandom_range(0, 3));
      @(negedge clk);
      req_valid = 1;
      req_pa = PA_W'((tag << (OFF_W + SB + SET_W)) | (longint'(set) << (OFF_W + SB)) | longint'($urandom_range(0, 511)));
      req_hint = h;
      req_id = 3'(t);
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      t_acc = cyc;
      #1 req_valid = 0;
      model(tag, set, h, eh, ewy, ee, ea);
      while (!resp_valid) @(posedge clk);
      checks++;
      if (cyc - t_acc != LAT || resp_hit != eh || int'(resp_way) != ewy || resp_evict != ee ||
          resp_aged != ea || resp_id != 3'(t)) begin
        failures++;
        if (failures < 10)
          $display("FAIL t %0d lat %0d hit %0b/%0b way %0d/%0d evict %0b/%0b aged %0b/%0b", t, cyc - t_acc, resp_hit, eh, resp_way, ewy, resp_evict, ee, resp_aged, ea);
      end
      n_hit += eh; n_evict += ee; n_aged += ea;
    end
    checks++;
    if (n_hit == 0 || n_evict == 0 || n_aged == 0) begin failures++; $display("FAIL coverage"); end
    $display("hits %0d evictions %0d ageing %0d", n_hit, n_evict, n_aged);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
