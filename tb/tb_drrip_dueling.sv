// tb_drrip_dueling: drives Default-hint fills into leader and follower sets and keeps
// its own PSEL and bimodal counter to predict default_rrpv: static-RRIP leaders always
// get 6, bimodal leaders get 7 except on every 32nd bimodal fill, followers follow the
// PSEL most significant bit. Also checks PSEL saturation at both ends.
module tb_drrip_dueling;
  import grasp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [10:0] set_idx = '0;
  logic fill = 0;
  logic [RRPV_W-1:0] default_rrpv;
  logic use_brrip;
  logic [9:0] psel;

  int checks = 0, failures = 0;
  int m_psel, m_bip;
  int n_brrip_near = 0, n_brrip_far = 0, n_follow_s = 0, n_follow_b = 0, n_sat_hi = 0, n_sat_lo = 0;

  drrip_dueling dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input int kind); // 0 static leader, 1 bimodal leader, 2 follower
    int set, exp_rrpv;
    bit exp_b;
    set = $urandom_range(0, 31) * 64;
    if (kind == 1) set += 1;
    if (kind == 2) set += $urandom_range(2, 63);
    @(negedge clk);
    set_idx = 11'(set);
    fill = 1;
    exp_b = (kind == 0) ? 0 : (kind == 1) ? 1 : (m_psel >= 512);
    exp_rrpv = !exp_b ? 6 : (m_bip == 0) ? 6 : 7;
    #1;
    checks++;
    if (use_brrip != exp_b || int'(default_rrpv) != exp_rrpv || int'(psel) != m_psel) begin
      failures++;
      if (failures < 10)
        $display("FAIL set %0d kind %0d: brrip %0b/%0b rrpv %0d/%0d psel %0d/%0d", set, kind, use_brrip, exp_b, default_rrpv, exp_rrpv, psel, m_psel);
    end
    if (kind == 1) begin if (exp_rrpv == 6) n_brrip_near++; else n_brrip_far++; end
    if (kind == 2) begin if (exp_b) n_follow_b++; else n_follow_s++; end
    // model update at the edge
    if (kind == 0) begin if (m_psel < 1023) m_psel++; else n_sat_hi++; end
    if (kind == 1) begin if (m_psel > 0) m_psel--; else n_sat_lo++; end
    if (exp_b) m_bip = (m_bip + 1) % 32;
    @(posedge clk);
    #1 fill = 0;
  endtask

  initial begin
    m_psel = 511; m_bip = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // static leaders miss a lot: PSEL climbs, followers switch to bimodal
    for (int i = 0; i < 1200; i++) step((i % 3 == 0) ? 2 : 0);
    // bimodal leaders miss a lot: PSEL falls to 0
    for (int i = 0; i < 2400; i++) step((i % 3 == 0) ? 2 : 1);
    for (int i = 0; i < 2000; i++) step($urandom_range(0, 2));
    checks++;
    if (n_brrip_near == 0 || n_brrip_far < 20 * n_brrip_near || n_follow_s == 0 || n_follow_b == 0 ||
        n_sat_hi == 0 || n_sat_lo == 0) begin
      failures++;
      $display("FAIL coverage: near %0d far %0d follow s/b %0d/%0d sat %0d/%0d", n_brrip_near, n_brrip_far, n_follow_s, n_follow_b, n_sat_hi, n_sat_lo);
    end
    $display("bimodal fills near/far %0d/%0d, followers static/bimodal %0d/%0d", n_brrip_near, n_brrip_far, n_follow_s, n_follow_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
