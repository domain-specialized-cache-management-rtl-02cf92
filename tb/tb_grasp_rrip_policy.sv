// tb_grasp_rrip_policy: random and directed checks of the GRASP RRIP set policy.
//
// The reference model follows the textbook form of RRIP victim search (raise every
// RRPV by one, repeatedly, until some way reaches 7) and applies the insertion and
// hit-promotion table row by row, so it shares no structure with the one-step search
// of the block. Every hint, hit and miss case and every ageing depth is exercised.
module tb_grasp_rrip_policy;
  import grasp_pkg::*;

  localparam int WAYS = 16;
  localparam int WAY_W = 4;

  logic [WAYS-1:0]   valid;
  logic [RRPV_W-1:0] rrpv_in  [WAYS];
  logic [RRPV_W-1:0] rrpv_out [WAYS];
  logic              hit, evict, aged;
  logic [WAY_W-1:0]  hit_way, fill_way;
  reuse_hint_e       hint;
  logic [RRPV_W-1:0] default_rrpv;

  int checks = 0, failures = 0;
  int n_case [4][2];   // [hint][hit]
  int n_aged = 0, n_invalid_fill = 0;

  grasp_rrip_policy #(.WAYS(WAYS)) dut (.*);

  task automatic check_one();
    int exp_rrpv [WAYS];
    int exp_way, ins;
    bit exp_evict, exp_aged;
    bit found;
    for (int w = 0; w < WAYS; w++) exp_rrpv[w] = int'(rrpv_in[w]);
    exp_evict = 0; exp_aged = 0; exp_way = 0;
    if (hit) begin
      if (hint == HINT_HIGH || hint == HINT_DEFAULT) exp_rrpv[hit_way] = 0;
      else if (exp_rrpv[hit_way] > 0) exp_rrpv[hit_way] = exp_rrpv[hit_way] - 1;
    end else begin
      found = 0;
      for (int w = 0; w < WAYS && !found; w++)
        if (!valid[w]) begin found = 1; exp_way = w; end
      if (!found) begin
        exp_evict = 1;
        forever begin
          for (int w = 0; w < WAYS && !found; w++)
            if (exp_rrpv[w] == 7) begin found = 1; exp_way = w; end
          if (found) break;
          exp_aged = 1;
          for (int w = 0; w < WAYS; w++) exp_rrpv[w]++;
        end
      end
      case (hint)
        HINT_HIGH:     ins = 0;
        HINT_MODERATE: ins = 6;
        HINT_LOW:      ins = 7;
        default:       ins = int'(default_rrpv);
      endcase
      exp_rrpv[exp_way] = ins;
    end
    #1;
    checks++;
    for (int w = 0; w < WAYS; w++)
      if (int'(rrpv_out[w]) != exp_rrpv[w]) begin
        failures++;
        $display("FAIL way %0d rrpv %0d exp %0d (hint %s hit %0b)", w, rrpv_out[w], exp_rrpv[w], hint.name(), hit);
        break;
      end
    if (!hit) begin
      checks++;
      if (int'(fill_way) != exp_way || evict != exp_evict || aged != exp_aged) begin
        failures++;
        $display("FAIL fill_way %0d exp %0d evict %0b/%0b aged %0b/%0b", fill_way, exp_way, evict, exp_evict, aged, exp_aged);
      end
      if (exp_aged) n_aged++;
      if (!exp_evict) n_invalid_fill++;
    end
    n_case[int'(hint)][hit]++;
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed: Table II examples on a full set with all RRPVs at 3
    valid = '1; hit = 0; hit_way = 0; default_rrpv = 7;
    for (int w = 0; w < WAYS; w++) rrpv_in[w] = 3;
    hint = HINT_HIGH; #1;
    checks++;
    if (!(fill_way == 0 && rrpv_out[0] == 0 && rrpv_out[1] == 7 && aged)) begin
      failures++; $display("FAIL directed high insert");
    end
    hint = HINT_MODERATE; hit = 1; hit_way = 5; rrpv_in[5] = 6; #1;
    checks++;
    if (rrpv_out[5] != 5 || rrpv_out[4] != 3) begin failures++; $display("FAIL directed moderate hit"); end
    hint = HINT_LOW; rrpv_in[5] = 0; #1;
    checks++;
    if (rrpv_out[5] != 0) begin failures++; $display("FAIL directed low hit at 0"); end

    for (int t = 0; t < 20000; t++) begin
      int mode;
      mode = $urandom_range(0, 3);
      for (int w = 0; w < WAYS; w++) begin
        rrpv_in[w] = RRPV_W'($urandom_range(0, (mode == 0) ? 7 : 5));
        valid[w]   = (mode == 3) ? ($urandom_range(0, 3) != 0) : 1'b1;
      end
      hint         = reuse_hint_e'($urandom_range(0, 3));
      hit          = $urandom_range(0, 1);
      hit_way      = WAY_W'($urandom_range(0, WAYS - 1));
      if (hit) valid[hit_way] = 1'b1;
      default_rrpv = $urandom_range(0, 1) ? 3'd6 : 3'd7;
      check_one();
    end
    for (int h = 0; h < 4; h++)
      for (int k = 0; k < 2; k++) begin
        checks++;
        if (n_case[h][k] == 0) begin failures++; $display("FAIL case hint %0d hit %0d never ran", h, k); end
      end
    checks++;
    if (n_aged == 0 || n_invalid_fill == 0) begin failures++; $display("FAIL ageing/invalid fill not covered"); end
    $display("ageing misses %0d, fills of invalid ways %0d", n_aged, n_invalid_fill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
