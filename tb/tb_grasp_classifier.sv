// tb_grasp_classifier: random addresses against hand-set region bounds for two
// Property Arrays; the expected hint is worked out from the region definitions
// (High: first R bytes of an array, Moderate: next R bytes, Low: everything else,
// Default: no array set). Addresses are drawn near every boundary.
module tb_grasp_classifier;
  import grasp_pkg::*;

  logic [VA_W-1:0]   va;
  logic [1:0]        pa_valid;
  logic [VA_W-1:0]   start_q [2];
  logic [VA_W-1:0]   end_q   [2];
  logic [VA_W:0]     hr_end  [2];
  logic [VA_W:0]     mr_end  [2];
  reuse_hint_e       hint;

  int checks = 0, failures = 0;
  int seen [4];

  grasp_classifier #(.NUM_PA(2)) dut (.*);

  function automatic reuse_hint_e ref_hint(longint a);
    reuse_hint_e h;
    bit any;
    any = 0;
    h = HINT_LOW;
    for (int i = 0; i < 2; i++) begin
      if (!pa_valid[i]) continue;
      any = 1;
      if (a >= longint'(start_q[i]) && a <= longint'(end_q[i])) begin
        if (a < longint'(hr_end[i])) h = HINT_HIGH;
        else if (a < longint'(mr_end[i]) && h != HINT_HIGH) h = HINT_MODERATE;
      end
    end
    return any ? h : HINT_DEFAULT;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s [2], e [2], r;
    for (int t = 0; t < 8000; t++) begin
      if (t % 500 == 0) begin
        // new configuration: 1 or 2 arrays, region R = 16MB / arrays
        pa_valid = (t < 500) ? 2'b00 : 2'($urandom_range(1, 3));
        r = (pa_valid == 2'b11) ? 64'd8388608 : 64'd16777216;
        s[0] = 64'h1000_0000 + longint'($urandom_range(0, 4095)) * 64;
        s[1] = 64'h7000_0000 + longint'($urandom_range(0, 4095)) * 64;
        for (int i = 0; i < 2; i++) begin
          // some arrays shorter than the High Reuse Region, most much longer
          e[i] = s[i] + (($urandom_range(0, 3) == 0) ? longint'($urandom_range(1, 4000000))
                                                       : longint'($urandom_range(40000000, 400000000)));
          start_q[i] = VA_W'(s[i]);
          end_q[i]   = VA_W'(e[i]);
          hr_end[i]  = (VA_W+1)'(s[i] + r);
          mr_end[i]  = (VA_W+1)'(s[i] + 2 * r);
        end
      end
      begin
        int i, k;
        longint base, a;
        i = $urandom_range(0, 1);
        k = $urandom_range(0, 5);
        case (k)
          0: base = s[i];
          1: base = s[i] + r;
          2: base = s[i] + 2 * r;
          3: base = e[i];
          4: base = s[i] + longint'($urandom_range(0, 50000000));
          default: base = longint'($urandom);
        endcase
        a = base + longint'($urandom_range(0, 2)) - 1;
        va = VA_W'(a);
        #1;
        checks++;
        seen[int'(hint)]++;
        if (hint != ref_hint(a)) begin
          failures++;
          if (failures < 10) $display("FAIL va %h hint %s exp %s", va, hint.name(), ref_hint(a).name());
        end
      end
    end
    for (int h = 0; h < 4; h++) begin
      checks++;
      if (seen[h] == 0) begin failures++; $display("FAIL hint %0d never produced", h); end
    end
    $display("hints default/low/moderate/high: %0d %0d %0d %0d", seen[0], seen[1], seen[2], seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
