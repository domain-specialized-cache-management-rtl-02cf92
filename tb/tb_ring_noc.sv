// tb_ring_noc: self-checking testbench for ring_noc at its default size (8 cores,
// 8 slices, 2 cycles per hop).
//
// Every core issues random requests. A stub LLC on the downstream side accepts each
// request after a random delay and answers after a random latency with random flags.
// The testbench checks, per request, that it reaches the LLC exactly 1 + 2*hops cycles
// after the upstream accept with its address and hint unchanged, and that the answer
// comes back exactly 1 + 2*hops cycles after the LLC gave it, with the LLC's flags;
// hops is the shorter ring distance from the core to the slice. It also checks that
// every ring distance from 0 to 4 occurred. Prints TB_RESULT; a watchdog stops a hang.
module tb_ring_noc;
  import grasp_pkg::*;

  localparam int NC = 8, NS = 8, HOP = 2, REQS = 300;

  logic clk = 0, rst_n = 0;
  logic        up_req_valid [NC], up_req_ready [NC];
  logic [PA_W-1:0] up_req_pa [NC];
  reuse_hint_e up_req_hint [NC];
  logic        up_resp_valid [NC], up_resp_hit [NC], up_resp_evict [NC], up_resp_aged [NC];
  logic        dn_req_valid [NC], dn_req_ready [NC];
  logic [PA_W-1:0] dn_req_pa [NC];
  reuse_hint_e dn_req_hint [NC];
  logic        dn_resp_valid [NC], dn_resp_hit [NC], dn_resp_evict [NC], dn_resp_aged [NC];

  ring_noc dut (.*);

  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0, n_done = 0;
  int seen_hops [5] = '{default: 0};

  initial begin
    #2000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic int hops(int c, longint pa);
    int s, d;
    s = int'((pa >> 6) & (NS - 1));
    d = (s >= c) ? s - c : c - s;
    if (NC - d < d) d = NC - d;
    return d;
  endfunction

  task automatic chk(bit ok, string what, int c);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL core %0d: %s at cycle %0d", c, what, cyc);
    end
  endtask

  task automatic run_core(int c);
    longint pa, t_acc, t_resp;
    reuse_hint_e h;
    bit fh, fe, fa;
    int hp, lat;
    for (int n = 0; n < REQS; n++) begin
      pa = {$urandom(), $urandom()} & 64'hFFFF_FFFF_FFC0;
      h  = reuse_hint_e'($urandom_range(0, 3));
      hp = hops(c, pa);
      seen_hops[hp]++;
      @(negedge clk);
      up_req_valid[c] = 1; up_req_pa[c] = PA_W'(pa); up_req_hint[c] = h;
      @(posedge clk);
      while (!up_req_ready[c]) @(posedge clk);
      t_acc = cyc;
      #1 up_req_valid[c] = 0;
      // downstream arrival
      while (!dn_req_valid[c]) @(posedge clk);
      chk(cyc - t_acc == 1 + HOP * hp, "request arrival time", c);
      chk(dn_req_pa[c] == PA_W'(pa) && dn_req_hint[c] == h, "request contents", c);
      repeat ($urandom_range(0, 3)) @(negedge clk);
      @(negedge clk); dn_req_ready[c] = 1;
      @(negedge clk); dn_req_ready[c] = 0;
      chk(!dn_req_valid[c], "request dropped after accept", c);
      lat = $urandom_range(1, 12);
      repeat (lat) @(negedge clk);
      fh = 1'($urandom()); fe = 1'($urandom()); fa = 1'($urandom());
      dn_resp_valid[c] = 1; dn_resp_hit[c] = fh; dn_resp_evict[c] = fe; dn_resp_aged[c] = fa;
      @(posedge clk);
      t_resp = cyc;
      #1 dn_resp_valid[c] = 0; dn_resp_hit[c] = 0; dn_resp_evict[c] = 0; dn_resp_aged[c] = 0;
      while (!up_resp_valid[c]) begin
        @(posedge clk);
        #1;
      end
      chk(cyc - t_resp == 1 + HOP * hp, "response return time", c);
      chk(up_resp_hit[c] == fh && up_resp_evict[c] == fe && up_resp_aged[c] == fa, "response flags", c);
      @(posedge clk); #1;
      chk(!up_resp_valid[c], "response longer than one cycle", c);
    end
    n_done++;
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin
      up_req_valid[c] = 0; up_req_pa[c] = '0; up_req_hint[c] = HINT_DEFAULT;
      dn_req_ready[c] = 0; dn_resp_valid[c] = 0;
      dn_resp_hit[c] = 0; dn_resp_evict[c] = 0; dn_resp_aged[c] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NC; c++) begin
      automatic int cc = c;
      fork run_core(cc); join_none
    end
    while (n_done < NC) @(posedge clk);
    for (int d = 0; d <= NC / 2; d++) chk(seen_hops[d] > 0, "ring distance never exercised", d);
    $display("requests per ring distance 0..4: %0d %0d %0d %0d %0d",
             seen_hops[0], seen_hops[1], seen_hops[2], seen_hops[3], seen_hops[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
