// drrip_dueling: picks the insertion RRPV for Default-hint fills, as dynamic RRIP does.
//
// GRASP runs on top of DRRIP: an access with the Default hint (no ABRs set) is filled
// either at RRPV 6 ("near LRU", static RRIP) or, by bimodal RRIP, at RRPV 7 ("LRU")
// with high probability and at 6 with low probability. Which of the two wins is
// decided by set dueling: a few leader sets always use one policy, their misses move
// a saturating selector (PSEL), and all other (follower) sets use the policy whose
// leaders miss less. The paper names DRRIP and Table II's "6 or 7" but gives none of
// its constants; those here are the usual ones: a 10-bit PSEL, leader sets every
// 64th set (set index mod 64 = 0 for static, = 1 for bimodal; 32 of each in a
// 2048-set slice), and a 1-in-32 chance of the "near" value in bimodal mode, made
// deterministic with a 5-bit counter instead of a random source.
//
// Interface: set_idx is the set of the current access; default_rrpv is combinational
// from it. fill is a one-cycle strobe for a Default-hint miss filled in set_idx;
// only those update PSEL and the bimodal counter (accesses with a GRASP hint do not
// use the Default insertion and so do not take part in the duel). State changes on
// the clock edge after the strobe.
module drrip_dueling
  import grasp_pkg::*;
#(
  parameter int unsigned SET_W     = 11,
  parameter int unsigned PSEL_W    = 10,
  parameter int unsigned LEADER_MOD_W = 6,   // leaders in every 2**6 = 64 sets
  parameter int unsigned BIP_W     = 5       // bimodal: 1 in 2**5 = 32 fills at RRPV 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SET_W-1:0]   set_idx,
  input  logic               fill,
  output logic [RRPV_W-1:0]  default_rrpv,
  output logic               use_brrip,
  output logic [PSEL_W-1:0]  psel
);

  localparam int unsigned LM_W = (LEADER_MOD_W < SET_W) ? LEADER_MOD_W : SET_W;

  logic [BIP_W-1:0] bip_cnt;
  logic             srrip_leader, brrip_leader;

  always_comb begin
    srrip_leader = (set_idx[LM_W-1:0] == LM_W'(0));
    brrip_leader = (set_idx[LM_W-1:0] == LM_W'(1));
    if (srrip_leader)      use_brrip = 1'b0;
    else if (brrip_leader) use_brrip = 1'b1;
    else                   use_brrip = psel[PSEL_W-1];   // high PSEL: static RRIP misses more
    if (!use_brrip)               default_rrpv = RRPV_NEAR;
    else if (bip_cnt == '0)       default_rrpv = RRPV_NEAR;
    else                          default_rrpv = RRPV_MAX;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psel    <= {1'b1, {(PSEL_W-1){1'b0}}} - 1'b1;  // just below the midpoint: start static
      bip_cnt <= '0;
    end else if (fill) begin
      if (srrip_leader && psel != '1)      psel <= psel + 1'b1;
      else if (brrip_leader && psel != '0) psel <= psel - 1'b1;
      if (use_brrip) bip_cnt <= bip_cnt + 1'b1;
    end
  end

endmodule
