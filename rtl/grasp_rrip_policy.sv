// grasp_rrip_policy: the GRASP replacement decision for one LLC set.
//
// Each block of a set keeps a 3-bit RRIP re-reference prediction value (RRPV); a
// higher value means "evict sooner". GRASP changes only the values written on a fill
// and on a hit, chosen by the Reuse Hint of the access (the paper's Table II):
//
//   hint       fill (insertion)        hit (promotion)
//   High       RRPV = 0                RRPV = 0
//   Moderate   RRPV = 6                if RRPV > 0: RRPV - 1
//   Low        RRPV = 7                if RRPV > 0: RRPV - 1
//   Default    RRPV = 6 or 7 (DRRIP)   RRPV = 0
//
// The 6-or-7 choice for Default comes in on default_rrpv from drrip_dueling.
// Victim selection is RRIP's and ignores the hint, as in the paper: the first way
// holding RRPV 7 is evicted; if none does, every RRPV of the set is raised until one
// reaches 7. Here that search is done in one step by adding (7 - max RRPV) to all
// ways and taking the first way that held the maximum. An invalid way is filled
// before any valid one is evicted, without ageing (this design's choice).
//
// Purely combinational: the caller reads a set's valid bits and RRPVs, presents
// them with the lookup result, and writes rrpv_out back together with the new tag.
module grasp_rrip_policy
  import grasp_pkg::*;
#(
  parameter int unsigned WAYS  = 16,
  parameter int unsigned WAY_W = $clog2(WAYS)
) (
  input  logic [WAYS-1:0]        valid,
  input  logic [RRPV_W-1:0]      rrpv_in [WAYS],
  input  logic                   hit,
  input  logic [WAY_W-1:0]       hit_way,
  input  reuse_hint_e            hint,
  input  logic [RRPV_W-1:0]      default_rrpv,   // DRRIP insertion value for Default
  output logic [RRPV_W-1:0]      rrpv_out [WAYS],
  output logic [WAY_W-1:0]       fill_way,       // way written on a miss
  output logic                   evict,          // miss replaces a valid block
  output logic                   aged            // miss had to raise the set's RRPVs
);

  logic [RRPV_W-1:0] max_rrpv, delta, ins_rrpv;
  logic              have_invalid;
  logic [WAY_W-1:0]  first_invalid, first_max;

  always_comb begin
    // insertion value from the hint (Table II)
    unique case (hint)
      HINT_HIGH:     ins_rrpv = RRPV_MRU;
      HINT_MODERATE: ins_rrpv = RRPV_NEAR;
      HINT_LOW:      ins_rrpv = RRPV_MAX;
      default:       ins_rrpv = default_rrpv;
    endcase

    // RRIP victim search
    have_invalid  = 1'b0;
    first_invalid = '0;
    max_rrpv      = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!valid[w]) begin
        have_invalid  = 1'b1;
        first_invalid = WAY_W'(w);
      end
      if (rrpv_in[w] > max_rrpv) max_rrpv = rrpv_in[w];
    end
    first_max = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (rrpv_in[w] == max_rrpv) first_max = WAY_W'(w);
    delta = RRPV_MAX - max_rrpv;

    fill_way = have_invalid ? first_invalid : first_max;
    evict    = !hit && !have_invalid;
    aged     = evict && (delta != '0);

    for (int w = 0; w < WAYS; w++) rrpv_out[w] = rrpv_in[w];

    if (hit) begin
      unique case (hint)
        HINT_HIGH, HINT_DEFAULT: rrpv_out[hit_way] = RRPV_MRU;
        default:
          if (rrpv_in[hit_way] != '0) rrpv_out[hit_way] = rrpv_in[hit_way] - 1'b1;
      endcase
    end else begin
      if (!have_invalid)
        for (int w = 0; w < WAYS; w++) rrpv_out[w] = rrpv_in[w] + delta;
      rrpv_out[fill_way] = ins_rrpv;
    end
  end

endmodule
