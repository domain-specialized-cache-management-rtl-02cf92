// ring_noc: latency of the on-chip ring between the cores and the LLC slices.
//
// The evaluated system links cores and LLC slices with a ring taking 2 cycles per
// hop. Core c sits at ring stop c and its local LLC slice s at stop s*NUM_CORES/
// NUM_SLICES (one slice per core by default). A request travels the shorter way
// round, so a trip covers min(d, NUM_CORES - d) hops for a stop distance d; the
// request is delayed by HOP_CYCLES per hop on the way to its slice, and the response
// by the same amount on the way back. A core in this design has at most one LLC
// request open, so each core needs only one delay counter. The hop delay follows
// the source design; the stop placement, the shortest-direction routing and the
// absence of link contention (two messages never compete for a link) are this
// design's simplifications.
//
// Interface: per core, an upstream request handshake (from the GRASP frontend) and
// a downstream one (to llc_nuca); the LLC's one-cycle response pulse with its flags
// is held and re-issued as a one-cycle pulse upstream after the return trip.
// Timing: upstream accept at t, downstream valid from t + 1 + HOP_CYCLES*hops;
// downstream response at r, upstream response at r + 1 + HOP_CYCLES*hops.
module ring_noc
  import grasp_pkg::*;
#(
  parameter int unsigned NUM_CORES   = 8,
  parameter int unsigned NUM_SLICES  = 8,
  parameter int unsigned HOP_CYCLES  = 2,
  parameter int unsigned BLOCK_BYTES = 64,
  parameter int unsigned SLICE_BITS  = (NUM_SLICES > 1) ? $clog2(NUM_SLICES) : 1,
  parameter int unsigned CNT_W       = $clog2(HOP_CYCLES * NUM_CORES + 2)
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the cores' frontends
  input  logic              up_req_valid   [NUM_CORES],
  output logic              up_req_ready   [NUM_CORES],
  input  logic [PA_W-1:0]   up_req_pa      [NUM_CORES],
  input  reuse_hint_e       up_req_hint    [NUM_CORES],
  output logic              up_resp_valid  [NUM_CORES],
  output logic              up_resp_hit    [NUM_CORES],
  output logic              up_resp_evict  [NUM_CORES],
  output logic              up_resp_aged   [NUM_CORES],
  // to the LLC
  output logic              dn_req_valid   [NUM_CORES],
  input  logic              dn_req_ready   [NUM_CORES],
  output logic [PA_W-1:0]   dn_req_pa      [NUM_CORES],
  output reuse_hint_e       dn_req_hint    [NUM_CORES],
  input  logic              dn_resp_valid  [NUM_CORES],
  input  logic              dn_resp_hit    [NUM_CORES],
  input  logic              dn_resp_evict  [NUM_CORES],
  input  logic              dn_resp_aged   [NUM_CORES]
);

  localparam int unsigned OFF_W = $clog2(BLOCK_BYTES);

  // one-way trip time from core c to the slice holding pa
  function automatic logic [CNT_W-1:0] trip(input int unsigned c, input logic [PA_W-1:0] pa);
    int unsigned s, stop, d;
    s    = (NUM_SLICES > 1) ? int'(pa[OFF_W +: SLICE_BITS]) : 0;
    stop = (s * NUM_CORES) / NUM_SLICES;
    d    = (stop >= c) ? stop - c : c - stop;
    if (NUM_CORES - d < d) d = NUM_CORES - d;
    return CNT_W'(d * HOP_CYCLES);
  endfunction

  typedef enum logic [2:0] {R_IDLE, R_OUT, R_REQ, R_WAIT, R_BACK, R_RESP} rstate_e;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    rstate_e          state;
    logic [CNT_W-1:0] cnt, hops_t;
    logic [PA_W-1:0]  pa_q;
    reuse_hint_e      hint_q;
    logic             hit_q, evict_q, aged_q;

    assign up_req_ready[c]  = (state == R_IDLE);
    assign dn_req_valid[c]  = (state == R_REQ);
    assign dn_req_pa[c]     = pa_q;
    assign dn_req_hint[c]   = hint_q;
    assign up_resp_valid[c] = (state == R_RESP);
    assign up_resp_hit[c]   = hit_q;
    assign up_resp_evict[c] = evict_q;
    assign up_resp_aged[c]  = aged_q;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        state   <= R_IDLE;
        cnt     <= '0;
        hops_t  <= '0;
        pa_q    <= '0;
        hint_q  <= HINT_DEFAULT;
        hit_q   <= 1'b0;
        evict_q <= 1'b0;
        aged_q  <= 1'b0;
      end else begin
        unique case (state)
          R_IDLE: if (up_req_valid[c]) begin
            pa_q   <= up_req_pa[c];
            hint_q <= up_req_hint[c];
            hops_t <= trip(c, up_req_pa[c]);
            cnt    <= trip(c, up_req_pa[c]);
            state  <= (trip(c, up_req_pa[c]) == '0) ? R_REQ : R_OUT;
          end
          R_OUT: begin
            cnt <= cnt - 1'b1;
            if (cnt == CNT_W'(1)) state <= R_REQ;
          end
          R_REQ:  if (dn_req_ready[c]) state <= R_WAIT;
          R_WAIT: if (dn_resp_valid[c]) begin
            hit_q   <= dn_resp_hit[c];
            evict_q <= dn_resp_evict[c];
            aged_q  <= dn_resp_aged[c];
            cnt     <= hops_t;
            state   <= (hops_t == '0) ? R_RESP : R_BACK;
          end
          R_BACK: begin
            cnt <= cnt - 1'b1;
            if (cnt == CNT_W'(1)) state <= R_RESP;
          end
          default: state <= R_IDLE;   // R_RESP
        endcase
      end
    end

    // an LLC response only comes back for the request this core has in flight
    a_resp_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
      dn_resp_valid[c] |-> state == R_WAIT);
  end

endmodule
