// llc_nuca: the shared, address-interleaved (NUCA) last-level cache.
//
// NUM_SLICES llc_slice instances (eight 2MB, 16-way slices make the 16MB LLC, one
// slice per core, as in the paper's evaluated system). A block lives in the slice
// given by the address bits just above the block offset. Every core offers at most
// one request at a time (PA plus Reuse Hint); each slice has a round-robin arbiter
// that picks one of the cores addressing it, so up to NUM_SLICES requests start per
// cycle. The slice's response is routed back to the core whose id it carries.
//
// The paper's system links cores and slices with a ring (2 cycles per hop); this
// block does not model the ring's topology or hop delay: a request reaches its
// slice arbiter in the cycle it is offered. That is this design's simplification.
//
// Interface: per core, req_valid/req_ready handshake and a one-cycle resp_valid
// pulse with hit/evict/aged flags, ACCESS_LAT cycles after the handshake. A core must
// keep its request stable until req_ready and must not have two requests open.
module llc_nuca
  import grasp_pkg::*;
#(
  parameter int unsigned NUM_CORES   = 8,
  parameter int unsigned NUM_SLICES  = 8,
  parameter int unsigned WAYS        = 16,
  parameter int unsigned SETS        = 2048,
  parameter int unsigned BLOCK_BYTES = 64,
  parameter int unsigned ACCESS_LAT  = 10,
  parameter int unsigned SLICE_BITS  = (NUM_SLICES > 1) ? $clog2(NUM_SLICES) : 1,
  parameter int unsigned ID_W        = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1,
  parameter int unsigned WAY_W       = $clog2(WAYS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid  [NUM_CORES],
  output logic              req_ready  [NUM_CORES],
  input  logic [PA_W-1:0]   req_pa     [NUM_CORES],
  input  reuse_hint_e       req_hint   [NUM_CORES],
  output logic              resp_valid [NUM_CORES],
  output logic              resp_hit   [NUM_CORES],
  output logic              resp_evict [NUM_CORES],
  output logic              resp_aged  [NUM_CORES],
  output logic              init_done
);

  localparam int unsigned OFF_W = $clog2(BLOCK_BYTES);

  logic [NUM_CORES-1:0]  want      [NUM_SLICES];
  logic [NUM_CORES-1:0]  gnt       [NUM_SLICES];
  logic [ID_W-1:0]       gnt_idx   [NUM_SLICES];
  logic                  gnt_any   [NUM_SLICES];
  logic                  s_ready   [NUM_SLICES];
  logic                  s_rvalid  [NUM_SLICES];
  logic [ID_W-1:0]       s_rid     [NUM_SLICES];
  logic                  s_rhit    [NUM_SLICES];
  logic                  s_revict  [NUM_SLICES];
  logic                  s_raged   [NUM_SLICES];
  logic [NUM_SLICES-1:0] s_init;

  function automatic int unsigned slice_of(input logic [PA_W-1:0] pa);
    if (NUM_SLICES == 1) return 0;
    return int'(pa[OFF_W +: SLICE_BITS]);
  endfunction

  always_comb begin
    for (int s = 0; s < NUM_SLICES; s++)
      for (int c = 0; c < NUM_CORES; c++)
        want[s][c] = req_valid[c] && (slice_of(req_pa[c]) == s);
  end

  for (genvar s = 0; s < NUM_SLICES; s++) begin : g_slice
    rr_arbiter #(.N(NUM_CORES), .IDX_W(ID_W)) u_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .req     (want[s]),
      .advance (s_ready[s]),
      .gnt     (gnt[s]),
      .gnt_idx (gnt_idx[s]),
      .gnt_any (gnt_any[s])
    );

    llc_slice #(
      .WAYS(WAYS), .SETS(SETS), .BLOCK_BYTES(BLOCK_BYTES),
      .SLICE_BITS(SLICE_BITS), .ACCESS_LAT(ACCESS_LAT), .ID_W(ID_W)
    ) u_slice (
      .clk        (clk),
      .rst_n      (rst_n),
      .req_valid  (gnt_any[s]),
      .req_ready  (s_ready[s]),
      .req_pa     (req_pa[gnt_idx[s]]),
      .req_hint   (req_hint[gnt_idx[s]]),
      .req_id     (gnt_idx[s]),
      .resp_valid (s_rvalid[s]),
      .resp_id    (s_rid[s]),
      .resp_hit   (s_rhit[s]),
      .resp_way   (),
      .resp_evict (s_revict[s]),
      .resp_aged  (s_raged[s]),
      .init_done  (s_init[s])
    );
  end

  assign init_done = &s_init;

  // a core has one request open, so at most one slice answers it in a cycle
  for (genvar c = 0; c < NUM_CORES; c++) begin : g_chk
    logic [NUM_SLICES-1:0] answering;
    for (genvar s = 0; s < NUM_SLICES; s++) begin : g_s
      assign answering[s] = s_rvalid[s] && (int'(s_rid[s]) == c);
    end
    a_one_resp: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(answering));
  end

  always_comb begin
    for (int c = 0; c < NUM_CORES; c++) begin
      req_ready[c]  = 1'b0;
      resp_valid[c] = 1'b0;
      resp_hit[c]   = 1'b0;
      resp_evict[c] = 1'b0;
      resp_aged[c]  = 1'b0;
      for (int s = 0; s < NUM_SLICES; s++) begin
        if (gnt[s][c] && s_ready[s]) req_ready[c] = 1'b1;
        if (s_rvalid[s] && int'(s_rid[s]) == c) begin
          resp_valid[c] = 1'b1;
          resp_hit[c]   = s_rhit[s];
          resp_evict[c] = s_revict[s];
          resp_aged[c]  = s_raged[s];
        end
      end
    end
  end

endmodule
