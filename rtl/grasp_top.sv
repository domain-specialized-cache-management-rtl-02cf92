// grasp_top: GRASP, graph-specialized management of a shared last-level cache.
//
// NUM_CORES per-core frontends (Address Bound Registers + classification logic) tag
// each LLC request with a 2-bit Reuse Hint; the request crosses the ring (ring_noc,
// HOP_CYCLES per hop each way) to the NUCA LLC (NUM_SLICES GRASP-managed slices),
// which uses the hint to choose RRIP insertion and hit-promotion values. The cores,
// their TLBs and their L1/L2 caches are not part of this RTL: their signals are ports.
// Per core the top takes ABR writes from software and LLC-bound requests carrying
// both the virtual address (for classification) and the translated physical address
// (for the cache), and returns a response with hit, eviction and ageing flags and
// the hint that was applied. Default sizes are those of the paper's evaluated system:
// 8 cores, 16MB 16-way LLC in eight 2MB slices, 10-cycle bank access, 2-cycle ring
// hops, two ABR pairs.
//
// Timing: request accepted (acc_valid & acc_ready) at t, reaches the ring at t+1 and
// is offered to the slice HOP_CYCLES*hops + 1 cycles later; the slice answers
// ACCESS_LAT cycles after accepting, and the answer returns HOP_CYCLES*hops + 1
// cycles after that (hops = ring distance between the core and the block's slice).
// After reset the LLC clears its valid bits (SETS cycles) and init_done rises;
// requests wait until then.
module grasp_top
  import grasp_pkg::*;
#(
  parameter int unsigned NUM_CORES   = 8,
  parameter int unsigned NUM_SLICES  = 8,
  parameter int unsigned WAYS        = 16,
  parameter int unsigned SETS        = 2048,
  parameter int unsigned BLOCK_BYTES = 64,
  parameter int unsigned ACCESS_LAT  = 10,
  parameter int unsigned NUM_PA      = 2,
  parameter int unsigned HOP_CYCLES  = 2,
  parameter int unsigned PA_IDX_W    = (NUM_PA > 1) ? $clog2(NUM_PA) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 abr_wr_en     [NUM_CORES],
  input  logic [PA_IDX_W-1:0]  abr_wr_idx    [NUM_CORES],
  input  logic                 abr_wr_is_end [NUM_CORES],
  input  logic [VA_W-1:0]      abr_wr_data   [NUM_CORES],
  input  logic                 abr_clear     [NUM_CORES],
  input  logic                 acc_valid     [NUM_CORES],
  output logic                 acc_ready     [NUM_CORES],
  input  logic [VA_W-1:0]      acc_va        [NUM_CORES],
  input  logic [PA_W-1:0]      acc_pa        [NUM_CORES],
  output logic                 resp_valid    [NUM_CORES],
  output logic                 resp_hit      [NUM_CORES],
  output logic                 resp_evict    [NUM_CORES],
  output logic                 resp_aged     [NUM_CORES],
  output reuse_hint_e          resp_hint     [NUM_CORES],
  output logic                 init_done
);

  // the LLC capacity that GRASP sizes its regions by
  localparam longint unsigned LLC_BYTES =
    longint'(NUM_SLICES) * longint'(SETS) * longint'(WAYS) * longint'(BLOCK_BYTES);

  logic              fe_acc_valid [NUM_CORES];
  logic              fe_acc_ready [NUM_CORES];
  logic              llc_req_valid [NUM_CORES];
  logic              llc_req_ready [NUM_CORES];
  logic [PA_W-1:0]   llc_req_pa    [NUM_CORES];
  reuse_hint_e       llc_req_hint  [NUM_CORES];
  logic              llc_resp_valid [NUM_CORES];
  // between the ring and the LLC slices
  logic              sl_req_valid  [NUM_CORES];
  logic              sl_req_ready  [NUM_CORES];
  logic [PA_W-1:0]   sl_req_pa     [NUM_CORES];
  reuse_hint_e       sl_req_hint   [NUM_CORES];
  logic              sl_resp_valid [NUM_CORES];
  logic              sl_resp_hit   [NUM_CORES];
  logic              sl_resp_evict [NUM_CORES];
  logic              sl_resp_aged  [NUM_CORES];

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    assign fe_acc_valid[c] = acc_valid[c] && init_done;
    assign acc_ready[c]    = fe_acc_ready[c] && init_done;

    grasp_frontend #(.NUM_PA(NUM_PA), .LLC_BYTES(LLC_BYTES), .IDX_W(PA_IDX_W)) u_fe (
      .clk            (clk),
      .rst_n          (rst_n),
      .abr_wr_en      (abr_wr_en[c]),
      .abr_wr_idx     (abr_wr_idx[c]),
      .abr_wr_is_end  (abr_wr_is_end[c]),
      .abr_wr_data    (abr_wr_data[c]),
      .abr_clear      (abr_clear[c]),
      .acc_valid      (fe_acc_valid[c]),
      .acc_ready      (fe_acc_ready[c]),
      .acc_va         (acc_va[c]),
      .acc_pa         (acc_pa[c]),
      .llc_req_valid  (llc_req_valid[c]),
      .llc_req_ready  (llc_req_ready[c]),
      .llc_req_pa     (llc_req_pa[c]),
      .llc_req_hint   (llc_req_hint[c]),
      .llc_resp_valid (llc_resp_valid[c]),
      .resp_valid     (resp_valid[c]),
      .resp_hint      (resp_hint[c])
    );
  end

  ring_noc #(
    .NUM_CORES(NUM_CORES), .NUM_SLICES(NUM_SLICES), .HOP_CYCLES(HOP_CYCLES),
    .BLOCK_BYTES(BLOCK_BYTES)
  ) u_ring (
    .clk           (clk),
    .rst_n         (rst_n),
    .up_req_valid  (llc_req_valid),
    .up_req_ready  (llc_req_ready),
    .up_req_pa     (llc_req_pa),
    .up_req_hint   (llc_req_hint),
    .up_resp_valid (llc_resp_valid),
    .up_resp_hit   (resp_hit),
    .up_resp_evict (resp_evict),
    .up_resp_aged  (resp_aged),
    .dn_req_valid  (sl_req_valid),
    .dn_req_ready  (sl_req_ready),
    .dn_req_pa     (sl_req_pa),
    .dn_req_hint   (sl_req_hint),
    .dn_resp_valid (sl_resp_valid),
    .dn_resp_hit   (sl_resp_hit),
    .dn_resp_evict (sl_resp_evict),
    .dn_resp_aged  (sl_resp_aged)
  );

  llc_nuca #(
    .NUM_CORES(NUM_CORES), .NUM_SLICES(NUM_SLICES), .WAYS(WAYS), .SETS(SETS),
    .BLOCK_BYTES(BLOCK_BYTES), .ACCESS_LAT(ACCESS_LAT)
  ) u_llc (
    .clk        (clk),
    .rst_n      (rst_n),
    .req_valid  (sl_req_valid),
    .req_ready  (sl_req_ready),
    .req_pa     (sl_req_pa),
    .req_hint   (sl_req_hint),
    .resp_valid (sl_resp_valid),
    .resp_hit   (sl_resp_hit),
    .resp_evict (sl_resp_evict),
    .resp_aged  (sl_resp_aged),
    .init_done  (init_done)
  );

endmodule
