// grasp_frontend: the per-core part of GRASP, sitting beside the L1-D cache.
//
// It holds the core's Address Bound Registers (abr_file) and classification logic
// (grasp_classifier). When the core's L1-D sends a request to the LLC, the request
// arrives here with both its virtual address (classified, in parallel with the TLB)
// and the translated physical address. The frontend registers {PA, Reuse Hint} as the
// LLC request, offers it to the LLC until accepted, and then waits for the response,
// which it hands back to the core together with the hint used. One request is open at
// a time (this design's choice; the paper does not describe the request path).
//
// Timing: acc_valid/acc_ready handshake in cycle t; llc_req_valid from t+1 until
// llc_req_ready; resp_valid in the same cycle as llc_resp_valid; acc_ready again in
// the cycle after the response.
module grasp_frontend
  import grasp_pkg::*;
#(
  parameter int unsigned NUM_PA    = 2,
  parameter longint unsigned LLC_BYTES = 64'd16777216,
  parameter int unsigned IDX_W     = (NUM_PA > 1) ? $clog2(NUM_PA) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // software side: ABR programming
  input  logic              abr_wr_en,
  input  logic [IDX_W-1:0]  abr_wr_idx,
  input  logic              abr_wr_is_end,
  input  logic [VA_W-1:0]   abr_wr_data,
  input  logic              abr_clear,
  // L1-D miss request from the core side
  input  logic              acc_valid,
  output logic              acc_ready,
  input  logic [VA_W-1:0]   acc_va,
  input  logic [PA_W-1:0]   acc_pa,
  // LLC request (PA, hint) and response
  output logic              llc_req_valid,
  input  logic              llc_req_ready,
  output logic [PA_W-1:0]   llc_req_pa,
  output reuse_hint_e       llc_req_hint,
  input  logic              llc_resp_valid,
  // response to the core side
  output logic              resp_valid,
  output reuse_hint_e       resp_hint
);

  logic [NUM_PA-1:0] pa_valid;
  logic [VA_W-1:0]   start_q [NUM_PA];
  logic [VA_W-1:0]   end_q   [NUM_PA];
  logic [VA_W:0]     hr_end  [NUM_PA];
  logic [VA_W:0]     mr_end  [NUM_PA];
  reuse_hint_e       hint;

  abr_file #(.NUM_PA(NUM_PA), .LLC_BYTES(LLC_BYTES), .IDX_W(IDX_W)) u_abr (
    .clk       (clk),
    .rst_n     (rst_n),
    .wr_en     (abr_wr_en),
    .wr_idx    (abr_wr_idx),
    .wr_is_end (abr_wr_is_end),
    .wr_data   (abr_wr_data),
    .clear     (abr_clear),
    .pa_valid  (pa_valid),
    .start_q   (start_q),
    .end_q     (end_q),
    .hr_end    (hr_end),
    .mr_end    (mr_end)
  );

  grasp_classifier #(.NUM_PA(NUM_PA)) u_cls (
    .va       (acc_va),
    .pa_valid (pa_valid),
    .start_q  (start_q),
    .end_q    (end_q),
    .hr_end   (hr_end),
    .mr_end   (mr_end),
    .hint     (hint)
  );

  typedef enum logic [1:0] {F_IDLE, F_REQ, F_WAIT} fstate_e;
  fstate_e state;

  assign acc_ready     = (state == F_IDLE);
  assign llc_req_valid = (state == F_REQ);
  assign resp_valid    = (state == F_WAIT) && llc_resp_valid;
  assign resp_hint     = llc_req_hint;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= F_IDLE;
      llc_req_pa   <= '0;
      llc_req_hint <= HINT_DEFAULT;
    end else begin
      unique case (state)
        F_IDLE: if (acc_valid) begin
          llc_req_pa   <= acc_pa;
          llc_req_hint <= hint;
          state        <= F_REQ;
        end
        F_REQ:  if (llc_req_ready) state <= F_WAIT;
        F_WAIT: if (llc_resp_valid) state <= F_IDLE;
        default: state <= F_IDLE;
      endcase
    end
  end

  // an offered LLC request stays, unchanged, until the LLC takes it
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    llc_req_valid && !llc_req_ready |=> llc_req_valid && $stable(llc_req_pa) && $stable(llc_req_hint));
  // no response arrives for a core that has no request open
  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    llc_resp_valid |-> state == F_WAIT);

endmodule
