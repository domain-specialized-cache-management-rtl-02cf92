// llc_slice: one slice of the shared last-level cache, with GRASP replacement.
//
// A slice is set-associative (16 ways, 2048 sets of 64-byte blocks: 2MB). It keeps,
// per set, the tags, valid bits and the 3-bit RRPV of every way; GRASP adds no other
// per-block state, so the hint is used while the access is handled and then dropped.
// Each request carries a physical address and the 2-bit Reuse Hint. The slice reads
// the set, compares tags, lets grasp_rrip_policy work out the new RRPVs and the way
// to fill, and writes the set back. A miss allocates the block at once (the data
// array, the memory refill and write-backs are outside this model: it keeps no data).
// drrip_dueling supplies the insertion value for Default-hint fills.
//
// Address split (this design's choice): [5:0] byte in block, [5+SLICE_BITS:6] slice
// number (used by llc_nuca to pick the slice), then the set index, then the tag.
//
// Interface and timing: req_valid/req_ready handshake; one request is handled at a
// time. After reset the slice clears its valid bits one set per cycle (SETS cycles,
// req_ready low). resp_valid is a one-cycle pulse ACCESS_LAT cycles after the request
// handshake (10, the paper's bank access latency), with the hit flag, the way, and
// whether a valid block was evicted and whether the set had to be aged. A new
// request may be accepted in the response cycle. The responder is not back-pressured.
module llc_slice
  import grasp_pkg::*;
#(
  parameter int unsigned WAYS        = 16,
  parameter int unsigned SETS        = 2048,
  parameter int unsigned BLOCK_BYTES = 64,
  parameter int unsigned SLICE_BITS  = 3,
  parameter int unsigned ACCESS_LAT  = 10,
  parameter int unsigned ID_W        = 3,
  parameter int unsigned WAY_W       = $clog2(WAYS),
  parameter int unsigned SET_W       = $clog2(SETS),
  parameter int unsigned OFF_W       = $clog2(BLOCK_BYTES),
  parameter int unsigned TAG_W       = PA_W - OFF_W - SLICE_BITS - SET_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [PA_W-1:0]   req_pa,
  input  reuse_hint_e       req_hint,
  input  logic [ID_W-1:0]   req_id,
  output logic              resp_valid,
  output logic [ID_W-1:0]   resp_id,
  output logic              resp_hit,
  output logic [WAY_W-1:0]  resp_way,
  output logic              resp_evict,
  output logic              resp_aged,
  output logic              init_done
);

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_LOOKUP, S_UPDATE, S_WAIT, S_RESP} state_e;
  state_e state;

  // set arrays: one row per set, written as a whole
  logic [WAYS-1:0]               valid_mem [SETS];
  logic [WAYS-1:0][RRPV_W-1:0]   rrpv_mem  [SETS];
  logic [WAYS-1:0][TAG_W-1:0]    tag_mem   [SETS];

  logic [WAYS-1:0]               rd_valid;
  logic [WAYS-1:0][RRPV_W-1:0]   rd_rrpv;
  logic [WAYS-1:0][TAG_W-1:0]    rd_tag;

  logic [SET_W-1:0]  init_set;
  logic [SET_W-1:0]  cur_set;
  logic [TAG_W-1:0]  cur_tag;
  reuse_hint_e       cur_hint;
  logic [$clog2(ACCESS_LAT+1)-1:0] lat_cnt;

  logic [SET_W-1:0]  in_set;
  logic [TAG_W-1:0]  in_tag;
  assign in_set = req_pa[OFF_W+SLICE_BITS +: SET_W];
  assign in_tag = req_pa[PA_W-1 -: TAG_W];

  // lookup and policy
  logic              hit;
  logic [WAY_W-1:0]  hit_way, fill_way, wr_way;
  logic              evict, aged;
  logic [RRPV_W-1:0] pol_in  [WAYS];
  logic [RRPV_W-1:0] pol_out [WAYS];
  logic [RRPV_W-1:0] default_rrpv;
  logic              use_brrip;
  logic [9:0]        psel;

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (rd_valid[w] && rd_tag[w] == cur_tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
    for (int w = 0; w < WAYS; w++) pol_in[w] = rd_rrpv[w];
    wr_way = hit ? hit_way : fill_way;
  end

  grasp_rrip_policy #(.WAYS(WAYS), .WAY_W(WAY_W)) u_policy (
    .valid        (rd_valid),
    .rrpv_in      (pol_in),
    .hit          (hit),
    .hit_way      (hit_way),
    .hint         (cur_hint),
    .default_rrpv (default_rrpv),
    .rrpv_out     (pol_out),
    .fill_way     (fill_way),
    .evict        (evict),
    .aged         (aged)
  );

  drrip_dueling #(.SET_W(SET_W), .PSEL_W(10)) u_duel (
    .clk          (clk),
    .rst_n        (rst_n),
    .set_idx      (cur_set),
    .fill         (state == S_UPDATE && !hit && cur_hint == HINT_DEFAULT),
    .default_rrpv (default_rrpv),
    .use_brrip    (use_brrip),
    .psel         (psel)
  );

  assign req_ready = (state == S_IDLE) || (state == S_RESP);
  assign init_done = (state != S_INIT);
  wire   accept    = req_valid && req_ready;

  // control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_INIT;
      init_set   <= '0;
      lat_cnt    <= '0;
      cur_set    <= '0;
      cur_tag    <= '0;
      cur_hint   <= HINT_DEFAULT;
      resp_id    <= '0;
      resp_hit   <= 1'b0;
      resp_way   <= '0;
      resp_evict <= 1'b0;
      resp_aged  <= 1'b0;
    end else begin
      unique case (state)
        S_INIT: begin
          init_set <= init_set + 1'b1;
          if (int'(init_set) == SETS - 1) state <= S_IDLE;
        end
        S_IDLE, S_RESP: begin
          if (accept) begin
            state    <= S_LOOKUP;
            lat_cnt  <= 1;
            cur_set  <= in_set;
            cur_tag  <= in_tag;
            cur_hint <= req_hint;
            resp_id  <= req_id;
          end else begin
            state <= S_IDLE;
          end
        end
        S_LOOKUP: begin
          state   <= S_UPDATE;
          lat_cnt <= lat_cnt + 1'b1;
        end
        S_UPDATE: begin
          resp_hit   <= hit;
          resp_way   <= wr_way;
          resp_evict <= evict;
          resp_aged  <= aged;
          lat_cnt    <= lat_cnt + 1'b1;
          state      <= (int'(lat_cnt) + 1 >= ACCESS_LAT) ? S_RESP : S_WAIT;
        end
        S_WAIT: begin
          lat_cnt <= lat_cnt + 1'b1;
          if (int'(lat_cnt) + 1 >= ACCESS_LAT) state <= S_RESP;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign resp_valid = (state == S_RESP);

  // every accepted request is answered exactly ACCESS_LAT cycles later
  a_resp_after_req: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> ##(ACCESS_LAT) resp_valid);

  // set arrays: synchronous read on accept, whole-row write in S_UPDATE or S_INIT
  always_ff @(posedge clk) begin
    if (accept) begin
      rd_valid <= valid_mem[in_set];
      rd_rrpv  <= rrpv_mem[in_set];
      rd_tag   <= tag_mem[in_set];
    end
    if (state == S_INIT) begin
      valid_mem[init_set] <= '0;
    end else if (state == S_UPDATE) begin
      logic [WAYS-1:0][RRPV_W-1:0] nrrpv;
      logic [WAYS-1:0][TAG_W-1:0]  ntag;
      logic [WAYS-1:0]             nvalid;
      for (int w = 0; w < WAYS; w++) nrrpv[w] = pol_out[w];
      ntag           = rd_tag;
      nvalid         = rd_valid;
      ntag[wr_way]   = cur_tag;
      nvalid[wr_way] = 1'b1;
      valid_mem[cur_set] <= nvalid;
      rrpv_mem[cur_set]  <= nrrpv;
      tag_mem[cur_set]   <= ntag;
    end
  end

endmodule
