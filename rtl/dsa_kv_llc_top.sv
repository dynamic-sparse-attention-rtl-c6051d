// dsa_kv_llc_top: KV-token-granular last-level cache for dynamic sparse
// attention (DSA) decode.
//
// One decode step of one layer for one tenant runs through the path:
//   indexer keys k^i_s --> lightning_indexer --> topk_select --> topk_gather
//   topk_gather --> kv_lru_tags --(hit)--> kv_data_store --> SDPA port
//                               --(miss)-> kv_miss_handler --> HBM port
//                                          (fill into kv_data_store and
//                                           forward to the SDPA port)
// A part of the LL cache (cfg_slots tokens, up to SLOTS) is kept for KV
// tokens and managed fully associatively with exact token-level LRU, so
// tokens picked by earlier decode steps, of any tenant and layer, are kept
// between steps and served without an HBM access.
//
// Use: program cfg_* while idle (flush clears the partition). Pulse
// step_start with the tenant, layer, indexer query q, head weights w and k;
// q, w, tenant and layer must stay stable until step_done. Then stream the
// T indexer keys of that tenant and layer, one per cycle (gaps allowed),
// marking the last with k_last. About T + 4 cycles later the top-k set is
// known; the gather then delivers the k selected tokens, 64 beats each, on
// sdpa_*; step_done pulses after the last beat. A hit costs 2 lookup cycles
// plus 64 read beats; a miss 16 cycles of LRU search plus the HBM round
// trip. evict_valid/evict_tag report each token the LRU replaces. The counters count lookups by outcome and evictions since reset.
// HBM, SDPA, the projections feeding q, w and k, and the rest of the LL
// cache are outside this block.
module dsa_kv_llc_top
  import dsa_pkg::*;
#(
  parameter int unsigned H     = IDX_HEADS,
  parameter int unsigned D     = IDX_DIM,
  parameter int unsigned KMAX  = TOPK_MAX,
  parameter int unsigned SLOTS = LL_SLOTS,
  parameter int unsigned NBEAT = BEATS,
  parameter int unsigned DW    = BUS_W,
  localparam int unsigned KW   = $clog2(KMAX+1),
  localparam int unsigned SLW  = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned BW   = (NBEAT > 1) ? $clog2(NBEAT) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  logic [SLW:0]              cfg_slots,     // reserved tokens, 0 = off
  input  logic [KW-1:0]             cfg_k,         // top-k
  input  logic [ADDR_W-1:0]         cfg_kv_base,   // KV cache base in HBM
  input  logic                      flush,
  // decode step
  input  logic                      step_start,
  input  logic [TENANT_W-1:0]       step_tenant,
  input  logic [LAYER_W-1:0]        step_layer,
  input  logic signed [IDX_EW-1:0]  q [H][D],
  input  logic signed [IDX_WW-1:0]  w [H],
  input  logic                      k_valid,
  input  logic                      k_last,
  input  logic signed [IDX_EW-1:0]  k [D],
  output logic                      busy,
  output logic                      step_done,
  // HBM read port
  output logic                      hbm_req_valid,
  input  logic                      hbm_req_ready,
  output logic [ADDR_W-1:0]         hbm_req_addr,
  input  logic                      hbm_rsp_valid,
  input  logic [DW-1:0]             hbm_rsp_data,
  // to SDPA
  output logic                      sdpa_valid,
  output logic [DW-1:0]             sdpa_data,
  output logic [POS_W-1:0]          sdpa_pos,
  output logic                      sdpa_tok_last,
  output logic                      sdpa_step_last,
  // eviction notice: a token left the reserved partition
  output logic                      evict_valid,
  output kv_tag_t                   evict_tag,
  // performance counters
  output logic [31:0]               cnt_hit,
  output logic [31:0]               cnt_miss,
  output logic [31:0]               cnt_bypass,
  output logic [31:0]               cnt_evict
);

  // ---- step sequencing ---------------------------------------------------
  typedef enum logic [1:0] {T_IDLE, T_INDEX, T_GATHER} tstate_t;
  tstate_t state;

  logic                     s_valid, s_last;
  logic [POS_W-1:0]         s_pos;
  logic signed [SCORE_W-1:0] s_score;
  logic                     tk_done;
  logic [POS_W-1:0]         sel_pos [KMAX];
  logic [KW-1:0]            sel_count;
  logic                     g_busy, g_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= T_IDLE;
    else unique case (state)
      T_IDLE:   if (step_start) state <= T_INDEX;
      T_INDEX:  if (tk_done)    state <= T_GATHER;
      T_GATHER: if (g_done)     state <= T_IDLE;
      default:  state <= T_IDLE;
    endcase
  end

  assign busy      = (state != T_IDLE) | g_busy;
  assign step_done = g_done;

  // ---- indexer and top-k ---------------------------------------------------
  lightning_indexer #(.H(H), .D(D)) u_indexer (
    .clk, .rst_n,
    .start   (step_start && state == T_IDLE),
    .q, .w,
    .k_valid (k_valid && (state == T_INDEX || step_start)),
    .k_last, .k,
    .s_valid, .s_last, .s_pos, .s_score
  );

  topk_select #(.KMAX(KMAX)) u_topk (
    .clk, .rst_n,
    .clear     (step_start && state == T_IDLE),
    .cfg_k,
    .in_valid  (s_valid),
    .in_last   (s_last),
    .in_score  (s_score),
    .in_pos    (s_pos),
    .done      (tk_done),
    .sel_pos,
    .sel_count
  );

  // ---- gather, LRU, data array, miss path ---------------------------------------
  logic           lru_req_valid, lru_req_ready;
  kv_tag_t        lru_req_tag;
  logic           lru_resp_valid, lru_resp_hit, lru_resp_bypass, lru_resp_evict;
  logic [SLW-1:0] lru_resp_slot;
  kv_tag_t        lru_resp_evict_tag;
  logic           miss_valid, miss_ready, miss_bypass;
  kv_tag_t        miss_tag;
  logic [SLW-1:0] miss_slot;
  logic           fill_valid, fill_last;
  logic [DW-1:0]  fill_data;
  logic           wr_en, rd_en;
  logic [SLW-1:0] wr_slot, rd_slot;
  logic [BW-1:0]  wr_beat, rd_beat;
  logic [DW-1:0]  wr_data, rd_data;
  logic           ev_hit, ev_miss, ev_bypass;

  topk_gather #(.KMAX(KMAX), .SLOTS(SLOTS), .NBEAT(NBEAT), .DW(DW)) u_gather (
    .clk, .rst_n,
    .start (tk_done && state == T_INDEX),
    .tenant (step_tenant), .layer (step_layer),
    .sel_pos, .sel_count,
    .busy (g_busy), .done (g_done),
    .lru_req_valid, .lru_req_ready, .lru_req_tag,
    .lru_resp_valid, .lru_resp_hit, .lru_resp_bypass, .lru_resp_slot,
    .miss_valid, .miss_ready, .miss_tag, .miss_slot, .miss_bypass,
    .fill_valid, .fill_data, .fill_last,
    .rd_en, .rd_slot, .rd_beat, .rd_data,
    .sdpa_valid, .sdpa_data, .sdpa_pos, .sdpa_tok_last, .sdpa_step_last,
    .ev_hit, .ev_miss, .ev_bypass
  );

  kv_lru_tags #(.N(SLOTS)) u_lru (
    .clk, .rst_n,
    .cfg_slots, .flush,
    .req_valid (lru_req_valid), .req_ready (lru_req_ready), .req_tag (lru_req_tag),
    .resp_valid (lru_resp_valid), .resp_hit (lru_resp_hit),
    .resp_bypass (lru_resp_bypass), .resp_slot (lru_resp_slot),
    .resp_evict (lru_resp_evict), .resp_evict_tag (lru_resp_evict_tag)
  );

  kv_data_store #(.SLOTS(SLOTS), .NBEAT(NBEAT), .DW(DW)) u_store (
    .clk,
    .wr_en, .wr_slot, .wr_beat, .wr_data,
    .rd_en, .rd_slot, .rd_beat, .rd_data
  );

  kv_miss_handler #(.SLOTS(SLOTS), .NBEAT(NBEAT), .DW(DW)) u_miss (
    .clk, .rst_n, .cfg_kv_base,
    .cmd_valid (miss_valid), .cmd_ready (miss_ready), .cmd_tag (miss_tag),
    .cmd_slot (miss_slot), .cmd_bypass (miss_bypass),
    .hbm_req_valid, .hbm_req_ready, .hbm_req_addr,
    .hbm_rsp_valid, .hbm_rsp_data,
    .wr_en, .wr_slot, .wr_beat, .wr_data,
    .out_valid (fill_valid), .out_data (fill_data), .out_last (fill_last)
  );

  assign evict_valid = lru_resp_valid & lru_resp_evict;
  assign evict_tag   = lru_resp_evict_tag;

  // ---- performance counters ----------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_hit    <= '0;
      cnt_miss   <= '0;
      cnt_bypass <= '0;
      cnt_evict  <= '0;
    end else begin
      cnt_hit    <= cnt_hit    + 32'(ev_hit);
      cnt_miss   <= cnt_miss   + 32'(ev_miss);
      cnt_bypass <= cnt_bypass + 32'(ev_bypass);
      cnt_evict  <= cnt_evict  + 32'(evict_valid);
    end
  end

endmodule
