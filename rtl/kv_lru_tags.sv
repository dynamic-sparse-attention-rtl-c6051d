// kv_lru_tags: the token-level LRU of the reserved last-level-cache partition.
//
// The reserved partition is managed fully associatively at the granularity
// of one KV token: any token of any tenant and layer may sit in any of the
// N slots, and on a miss the least recently used slot is replaced. Each slot
// holds a valid bit, the token's tag {tenant, layer, pos} and the value of a
// free-running access counter at its last use (a time stamp), which gives
// exact LRU order.
//
// How a lookup runs (one at a time):
//   IDLE   accept the request (req_valid & req_ready).
//   CMP    compare the tag with all N slots at once. A hit refreshes the
//          slot's stamp and answers next cycle: 2 cycles in all.
//   SEARCH on a miss, wait for the victim: a pipelined binary tree of
//          comparators, one register level per tree level, finds the slot
//          with the smallest key {valid, stamp} (empty slots first, then the
//          oldest; ties go to the lower slot). The slot is rewritten with the
//          new tag and the old one is reported as evicted. A miss answers
//          after 3 + ceil(log2 N) cycles: 16 for the default 5120 slots.
// The paper allows 10-20 cycles for the evaluation and eviction; the stamp
// scheme and the comparator tree are this design's own way of meeting that.
//
// cfg_slots sets how many slots are reserved (0..N, the "LL reserved" size);
// slots at or above it neither hit nor get allocated. With cfg_slots = 0 every
// lookup answers at once as a miss with resp_bypass set: no slot is used and
// the token goes from HBM straight through. `flush` invalidates every slot;
// raise it, and change cfg_slots, only while the unit is idle. The 32-bit
// stamp wraps after 2^32 lookups, after which the LRU order is wrong for
// one round of replacements; widen STAMP_W if that matters.
module kv_lru_tags
  import dsa_pkg::*;
#(
  parameter int unsigned N       = LL_SLOTS,
  parameter int unsigned STAMP_W = 32,
  localparam int unsigned SLW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned LV     = SLW                 // tree levels
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [SLW:0]     cfg_slots,
  input  logic             flush,
  input  logic             req_valid,
  output logic             req_ready,
  input  kv_tag_t          req_tag,
  output logic             resp_valid,
  output logic             resp_hit,
  output logic             resp_bypass,
  output logic [SLW-1:0]   resp_slot,
  output logic             resp_evict,      // a valid token was replaced
  output kv_tag_t          resp_evict_tag
);

  localparam int unsigned NP = 1 << LV;      // leaves, padded to a power of 2
  localparam int unsigned KW = STAMP_W + 1;  // key = {valid, stamp}

  typedef enum logic [1:0] {S_IDLE, S_CMP, S_SEARCH} state_t;
  state_t state;

  logic                vld   [N];
  kv_tag_t             tag   [N];
  logic [STAMP_W-1:0]  stamp [N];
  logic [STAMP_W-1:0]  now;
  kv_tag_t             tag_q;
  logic [SLW:0]        cnt;

  // ---- parallel tag compare ------------------------------------------------
  logic [N-1:0]   match;
  logic           hit_c;
  logic [SLW-1:0] hit_idx;
  always_comb begin
    hit_idx = '0;
    for (int i = 0; i < N; i++)
      match[i] = vld[i] && (tag[i] == tag_q) && ((SLW+1)'(i) < cfg_slots);
    for (int i = N-1; i >= 0; i--)
      if (match[i]) hit_idx = SLW'(i);
    hit_c = |match;
  end

  // ---- victim search: pipelined min tree ------------------------------------
  // Heap numbering: node n has children 2n and 2n+1; leaves are NP..2NP-1.
  logic [KW-1:0]  nkey [1:NP-1];
  logic [SLW-1:0] nidx [1:NP-1];

  function automatic logic [KW-1:0] leaf_key(int unsigned i);
    if (i >= N || i >= int'(cfg_slots)) return '1;    // not allocatable
    return {vld[i], stamp[i]};
  endfunction

  always_ff @(posedge clk) begin
    for (int n = NP-1; n >= 1; n--) begin
      logic [KW-1:0]  ka, kb;
      logic [SLW-1:0] ia, ib;
      if (2*n >= NP) begin
        ka = leaf_key(2*n - NP);   ia = SLW'(2*n - NP);
        kb = leaf_key(2*n+1 - NP); ib = SLW'(2*n+1 - NP);
      end else begin
        ka = nkey[2*n];   ia = nidx[2*n];
        kb = nkey[2*n+1]; ib = nidx[2*n+1];
      end
      if (kb < ka) begin nkey[n] <= kb; nidx[n] <= ib; end
      else         begin nkey[n] <= ka; nidx[n] <= ia; end
    end
  end

  logic [SLW-1:0] victim;
  assign victim = nidx[1];

  // ---- control ----------------------------------------------------------------
  assign req_ready = (state == S_IDLE) && !flush;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      now            <= '0;
      tag_q          <= '0;
      cnt            <= '0;
      resp_valid     <= 1'b0;
      resp_hit       <= 1'b0;
      resp_bypass    <= 1'b0;
      resp_slot      <= '0;
      resp_evict     <= 1'b0;
      resp_evict_tag <= '0;
      for (int i = 0; i < N; i++) begin
        vld[i]   <= 1'b0;
        tag[i]   <= '0;
        stamp[i] <= '0;
      end
    end else begin
      resp_valid <= 1'b0;
      if (flush)
        for (int i = 0; i < N; i++) vld[i] <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid && req_ready) begin
          tag_q <= req_tag;
          if (cfg_slots == '0) begin            // nothing reserved: bypass
            resp_valid  <= 1'b1;
            resp_hit    <= 1'b0;
            resp_bypass <= 1'b1;
            resp_slot   <= '0;
            resp_evict  <= 1'b0;
          end else begin
            state <= S_CMP;
          end
        end
        S_CMP: begin
          if (hit_c) begin
            now            <= now + 1'b1;
            stamp[hit_idx] <= now;
            resp_valid  <= 1'b1;
            resp_hit    <= 1'b1;
            resp_bypass <= 1'b0;
            resp_slot   <= hit_idx;
            resp_evict  <= 1'b0;
            state       <= S_IDLE;
          end else begin
            cnt   <= '0;
            state <= S_SEARCH;
          end
        end
        S_SEARCH: begin
          cnt <= cnt + 1'b1;
          if (cnt == (SLW+1)'(LV)) begin
            vld[victim]    <= 1'b1;
            tag[victim]    <= tag_q;
            stamp[victim]  <= now;
            now            <= now + 1'b1;
            resp_valid     <= 1'b1;
            resp_hit       <= 1'b0;
            resp_bypass    <= 1'b0;
            resp_slot      <= victim;
            resp_evict     <= vld[victim];
            resp_evict_tag <= tag[victim];
            state          <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A token may occupy at most one slot.
  assert property (@(posedge clk) $onehot0(match));

endmodule
