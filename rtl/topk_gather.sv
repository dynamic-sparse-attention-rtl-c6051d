// topk_gather: the gather() step of dynamic sparse attention, run against the
// KV-token-granular last-level cache.
//
// Once the top-k set of a decode step is known, this unit walks it entry by
// entry (best score first). For each selected position it asks the
// token-level LRU whether the token {tenant, layer, pos} is in the reserved
// LL partition:
//   hit   - it reads the token's NBEAT beats from the data array (one per
//           cycle, registered read) and streams them to the attention
//           (SDPA) datapath;
//   miss  - it passes the tag and the slot the LRU allocated (or the bypass
//           flag) to the miss handler, which fetches the token from HBM,
//           fills the slot and forwards the beats, which are streamed on.
// Every beat leaves on sdpa_* with the token position; sdpa_tok_last marks a
// token's last beat and sdpa_step_last the last beat of the step. `done`
// pulses when the whole set has been delivered. ev_hit / ev_miss / ev_bypass
// pulse once per looked-up token for the performance counters.
//
// Tokens are handled one at a time, so a slot being read can never be
// chosen as a victim while it is in use. The SDPA side is assumed to take a
// beat every cycle (no back-pressure). The walk order and the one-at-a-time
// sequencing are this design's choices; the paper gives only the gather's
// place between the top-k selection and the LRU.
module topk_gather
  import dsa_pkg::*;
#(
  parameter int unsigned KMAX  = TOPK_MAX,
  parameter int unsigned SLOTS = LL_SLOTS,
  parameter int unsigned NBEAT = BEATS,
  parameter int unsigned DW    = BUS_W,
  localparam int unsigned KW   = $clog2(KMAX+1),
  localparam int unsigned SLW  = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned BW   = (NBEAT > 1) ? $clog2(NBEAT) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // step command
  input  logic                start,
  input  logic [TENANT_W-1:0] tenant,
  input  logic [LAYER_W-1:0]  layer,
  input  logic [POS_W-1:0]    sel_pos [KMAX],
  input  logic [KW-1:0]       sel_count,
  output logic                busy,
  output logic                done,
  // token-level LRU
  output logic                lru_req_valid,
  input  logic                lru_req_ready,
  output kv_tag_t             lru_req_tag,
  input  logic                lru_resp_valid,
  input  logic                lru_resp_hit,
  input  logic                lru_resp_bypass,
  input  logic [SLW-1:0]      lru_resp_slot,
  // miss handler
  output logic                miss_valid,
  input  logic                miss_ready,
  output kv_tag_t             miss_tag,
  output logic [SLW-1:0]      miss_slot,
  output logic                miss_bypass,
  input  logic                fill_valid,
  input  logic [DW-1:0]       fill_data,
  input  logic                fill_last,
  // data array read port
  output logic                rd_en,
  output logic [SLW-1:0]      rd_slot,
  output logic [BW-1:0]       rd_beat,
  input  logic [DW-1:0]       rd_data,
  // to SDPA
  output logic                sdpa_valid,
  output logic [DW-1:0]       sdpa_data,
  output logic [POS_W-1:0]    sdpa_pos,
  output logic                sdpa_tok_last,
  output logic                sdpa_step_last,
  // events
  output logic                ev_hit,
  output logic                ev_miss,
  output logic                ev_bypass
);

  typedef enum logic [2:0] {G_IDLE, G_LOOKUP, G_WAIT, G_READ, G_MISS, G_FILL, G_NEXT} gstate_t;
  gstate_t        state;
  logic [KW-1:0]  idx, cnt_q;
  logic [TENANT_W-1:0] tenant_q;
  logic [LAYER_W-1:0]  layer_q;
  logic [POS_W-1:0]    pos_q;
  logic [SLW-1:0] slot_q;
  logic           byp_q;
  logic [BW-1:0]  beat_q;
  logic           rd_v1, rd_last1;
  logic           last_tok;
  logic [KW-1:0]  idx_n;
  localparam int unsigned IW = (KMAX > 1) ? $clog2(KMAX) : 1;

  assign idx_n       = idx + 1'b1;

  assign last_tok    = (idx == cnt_q - 1'b1);
  assign busy        = (state != G_IDLE);
  assign lru_req_valid = (state == G_LOOKUP);
  assign lru_req_tag   = '{tenant: tenant_q, layer: layer_q, pos: pos_q};
  assign miss_valid  = (state == G_MISS);
  assign miss_tag    = lru_req_tag;
  assign miss_slot   = slot_q;
  assign miss_bypass = byp_q;
  assign rd_en       = (state == G_READ);
  assign rd_slot     = slot_q;
  assign rd_beat     = beat_q;

  // SDPA stream: registered array read or forwarded fill, never both
  assign sdpa_valid     = rd_v1 | fill_valid;
  assign sdpa_data      = rd_v1 ? rd_data : fill_data;
  assign sdpa_pos       = pos_q;
  assign sdpa_tok_last  = rd_v1 ? rd_last1 : (fill_valid & fill_last);
  assign sdpa_step_last = sdpa_tok_last & last_tok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= G_IDLE;
      idx      <= '0;
      cnt_q    <= '0;
      tenant_q <= '0;
      layer_q  <= '0;
      pos_q    <= '0;
      slot_q   <= '0;
      byp_q    <= 1'b0;
      beat_q   <= '0;
      rd_v1    <= 1'b0;
      rd_last1 <= 1'b0;
      done     <= 1'b0;
      ev_hit   <= 1'b0;
      ev_miss  <= 1'b0;
      ev_bypass <= 1'b0;
    end else begin
      done      <= 1'b0;
      ev_hit    <= 1'b0;
      ev_miss   <= 1'b0;
      ev_bypass <= 1'b0;
      rd_v1     <= (state == G_READ);
      rd_last1  <= (state == G_READ) && (beat_q == BW'(NBEAT-1));
      unique case (state)
        G_IDLE: if (start) begin
          tenant_q <= tenant;
          layer_q  <= layer;
          cnt_q    <= sel_count;
          idx      <= '0;
          pos_q    <= sel_pos[0];
          if (sel_count == '0) done <= 1'b1;
          else                 state <= G_LOOKUP;
        end
        G_LOOKUP: if (lru_req_ready) state <= G_WAIT;
        G_WAIT: if (lru_resp_valid) begin
          slot_q    <= lru_resp_slot;
          byp_q     <= lru_resp_bypass;
          beat_q    <= '0;
          ev_hit    <= lru_resp_hit;
          ev_miss   <= !lru_resp_hit && !lru_resp_bypass;
          ev_bypass <= lru_resp_bypass;
          state     <= lru_resp_hit ? G_READ : G_MISS;
        end
        G_READ: begin
          beat_q <= beat_q + 1'b1;
          if (beat_q == BW'(NBEAT-1)) state <= G_NEXT;
        end
        G_MISS: if (miss_ready) state <= G_FILL;
        G_FILL: if (fill_valid && fill_last) state <= G_NEXT;
        G_NEXT: begin                 // last array beat leaves in this cycle
          if (last_tok) begin
            done  <= 1'b1;
            state <= G_IDLE;
          end else begin
            idx   <= idx + 1'b1;
            pos_q <= sel_pos[idx_n[IW-1:0]];
            state <= G_LOOKUP;
          end
        end
        default: state <= G_IDLE;
      endcase
    end
  end

endmodule
