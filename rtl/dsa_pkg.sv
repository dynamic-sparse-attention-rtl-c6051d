// dsa_pkg: types and default sizes shared by the KV-granular last-level-cache
// design for dynamic sparse attention (DSA).
//
// A KV token is named by the tenant (request in the decode batch), the layer
// and its position in that tenant's context. The reserved LL-cache partition
// stores whole tokens, so this triple is the cache tag. Sizes that come from
// the evaluated serving setup: batch of 8 tenants, 64k-token context,
// LLaMA-3.1-70B with 80 layers, an indexer with 4 heads of dimension 64 and
// top-k up to 256. The 4 KiB token (K and V, 8 KV heads x 128 dims x BF16)
// and the 512-bit data bus are this design's choice.
package dsa_pkg;

  // ---- indexer ---------------------------------------------------------
  parameter int unsigned IDX_HEADS = 4;    // H_i
  parameter int unsigned IDX_DIM   = 64;   // D_indexer
  parameter int unsigned IDX_EW    = 8;    // width of one q^i / k^i element (signed)
  parameter int unsigned IDX_WW    = 8;    // width of one head weight w^i (signed)
  parameter int unsigned SCORE_W   = 32;   // signed index score

  // ---- top-k -----------------------------------------------------------
  parameter int unsigned TOPK_MAX  = 256;  // largest k evaluated

  // ---- KV token naming ---------------------------------------------------
  parameter int unsigned TENANT_W  = 3;    // batch of 8
  parameter int unsigned LAYER_W   = 7;    // up to 128 layers (80 used)
  parameter int unsigned POS_W     = 16;   // 64k context

  typedef struct packed {
    logic [TENANT_W-1:0] tenant;
    logic [LAYER_W-1:0]  layer;
    logic [POS_W-1:0]    pos;
  } kv_tag_t;

  parameter int unsigned TAG_W = $bits(kv_tag_t);

  // ---- reserved LL partition ---------------------------------------------
  parameter int unsigned TOKEN_BYTES = 4096;               // one layer's K+V of one token
  parameter int unsigned BUS_W       = 512;                // data beat
  parameter int unsigned BEATS       = TOKEN_BYTES * 8 / BUS_W;  // 64 beats per token
  parameter int unsigned LL_SLOTS    = 5120;               // 20 MiB / 4 KiB
  parameter int unsigned ADDR_W      = 48;                 // HBM byte address

  // Byte address of a KV token in HBM: tokens are laid out densely by
  // {tenant, layer, pos}, TOKEN_BYTES apart, above a base address.
  function automatic logic [ADDR_W-1:0] kv_addr(logic [ADDR_W-1:0] base, kv_tag_t t);
    return base + (ADDR_W'(t) << $clog2(TOKEN_BYTES));
  endfunction

endpackage
