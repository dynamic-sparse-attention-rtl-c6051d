// tb_dsa_kv_llc_full: end-to-end test of the KV-granular LL cache with every
// parameter at its default: 4x64 indexer, top-k up to 256, 5120 reserved
// token slots of 4 KiB (20 MiB), 64-beat tokens, HBM latency 200 cycles.
// Decode steps over 1000-token contexts (the evaluated prompts were
// 500-1500 tokens) with k = 128 and 256 and a slowly changing query; then the
// reservation is cut to 100 tokens at run time (to reach evictions quickly),
// and a step runs with nothing reserved. Checks as in tb_dsa_kv_llc_top:
// every SDPA beat, hit/miss/eviction/bypass counts and evicted tokens
// against reference models; every mechanism must occur.
module tb_dsa_kv_llc_full;
  localparam int KMAX = dsa_pkg::TOPK_MAX, SLOTS = dsa_pkg::LL_SLOTS,
                 NBEAT = dsa_pkg::BEATS, WATCHDOG = 3000000;

  import dsa_pkg::*;
  import tb_dsa_pkg::*;
  localparam int H = IDX_HEADS, D = IDX_DIM;
  localparam int KW = $clog2(KMAX+1), SLW = (SLOTS > 1) ? $clog2(SLOTS) : 1;

  logic clk = 0, rst_n = 0;
  logic [SLW:0] cfg_slots;
  logic [KW-1:0] cfg_k;
  logic [ADDR_W-1:0] cfg_kv_base = 48'h0020_0000_0000;
  logic flush = 0;
  logic step_start = 0;
  logic [TENANT_W-1:0] step_tenant;
  logic [LAYER_W-1:0] step_layer;
  logic signed [7:0] q [H][D];
  logic signed [7:0] w [H];
  logic k_valid = 0, k_last = 0;
  logic signed [7:0] k [D];
  logic busy, step_done;
  logic hbm_req_valid, hbm_req_ready, hbm_rsp_valid;
  logic [ADDR_W-1:0] hbm_req_addr;
  logic [BUS_W-1:0] hbm_rsp_data;
  logic sdpa_valid, sdpa_tok_last, sdpa_step_last;
  logic [BUS_W-1:0] sdpa_data;
  logic [POS_W-1:0] sdpa_pos;
  logic evict_valid;
  kv_tag_t evict_tag;
  logic [31:0] cnt_hit, cnt_miss, cnt_bypass, cnt_evict;
  int n_req;

  dsa_kv_llc_top dut (.*);

  hbm_model #(.LAT(200), .NBEAT(NBEAT)) u_hbm (.clk, .rst_n, .req_valid(hbm_req_valid),
    .req_ready(hbm_req_ready), .req_addr(hbm_req_addr), .rsp_valid(hbm_rsp_valid),
    .rsp_data(hbm_rsp_data), .n_req);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // indexer key of token s of (tenant t, layer l), element d: a fixed hash
  function automatic logic signed [7:0] key_of(int t, int l, int s, int d);
    logic [31:0] x;
    x = 32'(s) * 32'h9E3779B1 ^ 32'(d) * 32'h85EBCA77 ^ 32'(t * 131 + l * 7919 + 1);
    x = x ^ (x >> 15); x = x * 32'h2C1B3C6D; x = x ^ (x >> 12);
    return 8'(x);
  endfunction

  // reference LRU (recency list, most recent last) and event counters
  kv_tag_t lru_q[$];
  kv_tag_t evict_exp[$];
  int e_hit = 0, e_miss = 0, e_byp = 0, e_evict = 0, n_flush = 0, n_kswitch = 0, n_steps = 0;
  int got_evict = 0;

  always @(posedge clk) if (rst_n && evict_valid) begin
    got_evict++;
    checks++;
    if (evict_exp.size() == 0 || evict_tag != evict_exp[0]) begin
      failures++; $display("FAIL: unexpected eviction of %h", evict_tag);
    end else void'(evict_exp.pop_front());
  end

  function automatic void ref_access(kv_tag_t t);
    int f[$];
    if (cfg_slots == 0) begin e_byp++; return; end
    f = lru_q.find_first_index(x) with (x == t);
    if (f.size() > 0) begin e_hit++; lru_q.delete(f[0]); end
    else begin
      e_miss++;
      if (lru_q.size() == int'(cfg_slots)) begin
        e_evict++; evict_exp.push_back(lru_q[0]); lru_q.delete(0);
      end
    end
    lru_q.push_back(t);
  endfunction

  task automatic do_flush();
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    lru_q.delete(); n_flush++;
  endtask

  // one decode step: T indexer keys, top-kk selection, gather, SDPA stream
  task automatic run_step(int t, int l, int T, int kk);
    longint sc [];
    bit taken [];
    int sel [$];
    int n, tok, beat, best;
    kv_tag_t tg;
    if (kk != int'(cfg_k)) n_kswitch++;
    cfg_k = KW'(kk);
    step_tenant = TENANT_W'(t); step_layer = LAYER_W'(l);
    // reference scores and top-k
    sc = new[T]; taken = new[T];
    for (int s = 0; s < T; s++) begin
      longint acc = 0;
      for (int j = 0; j < H; j++) begin
        longint dot = 0;
        for (int d = 0; d < D; d++) dot += longint'(q[j][d]) * longint'(key_of(t, l, s, d));
        if (dot > 0) acc += dot * longint'(w[j]);
      end
      sc[s] = acc; taken[s] = 0;
    end
    n = (T < kk) ? T : kk;
    for (int r = 0; r < n; r++) begin
      best = -1;
      for (int s = 0; s < T; s++) if (!taken[s] && (best < 0 || sc[s] > sc[best])) best = s;
      taken[best] = 1; sel.push_back(best);
      tg.tenant = step_tenant; tg.layer = step_layer; tg.pos = POS_W'(best);
      ref_access(tg);
    end
    // drive
    @(negedge clk);
    step_start = 1;
    for (int s = 0; s < T; s++) begin
      k_valid = 1; k_last = (s == T-1);
      for (int d = 0; d < D; d++) k[d] = key_of(t, l, s, d);
      @(negedge clk);
      step_start = 0;
      if (s % 97 == 50) begin k_valid = 0; @(negedge clk); end   // a gap in the stream
    end
    k_valid = 0; k_last = 0;
    tok = 0; beat = 0;
    while (!step_done) begin
      if (sdpa_valid) begin
        logic [ADDR_W-1:0] a;
        tg.tenant = step_tenant; tg.layer = step_layer; tg.pos = POS_W'(sel[tok]);
        a = cfg_kv_base + (ADDR_W'(tg) << $clog2(TOKEN_BYTES));
        checks++;
        if (sdpa_data !== hbm_word(a, beat) || int'(sdpa_pos) != sel[tok] ||
            sdpa_tok_last != (beat == NBEAT-1) ||
            sdpa_step_last != (beat == NBEAT-1 && tok == n-1)) begin
          failures++;
          $display("FAIL step %0d tok %0d beat %0d: pos %0d exp %0d", n_steps, tok, beat,
                   sdpa_pos, sel[tok]);
        end
        beat++;
        if (beat == NBEAT) begin beat = 0; tok++; end
      end
      @(negedge clk);
    end
    checks++;
    if (tok != n) begin failures++; $display("FAIL: %0d tokens of %0d delivered", tok, n); end
    @(negedge clk);
    checks++;
    if (int'(cnt_hit) != e_hit || int'(cnt_miss) != e_miss || int'(cnt_bypass) != e_byp ||
        int'(cnt_evict) != e_evict || n_req != e_miss + e_byp) begin
      failures++;
      $display("FAIL counters: hit %0d/%0d miss %0d/%0d bypass %0d/%0d evict %0d/%0d hbm %0d",
               cnt_hit, e_hit, cnt_miss, e_miss, cnt_bypass, e_byp, cnt_evict, e_evict, n_req);
    end
    n_steps++;
    $display("step %0d tenant %0d layer %0d T %0d k %0d: cycle %0d, hits %0d misses %0d evictions %0d",
             n_steps, t, l, T, kk, cyc, cnt_hit, cnt_miss, cnt_evict);
  endtask

  // next query: keep most elements, redraw a few (consecutive decode steps
  // select overlapping but different sets)
  task automatic new_query(int redraw_pct);
    for (int j = 0; j < H; j++)
      for (int d = 0; d < D; d++)
        if ($urandom_range(0, 99) < redraw_pct) q[j][d] = 8'($urandom);
  endtask

  // deterministic query for (tenant, layer, step): each element is redrawn
  // every 8 steps, at a phase of its own, so about 1/8 changes per step
  task automatic det_query(int t, int l, int step);
    for (int j = 0; j < H; j++)
      for (int d = 0; d < D; d++) begin
        int ph = (j * 37 + d * 11) % 8;
        q[j][d] = key_of(t + 8, l + 3 * j, (step + ph) / 8, d + 64 * j);
      end
  endtask

  initial begin
    cfg_slots = (SLW+1)'(SLOTS); cfg_k = '0; step_tenant = 0; step_layer = 0;
    for (int d = 0; d < D; d++) k[d] = 0;
    for (int j = 0; j < H; j++) begin
      w[j] = 8'($urandom_range(1, 100));
      for (int d = 0; d < D; d++) q[j][d] = 8'($urandom);
    end
    w[H-1] = -8'sd20;                        // one head votes against
    repeat (3) @(negedge clk);
    rst_n = 1;
    
    run_step(0, 10, 1000, 128); new_query(10);
    run_step(0, 10, 1000, 128); new_query(10);
    run_step(3, 41, 1000, 256);
    do_flush();
    cfg_slots = (SLW+1)'(100);
    run_step(0, 10, 1000, 128); new_query(10);
    run_step(0, 10, 1000, 128);
    cfg_slots = '0;
    run_step(2, 11, 300, 64);
    cfg_slots = (SLW+1)'(SLOTS);

    // every mechanism must have happened
    checks++;
    if (e_hit == 0 || e_miss == 0 || e_evict == 0 || e_byp == 0 || n_flush == 0 || n_kswitch < 2) begin
      failures++;
      $display("FAIL: mechanism not exercised: hit %0d miss %0d evict %0d bypass %0d flush %0d k-switch %0d",
               e_hit, e_miss, e_evict, e_byp, n_flush, n_kswitch);
    end
    checks++;
    if (got_evict != e_evict) begin failures++; $display("FAIL: %0d eviction notices", got_evict); end
    $display("mechanisms: hits %0d misses %0d evictions %0d bypasses %0d flushes %0d k-switches %0d steps %0d",
             e_hit, e_miss, e_evict, e_byp, n_flush, n_kswitch, n_steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
