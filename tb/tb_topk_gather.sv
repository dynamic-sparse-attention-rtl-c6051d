// tb_topk_gather: self-checking test of the gather unit, wired to the real
// token-level LRU, data array and miss handler and to the behavioural HBM
// model (latency 30), at 8 slots, top-k up to 8 and 4-beat tokens.
// Steps: a cold set (all misses), the same set again (all hits, which must
// take exactly 1 + k*(NBEAT+4) cycles from start to done, counted in this
// testbench's convention), sets that force evictions, random sets, an empty
// set, a set for another tenant and a set with nothing reserved (bypass).
// Every beat on the SDPA side is compared with the HBM contents of the
// expected token, with its position and last flags; hit/miss events are
// compared with a reference exact-LRU model.
module tb_topk_gather;
  import dsa_pkg::*;
  import tb_dsa_pkg::*;
  localparam int KMAX = 8, SLOTS = 8, NBEAT = 4, LAT = 30, KW = 4, SLW = 3;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  logic [TENANT_W-1:0] tenant;
  logic [LAYER_W-1:0]  layer;
  logic [POS_W-1:0]    sel_pos [KMAX];
  logic [KW-1:0]       sel_count;
  logic [SLW:0]        cfg_slots;
  logic [ADDR_W-1:0]   cfg_kv_base = 48'h0010_0000_0000;

  logic lru_req_valid, lru_req_ready, lru_resp_valid, lru_resp_hit, lru_resp_bypass, lru_resp_evict;
  kv_tag_t lru_req_tag, lru_resp_evict_tag, miss_tag;
  logic [SLW-1:0] lru_resp_slot, miss_slot, rd_slot, wr_slot;
  logic miss_valid, miss_ready, miss_bypass, fill_valid, fill_last;
  logic [BUS_W-1:0] fill_data, rd_data, wr_data, sdpa_data, hbm_rsp_data;
  logic rd_en, wr_en;
  logic [1:0] rd_beat, wr_beat;
  logic sdpa_valid, sdpa_tok_last, sdpa_step_last;
  logic [POS_W-1:0] sdpa_pos;
  logic ev_hit, ev_miss, ev_bypass;
  logic hbm_req_valid, hbm_req_ready, hbm_rsp_valid;
  logic [ADDR_W-1:0] hbm_req_addr;
  int n_req;

  topk_gather #(.KMAX(KMAX), .SLOTS(SLOTS), .NBEAT(NBEAT)) dut (.*);
  kv_lru_tags #(.N(SLOTS)) u_lru (.clk, .rst_n, .cfg_slots, .flush(1'b0),
    .req_valid(lru_req_valid), .req_ready(lru_req_ready), .req_tag(lru_req_tag),
    .resp_valid(lru_resp_valid), .resp_hit(lru_resp_hit), .resp_bypass(lru_resp_bypass),
    .resp_slot(lru_resp_slot), .resp_evict(lru_resp_evict), .resp_evict_tag(lru_resp_evict_tag));
  kv_data_store #(.SLOTS(SLOTS), .NBEAT(NBEAT)) u_store (.clk, .wr_en, .wr_slot, .wr_beat,
    .wr_data, .rd_en, .rd_slot, .rd_beat, .rd_data);
  kv_miss_handler #(.SLOTS(SLOTS), .NBEAT(NBEAT)) u_miss (.clk, .rst_n, .cfg_kv_base,
    .cmd_valid(miss_valid), .cmd_ready(miss_ready), .cmd_tag(miss_tag), .cmd_slot(miss_slot),
    .cmd_bypass(miss_bypass), .hbm_req_valid, .hbm_req_ready, .hbm_req_addr,
    .hbm_rsp_valid, .hbm_rsp_data, .wr_en, .wr_slot, .wr_beat, .wr_data,
    .out_valid(fill_valid), .out_data(fill_data), .out_last(fill_last));
  hbm_model #(.LAT(LAT), .NBEAT(NBEAT)) u_hbm (.clk, .rst_n, .req_valid(hbm_req_valid),
    .req_ready(hbm_req_ready), .req_addr(hbm_req_addr), .rsp_valid(hbm_rsp_valid),
    .rsp_data(hbm_rsp_data), .n_req);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference exact LRU: recency list, most recent last
  kv_tag_t lru_q[$];
  int exp_hits, exp_misses, exp_byp, got_hits, got_misses, got_byp;
  always @(posedge clk) if (rst_n) begin
    got_hits   += int'(ev_hit);
    got_misses += int'(ev_miss);
    got_byp    += int'(ev_bypass);
  end

  function automatic void ref_access(kv_tag_t t);
    int f[$];
    if (cfg_slots == 0) begin exp_byp++; return; end
    f = lru_q.find_first_index(x) with (x == t);
    if (f.size() > 0) begin exp_hits++; lru_q.delete(f[0]); end
    else begin
      exp_misses++;
      if (lru_q.size() == int'(cfg_slots)) lru_q.delete(0);
    end
    lru_q.push_back(t);
  endfunction

  task automatic run_step(int t, int l, int pos [], int exp_cycles);
    int n, beat, tok, t0, hits0;
    kv_tag_t tg;
    n = pos.size();
    tenant = TENANT_W'(t); layer = LAYER_W'(l); sel_count = KW'(n);
    for (int i = 0; i < KMAX; i++) sel_pos[i] = (i < n) ? POS_W'(pos[i]) : POS_W'(16'hffff);
    for (int i = 0; i < n; i++) begin
      tg.tenant = tenant; tg.layer = layer; tg.pos = POS_W'(pos[i]);
      ref_access(tg);
    end
    start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    beat = 0; tok = 0;
    while (!done) begin
      if (sdpa_valid) begin
        logic [ADDR_W-1:0] a;
        tg.tenant = tenant; tg.layer = layer; tg.pos = POS_W'(pos[tok]);
        a = cfg_kv_base + (ADDR_W'(tg) << 12);
        checks++;
        if (sdpa_data !== hbm_word(a, beat) || sdpa_pos != POS_W'(pos[tok]) ||
            sdpa_tok_last != (beat == NBEAT-1) ||
            sdpa_step_last != (beat == NBEAT-1 && tok == n-1)) begin
          failures++;
          $display("FAIL tok %0d beat %0d pos %0d/%0d", tok, beat, sdpa_pos, pos[tok]);
        end
        beat++;
        if (beat == NBEAT) begin beat = 0; tok++; end
      end
      @(negedge clk);
    end
    checks++;
    if (tok != n || beat != 0) begin failures++; $display("FAIL: %0d tokens delivered of %0d", tok, n); end
    if (exp_cycles > 0) begin
      checks++;
      if (cyc - t0 != exp_cycles) begin
        failures++; $display("FAIL: step took %0d cycles, expected %0d", cyc - t0, exp_cycles);
      end
    end
    @(negedge clk);
    checks++;
    if (got_hits != exp_hits || got_misses != exp_misses || got_byp != exp_byp) begin
      failures++;
      $display("FAIL events: hit %0d/%0d miss %0d/%0d bypass %0d/%0d", got_hits, exp_hits,
               got_misses, exp_misses, got_byp, exp_byp);
    end
  endtask

  initial begin
    int p[];
    cfg_slots = 4'(SLOTS);
    tenant = 0; layer = 0; sel_count = 0;
    for (int i = 0; i < KMAX; i++) sel_pos[i] = 0;
    exp_hits = 0; exp_misses = 0; exp_byp = 0; got_hits = 0; got_misses = 0; got_byp = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_step(1, 3, '{7, 0, 1, 2, 3, 4, 5, 6}, 0);      // cold: all misses
    run_step(1, 3, '{0, 1, 2, 3, 4, 5, 6, 7}, 1 + 8*(NBEAT+4));  // all hits
    run_step(1, 3, '{8, 9, 10, 11, 0, 1, 2, 3}, 0);     // evictions
    run_step(2, 3, '{8, 9}, 0);                          // other tenant
    run_step(1, 3, '{}, 0);                              // empty set
    for (int r = 0; r < 20; r++) begin
      automatic int n = $urandom_range(1, KMAX);
      p = new[n];
      for (int i = 0; i < n; i++) begin
        bit dup;
        do begin
          p[i] = $urandom_range(0, 15); dup = 0;
          for (int j = 0; j < i; j++) if (p[j] == p[i]) dup = 1;
        end while (dup);
      end
      run_step($urandom_range(0, 1), 3, p, 0);
    end
    cfg_slots = 0;                                       // nothing reserved
    run_step(1, 3, '{0, 1, 2}, 0);
    checks++;
    if (exp_hits == 0 || exp_misses == 0 || exp_byp == 0) begin
      failures++; $display("FAIL: some outcome never happened");
    end
    $display("hits %0d misses %0d bypasses %0d hbm %0d", got_hits, got_misses, got_byp, n_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
