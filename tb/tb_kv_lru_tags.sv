// tb_kv_lru_tags: self-checking test of the token-level LRU tag store with
// 16 slots. 3000 random lookups over 64 distinct tokens are compared with a
// reference model of an exact-LRU, fully associative store (empty slots
// are used first, the oldest empty one first): hit or miss, slot, evicted
// token, and the answer time (2 cycles for a hit, 3 + log2(16) = 7 for a
// miss). The number of reserved slots is changed between 16, 8 and 0 (bypass),
// and the store is flushed now and then.
module tb_kv_lru_tags;
  import dsa_pkg::*;
  localparam int N = 16, SLW = 4;

  logic clk = 0, rst_n = 0;
  logic [SLW:0] cfg_slots;
  logic flush = 0, req_valid = 0, req_ready;
  kv_tag_t req_tag;
  logic resp_valid, resp_hit, resp_bypass, resp_evict;
  logic [SLW-1:0] resp_slot;
  kv_tag_t resp_evict_tag;

  kv_lru_tags #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int nhit = 0, nmiss = 0, nevict = 0, nbyp = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // reference model
  bit      m_vld [N];
  kv_tag_t m_tag [N];
  int      m_stamp [N];
  int      m_now = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic lookup(kv_tag_t t);
    int t0, lat, e_slot, exp_lat;
    bit e_hit, e_evict, e_byp;
    kv_tag_t e_etag;
    // reference
    e_hit = 0; e_slot = 0; e_evict = 0; e_byp = (cfg_slots == 0); e_etag = '0;
    if (!e_byp) begin
      for (int i = 0; i < int'(cfg_slots); i++)
        if (m_vld[i] && m_tag[i] == t) begin e_hit = 1; e_slot = i; end
      if (e_hit) m_stamp[e_slot] = m_now;
      else begin
        longint best = -1, key;
        for (int i = 0; i < int'(cfg_slots); i++) begin
          key = (longint'(m_vld[i]) << 32) | longint'(unsigned'(m_stamp[i]));
          if (best < 0 || key < best) begin best = key; e_slot = i; end
        end
        e_evict = m_vld[e_slot]; e_etag = m_tag[e_slot];
        m_vld[e_slot] = 1; m_tag[e_slot] = t; m_stamp[e_slot] = m_now;
      end
      m_now++;
    end
    exp_lat = e_byp ? 1 : e_hit ? 2 : 3 + SLW;
    // drive
    req_valid = 1; req_tag = t;
    #1;
    while (!req_ready) @(negedge clk);
    t0 = cyc;
    @(negedge clk); req_valid = 0;
    while (!resp_valid) @(negedge clk);
    lat = cyc - t0;
    checks++;
    if (resp_hit != e_hit || resp_bypass != e_byp || lat != exp_lat ||
        (!e_byp && int'(resp_slot) != e_slot) || resp_evict != e_evict ||
        (e_evict && resp_evict_tag != e_etag)) begin
      failures++;
      $display("FAIL @%0d tag %h: hit %0d/%0d byp %0d/%0d slot %0d/%0d evict %0d/%0d lat %0d/%0d",
               m_now, t, resp_hit, e_hit, resp_bypass, e_byp, resp_slot, e_slot,
               resp_evict, e_evict, lat, exp_lat);
    end
    if (e_byp) nbyp++; else if (e_hit) nhit++; else nmiss++;
    if (e_evict) nevict++;
  endtask

  initial begin
    kv_tag_t t;
    cfg_slots = (SLW+1)'(N);
    req_tag = '0;
    for (int i = 0; i < N; i++) begin m_vld[i] = 0; m_stamp[i] = 0; m_tag[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 3000; n++) begin
      if (n % 500 == 499) begin                     // flush
        flush = 1; @(negedge clk); flush = 0;
        for (int i = 0; i < N; i++) m_vld[i] = 0;
      end
      if (n == 1000) cfg_slots = 8;
      if (n == 1500) cfg_slots = 0;
      if (n == 1600) cfg_slots = (SLW+1)'(N);
      t.tenant = TENANT_W'($urandom_range(0, 1));
      t.layer  = LAYER_W'($urandom_range(0, 1));
      t.pos    = POS_W'($urandom_range(0, 15));
      lookup(t);
      @(negedge clk);
    end
    checks++;
    if (nhit == 0 || nmiss == 0 || nevict == 0 || nbyp == 0) begin
      failures++; $display("FAIL: not every outcome seen");
    end
    $display("hits %0d misses %0d evictions %0d bypasses %0d", nhit, nmiss, nevict, nbyp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
