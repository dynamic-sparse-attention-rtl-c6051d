// tb_kv_miss_handler: self-checking test of the HBM miss path with 16 slots
// and 4-beat tokens, against the behavioural HBM model (latency 20 cycles).
// For 60 random misses (some in bypass) it checks the HBM address
// (base + tag * 4096), that every returned beat is forwarded in order with
// the last flag on the last one, that it is written to the right slot and
// beat (and not written at all in bypass), and that the first beat leaves
// LAT + 3 cycles after the clock edge that accepts the command.
module tb_kv_miss_handler;
  import dsa_pkg::*;
  import tb_dsa_pkg::*;
  localparam int SLOTS = 16, NBEAT = 4, LAT = 20;

  logic clk = 0, rst_n = 0;
  logic [ADDR_W-1:0] cfg_kv_base = 48'h0000_4000_0000;
  logic cmd_valid = 0, cmd_ready, cmd_bypass = 0;
  kv_tag_t cmd_tag;
  logic [3:0] cmd_slot;
  logic hbm_req_valid, hbm_req_ready, hbm_rsp_valid;
  logic [ADDR_W-1:0] hbm_req_addr;
  logic [BUS_W-1:0] hbm_rsp_data;
  logic wr_en, out_valid, out_last;
  logic [3:0] wr_slot;
  logic [1:0] wr_beat;
  logic [BUS_W-1:0] wr_data, out_data;
  int n_req;

  kv_miss_handler #(.SLOTS(SLOTS), .NBEAT(NBEAT)) dut (.*);
  hbm_model #(.LAT(LAT), .NBEAT(NBEAT)) u_hbm (
    .clk, .rst_n, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready),
    .req_addr(hbm_req_addr), .rsp_valid(hbm_rsp_valid), .rsp_data(hbm_rsp_data), .n_req);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // HBM request address check
  logic [ADDR_W-1:0] exp_addr;
  always @(posedge clk) if (rst_n && hbm_req_valid && hbm_req_ready) begin
    checks++;
    if (hbm_req_addr !== exp_addr) begin
      failures++; $display("FAIL addr %h exp %h", hbm_req_addr, exp_addr);
    end
  end

  int exp_slot, n_wr, n_out;
  logic exp_byp;

  initial begin
    int t0;
    cmd_tag = '0; cmd_slot = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      cmd_tag.tenant = TENANT_W'($urandom); cmd_tag.layer = LAYER_W'($urandom_range(0, 79));
      cmd_tag.pos = POS_W'($urandom);
      cmd_slot = 4'($urandom); cmd_bypass = ($urandom_range(0, 3) == 0);
      exp_addr = cfg_kv_base + (ADDR_W'(cmd_tag) << 12);
      exp_slot = int'(cmd_slot); exp_byp = cmd_bypass;
      n_wr = 0; n_out = 0;
      cmd_valid = 1;
      #1;
      while (!cmd_ready) @(negedge clk);
      t0 = cyc;
      @(negedge clk); cmd_valid = 0;
      while (n_out < NBEAT) begin
        if (wr_en) begin                  // the write goes with the forwarded beat
          n_wr++;
          checks++;
          if (exp_byp || !out_valid || int'(wr_slot) != exp_slot || int'(wr_beat) != n_out ||
              wr_data !== hbm_word(exp_addr, n_out)) begin
            failures++; $display("FAIL write slot %0d beat %0d", wr_slot, wr_beat);
          end
        end
        if (out_valid) begin
          checks++;
          if (out_data !== hbm_word(exp_addr, n_out) || out_last != (n_out == NBEAT-1) ||
              (n_out == 0 && cyc - t0 != LAT + 4)) begin
            failures++;
            $display("FAIL beat %0d last %0d lat %0d", n_out, out_last, cyc - t0);
          end
          n_out++;
        end
        @(negedge clk);
      end
      @(negedge clk);
      checks++;
      if (n_wr != (exp_byp ? 0 : NBEAT)) begin
        failures++; $display("FAIL %0d writes (bypass %0d)", n_wr, exp_byp);
      end
    end
    checks++;
    if (n_req != 60) begin failures++; $display("FAIL %0d HBM requests", n_req); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
