// tb_topk_select: self-checking test of the streaming top-k selector at its
// full size (KMAX = 256). Three decode steps run with k = 64, 128 and 256
// over 1000, 1000 and 150 random scores (narrow range, so ties occur; the last
// step has fewer scores than k). The expected set is found by a stable
// selection in the testbench: highest score first, earlier token first on a
// tie. The done pulse must come exactly one cycle after the last score.
module tb_topk_select;
  import dsa_pkg::*;
  localparam int KMAX = TOPK_MAX, KW = $clog2(KMAX+1);

  logic clk = 0, rst_n = 0, clear = 0;
  logic [KW-1:0] cfg_k;
  logic in_valid = 0, in_last = 0;
  logic signed [SCORE_W-1:0] in_score;
  logic [POS_W-1:0] in_pos;
  logic done;
  logic [POS_W-1:0] sel_pos [KMAX];
  logic [KW-1:0] sel_count;

  int checks = 0, failures = 0;
  int sc [1000];
  bit taken [1000];

  topk_select dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_step(int kk, int n);
    int exp_pos, best;
    cfg_k = KW'(kk);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int s = 0; s < n; s++) begin
      sc[s] = $urandom_range(0, 400) - 200;
      taken[s] = 0;
      in_valid = 1; in_last = (s == n-1);
      in_score = SCORE_W'(sc[s]); in_pos = POS_W'(s);
      @(negedge clk);
      checks++;
      if (s < n-1 && done != 1'b0) begin failures++; $display("FAIL: early done"); end
    end
    in_valid = 0; in_last = 0;
    // done is registered: visible now (one cycle after the last score)
    checks++;
    if (done !== 1'b1) begin failures++; $display("FAIL: done not seen 1 cycle after last"); end
    checks++;
    if (int'(sel_count) != ((n < kk) ? n : kk)) begin
      failures++; $display("FAIL: count %0d", sel_count);
    end
    for (int r = 0; r < ((n < kk) ? n : kk); r++) begin
      best = -1;
      for (int s = 0; s < n; s++)
        if (!taken[s] && (best < 0 || sc[s] > sc[best])) best = s;
      taken[best] = 1;
      exp_pos = best;
      checks++;
      if (int'(sel_pos[r]) != exp_pos) begin
        failures++;
        $display("FAIL k=%0d rank %0d: got %0d exp %0d", kk, r, sel_pos[r], exp_pos);
      end
    end
  endtask

  initial begin
    cfg_k = '0; in_score = '0; in_pos = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_step(64, 1000);
    run_step(128, 1000);
    run_step(256, 150);
    run_step(256, 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
