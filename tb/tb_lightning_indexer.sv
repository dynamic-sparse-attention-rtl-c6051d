// tb_lightning_indexer: self-checking test of the indexer score unit at its
// full size (4 heads x 64 dims). Random q, w and keys are applied, keys one
// per cycle with a gap in the middle of the stream; every score is compared
// with sum_j w_j * max(0, q_j . k) worked out in the testbench, together with
// the token position, the last flag and the 2-cycle latency.
module tb_lightning_indexer;
  import dsa_pkg::*;
  localparam int H = IDX_HEADS, D = IDX_DIM, NK = 200;

  logic clk = 0, rst_n = 0, start = 0;
  logic signed [7:0] q [H][D];
  logic signed [7:0] w [H];
  logic k_valid = 0, k_last = 0;
  logic signed [7:0] k [D];
  logic s_valid, s_last;
  logic [POS_W-1:0] s_pos;
  logic signed [SCORE_W-1:0] s_score;

  logic signed [7:0] keys [NK][D];
  longint exp_score [NK];
  int in_cycle [NK];
  int checks = 0, failures = 0, cyc = 0, nout = 0;

  lightning_indexer dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_score(int s);
    longint acc = 0;
    for (int j = 0; j < H; j++) begin
      longint dot = 0;
      for (int d = 0; d < D; d++) dot += longint'(q[j][d]) * longint'(keys[s][d]);
      if (dot > 0) acc += dot * longint'(w[j]);
    end
    return acc;
  endfunction

  // check outputs
  always @(posedge clk) if (rst_n && s_valid) begin
    checks++;
    if (nout >= NK || s_pos != POS_W'(nout) || longint'(s_score) != exp_score[nout] ||
        s_last != (nout == NK-1) || cyc - in_cycle[nout] != 2) begin
      failures++;
      $display("FAIL out %0d: pos %0d score %0d exp %0d last %0d lat %0d", nout, s_pos,
               s_score, exp_score[nout], s_last, cyc - in_cycle[nout]);
    end
    nout++;
  end

  initial begin
    for (int j = 0; j < H; j++) begin
      w[j] = 8'($urandom_range(0, 255));
      for (int d = 0; d < D; d++) q[j][d] = 8'($urandom_range(0, 255));
    end
    w[0] = 8'sd127;  // one strongly positive head, one negative
    w[1] = -8'sd128;
    for (int s = 0; s < NK; s++)
      for (int d = 0; d < D; d++) keys[s][d] = 8'($urandom_range(0, 255));
    // key 5: all heads negative -> ReLU makes the score 0
    for (int d = 0; d < D; d++) keys[5][d] = 8'sd0;
    for (int s = 0; s < NK; s++) exp_score[s] = ref_score(s);
    for (int d = 0; d < D; d++) k[d] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int s = 0; s < NK; s++) begin
      if (s == 100) begin k_valid = 0; repeat (3) @(negedge clk); end
      k_valid = 1; k_last = (s == NK-1);
      for (int d = 0; d < D; d++) k[d] = keys[s][d];
      in_cycle[s] = cyc;
      @(negedge clk);
    end
    k_valid = 0; k_last = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (nout != NK) begin failures++; $display("FAIL: %0d scores, expected %0d", nout, NK); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
