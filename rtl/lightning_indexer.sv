// lightning_indexer: the DSA "lightning indexer" score unit.
//
// For the current query it scores every cached context token s as
//     S_s = sum_{j=1..H} w_j * ReLU(q_j . k_s)
// with H = 4 indexer heads of dimension D = 64 (the paper's choice). q_j and
// w_j are loaded once per decode step (held on the inputs while the keys
// stream); the indexer keys k_s arrive one per cycle on a valid stream and
// each produces one score, so a context of T tokens takes T cycles.
//
// Pipeline (latency 2, throughput 1 key/cycle):
//   stage 1: H dot products of D signed products each, registered;
//   stage 2: ReLU, multiply by w_j, sum over the heads, registered.
// The output carries the key's position (counted from 0 at `start`; the first
// key may arrive in the same cycle as `start`) and
// its last flag. The paper runs the indexer in BF16; this design uses signed
// 8-bit fixed point for q, k and w and exact integer sums, which is its own
// choice. Reset clears the pipeline valids and the position counter.
module lightning_indexer
  import dsa_pkg::*;
#(
  parameter int unsigned H   = IDX_HEADS,
  parameter int unsigned D   = IDX_DIM,
  parameter int unsigned EW  = IDX_EW,
  parameter int unsigned WW  = IDX_WW,
  parameter int unsigned SW  = SCORE_W,
  parameter int unsigned PW  = POS_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,        // resets the position counter
  input  logic signed [EW-1:0]        q   [H][D],   // indexer query q^i_t
  input  logic signed [WW-1:0]        w   [H],      // head weights w^i_t
  input  logic                        k_valid,
  input  logic                        k_last,
  input  logic signed [EW-1:0]        k   [D],      // indexer key k^i_s
  output logic                        s_valid,
  output logic                        s_last,
  output logic [PW-1:0]               s_pos,
  output logic signed [SW-1:0]        s_score
);

  localparam int unsigned DOT_W = 2*EW + $clog2(D) + 1;

  logic [PW-1:0]            pos_q;
  logic                     v1, l1;
  logic [PW-1:0]            p1;
  logic signed [DOT_W-1:0]  dot1 [H];
  logic signed [DOT_W-1:0]  dot_c [H];
  logic signed [SW-1:0]     score_c;

  always_comb begin
    for (int j = 0; j < H; j++) begin
      dot_c[j] = '0;
      for (int d = 0; d < D; d++)
        dot_c[j] += DOT_W'(q[j][d]) * DOT_W'(k[d]);
    end
  end

  always_comb begin
    score_c = '0;
    for (int j = 0; j < H; j++)
      if (dot1[j] > 0)
        score_c += SW'(dot1[j]) * SW'(w[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos_q   <= '0;
      v1      <= 1'b0;
      l1      <= 1'b0;
      p1      <= '0;
      s_valid <= 1'b0;
      s_last  <= 1'b0;
      s_pos   <= '0;
      s_score <= '0;
      for (int j = 0; j < H; j++) dot1[j] <= '0;
    end else begin
      v1 <= k_valid;
      l1 <= k_valid & k_last;
      if (start)        pos_q <= PW'(k_valid);   // a key may come with start
      else if (k_valid) pos_q <= pos_q + 1'b1;
      if (k_valid) begin
        p1 <= start ? '0 : pos_q;
        for (int j = 0; j < H; j++) dot1[j] <= dot_c[j];
      end
      s_valid <= v1;
      s_last  <= l1;
      if (v1) begin
        s_pos   <= p1;
        s_score <= score_c;
      end
    end
  end

endmodule
