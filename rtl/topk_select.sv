// topk_select: streaming top-k selector, Omega_t = Top-k_s(S_t,s).
//
// Scores arrive one per cycle, tagged with their token position. The unit
// keeps a list of the KMAX best (score, position) pairs sorted by descending
// score in registers and inserts each new pair in one cycle: every entry
// compares itself with the new score in parallel, entries below the
// insertion point shift down by one, and the last one falls off. The first
// cfg_k entries of the list are then the top cfg_k set for any cfg_k <= KMAX,
// so k is chosen at run time (the paper evaluates k = 64, 128 and 256).
// Equal scores keep arrival order (the earlier token ranks first).
//
// `clear` empties the list at the start of a decode step. `done` pulses one
// cycle after the pair marked `in_last` has been inserted; `sel_pos[0..
// sel_count-1]` then hold the selected positions, best first, and stay
// stable until the next clear. The sorting network is this design's own
// choice; the paper gives only the top-k function.
module topk_select
  import dsa_pkg::*;
#(
  parameter int unsigned KMAX = TOPK_MAX,
  parameter int unsigned SW   = SCORE_W,
  parameter int unsigned PW   = POS_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic [$clog2(KMAX+1)-1:0] cfg_k,
  input  logic                      in_valid,
  input  logic                      in_last,
  input  logic signed [SW-1:0]      in_score,
  input  logic [PW-1:0]             in_pos,
  output logic                      done,
  output logic [PW-1:0]             sel_pos [KMAX],
  output logic [$clog2(KMAX+1)-1:0] sel_count
);

  logic signed [SW-1:0] sc   [KMAX];
  logic                 vld  [KMAX];
  logic                 ins  [KMAX];   // new pair belongs at or above entry i
  logic [$clog2(KMAX+1)-1:0] n_q;      // entries filled, saturating at KMAX

  logic                 shf  [KMAX];   // entry i takes entry i-1

  // index of the entry above i (entry 0 has none and never shifts)
  function automatic int unsigned up(int unsigned i);
    return (i == 0) ? 0 : i - 1;
  endfunction

  always_comb
    for (int i = 0; i < KMAX; i++) begin
      ins[i] = !vld[i] || (in_score > sc[i]);
      shf[i] = (i != 0) && ins[up(i)];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
      n_q  <= '0;
      for (int i = 0; i < KMAX; i++) begin
        vld[i]     <= 1'b0;
        sc[i]      <= '0;
        sel_pos[i] <= '0;
      end
    end else begin
      done <= in_valid & in_last & !clear;
      if (clear) begin
        n_q <= '0;
        for (int i = 0; i < KMAX; i++) vld[i] <= 1'b0;
      end else if (in_valid) begin
        if (n_q != KMAX[$clog2(KMAX+1)-1:0]) n_q <= n_q + 1'b1;
        for (int i = 0; i < KMAX; i++) begin
          if (shf[i]) begin                       // shift down from above
            sc[i]      <= sc[up(i)];
            sel_pos[i] <= sel_pos[up(i)];
            vld[i]     <= vld[up(i)];
          end else if (ins[i]) begin              // the insertion point
            sc[i]      <= in_score;
            sel_pos[i] <= in_pos;
            vld[i]     <= 1'b1;
          end
        end
      end
    end
  end

  assign sel_count = (n_q < cfg_k) ? n_q : cfg_k;

endmodule
