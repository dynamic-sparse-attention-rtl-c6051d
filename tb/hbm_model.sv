// hbm_model: behavioural model of the HBM read port seen by the miss path
// (not synthesizable logic; HBM itself is outside the design). It takes one
// token read request at a time (req_ready is low while a request is in
// service), waits LAT cycles - 200 cycles stands for the ~200 ns access
// latency at 1 GHz - and returns NBEAT beats, one per cycle, whose contents
// are tb_dsa_pkg::hbm_word(address, beat). It counts the requests it served.
module hbm_model
  import dsa_pkg::*;
#(
  parameter int unsigned LAT   = 200,
  parameter int unsigned NBEAT = BEATS,
  parameter int unsigned DW    = BUS_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [ADDR_W-1:0] req_addr,
  output logic              rsp_valid,
  output logic [DW-1:0]     rsp_data,
  output int                n_req
);
  logic [ADDR_W-1:0] a_q;
  int                wait_q, beat_q;
  logic              busy;

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; wait_q <= 0; beat_q <= 0; a_q <= '0;
      rsp_valid <= 1'b0; rsp_data <= '0; n_req <= 0;
    end else begin
      rsp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy <= 1'b1; a_q <= req_addr; wait_q <= int'(LAT); beat_q <= 0;
        n_req <= n_req + 1;
      end else if (busy) begin
        if (wait_q > 0) wait_q <= wait_q - 1;
        else begin
          rsp_valid <= 1'b1;
          rsp_data  <= DW'(tb_dsa_pkg::hbm_word(a_q, beat_q));
          beat_q    <= beat_q + 1;
          if (beat_q == int'(NBEAT) - 1) busy <= 1'b0;
        end
      end
    end
  end
endmodule
