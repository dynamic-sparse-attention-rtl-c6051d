// kv_miss_handler: the miss path from the token-level LRU to HBM.
//
// When a top-k token is not in the reserved LL partition, the gather unit
// hands its tag and the slot the LRU chose for it to this unit. The unit
// sends one read request for the whole token to HBM (byte address
// cfg_kv_base + tag * TOKEN_BYTES, length TOKEN_BYTES), then takes the
// NBEAT response beats as they come back, in order, writes each into the
// slot of the data array and forwards it to the attention datapath in the
// same registered cycle (fill and forward). With cmd_bypass set (nothing
// reserved) the beats are forwarded but not stored.
//
// Timing: cmd is accepted in IDLE; hbm_req_valid rises the next cycle and is
// held until hbm_req_ready; each response beat appears on out_* and the
// write port one cycle after it arrives; out_last marks the token's last
// beat, after which the unit is idle again. HBM responses cannot be
// stalled. Only one miss is outstanding at a time; the request format and
// the dense address map are this design's choices.
module kv_miss_handler
  import dsa_pkg::*;
#(
  parameter int unsigned SLOTS = LL_SLOTS,
  parameter int unsigned NBEAT = BEATS,
  parameter int unsigned DW    = BUS_W,
  parameter int unsigned AW    = ADDR_W,
  localparam int unsigned SLW  = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned BW   = (NBEAT > 1) ? $clog2(NBEAT) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [AW-1:0]  cfg_kv_base,
  // command from the gather unit
  input  logic           cmd_valid,
  output logic           cmd_ready,
  input  kv_tag_t        cmd_tag,
  input  logic [SLW-1:0] cmd_slot,
  input  logic           cmd_bypass,
  // HBM read port
  output logic           hbm_req_valid,
  input  logic           hbm_req_ready,
  output logic [AW-1:0]  hbm_req_addr,
  input  logic           hbm_rsp_valid,
  input  logic [DW-1:0]  hbm_rsp_data,
  // fill into the reserved data array
  output logic           wr_en,
  output logic [SLW-1:0] wr_slot,
  output logic [BW-1:0]  wr_beat,
  output logic [DW-1:0]  wr_data,
  // forwarded token beats
  output logic           out_valid,
  output logic [DW-1:0]  out_data,
  output logic           out_last
);

  typedef enum logic [1:0] {M_IDLE, M_REQ, M_DATA} mstate_t;
  mstate_t        state;
  logic [SLW-1:0] slot_q;
  logic           bypass_q;
  logic [BW-1:0]  beat_q;

  assign cmd_ready     = (state == M_IDLE);
  assign hbm_req_valid = (state == M_REQ);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= M_IDLE;
      slot_q       <= '0;
      bypass_q     <= 1'b0;
      beat_q       <= '0;
      hbm_req_addr <= '0;
      wr_en        <= 1'b0;
      wr_slot      <= '0;
      wr_beat      <= '0;
      wr_data      <= '0;
      out_valid    <= 1'b0;
      out_data     <= '0;
      out_last     <= 1'b0;
    end else begin
      wr_en     <= 1'b0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        M_IDLE: if (cmd_valid) begin
          slot_q       <= cmd_slot;
          bypass_q     <= cmd_bypass;
          hbm_req_addr <= kv_addr(cfg_kv_base, cmd_tag);
          beat_q       <= '0;
          state        <= M_REQ;
        end
        M_REQ: if (hbm_req_ready) state <= M_DATA;
        M_DATA: if (hbm_rsp_valid) begin
          wr_en     <= !bypass_q;
          wr_slot   <= slot_q;
          wr_beat   <= beat_q;
          wr_data   <= hbm_rsp_data;
          out_valid <= 1'b1;
          out_data  <= hbm_rsp_data;
          out_last  <= (beat_q == BW'(NBEAT-1));
          beat_q    <= beat_q + 1'b1;
          if (beat_q == BW'(NBEAT-1)) state <= M_IDLE;
        end
        default: state <= M_IDLE;
      endcase
    end
  end

endmodule
