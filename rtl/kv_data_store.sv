// kv_data_store: data array of the last-level-cache partition reserved for
// KV tokens.
//
// Each of the SLOTS slots holds one whole KV token (one layer's K and V of
// one context position for one tenant), TOKEN_BYTES long, stored as BEATS
// words of BUS_W bits; word address = slot * BEATS + beat. The default,
// 5120 slots of 4 KiB, is the 20 MB reservation, the largest the paper
// evaluates. In a real chip this is the SRAM of the existing LL cache set
// aside for KV tokens; here it is a plain array with one write port (fills
// from HBM) and one read port with a registered output (read data appears
// the cycle after rd_en). A read and a write of the same word in one cycle
// return the old data. Contents are not reset; only filled slots are read.
module kv_data_store
  import dsa_pkg::*;
#(
  parameter int unsigned SLOTS = LL_SLOTS,
  parameter int unsigned NBEAT = BEATS,
  parameter int unsigned DW    = BUS_W,
  localparam int unsigned SLW  = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned BW   = (NBEAT > 1) ? $clog2(NBEAT) : 1
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [SLW-1:0] wr_slot,
  input  logic [BW-1:0]  wr_beat,
  input  logic [DW-1:0]  wr_data,
  input  logic           rd_en,
  input  logic [SLW-1:0] rd_slot,
  input  logic [BW-1:0]  rd_beat,
  output logic [DW-1:0]  rd_data
);

  localparam int unsigned WORDS = SLOTS * NBEAT;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [DW-1:0] mem [WORDS];

  function automatic logic [AW-1:0] waddr(logic [SLW-1:0] s, logic [BW-1:0] b);
    return AW'(s) * AW'(NBEAT) + AW'(b);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[waddr(wr_slot, wr_beat)] <= wr_data;
    if (rd_en) rd_data <= mem[waddr(rd_slot, rd_beat)];
  end

endmodule
