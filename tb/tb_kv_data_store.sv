// tb_kv_data_store: self-checking test of the reserved-partition data array,
// reduced to 8 slots of 4 beats of 64 bits. Random writes and reads are
// compared with a shadow copy; read data must appear exactly one cycle after
// the read, and a read of a word written in the same cycle returns the old
// value.
module tb_kv_data_store;
  localparam int SLOTS = 8, NBEAT = 4, DW = 64;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [2:0] wr_slot, rd_slot;
  logic [1:0] wr_beat, rd_beat;
  logic [DW-1:0] wr_data, rd_data;
  logic [DW-1:0] shadow [SLOTS*NBEAT];
  int checks = 0, failures = 0;

  kv_data_store #(.SLOTS(SLOTS), .NBEAT(NBEAT), .DW(DW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] exp_d;
    wr_slot = 0; rd_slot = 0; wr_beat = 0; rd_beat = 0; wr_data = 0;
    @(negedge clk);
    // fill every word
    for (int a = 0; a < SLOTS*NBEAT; a++) begin
      wr_en = 1; wr_slot = 3'(a / NBEAT); wr_beat = 2'(a % NBEAT);
      wr_data = {$urandom, $urandom}; shadow[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    // random mixed traffic
    for (int n = 0; n < 2000; n++) begin
      int ra, wa;
      ra = $urandom_range(0, SLOTS*NBEAT-1);
      wa = (n % 7 == 0) ? ra : $urandom_range(0, SLOTS*NBEAT-1);
      rd_en = 1; rd_slot = 3'(ra / NBEAT); rd_beat = 2'(ra % NBEAT);
      wr_en = ($urandom_range(0, 1) == 1);
      wr_slot = 3'(wa / NBEAT); wr_beat = 2'(wa % NBEAT); wr_data = {$urandom, $urandom};
      exp_d = shadow[ra];                 // old value, even if written now
      @(negedge clk);
      if (wr_en) shadow[wa] = wr_data;
      rd_en = 0; wr_en = 0;
      checks++;
      if (rd_data !== exp_d) begin
        failures++; $display("FAIL read %0d: %h exp %h", ra, rd_data, exp_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
