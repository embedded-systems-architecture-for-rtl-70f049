// feature_scratchpad_tb: self-checking test of the two-bank feature memory.
//
// Fills both 4 KB banks (default size) with words from a hash of bank and
// address, reads every word back and compares with the same hash, checks
// that rd_data appears exactly one cycle after rd_en and holds while rd_en
// is low, that the banks do not alias, and that a read of a word being
// written in the same cycle returns the old contents.  A watchdog ends the
// run if it hangs.
module feature_scratchpad_tb;
  localparam int unsigned NUM_BANKS  = 2;
  localparam int unsigned BANK_BYTES = 4096;
  localparam int unsigned WORD_BITS  = 32;
  localparam int unsigned BANK_WORDS = BANK_BYTES * 8 / WORD_BITS;
  localparam int unsigned AW         = $clog2(BANK_WORDS);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                 wr_en = 1'b0, rd_en = 1'b0;
  logic [0:0]           wr_bank = '0, rd_bank = '0;
  logic [AW-1:0]        wr_addr = '0, rd_addr = '0;
  logic [WORD_BITS-1:0] wr_data = '0, rd_data;

  int checks = 0, failures = 0;

  feature_scratchpad dut (.*);

  function automatic logic [31:0] pattern(int b, int a, int salt);
    return (32'h9E37_79B9 * (b * 4096 + a + 1)) ^ (32'h5bd1e995 * salt) ^ {a[15:0], 16'hC0DE};
  endfunction

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    // Fill both banks.
    for (int b = 0; b < NUM_BANKS; b++)
      for (int a = 0; a < BANK_WORDS; a++) begin
        wr_en = 1'b1; wr_bank = b[0]; wr_addr = a[AW-1:0]; wr_data = pattern(b, a, 1);
        @(negedge clk);
      end
    wr_en = 1'b0;
    // Read back, every word, one-cycle latency.
    for (int b = 0; b < NUM_BANKS; b++)
      for (int a = 0; a < BANK_WORDS; a++) begin
        rd_en = 1'b1; rd_bank = b[0]; rd_addr = a[AW-1:0];
        @(negedge clk);
        check($sformatf("bank %0d word %0d", b, a), rd_data, pattern(b, a, 1));
      end
    // rd_data holds while rd_en is low.
    rd_en = 1'b0; rd_bank = 1'b0; rd_addr = '0;
    repeat (3) @(negedge clk);
    check("hold", rd_data, pattern(NUM_BANKS - 1, BANK_WORDS - 1, 1));
    // Overwrite bank 1 only at random addresses; bank 0 must not change.
    for (int i = 0; i < 64; i++) begin
      int a;
      a = int'($urandom_range(BANK_WORDS - 1));
      wr_en = 1'b1; wr_bank = 1'b1; wr_addr = a[AW-1:0]; wr_data = 32'hFFFF_0000 | a;
      @(negedge clk);
      wr_en = 1'b0;
      rd_en = 1'b1; rd_bank = 1'b0; rd_addr = a[AW-1:0];
      @(negedge clk);
      check("bank 0 untouched", rd_data, pattern(0, a, 1));
      rd_bank = 1'b1;
      @(negedge clk);
      check("bank 1 rewritten", rd_data, 32'hFFFF_0000 | a);
      rd_en = 1'b0;
    end
    // Read during write of the same word returns the old value.
    wr_en = 1'b1; wr_bank = 1'b0; wr_addr = AW'(7); wr_data = 32'h1234_5678;
    rd_en = 1'b1; rd_bank = 1'b0; rd_addr = AW'(7);
    @(negedge clk);
    check("read during write: old", rd_data, pattern(0, 7, 1));
    wr_en = 1'b0;
    @(negedge clk);
    check("read after write: new", rd_data, 32'h1234_5678);
    rd_en = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
