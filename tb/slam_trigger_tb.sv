// slam_trigger_tb: self-checking test of the Feature Buffer controller.
//
// Runs the controller at a 16-word bank (BANK_BYTES = 64) through a scripted
// sequence whose expected outcome is written out by hand: a frame closed by
// its last-word mark, the interrupt one cycle after the bank fills, the swap
// to the other bank in the same cycle, throttling when both banks are busy,
// lock / clear / release, oldest-first announcement of two filled banks,
// commands that do not match the bank state, re-announcement of a cleared
// but unlocked bank, a bank closed by filling up, a frame that spills into
// the next bank, and lone frame-end marks on empty and partly filled banks.
module slam_trigger_tb;
  import fb_pkg::*;
  localparam int unsigned BANK_BYTES = 64;
  localparam int unsigned WORD_BITS  = 32;
  localparam int unsigned BANK_WORDS = BANK_BYTES * 8 / WORD_BITS;
  localparam int unsigned AW         = $clog2(BANK_WORDS);
  localparam int unsigned CW         = AW + 1;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic          dsp_wr_valid = 1'b0, dsp_frame_end = 1'b0;
  logic          dsp_wr_ready, frame_throttle, mem_wr_en;
  bank_id_t      mem_wr_bank;
  logic [AW-1:0] mem_wr_addr;
  fb_cmd_t       cmd;
  logic          filled_valid;
  bank_id_t      filled_bank;
  logic [1:0]    irq;
  bank_state_e   bank_state [FB_NUM_BANKS];
  logic [CW-1:0] bank_count [FB_NUM_BANKS];

  slam_trigger #(.BANK_BYTES(BANK_BYTES), .WORD_BITS(WORD_BITS), .NUM_IRQ(2)) dut (.*);

  int checks = 0, failures = 0;

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  // Expected state of both banks, the DSP's bank, the register and irq.
  task automatic expect_state(string what, bank_state_e s0, bank_state_e s1,
                              int ready, int fvalid, int fbank);
    chk({what, ": bank0"}, int'(bank_state[0]), int'(s0));
    chk({what, ": bank1"}, int'(bank_state[1]), int'(s1));
    chk({what, ": ready"}, int'(dsp_wr_ready), ready);
    chk({what, ": throttle"}, int'(frame_throttle), 1 - ready);
    chk({what, ": filled_valid"}, int'(filled_valid), fvalid);
    chk({what, ": irq"}, int'(irq), fvalid ? 3 : 0);
    if (fvalid) chk({what, ": filled_bank"}, int'(filled_bank), fbank);
  endtask

  // One word per cycle; checks the write address and bank on the way.
  task automatic write_frame(int n, int exp_bank, int exp_first_addr, bit mark_last);
    for (int i = 0; i < n; i++) begin
      dsp_wr_valid  = 1'b1;
      dsp_frame_end = mark_last && (i == n - 1);
      #1;
      chk("mem_wr_en", int'(mem_wr_en), 1);
      chk("mem_wr_bank", int'(mem_wr_bank), exp_bank);
      chk("mem_wr_addr", int'(mem_wr_addr), exp_first_addr + i);
      @(negedge clk);
    end
    dsp_wr_valid = 1'b0; dsp_frame_end = 1'b0;
  endtask

  task automatic command(fb_cmd_op_e op, int bank);
    cmd.op = op; cmd.bank = bank[0];
    @(negedge clk);
    cmd.op = CMD_NONE;
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd = '{op: CMD_NONE, bank: 1'b0};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_state("reset", BANK_WRITING, BANK_FREE, 1, 0, 0);

    // Frame A, 5 words, into bank 0.
    write_frame(5, 0, 0, 1);
    // One edge after the fill: bank 0 FILLED, bank 1 WRITING, irq not yet.
    expect_state("A filled", BANK_FILLED, BANK_WRITING, 1, 0, 0);
    chk("count0", int'(bank_count[0]), 5);
    @(negedge clk);
    expect_state("A announced", BANK_FILLED, BANK_WRITING, 1, 1, 0);

    // Frame B, 3 words, into bank 1 at address 0; then no bank is free.
    write_frame(3, 1, 0, 1);
    expect_state("B filled", BANK_FILLED, BANK_FILLED, 0, 1, 0);
    chk("count1", int'(bank_count[1]), 3);

    // Wrong commands are ignored: release of a FILLED bank, lock of a
    // WRITING bank does not exist here, so lock bank 0 twice later.
    command(CMD_RELEASE, 0);
    expect_state("release filled ignored", BANK_FILLED, BANK_FILLED, 0, 1, 0);

    // Clear with both banks FILLED and none locked: the older, A in bank 0,
    // is announced again rather than B.
    command(CMD_CLEAR, 0);
    expect_state("both filled, cleared", BANK_FILLED, BANK_FILLED, 0, 0, 0);
    @(negedge clk);
    expect_state("oldest first", BANK_FILLED, BANK_FILLED, 0, 1, 0);

    // Lock A, clear: the register empties for one cycle, then B (older
    // remaining) is announced.
    command(CMD_LOCK, 0);
    expect_state("A locked", BANK_LOCKED, BANK_FILLED, 0, 1, 0);
    command(CMD_LOCK, 0);
    expect_state("relock ignored", BANK_LOCKED, BANK_FILLED, 0, 1, 0);
    command(CMD_CLEAR, 0);
    expect_state("cleared", BANK_LOCKED, BANK_FILLED, 0, 0, 0);
    @(negedge clk);
    expect_state("B announced", BANK_LOCKED, BANK_FILLED, 0, 1, 1);

    // Release A: bank 0 goes straight to WRITING, throttle drops.
    command(CMD_RELEASE, 0);
    expect_state("A released", BANK_WRITING, BANK_FILLED, 1, 1, 1);
    chk("count0 reset", int'(bank_count[0]), 0);

    // Clear B without locking: it is announced again.
    command(CMD_CLEAR, 0);
    expect_state("B cleared unlocked", BANK_WRITING, BANK_FILLED, 1, 0, 0);
    @(negedge clk);
    expect_state("B re-announced", BANK_WRITING, BANK_FILLED, 1, 1, 1);

    // Frame C fills bank 0 completely without a last-word mark.
    write_frame(BANK_WORDS, 0, 0, 0);
    expect_state("C full", BANK_FILLED, BANK_FILLED, 0, 1, 1);
    chk("count0 full", int'(bank_count[0]), BANK_WORDS);

    // Consume B, then C is announced.
    command(CMD_LOCK, 1);
    command(CMD_CLEAR, 0);
    @(negedge clk);
    expect_state("C announced", BANK_FILLED, BANK_LOCKED, 0, 1, 0);
    command(CMD_RELEASE, 1);
    expect_state("B released", BANK_FILLED, BANK_WRITING, 1, 1, 0);

    // A lone frame-end on the empty bank is ignored.
    dsp_frame_end = 1'b1;
    @(negedge clk);
    dsp_frame_end = 1'b0;
    expect_state("empty frame end", BANK_FILLED, BANK_WRITING, 1, 1, 0);

    // Consume C so both banks can take the next frame.
    command(CMD_LOCK, 0);
    command(CMD_CLEAR, 0);
    command(CMD_RELEASE, 0);
    expect_state("C released", BANK_FREE, BANK_WRITING, 1, 0, 0);

    // Frame D is 2 words longer than a bank: bank 1 closes full, the last
    // two words go to bank 0 from address 0, closed by the last-word mark.
    write_frame(BANK_WORDS - 2, 1, 0, 0);
    write_frame(2, 1, BANK_WORDS - 2, 0);
    expect_state("D first part", BANK_WRITING, BANK_FILLED, 1, 0, 0);
    write_frame(2, 0, 0, 1);
    expect_state("D spill", BANK_FILLED, BANK_FILLED, 0, 1, 1);
    chk("spill count", int'(bank_count[0]), 2);

    // Lone frame-end closing a partly filled bank.
    command(CMD_LOCK, 1);
    command(CMD_CLEAR, 0);
    command(CMD_RELEASE, 1);
    @(negedge clk);
    expect_state("E start", BANK_FILLED, BANK_WRITING, 1, 1, 0);
    write_frame(4, 1, 0, 0);
    dsp_frame_end = 1'b1;
    @(negedge clk);
    dsp_frame_end = 1'b0;
    expect_state("E closed by mark", BANK_FILLED, BANK_FILLED, 0, 1, 0);
    chk("E count", int'(bank_count[1]), 4);

    // Reset mid-way brings everything back.
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_state("reset again", BANK_WRITING, BANK_FREE, 1, 0, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
