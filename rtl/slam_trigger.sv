// slam_trigger: the Feature Buffer controller and its SLAM Trigger.
//
// What it does.  It hands the two scratchpad banks back and forth between
// the DSP (producer) and the CPU (consumer), and wakes the CPU when a bank of
// features is ready instead of letting the update and mapping threads poll.
//
// How it works.  Each bank is FREE, WRITING, FILLED or LOCKED (fb_pkg).  The
// DSP always writes the bank that is WRITING, at an address the controller
// steps through from 0.  A bank is filled when the DSP marks the last word of
// its frame (dsp_frame_end) or when its last word is written; it then becomes
// FILLED and the other bank, if FREE, becomes WRITING in the same cycle, so
// the DSP need not pause.  A frame longer than one bank spills into the next
// bank.  The filled-bank-ID register (filled_bank, filled_valid) takes the ID
// of a FILLED bank one cycle after the register is empty; the older of two
// FILLED banks goes first.  While it is valid the interrupt lines are high.
// The CPU then locks the bank (FILLED -> LOCKED), clears the register, reads
// the features, and releases the bank (LOCKED -> FREE).  If the CPU clears
// the register without locking, the bank is still FILLED and is announced
// again.  When neither bank can take the DSP's writes, because the consumer
// lags, dsp_wr_ready falls and frame_throttle asks the image side to slow
// the frame rate until a bank is released.
//
// Interface.  dsp_wr_valid / dsp_wr_ready is a valid-ready handshake for one
// feature word; the data itself goes straight to the scratchpad on
// mem_wr_bank / mem_wr_addr with mem_wr_en.  dsp_frame_end may come with the
// frame's last word, or alone (no word) to close a partly filled bank; alone
// on an empty bank it is ignored.  cmd carries at most one CPU command per
// cycle.  Commands that do not match the bank state (locking a bank that is
// not FILLED, releasing one that is not LOCKED) are ignored.
//
// Timing.  Every output is a register or decoded from registers.  A bank
// filled at edge N is announced (irq high) after edge N+1.
//
// From the paper: the two banks, the filled-bank-ID register, the interrupt,
// lock / clear / release, the swapping of banks and the frame-rate throttle.
// This design's choices: the auto-incrementing write address, the word
// counts, the closing of a bank by a frame-end mark, spilling of oversized
// frames, oldest-first announcement and the re-announcement of a cleared but
// unlocked bank.  NUM_IRQ lines, one per notified core (Core 0 and Core 1 in
// the paper's figure), carry the same interrupt.
module slam_trigger
  import fb_pkg::*;
#(
  parameter int unsigned BANK_BYTES = 4096,
  parameter int unsigned WORD_BITS  = 32,
  parameter int unsigned NUM_IRQ    = 2,
  localparam int unsigned BANK_WORDS = BANK_BYTES * 8 / WORD_BITS,
  localparam int unsigned AW         = $clog2(BANK_WORDS),
  localparam int unsigned CW         = AW + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // producer (DSP) side
  input  logic                 dsp_wr_valid,
  input  logic                 dsp_frame_end,
  output logic                 dsp_wr_ready,
  output logic                 frame_throttle,
  // scratchpad write control
  output logic                 mem_wr_en,
  output bank_id_t             mem_wr_bank,
  output logic [AW-1:0]        mem_wr_addr,
  // consumer (CPU) side
  input  fb_cmd_t              cmd,
  output logic                 filled_valid,
  output bank_id_t             filled_bank,
  output logic [NUM_IRQ-1:0]   irq,
  output bank_state_e          bank_state [FB_NUM_BANKS],
  output logic [CW-1:0]        bank_count [FB_NUM_BANKS]
);

  bank_state_e   state_q [FB_NUM_BANKS];
  bank_state_e   state_d [FB_NUM_BANKS];
  logic [CW-1:0] count_q [FB_NUM_BANKS];
  logic [CW-1:0] count_d [FB_NUM_BANKS];
  bank_id_t      wb_q, wb_d;          // bank the DSP writes (when WRITING)
  logic [AW-1:0] ptr_q, ptr_d;        // next word address in that bank
  bank_id_t      last_filled_q, last_filled_d;
  logic          fvalid_q, fvalid_d;
  bank_id_t      fbank_q, fbank_d;

  logic accept, close_bank, any_writing;

  assign dsp_wr_ready   = (state_q[wb_q] == BANK_WRITING);
  assign frame_throttle = !dsp_wr_ready;
  assign accept         = dsp_wr_valid && dsp_wr_ready;
  assign mem_wr_en      = accept;
  assign mem_wr_bank    = wb_q;
  assign mem_wr_addr    = ptr_q;

  // A bank closes on the last word of a frame, on its own last word, or on a
  // lone frame-end mark when it already holds words.
  assign close_bank = dsp_wr_ready &&
                      ((accept && (dsp_frame_end || ptr_q == AW'(BANK_WORDS - 1))) ||
                       (!dsp_wr_valid && dsp_frame_end && count_q[wb_q] != '0));

  always_comb begin
    state_d       = state_q;
    count_d       = count_q;
    wb_d          = wb_q;
    ptr_d         = ptr_q;
    last_filled_d = last_filled_q;
    fvalid_d      = fvalid_q;
    fbank_d       = fbank_q;

    // CPU commands
    unique case (cmd.op)
      CMD_LOCK:    if (state_q[cmd.bank] == BANK_FILLED) state_d[cmd.bank] = BANK_LOCKED;
      CMD_RELEASE: if (state_q[cmd.bank] == BANK_LOCKED) state_d[cmd.bank] = BANK_FREE;
      CMD_CLEAR:   fvalid_d = 1'b0;
      default: ;
    endcase

    // DSP writes into the current bank
    if (accept) begin
      ptr_d          = ptr_q + 1'b1;
      count_d[wb_q]  = count_q[wb_q] + 1'b1;
    end
    if (close_bank) begin
      state_d[wb_q] = BANK_FILLED;
      last_filled_d = wb_q;
    end

    // Hand a FREE bank to the DSP when it has none, preferring the other one.
    any_writing = 1'b0;
    for (int b = 0; b < FB_NUM_BANKS; b++)
      if (state_d[b] == BANK_WRITING) any_writing = 1'b1;
    if (!any_writing) begin
      if (state_d[~wb_q] == BANK_FREE) begin
        wb_d = ~wb_q;
        state_d[~wb_q] = BANK_WRITING;
        ptr_d = '0;
        count_d[~wb_q] = '0;
      end else if (state_d[wb_q] == BANK_FREE) begin
        state_d[wb_q] = BANK_WRITING;
        ptr_d = '0;
        count_d[wb_q] = '0;
      end
    end

    // Filled-bank-ID register: load the oldest FILLED bank when empty.
    if (!fvalid_q && cmd.op != CMD_CLEAR) begin
      if (state_q[~last_filled_q] == BANK_FILLED) begin
        fvalid_d = 1'b1;
        fbank_d  = ~last_filled_q;
      end else if (state_q[last_filled_q] == BANK_FILLED) begin
        fvalid_d = 1'b1;
        fbank_d  = last_filled_q;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      // Bank 0 starts out WRITING so the DSP can begin at once.
      for (int b = 0; b < FB_NUM_BANKS; b++) begin
        state_q[b] <= (b == 0) ? BANK_WRITING : BANK_FREE;
        count_q[b] <= '0;
      end
      wb_q          <= '0;
      ptr_q         <= '0;
      last_filled_q <= 1'b1;
      fvalid_q      <= 1'b0;
      fbank_q       <= '0;
    end else begin
      state_q       <= state_d;
      count_q       <= count_d;
      wb_q          <= wb_d;
      ptr_q         <= ptr_d;
      last_filled_q <= last_filled_d;
      fvalid_q      <= fvalid_d;
      fbank_q       <= fbank_d;
    end
  end

  assign filled_valid = fvalid_q;
  assign filled_bank  = fbank_q;
  assign irq          = {NUM_IRQ{fvalid_q}};
  assign bank_state   = state_q;
  assign bank_count   = count_q;

  // The producer must hold its words while throttled.
  a_no_write_when_throttled: assert property (
    @(posedge clk) disable iff (!rst_n) dsp_wr_valid |-> dsp_wr_ready)
    else $error("DSP wrote a feature word while the Feature Buffer was throttled");

  // At most one bank is ever WRITING.
  a_one_writer: assert property (
    @(posedge clk) disable iff (!rst_n)
    !(state_q[0] == BANK_WRITING && state_q[1] == BANK_WRITING));

endmodule
