// slam_arch_top_tb: end-to-end test of the Feature Buffer subsystem at its
// full size (two 4 KB banks, 32-bit words, two interrupt lines).
//
// A DSP model streams frames of feature words into the buffer: short frames,
// frames that exactly fill a bank, and frames longer than a bank.  A CPU
// model waits for the interrupt, reads the filled-bank ID, locks the bank,
// clears the ID, reads the word count and every feature word, checks them,
// waits a random time and releases the bank.  Now and then it clears the ID
// without locking, to see the bank announced again.  The words the CPU reads
// must be the DSP's stream, in order: a scoreboard queue holds what the DSP
// wrote.  Each mechanism of the design is counted and must happen at least
// once: interrupts, bank swaps, throttling of the producer, a bank closed by
// filling up, a frame spilling into the next bank, re-announcement, and both
// banks waiting for the CPU at once.  Every CPU read must answer one cycle
// later, and the producer may be held off only while both banks are taken.
module slam_arch_top_tb;
  import fb_pkg::*;
  localparam int unsigned BANK_BYTES = 4096;
  localparam int unsigned WORD_BITS  = 32;
  localparam int unsigned BANK_WORDS = BANK_BYTES * 8 / WORD_BITS;
  localparam int unsigned AW         = $clog2(BANK_WORDS);
  localparam int unsigned CPU_AW     = AW + FB_BANK_ID_W + 1;
  localparam int          NUM_FRAMES = 24;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic                 dsp_wr_valid = 1'b0, dsp_frame_end = 1'b0;
  logic [WORD_BITS-1:0] dsp_wr_data = '0;
  logic                 dsp_wr_ready, frame_throttle;
  logic                 cpu_req = 1'b0, cpu_we = 1'b0;
  logic [CPU_AW-1:0]    cpu_addr = '0;
  logic [WORD_BITS-1:0] cpu_wdata = '0, cpu_rdata;
  logic                 cpu_rvalid;
  logic [1:0]           irq;

  slam_arch_top dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h (t=%0t)", what, got, exp, $time);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_irq = 0, n_swap = 0, n_throttle = 0, n_full = 0, n_spill = 0;
  int n_reannounce = 0, n_both_waiting = 0, n_banks_read = 0;
  logic     irq_q = 1'b0, thr_q = 1'b0;
  bank_id_t wb_q = '0;
  always @(posedge clk) if (rst_n) begin
    if (irq[0] && !irq_q) n_irq++;
    if (frame_throttle && !thr_q) n_throttle++;
    if (dut.mem_wr_bank != wb_q) n_swap++;
    irq_q <= irq[0];
    thr_q <= frame_throttle;
    wb_q  <= dut.mem_wr_bank;
  end
  logic both_q = 1'b0;
  always @(posedge clk) if (rst_n) begin
    logic both;
    both = dut.bank_state[0] == BANK_FILLED && dut.bank_state[1] == BANK_FILLED;
    if (both && !both_q) n_both_waiting++;
    both_q <= both;
  end

  // The DSP is held off only when no bank can take its words.
  always @(negedge clk) if (rst_n) begin
    logic any_open;
    any_open = dut.bank_state[0] inside {BANK_FREE, BANK_WRITING} ||
               dut.bank_state[1] inside {BANK_FREE, BANK_WRITING};
    chk("throttle only when both banks are taken", int'(frame_throttle), int'(!any_open));
  end

  // ---------------- DSP model ----------------
  logic [WORD_BITS-1:0] stream [$];
  bit dsp_done = 1'b0;

  task automatic dsp_frame(int f, int n);
    if (n > BANK_WORDS) n_spill++;
    for (int i = 0; i < n; i++) begin
      logic [WORD_BITS-1:0] w;
      while (!dsp_wr_ready) @(negedge clk);
      w = {f[7:0], 24'(i)} ^ 32'h0F0F_0000 ^ $urandom;
      dsp_wr_valid  = 1'b1;
      dsp_wr_data   = w;
      dsp_frame_end = (i == n - 1);
      stream.push_back(w);
      @(negedge clk);
      dsp_wr_valid  = 1'b0;
      dsp_frame_end = 1'b0;
    end
  endtask

  initial begin : dsp
    @(posedge rst_n);
    @(negedge clk);
    for (int f = 0; f < NUM_FRAMES; f++) begin
      int n;
      case (f % 6)
        0: n = BANK_WORDS;                               // exactly one bank
        1: n = BANK_WORDS + int'($urandom_range(1, 40)); // spills over
        default: n = int'($urandom_range(1, BANK_WORDS - 1));
      endcase
      dsp_frame(f, n);
      repeat (int'($urandom_range(0, 30))) @(negedge clk);
    end
    dsp_done = 1'b1;
  end

  // ---------------- CPU model ----------------
  task automatic cpu_write(int idx, int data);
    cpu_req = 1'b1; cpu_we = 1'b1; cpu_addr = {1'b0, {FB_BANK_ID_W{1'b0}}, AW'(idx)};
    cpu_wdata = data;
    @(negedge clk);
    cpu_req = 1'b0; cpu_we = 1'b0;
  endtask

  task automatic cpu_read(logic [CPU_AW-1:0] a, output logic [WORD_BITS-1:0] d);
    cpu_req = 1'b1; cpu_we = 1'b0; cpu_addr = a;
    @(negedge clk);
    cpu_req = 1'b0;
    chk("read answered next cycle", int'(cpu_rvalid), 1);
    d = cpu_rdata;
  endtask

  function automatic logic [CPU_AW-1:0] reg_a(int idx);
    return {1'b0, {FB_BANK_ID_W{1'b0}}, AW'(idx)};
  endfunction

  int total_read = 0;
  initial begin : cpu
    logic [WORD_BITS-1:0] d, id, st;
    int b, cnt;
    bit reannounce_pending;
    int cleared_bank;
    reannounce_pending = 1'b0;
    cleared_bank = 0;
    @(posedge rst_n);
    @(negedge clk);
    forever begin
      while (irq !== 2'b11) begin
        if (dsp_done && stream.size() == 0 && !dut.filled_valid) break;
        @(negedge clk);
      end
      if (irq !== 2'b11) break;
      // A late answer now and then, so that both banks wait at once.
      if (n_banks_read == 2) repeat (3000) @(negedge clk);
      else if ($urandom_range(3) == 0) repeat (int'($urandom_range(0, 3000))) @(negedge clk);
      cpu_read(reg_a(REG_FILLED_ID), id);
      chk("FILLED_ID valid", int'(id[1]), 1);
      b = int'(id[0]);
      if (reannounce_pending) begin
        chk("re-announced bank", b, cleared_bank);
        reannounce_pending = 1'b0;
      end else if ($urandom_range(7) == 0 || n_reannounce == 0) begin
        // Clear without locking: the same bank must come back.
        cpu_write(REG_FILLED_ID, 0);
        cleared_bank = b;
        n_reannounce++;
        reannounce_pending = 1'b1;
        continue;
      end
      cpu_write(REG_LOCK, b);
      cpu_write(REG_FILLED_ID, 0);
      cpu_read(reg_a(REG_STATUS), st);
      chk("bank locked", int'(b ? st[3:2] : st[1:0]), int'(BANK_LOCKED));
      cpu_read(reg_a(b ? REG_COUNT1 : REG_COUNT0), d);
      cnt = int'(d);
      if (cnt == BANK_WORDS) n_full++;
      for (int i = 0; i < cnt; i++) begin
        logic [WORD_BITS-1:0] exp;
        cpu_read({1'b1, FB_BANK_ID_W'(b), AW'(i)}, d);
        if (stream.size() == 0) begin
          chk("word expected", 0, 1);
        end else begin
          exp = stream.pop_front();
          chk("feature word", d, exp);
        end
      end
      total_read += cnt;
      n_banks_read++;
      // Slow consumer now and then, so that the DSP gets throttled.
      repeat (int'($urandom_range(0, 3000))) @(negedge clk);
      cpu_write(REG_RELEASE, b);
    end
    chk("scoreboard empty", stream.size(), 0);
    $display("banks=%0d words=%0d irq=%0d swaps=%0d throttles=%0d full=%0d spills=%0d reannounce=%0d both_waiting=%0d",
             n_banks_read, total_read, n_irq, n_swap, n_throttle, n_full, n_spill, n_reannounce, n_both_waiting);
    chk("mechanism: interrupt", int'(n_irq > 0), 1);
    chk("mechanism: bank swap", int'(n_swap > 0), 1);
    chk("mechanism: throttle", int'(n_throttle > 0), 1);
    chk("mechanism: bank closed full", int'(n_full > 0), 1);
    chk("mechanism: frame spill", int'(n_spill > 0), 1);
    chk("mechanism: re-announce", int'(n_reannounce > 0), 1);
    chk("mechanism: both banks waiting", int'(n_both_waiting > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
  end
endmodule
