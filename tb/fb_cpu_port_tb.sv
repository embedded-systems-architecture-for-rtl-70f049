// fb_cpu_port_tb: self-checking test of the CPU window onto the Feature
// Buffer.
//
// The controller's status is driven directly by the test and the scratchpad
// is a small array in the test with a one-cycle read.  Checks: each register
// write becomes the right one-cycle command (clear, lock, release) and a
// write to a feature or unmapped address gives none; register reads return
// the FILLED_ID, STATUS and COUNT fields as laid out in fb_pkg, unmapped
// registers read 0; feature reads reach the right bank and word; every read
// answers exactly one cycle later and writes give no response.
module fb_cpu_port_tb;
  import fb_pkg::*;
  localparam int unsigned BANK_BYTES = 4096;
  localparam int unsigned WORD_BITS  = 32;
  localparam int unsigned BANK_WORDS = BANK_BYTES * 8 / WORD_BITS;
  localparam int unsigned AW         = $clog2(BANK_WORDS);
  localparam int unsigned CW         = AW + 1;
  localparam int unsigned CPU_AW     = AW + FB_BANK_ID_W + 1;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic                 cpu_req = 1'b0, cpu_we = 1'b0;
  logic [CPU_AW-1:0]    cpu_addr = '0;
  logic [WORD_BITS-1:0] cpu_wdata = '0, cpu_rdata;
  logic                 cpu_rvalid;
  logic                 mem_rd_en;
  bank_id_t             mem_rd_bank;
  logic [AW-1:0]        mem_rd_addr;
  logic [WORD_BITS-1:0] mem_rd_data;
  fb_cmd_t              cmd;
  logic                 filled_valid = 1'b0;
  bank_id_t             filled_bank = '0;
  logic                 frame_throttle = 1'b0;
  bank_id_t             wr_bank = '0;
  bank_state_e          bank_state [FB_NUM_BANKS];
  logic [CW-1:0]        bank_count [FB_NUM_BANKS];

  fb_cpu_port dut (.*);

  // Scratchpad stand-in: word = f(bank, address), one-cycle read.
  function automatic logic [31:0] word_of(int b, int a);
    return 32'hA5A5_0000 ^ (b << 20) ^ (a * 32'h0001_0003);
  endfunction
  always_ff @(posedge clk) if (mem_rd_en) mem_rd_data <= word_of(int'(mem_rd_bank), int'(mem_rd_addr));

  int checks = 0, failures = 0;
  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h (t=%0t)", what, got, exp, $time);
    end
  endtask

  function automatic logic [CPU_AW-1:0] reg_addr(int idx);
    return {1'b0, {FB_BANK_ID_W{1'b0}}, AW'(idx)};
  endfunction
  function automatic logic [CPU_AW-1:0] mem_addr(int b, int a);
    return {1'b1, FB_BANK_ID_W'(b), AW'(a)};
  endfunction

  // A write: the command is visible in the same cycle, and only then.
  task automatic do_write(logic [CPU_AW-1:0] a, int data, fb_cmd_op_e exp_op, int exp_bank);
    cpu_req = 1'b1; cpu_we = 1'b1; cpu_addr = a; cpu_wdata = data;
    #1;
    chk("cmd op", int'(cmd.op), int'(exp_op));
    if (exp_op == CMD_LOCK || exp_op == CMD_RELEASE) chk("cmd bank", int'(cmd.bank), exp_bank);
    @(negedge clk);
    cpu_req = 1'b0; cpu_we = 1'b0;
    chk("no response to a write", int'(cpu_rvalid), 0);
    #1;
    chk("cmd is one cycle", int'(cmd.op), int'(CMD_NONE));
  endtask

  // A read: answered on the next cycle, not before.
  task automatic do_read(logic [CPU_AW-1:0] a, longint exp, string what);
    cpu_req = 1'b1; cpu_we = 1'b0; cpu_addr = a;
    #1;
    chk({what, ": no command"}, int'(cmd.op), int'(CMD_NONE));
    @(negedge clk);
    cpu_req = 1'b0;
    chk({what, ": rvalid"}, int'(cpu_rvalid), 1);
    chk(what, cpu_rdata, exp);
    @(negedge clk);
    chk({what, ": rvalid drops"}, int'(cpu_rvalid), 0);
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bank_state[0] = BANK_FREE; bank_state[1] = BANK_FREE;
    bank_count[0] = '0; bank_count[1] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    chk("rvalid after reset", int'(cpu_rvalid), 0);

    // Commands.
    do_write(reg_addr(REG_FILLED_ID), 32'hFFFF_FFFF, CMD_CLEAR, 0);
    do_write(reg_addr(REG_LOCK), 1, CMD_LOCK, 1);
    do_write(reg_addr(REG_LOCK), 0, CMD_LOCK, 0);
    do_write(reg_addr(REG_RELEASE), 1, CMD_RELEASE, 1);
    do_write(reg_addr(REG_RELEASE), 32'h10, CMD_RELEASE, 0);
    do_write(reg_addr(REG_STATUS), 1, CMD_NONE, 0);
    do_write(reg_addr(9), 1, CMD_NONE, 0);
    do_write(mem_addr(1, 5), 2, CMD_NONE, 0);

    // Registers.
    filled_valid = 1'b1; filled_bank = 1'b1;
    do_read(reg_addr(REG_FILLED_ID), 3, "FILLED_ID valid bank 1");
    filled_valid = 1'b0; filled_bank = 1'b0;
    do_read(reg_addr(REG_FILLED_ID), 0, "FILLED_ID empty");
    filled_valid = 1'b1; filled_bank = 1'b0;
    do_read(reg_addr(REG_FILLED_ID), 2, "FILLED_ID valid bank 0");
    bank_state[0] = BANK_LOCKED; bank_state[1] = BANK_WRITING;
    frame_throttle = 1'b0; wr_bank = 1'b1;
    do_read(reg_addr(REG_STATUS), 32'h27, "STATUS locked/writing");
    bank_state[0] = BANK_FILLED; bank_state[1] = BANK_LOCKED;
    frame_throttle = 1'b1; wr_bank = 1'b0;
    do_read(reg_addr(REG_STATUS), 32'h1E, "STATUS filled/locked/throttle");
    bank_count[0] = CW'(BANK_WORDS); bank_count[1] = CW'(77);
    do_read(reg_addr(REG_COUNT0), BANK_WORDS, "COUNT0");
    do_read(reg_addr(REG_COUNT1), 77, "COUNT1");
    do_read(reg_addr(6), 0, "unmapped register");

    // Feature words, including the first and last of each bank.
    for (int b = 0; b < 2; b++) begin
      do_read(mem_addr(b, 0), word_of(b, 0), "first word");
      do_read(mem_addr(b, BANK_WORDS - 1), word_of(b, BANK_WORDS - 1), "last word");
    end
    for (int i = 0; i < 200; i++) begin
      int b, a;
      b = int'($urandom_range(1));
      a = int'($urandom_range(BANK_WORDS - 1));
      do_read(mem_addr(b, a), word_of(b, a), "random word");
    end

    // Back-to-back reads: register then feature then register.
    cpu_req = 1'b1; cpu_we = 1'b0; cpu_addr = reg_addr(REG_COUNT1);
    @(negedge clk);
    chk("b2b 1", cpu_rdata, 77);
    cpu_addr = mem_addr(1, 9);
    @(negedge clk);
    chk("b2b 2", cpu_rdata, word_of(1, 9));
    cpu_addr = reg_addr(REG_FILLED_ID);
    @(negedge clk);
    chk("b2b 3", cpu_rdata, 2);
    cpu_req = 1'b0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
