// fb_cpu_port: the CPU cores' window onto the Feature Buffer.
//
// What it does.  It turns simple word reads and writes from the CPU into
// scratchpad reads and controller commands, so the update and mapping
// threads can read the filled-bank-ID register, lock the filled bank, clear
// the register, read the features straight from the scratchpad and release
// the bank, all without going through main memory.
//
// How it works.  The word address has two regions, chosen by its top bit:
//   cpu_addr = {1'b1, bank, word}  feature words, read only (writes ignored)
//   cpu_addr = {1'b0, ..., index}  controller registers, map in fb_pkg
// A register write becomes a one-cycle command to the controller: any write
// to FILLED_ID is a clear, a write to LOCK or RELEASE names the bank in bit
// 0.  Register reads are sampled into a holding register; feature reads are
// passed to the scratchpad, whose output is registered.
//
// Interface and timing.  cpu_req with cpu_we = 0 is a read, answered on the
// next cycle with cpu_rvalid and cpu_rdata; every request is taken at once
// (no wait states).  Writes give no response.  Reads of unmapped registers
// return 0.
//
// The paper says the CPU reads the features from the ScratchPad and locks,
// clears and releases banks; the memory-mapped form, the address map and the
// single-cycle bus are this design's choices.
module fb_cpu_port
  import fb_pkg::*;
#(
  parameter int unsigned BANK_BYTES = 4096,
  parameter int unsigned WORD_BITS  = 32,
  localparam int unsigned BANK_WORDS = BANK_BYTES * 8 / WORD_BITS,
  localparam int unsigned AW         = $clog2(BANK_WORDS),
  localparam int unsigned CW         = AW + 1,
  localparam int unsigned CPU_AW     = AW + FB_BANK_ID_W + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // CPU bus
  input  logic                 cpu_req,
  input  logic                 cpu_we,
  input  logic [CPU_AW-1:0]    cpu_addr,
  input  logic [WORD_BITS-1:0] cpu_wdata,
  output logic                 cpu_rvalid,
  output logic [WORD_BITS-1:0] cpu_rdata,
  // scratchpad read port
  output logic                 mem_rd_en,
  output bank_id_t             mem_rd_bank,
  output logic [AW-1:0]        mem_rd_addr,
  input  logic [WORD_BITS-1:0] mem_rd_data,
  // controller
  output fb_cmd_t              cmd,
  input  logic                 filled_valid,
  input  bank_id_t             filled_bank,
  input  logic                 frame_throttle,
  input  bank_id_t             wr_bank,
  input  bank_state_e          bank_state [FB_NUM_BANKS],
  input  logic [CW-1:0]        bank_count [FB_NUM_BANKS]
);

  logic                 is_mem;
  logic [AW-1:0]        reg_idx;
  logic                 rd_mem_q;
  logic [WORD_BITS-1:0] reg_rdata_d, reg_rdata_q;

  assign is_mem      = cpu_addr[CPU_AW-1];
  assign reg_idx     = cpu_addr[AW-1:0];
  assign mem_rd_en   = cpu_req && !cpu_we && is_mem;
  assign mem_rd_bank = cpu_addr[AW +: FB_BANK_ID_W];
  assign mem_rd_addr = cpu_addr[AW-1:0];

  // Register writes become controller commands.
  always_comb begin
    cmd.op   = CMD_NONE;
    cmd.bank = cpu_wdata[FB_BANK_ID_W-1:0];
    if (cpu_req && cpu_we && !is_mem) begin
      if (reg_idx == AW'(REG_FILLED_ID))    cmd.op = CMD_CLEAR;
      else if (reg_idx == AW'(REG_LOCK))    cmd.op = CMD_LOCK;
      else if (reg_idx == AW'(REG_RELEASE)) cmd.op = CMD_RELEASE;
    end
  end

  // Register read data.
  always_comb begin
    reg_rdata_d = '0;
    if (reg_idx == AW'(REG_FILLED_ID))
      reg_rdata_d[1:0] = {filled_valid, filled_bank};
    else if (reg_idx == AW'(REG_STATUS))
      reg_rdata_d[5:0] = {wr_bank, frame_throttle, bank_state[1], bank_state[0]};
    else if (reg_idx == AW'(REG_COUNT0))
      reg_rdata_d[CW-1:0] = bank_count[0];
    else if (reg_idx == AW'(REG_COUNT1))
      reg_rdata_d[CW-1:0] = bank_count[1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cpu_rvalid  <= 1'b0;
      rd_mem_q    <= 1'b0;
      reg_rdata_q <= '0;
    end else begin
      cpu_rvalid <= cpu_req && !cpu_we;
      rd_mem_q   <= is_mem;
      if (cpu_req && !cpu_we && !is_mem) reg_rdata_q <= reg_rdata_d;
    end
  end

  assign cpu_rdata = rd_mem_q ? mem_rd_data : reg_rdata_q;

endmodule
