// slam_arch_top: the Feature Buffer subsystem of the SLAM mobile architecture.
//
// What it does.  In the proposed SoC the DSP takes camera frames straight
// from the image sensor, extracts features and writes them into an on-chip
// two-bank ScratchPad, the Feature Buffer, instead of into main memory.  When
// a bank is full of one frame's features the controller interrupts the CPU
// cores that run the update and mapping threads (the SLAM Trigger); they lock
// the bank, clear the notification, read the features at scratchpad latency
// and release the bank, while the DSP fills the other bank.  If the CPU falls
// behind, the buffer asks the image side to throttle the frame rate.
//
// How it is built: feature_scratchpad (the 8 KB, two-bank memory),
// slam_trigger (bank states, filled-bank-ID register, interrupt, throttle)
// and fb_cpu_port (the CPU's register and feature window).  The DSP, the
// CPU cores, the caches, main memory and the image-sensor IO are existing
// SoC parts outside this RTL; they connect through the ports below.
//
// Interface.
//   DSP side  : dsp_wr_valid / dsp_wr_ready handshake with dsp_wr_data, and
//               dsp_frame_end marking the last word of a frame (or alone,
//               closing a partly filled bank).
//   Sensor    : frame_throttle, high while no bank can take features.
//   CPU side  : cpu_req / cpu_we / cpu_addr / cpu_wdata, answered one cycle
//               later on cpu_rvalid / cpu_rdata; irq, one line per notified
//               core.  See fb_cpu_port for the address map.
// Timing: one clock, active-low asynchronous reset; one feature word per
// cycle in, one word per cycle out, one-cycle read latency.
module slam_arch_top
  import fb_pkg::*;
#(
  parameter int unsigned BANK_BYTES = 4096,
  parameter int unsigned WORD_BITS  = 32,
  parameter int unsigned NUM_IRQ    = 2,
  localparam int unsigned BANK_WORDS = BANK_BYTES * 8 / WORD_BITS,
  localparam int unsigned AW         = $clog2(BANK_WORDS),
  localparam int unsigned CPU_AW     = AW + FB_BANK_ID_W + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // DSP (producer)
  input  logic                 dsp_wr_valid,
  input  logic [WORD_BITS-1:0] dsp_wr_data,
  input  logic                 dsp_frame_end,
  output logic                 dsp_wr_ready,
  // image sensor side
  output logic                 frame_throttle,
  // CPU cores (consumer)
  input  logic                 cpu_req,
  input  logic                 cpu_we,
  input  logic [CPU_AW-1:0]    cpu_addr,
  input  logic [WORD_BITS-1:0] cpu_wdata,
  output logic                 cpu_rvalid,
  output logic [WORD_BITS-1:0] cpu_rdata,
  output logic [NUM_IRQ-1:0]   irq
);

  localparam int unsigned CW = AW + 1;

  logic                 mem_wr_en;
  bank_id_t             mem_wr_bank;
  logic [AW-1:0]        mem_wr_addr;
  logic                 mem_rd_en;
  bank_id_t             mem_rd_bank;
  logic [AW-1:0]        mem_rd_addr;
  logic [WORD_BITS-1:0] mem_rd_data;
  fb_cmd_t              cmd;
  logic                 filled_valid;
  bank_id_t             filled_bank;
  bank_state_e          bank_state [FB_NUM_BANKS];
  logic [CW-1:0]        bank_count [FB_NUM_BANKS];

  feature_scratchpad #(
    .NUM_BANKS (FB_NUM_BANKS),
    .BANK_BYTES(BANK_BYTES),
    .WORD_BITS (WORD_BITS)
  ) u_scratchpad (
    .clk    (clk),
    .wr_en  (mem_wr_en),
    .wr_bank(mem_wr_bank),
    .wr_addr(mem_wr_addr),
    .wr_data(dsp_wr_data),
    .rd_en  (mem_rd_en),
    .rd_bank(mem_rd_bank),
    .rd_addr(mem_rd_addr),
    .rd_data(mem_rd_data)
  );

  slam_trigger #(
    .BANK_BYTES(BANK_BYTES),
    .WORD_BITS (WORD_BITS),
    .NUM_IRQ   (NUM_IRQ)
  ) u_trigger (
    .clk           (clk),
    .rst_n         (rst_n),
    .dsp_wr_valid  (dsp_wr_valid),
    .dsp_frame_end (dsp_frame_end),
    .dsp_wr_ready  (dsp_wr_ready),
    .frame_throttle(frame_throttle),
    .mem_wr_en     (mem_wr_en),
    .mem_wr_bank   (mem_wr_bank),
    .mem_wr_addr   (mem_wr_addr),
    .cmd           (cmd),
    .filled_valid  (filled_valid),
    .filled_bank   (filled_bank),
    .irq           (irq),
    .bank_state    (bank_state),
    .bank_count    (bank_count)
  );

  fb_cpu_port #(
    .BANK_BYTES(BANK_BYTES),
    .WORD_BITS (WORD_BITS)
  ) u_cpu_port (
    .clk           (clk),
    .rst_n         (rst_n),
    .cpu_req       (cpu_req),
    .cpu_we        (cpu_we),
    .cpu_addr      (cpu_addr),
    .cpu_wdata     (cpu_wdata),
    .cpu_rvalid    (cpu_rvalid),
    .cpu_rdata     (cpu_rdata),
    .mem_rd_en     (mem_rd_en),
    .mem_rd_bank   (mem_rd_bank),
    .mem_rd_addr   (mem_rd_addr),
    .mem_rd_data   (mem_rd_data),
    .cmd           (cmd),
    .filled_valid  (filled_valid),
    .filled_bank   (filled_bank),
    .frame_throttle(frame_throttle),
    .wr_bank       (mem_wr_bank),
    .bank_state    (bank_state),
    .bank_count    (bank_count)
  );

  // The CPU reads only words that are in a bank, never the one being written
  // while it is being written.
  a_no_read_of_writing_bank: assert property (
    @(posedge clk) disable iff (!rst_n)
    mem_rd_en |-> bank_state[mem_rd_bank] != BANK_WRITING)
    else $error("CPU read the bank the DSP is writing");

endmodule
