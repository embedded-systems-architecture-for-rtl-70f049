// feature_scratchpad: the banked ScratchPad memory of the Feature Buffer.
//
// NUM_BANKS banks of BANK_BYTES bytes each (two banks of 4 KB, 8 KB in all,
// as in the paper), stored as one array of WORD_BITS-bit words.  One write
// port serves the producer (the DSP writing extracted features) and one read
// port serves the consumer (the CPU reading them), so the DSP can fill one
// bank while the CPU reads the other.
//
// Interface: a write is taken on the rising clock edge when wr_en is high.
// A read is issued with rd_en; rd_data holds the word on the next cycle and
// keeps it until the next read.  A read of the word written in the same
// cycle returns the old contents.
//
// Timing: one-cycle read latency, one write per cycle.  The paper quotes a
// 0.4 ns access time for this memory (a circuit-level estimate); the single
// cycle latency, the 32-bit word and the read-during-write behaviour are this
// design's choices.  The memory is not reset; it holds whatever was last
// written.
module feature_scratchpad #(
  parameter int unsigned NUM_BANKS  = 2,
  parameter int unsigned BANK_BYTES = 4096,
  parameter int unsigned WORD_BITS  = 32,
  localparam int unsigned BANK_WORDS = BANK_BYTES * 8 / WORD_BITS,
  localparam int unsigned AW         = $clog2(BANK_WORDS),
  localparam int unsigned BW         = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [BW-1:0]        wr_bank,
  input  logic [AW-1:0]        wr_addr,
  input  logic [WORD_BITS-1:0] wr_data,
  input  logic                 rd_en,
  input  logic [BW-1:0]        rd_bank,
  input  logic [AW-1:0]        rd_addr,
  output logic [WORD_BITS-1:0] rd_data
);

  logic [WORD_BITS-1:0] mem [NUM_BANKS*BANK_WORDS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_bank, wr_addr}] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[{rd_bank, rd_addr}];
  end

endmodule
