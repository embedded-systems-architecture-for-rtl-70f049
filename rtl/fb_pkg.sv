// fb_pkg: types and constants shared by the Feature Buffer modules.
//
// The Feature Buffer is a two-bank scratchpad that sits between the DSP,
// which writes the features it extracts from each camera frame, and the CPU
// cores, which read them.  Each bank moves through four states:
//   FREE    - empty, may be handed to the DSP
//   WRITING - the DSP is filling it with the features of one frame
//   FILLED  - holds a complete frame of features, waiting for the CPU
//   LOCKED  - the CPU has claimed it and is reading it
// The two banks and the lock / clear / release commands follow the paper's
// description; the state encoding, the command encoding and the CPU register
// map below are this design's own choices.
package fb_pkg;

  // Two banks, one per frame of features in flight.
  localparam int unsigned FB_NUM_BANKS = 2;
  localparam int unsigned FB_BANK_ID_W = 1;

  typedef logic [FB_BANK_ID_W-1:0] bank_id_t;

  typedef enum logic [1:0] {
    BANK_FREE    = 2'd0,
    BANK_WRITING = 2'd1,
    BANK_FILLED  = 2'd2,
    BANK_LOCKED  = 2'd3
  } bank_state_e;

  // Command from the CPU side to the controller.  At most one per cycle.
  typedef enum logic [1:0] {
    CMD_NONE    = 2'd0,
    CMD_LOCK    = 2'd1,  // claim the named FILLED bank
    CMD_CLEAR   = 2'd2,  // clear the filled-bank-ID register
    CMD_RELEASE = 2'd3   // hand the named LOCKED bank back to the DSP
  } fb_cmd_op_e;

  typedef struct packed {
    fb_cmd_op_e op;
    bank_id_t   bank;
  } fb_cmd_t;

  // CPU register map: word index inside the register region.
  //   0 FILLED_ID  read : bit 1 = valid, bit 0 = bank ID;  write: clear
  //   1 LOCK       write: bit 0 = bank to lock
  //   2 RELEASE    write: bit 0 = bank to release
  //   3 STATUS     read : [1:0] bank 0 state, [3:2] bank 1 state,
  //                       [4] frame throttle, [5] bank the DSP writes
  //   4 COUNT0     read : words written into bank 0 for its frame
  //   5 COUNT1     read : words written into bank 1 for its frame
  localparam int unsigned REG_FILLED_ID = 0;
  localparam int unsigned REG_LOCK      = 1;
  localparam int unsigned REG_RELEASE   = 2;
  localparam int unsigned REG_STATUS    = 3;
  localparam int unsigned REG_COUNT0    = 4;
  localparam int unsigned REG_COUNT1    = 5;

endpackage
