// rcam_pkg -- constants and types shared by the RAM-based CAM with erase RAM.
//
// The defaults describe the main configuration: a 65,536 x 8-bit binary CAM
// built from 2,048 RAM-based CAM units (RCUs) of 32 x 8 bits, fed from a
// 256-bit system bus through an erase RAM split into eight 256 x 256-bit
// dual-port memories (DPMs). Every module takes these as parameter defaults so
// that a smaller instance can be simulated by overriding them.
package rcam_pkg;

  // Width of the external (DMA) bus that delivers edata.
  localparam int unsigned BUS_W_DEF     = 256;
  // Number of DPMs the erase RAM is split into (horizontal partitioning).
  localparam int unsigned PARTS_DEF     = 8;
  // Data width and depth of one RCU (one M10K block: 8,192 x 1 / 256 x 32).
  localparam int unsigned RCU_DW_DEF    = 8;
  localparam int unsigned RCU_WORDS_DEF = 32;
  // Number of sub-RCAM blocks (RCBs).
  localparam int unsigned N_RCB_DEF     = 8;
  // CAM word width; a multiple of RCU_DW_DEF (8, 16, 32 or 64).
  localparam int unsigned WORD_W_DEF    = 8;

  // State of the update sequencer.
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,   // no update running; CAM may be searched
    ST_ERASE = 2'd1,   // clearing the old contents row by row
    ST_WRITE = 2'd2    // setting the new contents row by row
  } ctrl_state_e;

endpackage
