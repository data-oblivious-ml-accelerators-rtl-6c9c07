// dolma_pkg: types and constants shared by the row-tagged systolic accelerator.
//
// Every matrix row (a scratchpad row, an accumulator row, a row entering or
// leaving the systolic array) carries one 8-bit blindedness tag. Tag zero means
// "not blinded"; each non-zero value names one security domain. The 8-bit width
// matches the tag that the host's tagged memory attaches to every 64-bit word.
// Data widths (8-bit inputs, 32-bit accumulation), the memory sizes and the
// command encoding are this design's choices, modelled on common Gemmini use.
package dolma_pkg;

  localparam int TAG_W  = 8;    // tag per row / per 64-bit memory word
  localparam int XLEN   = 64;   // width of rs1/rs2 and of a memory address
  localparam int BEAT_W = 64;   // one memory beat, one tag per beat
  localparam int IN_W   = 8;    // input element width
  localparam int ACC_W  = 32;   // accumulator element width

  typedef logic [TAG_W-1:0] tag_t;

  // RoCC funct7 values understood by the command router
  typedef enum logic [6:0] {
    FN_CONFIG  = 7'd0,
    FN_MVIN    = 7'd2,
    FN_MVOUT   = 7'd3,
    FN_COMPUTE = 7'd4,
    FN_PRELOAD = 7'd6
  } funct_e;

  // Reason recorded for the first fault after reset
  typedef enum logic [2:0] {
    FAULT_NONE        = 3'd0,
    FAULT_BLINDED_CMD = 3'd1,  // rs1 or rs2 of a command was blinded
    FAULT_MIX_ARRAY   = 3'd2,  // differing non-zero tags on A, D, B of a row
    FAULT_MIX_WEIGHTS = 3'd3,  // differing non-zero tags among the B rows
    FAULT_MIX_SPAD    = 3'd4,  // partial or accumulating write mixing tags in a row
    FAULT_BLINDED_PTE = 3'd5   // a blinded page-table entry reached the TLB
  } fault_e;

  // Tag combination rule: OR of the tags, valid only when no two non-zero
  // tags differ. Shared by the array input check and the scratchpad check.
  function automatic logic tags_conflict(tag_t x, tag_t y);
    return (x != '0) && (y != '0) && (x != y);
  endfunction

endpackage
