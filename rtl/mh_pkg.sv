// Shared constants and types of the configurable memory hierarchy.
//
// MAX_LEVELS is the largest number of hierarchy levels the framework can be
// built with (one to five levels, as the design allows). Per-level build
// parameters (macro depth, bank count, port type) are passed to the top as
// arrays of MAX_LEVELS entries; only the first NUM_LEVELS entries are used.
//
// level_cfg_t is the runtime access-pattern setting of one level
// (cycle length, inter-cycle shift, skip shift). It is sampled while the
// hierarchy is held in reset, so a new pattern is started by a reset cycle.
// CFG_W, the width of these settings, is a choice of this implementation.
// The OSR's list of available shifts is passed as an array of MAX_SHIFTS
// entries of which the first NUM_SHIFTS are used.
package mh_pkg;

  localparam int unsigned MAX_LEVELS = 5;
  localparam int unsigned CFG_W      = 16;
  localparam int unsigned MAX_SHIFTS = 8;   // size of the OSR shift list parameter

  typedef logic [CFG_W-1:0] cfg_word_t;

  typedef struct packed {
    cfg_word_t cycle_length;       // words per pattern cycle, 1..level depth
    cfg_word_t inter_cycle_shift;  // words the window moves after a shift, 0..cycle_length
    cfg_word_t skip_shift;         // extra cycle repeats before each shift
  } level_cfg_t;

endpackage
