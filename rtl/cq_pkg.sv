// cq_pkg: types and constants shared by the update-conflation tracker.
//
// The conflation datapath is one 48-bit word per pipeline slot, the width of
// a DSP48 cascade bus. Its layout, from the top down, is: 3 unused bits, the
// valid flag, the 24-bit key and the two 10-bit increment lanes (shadow count
// above master count), 24 + 1 + 2*10 = 45 bits in use. The valid flag sits
// directly above the key so that it takes part in the key comparison, and the
// increments sit in the low bits so that a plain 48-bit addition merges two
// increments without touching the key as long as no lane overflows.
//
// Counters in memory are wider than the increments: each memory word holds a
// 32-bit master and a 32-bit shadow count in a 72-bit controller word. The
// counter width is this design's choice; the key width, the lane count and
// the 10-bit lane width follow the evaluated configuration.
package cq_pkg;

  localparam int unsigned KEY_W   = 24;              // key (bucket) width
  localparam int unsigned CNT_W   = 10;              // width of one increment lane
  localparam int unsigned NLANE   = 2;               // master and shadow lane
  localparam int unsigned INC_W   = NLANE * CNT_W;   // value part of the datapath
  localparam int unsigned DP_W    = 48;              // DSP cascade width
  localparam int unsigned TAG_W   = KEY_W + 1;       // valid flag + key, the matched field
  localparam int unsigned TAG_LSB = INC_W;
  localparam int unsigned VAL_BIT = INC_W + KEY_W;   // position of the valid flag

  // Memory side
  localparam int unsigned MEM_LANES = 4;             // controller command lanes
  localparam int unsigned MEM_DW    = 72;            // controller word width
  localparam int unsigned CTR_W     = 32;            // stored count width per lane

  typedef logic [DP_W-1:0]  dp_word_t;
  typedef logic [KEY_W-1:0] key_t;
  typedef logic [INC_W-1:0] inc_t;
  typedef logic [MEM_DW-1:0] mem_word_t;

  // A write-back request leaving the last conflation stage.
  typedef struct packed {
    key_t key;
    inc_t inc;
  } wr_req_t;

  // One command on a controller lane.
  typedef struct packed {
    logic      we;     // 1 = write, 0 = read
    key_t      addr;
    mem_word_t wdata;
  } mem_cmd_t;

  // Pack a slot of the conflation datapath.
  function automatic dp_word_t dp_pack(logic valid, key_t key, inc_t inc);
    dp_word_t w;
    w = '0;
    w[VAL_BIT] = valid;
    w[TAG_LSB +: KEY_W] = key;
    w[INC_W-1:0] = inc;
    return w;
  endfunction

  function automatic logic dp_valid(dp_word_t w);
    return w[VAL_BIT];
  endfunction

  function automatic key_t dp_key(dp_word_t w);
    return w[TAG_LSB +: KEY_W];
  endfunction

  function automatic inc_t dp_inc(dp_word_t w);
    return w[INC_W-1:0];
  endfunction

  // Mask of the compared field (valid flag + key), as a DSP pattern detector
  // would be configured.
  localparam dp_word_t TAG_MASK = dp_word_t'(((DP_W'(1) << TAG_W) - 1) << TAG_LSB);

  // Memory word: master count in the low 32 bits, shadow count above it.
  function automatic mem_word_t ctr_pack(logic [CTR_W-1:0] master, logic [CTR_W-1:0] shadow);
    return mem_word_t'({shadow, master});
  endfunction

endpackage
