// mbi_pkg -- shared constants and types of the memorization-based inference
// (MBI) engine.
//
// The engine replaces the arithmetic of a recurrent attention model (RAM) by
// lookups: for every glimpse the query {location, hidden state, patch} is
// matched against stored keys, and the value of the closest key gives the next
// location, the next hidden state and the predicted class.
//
// Numbers that follow the published design: 32 keys per lookup table (LUT),
// 32x32 compute-in-memory arrays, keys split into 5 partitions, 5-bit ADC,
// 5 glimpses, 2-bit patch elements and 1-bit hidden-state elements.
// Numbers chosen here (the publication shows accuracy curves, not the chosen
// point): 4x4 patches, 2 patches per glimpse, glimpse scale 2, hidden state of
// 64 elements, 5-bit pixel coordinates, 8-bit weights, 4-bit class code,
// 819.2 mV maximum precharge level.
//
// Key / query layout (160 columns, partition p holds columns 32p..32p+31):
//   partition 0 : patch 0 (16 elements x 2 bits, element e in cols 2e (LSB), 2e+1 (MSB))
//   partition 1 : patch 1 (same layout)
//   partition 2 : hidden state bits 0..31
//   partition 3 : hidden state bits 32..63
//   partition 4 : location x in cols 0..4, y in cols 5..9, cols 10..31 unused
package mbi_pkg;

  // ---------------- compute-in-memory array ----------------
  localparam int unsigned ROWS     = 32;   // key vectors per LUT
  localparam int unsigned COLS     = 32;   // columns per array
  localparam int unsigned NPART    = 5;    // key partitions (arrays per LUT)
  localparam int unsigned KEY_W    = NPART * COLS;
  localparam int unsigned ADC_BITS = 5;
  localparam int unsigned W_BITS   = 8;    // BO weight width
  localparam int unsigned VMAX_UV  = 819200; // maximum precharge level, microvolts
  localparam int unsigned NODES    = 8192; // LUT nodes of the cluster tree
  localparam int unsigned NODE_W   = 16;   // node index field width
  localparam int unsigned ROW_W    = $clog2(ROWS);
  localparam int unsigned NROWS_W  = ROW_W + 1; // 1..32 rows per node
  localparam int unsigned WDIST_W  = ADC_BITS + W_BITS;       // weighted partition distance
  localparam int unsigned DIST_W   = WDIST_W + $clog2(NPART) + 1; // summed distance

  // ---------------- recurrent attention model ----------------
  localparam int unsigned NGLIMPSES   = 5;
  localparam int unsigned IMG         = 28;  // MNIST image side
  localparam int unsigned PIX_BITS    = 8;
  localparam int unsigned PATCH       = 4;   // patch side
  localparam int unsigned NPATCHES    = 2;   // patches per glimpse
  localparam int unsigned SCALE       = 2;   // glimpse scale
  localparam int unsigned PQ_BITS     = 2;   // patch quantisation
  localparam int unsigned PATCH_ELEMS = NPATCHES * PATCH * PATCH;
  localparam int unsigned PATCH_W     = PATCH_ELEMS * PQ_BITS; // 64
  localparam int unsigned HIDDEN      = 64;  // hidden state elements, 1 bit each
  localparam int unsigned LOC_BITS    = 5;
  localparam int unsigned ACT_BITS    = 4;
  localparam int unsigned MAX_DEPTH   = 8;   // deepest tree walk allowed

  // Column significance code for the precharge DAC: V_P = VMAX >> code,
  // CS_OFF leaves the column unprecharged (unused column).
  typedef logic [2:0] cs_t;
  localparam cs_t CS_OFF = 3'd7;

  typedef logic [31:0] uv_t;  // analog level in microvolts

  typedef struct packed {
    logic [LOC_BITS-1:0] y;
    logic [LOC_BITS-1:0] x;
  } loc_t;

  // Value stored with a leaf key.
  typedef struct packed {
    loc_t                loc;     // next glimpse location l(t+1)
    logic [HIDDEN-1:0]   hidden;  // next hidden state h(t+1)
    logic [ACT_BITS-1:0] action;  // class prediction a(t)
  } value_t;

  localparam int unsigned PAYLOAD_W = $bits(value_t);
  typedef logic [PAYLOAD_W-1:0] payload_t; // leaf: value_t, centroid row: child node in [NODE_W-1:0]

  typedef struct packed {
    logic               is_leaf;
    logic [NROWS_W-1:0] nrows;
  } node_desc_t;

  // Control bundle from the row sequencer to all partition arrays.
  typedef struct packed {
    logic              pch;   // step 1: precharge BL/BLB
    logic              eval;  // step 2: assert the row line, discharge
    logic              csum;  // step 3: charge-share onto SLP/SLN
    logic              conv;  // step 4: sample the ADC
    logic [NODE_W-1:0] node;  // which LUT node (array) is addressed
    logic [ROW_W-1:0]  row;   // which row line
  } cim_ctrl_t;

  // Default column significance of partition p, column c (see layout above).
  function automatic cs_t default_cs(int unsigned p, int unsigned c);
    if (p <= 1)      return (c % 2 == 0) ? cs_t'(1) : cs_t'(0); // 2-bit patch: LSB at VMAX/2
    else if (p <= 3) return cs_t'(0);                           // 1-bit hidden: VMAX
    else if (c < 2 * LOC_BITS) return cs_t'(LOC_BITS - 1 - (c % LOC_BITS)); // 5-bit coordinates
    else             return CS_OFF;
  endfunction

endpackage
