// ndft_pkg: sizes shared by the logic-layer shared-memory blocks.
//
// The near-data system has a 4 x 4 mesh of HBM2 stacks. The logic layer of each
// stack holds 8 NDP units of 2 in-order cores each, and one scratchpad (SPM) that
// all 16 cores of the stack share. Every core owns a 16 KB slice of that SPM, so a
// stack holds 256 KB. These counts and sizes are the published configuration.
// The 64-bit word (one double-precision value, the element type of the
// pseudopotential matrices) and the word-addressed core port are this design's
// own choices.
package ndft_pkg;

  // System shape (published configuration).
  localparam int unsigned MESH_X             = 4;
  localparam int unsigned MESH_Y             = 4;
  localparam int unsigned N_STACKS           = MESH_X * MESH_Y;           // 16
  localparam int unsigned UNITS_PER_STACK    = 8;
  localparam int unsigned CORES_PER_UNIT     = 2;
  localparam int unsigned CORES_PER_STACK    = UNITS_PER_STACK * CORES_PER_UNIT; // 16
  localparam int unsigned SPM_BYTES_PER_CORE = 16 * 1024;                 // 16 KB
  localparam int unsigned SPM_BYTES_PER_STACK = SPM_BYTES_PER_CORE * CORES_PER_STACK; // 256 KB

  // Word organisation (design choice).
  localparam int unsigned DATA_W     = 64;
  localparam int unsigned WORD_BYTES = DATA_W / 8;
  localparam int unsigned BANK_WORDS = SPM_BYTES_PER_CORE / WORD_BYTES;   // 2048

  // Core that runs the inter-stack communication process (design choice: the
  // last core of the last NDP unit of the stack).
  localparam int unsigned COMM_CORE = CORES_PER_STACK - 1;

endpackage
