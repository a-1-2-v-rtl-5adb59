// bic_pkg: sizes shared by the bitmap index creation (BIC) design.
//
// The defaults are those of the fabricated 65-nm core: a record of 32 words of
// 8 bits held in one 32-word CAM block, 8 keys per record and 16 records per
// batch. A batch therefore produces an 8 x 16-bit bitmap index. The number of
// cores in the multi-core system is not given for the chip (it holds a single
// core); DEF_CORES is this design's own choice.
package bic_pkg;
  localparam int unsigned DEF_WORD_W   = 8;   // bits per record word and per key
  localparam int unsigned DEF_CB_WORDS = 32;  // words per CAM block (CB)
  localparam int unsigned DEF_NUM_CB   = 1;   // CAM blocks per core (X)
  localparam int unsigned DEF_KEYS     = 8;   // keys per batch (M)
  localparam int unsigned DEF_RECORDS  = 16;  // records per batch (N)
  localparam int unsigned DEF_CORES    = 4;   // cores in the system (Z), own choice

  // Phase of a core's input stream: record words first, then the keys.
  typedef enum logic {PH_WORDS = 1'b0, PH_KEYS = 1'b1} in_phase_e;

  // States of the transpose matrix control unit.
  typedef enum logic [1:0] {TM_IDLE = 2'd0, TM_COPY = 2'd1, TM_OUT = 2'd2} tm_state_e;
endpackage
