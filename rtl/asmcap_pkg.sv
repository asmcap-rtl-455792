// asmcap_pkg -- types and constants shared by the ASMCap approximate string
// matching accelerator.
//
// A DNA base is two bits. The A/C/G/T code below is this design's own choice
// (the two SRAM cells of a cell just hold two bits; no mapping is given).
// Threshold, row and array-id fields of the broadcast command are carried in
// fixed 16-bit fields so that one command layout serves every array size; a
// module only uses the low bits it needs.
package asmcap_pkg;

  // Base code as named constants; buses carry plain 2-bit base_t.
  typedef enum logic [1:0] {
    BASE_A = 2'b00,
    BASE_C = 2'b01,
    BASE_G = 2'b10,
    BASE_T = 2'b11
  } base_e;
  typedef logic [1:0] base_t;

  // Select signal S shared by all cell multiplexers: 1 = ED* (co-located,
  // left and right neighbours), 0 = Hamming distance (co-located only).
  typedef enum logic {
    MODE_HD  = 1'b0,
    MODE_EDS = 1'b1
  } match_mode_e;

  // Rotation direction of the read shift register. Base 0 is the leftmost
  // base of a sequence. Right: base j moves to j+1 and the last base wraps to
  // position 0.
  typedef enum logic {
    ROT_RIGHT = 1'b0,
    ROT_LEFT  = 1'b1
  } rot_dir_e;

  // Operation carried to the arrays by the H-tree.
  typedef enum logic [1:0] {
    ACMD_NOP    = 2'd0,
    ACMD_WRITE  = 2'd1,   // write one reference segment into one row
    ACMD_LOAD   = 2'd2,   // load a read into the shift registers
    ACMD_SEARCH = 2'd3    // one search cycle on all rows
  } array_op_e;

  // What a search cycle is, so the unit knows how to fold its result.
  typedef enum logic [1:0] {
    STEP_ED0 = 2'd0,      // ED* search with the unrotated read
    STEP_HD0 = 2'd1,      // HD search with the unrotated read (HDAC)
    STEP_ROT = 2'd2       // ED* search with a rotated read (TASR)
  } step_e;

  // Host instructions.
  typedef enum logic [1:0] {
    OP_NOP       = 2'd0,
    OP_CONFIG    = 2'd1,
    OP_WRITE_REF = 2'd2,
    OP_SEARCH    = 2'd3
  } host_op_e;

  localparam int unsigned FW     = 16;  // width of threshold/row/id fields
  localparam int unsigned P_BITS = 16;  // HDAC probability p, fraction of 2^16

  // Matching configuration written by OP_CONFIG.
  typedef struct packed {
    logic [FW-1:0]     t;        // ED threshold T
    logic [FW-1:0]     t_l;      // TASR lower bound T_l
    logic [7:0]        n_r;      // TASR rotation count N_R
    rot_dir_e          rot_dir;  // TASR rotation direction
    logic              hdac_en;  // HDAC enable
    logic [P_BITS-1:0] p;        // HDAC probability p = f(e_s, e_id, T)
  } cfg_t;

  // Control part of a command broadcast to the arrays (the bases travel
  // beside it).
  typedef struct packed {
    array_op_e     op;
    match_mode_e   mode;        // S for this search cycle
    logic          rot_en;      // rotate the shift registers after this cycle
    rot_dir_e      rot_dir;
    step_e         kind;
    logic          hd_follows;  // an HD cycle follows this ED0 cycle
    logic          last;        // last search cycle of this read
    logic [FW-1:0] threshold;   // T, sets V_ref = T/N VDD
    logic [FW-1:0] array_id;    // target array of a write
    logic [FW-1:0] row;         // target row of a write
    logic [P_BITS-1:0] p;       // HDAC probability for this read
  } acmd_ctrl_t;

endpackage
