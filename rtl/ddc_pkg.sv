// ddc_pkg -- shared types and constants of the DDC-PIM accelerator.
//
// Geometry follows the paper: a PIM core has 32 compartments, each of 16
// double-bitwise multiply units (DBMUs) with 64 SRAM rows, so a compartment
// row holds two spliced signed 8-bit weights and the core holds 32 Kb (4 KB).
// Four PIM macros share one bit-serial input broadcast.  The operating-mode
// encoding, the control bundle and the instruction encoding are this
// design's own choices; the paper does not give them.
// Not every constant is used by every module that imports the package, so a
// lint run on one module reports some of them unused.
package ddc_pkg;

  localparam int unsigned NCOMP  = 32;  // compartments per PIM core
  localparam int unsigned NDBMU  = 16;  // DBMUs per compartment
  localparam int unsigned NROWS  = 64;  // SRAM cells per DBMU column
  localparam int unsigned WBITS  = 8;   // weight / input precision
  localparam int unsigned NCH    = 4;   // channel outputs per macro
  localparam int unsigned NMACRO = 4;   // PIM macros
  localparam int unsigned CNTW   = 6;   // width of a 32-compartment bit count
  localparam int unsigned PSW    = 32;  // partial-sum / result width
  localparam int unsigned ISW    = 16;  // width of a per-row input sum

  localparam int unsigned ROWW   = $clog2(NROWS);
  localparam int unsigned COMPW  = $clog2(NCOMP);

  // PIM core operating modes (paper: normal SRAM, regular computing,
  // double computing).
  typedef enum logic [1:0] {
    MODE_SRAM    = 2'd0,
    MODE_REGULAR = 2'd1,
    MODE_DOUBLE  = 2'd2
  } core_mode_e;

  // Configuration of one MVM as seen by a macro.
  typedef struct packed {
    core_mode_e mode;
    logic       dw;          // depthwise mapping (split adder units)
    logic       stage;       // dw-conv stage: which weight half is used
    logic       recover_en;  // add (sum I) x M in the ARU (FCC layers)
  } core_cfg_t;

  // Control flags that travel with one bit-serial compute cycle.
  typedef struct packed {
    logic valid;      // this cycle carries one input bit
    logic bit_first;  // input MSB (signed, negative weight)
    logic bit_last;   // input LSB: partial sum complete after this cycle
    logic row_first;  // first row of the MVM
    logic row_last;   // last row of the MVM
  } cmp_ctl_t;

  // Per-channel bit counts: cnt[k] = number of ones at weight bit k.
  typedef logic [WBITS-1:0][CNTW-1:0] bitcnt_t;

  // Instruction set of the top controller (64-bit words).
  typedef enum logic [3:0] {
    OP_HALT  = 4'd0,
    OP_LOADW = 4'd1,  // weight memory -> PIM rows (normal SRAM mode)
    OP_LOADM = 4'd2,  // weight memory -> mean-value registers
    OP_MVM   = 4'd3,  // one matrix-vector multiplication over rows
    OP_SWAP  = 4'd4   // swap the ping-pong banks
  } opcode_e;

  // LOADW: [63:60] op, [59:43] weight addr, [42:30] PIM addr
  //        {macro,row,comp}, [29:17] word count.
  // LOADM: [63:60] op, [59:43] weight addr (8 words, two M bytes each).
  // MVM  : [63:60] op, [59:48] input addr, [47:36] output addr,
  //        [35:30] first row, [29:23] row count (1..64), [22:21] mode,
  //        [20] dw, [19] stage, [18] recover, [17] relu, [16:12] shift,
  //        [11] pool_first, [10] pool_last.
  typedef struct packed {
    opcode_e     op;
    logic [11:0] in_addr;
    logic [11:0] out_addr;
    logic [5:0]  row0;
    logic [6:0]  nrows;
    logic [1:0]  mode;
    logic        dw;
    logic        stage;
    logic        recover;
    logic        relu;
    logic [4:0]  shift;
    logic        pool_first;
    logic        pool_last;
    logic [9:0]  unused;
  } mvm_instr_t;

endpackage
