// zolc_pkg: sizes, encodings and record types shared by the zero-overhead
// loop controller (ZOLC).
//
// The ZOLC replaces the loop-overhead instructions of a RISC core (index
// update, compare, backward branch) with hardware. Software is cut into
// "tasks": straight-line or branching code regions between loop boundaries.
// Each task has up to NUM_EXITS exits. When the fetch PC reaches an exit of
// the current task, the ZOLC names the task that follows, supplies its entry
// PC in the same cycle, and updates the index of the loop that the exit
// closes, writing it back to the general-purpose register file.
//
// The sizes follow the full configuration of the design: 32 task switching
// entries, 8 loops and up to 4 entries/exits per loop, on a 32-bit core.
// The widths of PCs and register addresses, and all encodings below
// (configuration pages, control commands, exit types), are this design's own.
package zolc_pkg;

  // Full configuration sizes.
  localparam int unsigned NUM_TASKS = 32;  // task switching entries
  localparam int unsigned NUM_LOOPS = 8;   // loops in one loop structure
  localparam int unsigned NUM_EXITS = 4;   // entries/exits per loop (per task)
  localparam int unsigned DATA_W    = 32;  // register/index width
  localparam int unsigned PC_W      = 32;  // program counter width
  localparam int unsigned REG_AW    = 5;   // 32 general-purpose registers


  // Commands sent by the instruction decoder ("ZOLC control").
  typedef enum logic [1:0] {
    ZC_NOP   = 2'd0,  // nothing
    ZC_WRITE = 2'd1,  // initialization mode: write immediate to (page, row)
    ZC_START = 2'd2,  // enter active mode; row = first task
    ZC_STOP  = 2'd3   // back to initialization mode
  } zolc_ctrl_e;

  // Configuration pages ("page selection"). The row within a page comes on
  // the register-address field, the data on the immediate.
  //   0..3  loop pages, row = loop number
  //   4     task entry PC, row = task number
  //   8+j   PC of exit j of a task, row = task number
  //   12+j  configuration of exit j (exit_cfg_t in the low bits), row = task
  typedef enum logic [3:0] {
    PG_LOOP_INITIAL = 4'd0,
    PG_LOOP_STEP    = 4'd1,
    PG_LOOP_FINAL   = 4'd2,
    PG_LOOP_IDXREG  = 4'd3,
    PG_TASK_ENTRY   = 4'd4,
    PG_EXIT_PC0     = 4'd8,
    PG_EXIT_PC1     = 4'd9,
    PG_EXIT_PC2     = 4'd10,
    PG_EXIT_PC3     = 4'd11,
    PG_EXIT_CFG0    = 4'd12,
    PG_EXIT_CFG1    = 4'd13,
    PG_EXIT_CFG2    = 4'd14,
    PG_EXIT_CFG3    = 4'd15
  } zolc_page_e;

  // What an exit does ("task type select").
  typedef enum logic [2:0] {
    EX_NONE  = 3'd0,  // exit not used
    EX_NEXT  = 3'd1,  // plain task switch to next_a, no index action
    EX_LOOP  = 3'd2,  // loop end: update index; next_a if loop goes on, next_b at loop end
    EX_BREAK = 3'd3,  // early exit from a loop: reset its index, go to next_a
    EX_END   = 3'd4   // leave the loop structure: go to next_a's entry PC, back to init mode
  } exit_type_e;

  // Bit positions of the exit configuration word written on pages 12..15.
  localparam int unsigned CFG_TYPE_LSB  = 0;   // exit_type_e, 3 bits
  localparam int unsigned CFG_LOOP_LSB  = 8;   // loop number, up to 8 bits
  localparam int unsigned CFG_NEXTA_LSB = 16;  // next task (loop goes on / plain)
  localparam int unsigned CFG_NEXTB_LSB = 24;  // next task at the end of the loop

  // Fields of the loop parameter tables (write side).
  typedef enum logic [1:0] {
    LF_INITIAL = 2'd0,
    LF_STEP    = 2'd1,
    LF_FINAL   = 2'd2,
    LF_IDXREG  = 2'd3
  } loop_field_e;

endpackage
