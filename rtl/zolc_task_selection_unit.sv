// zolc_task_selection_unit: the task selection unit of the ZOLC.
//
// It holds the task-sequencing LUT and the ZOLC mode. The LUT has one entry
// per task (NUM_TASKS task switching entries). An entry gives the task's
// entry PC and, for each of up to NUM_EXITS exits, the PC of the exit's last
// instruction, the exit type, the loop the exit refers to and the next task:
// next_a, or next_b when an EX_LOOP exit finds its loop finished.
//
// Initialization mode: the instruction decoder writes the LUT and the loop
// parameter tables with ZC_WRITE commands (page, row on the register-address
// field, data on the immediate). ZC_START enters active mode with the task
// given on the row field as the current task. Loop parameter writes are also
// accepted in active mode, so that software can change a loop bound that
// depends on an outer loop's index before the inner loop starts.
//
// Active mode: the unit shows the PC decoding unit the exit PCs of the
// current task. When the PC decoding unit reports a task end and which exit
// was taken (task_entry_sel), the unit drives the loop address and task type
// of that exit to the loop parameter tables and index calculation unit, takes
// their end-of-loop answer, picks the next task and drives that task's entry
// PC as the ZOLC PC target, all in the same cycle. The current task register
// moves to the next task at the clock edge. An EX_END exit, or ZC_STOP,
// returns to initialization mode.
//
// Follows the paper: the two modes, the LUT inside this unit addressed by
// the completed task and the loop status, and the signal set towards the
// decoder and PC decoding unit. This design's own choices: the LUT layout,
// the page encoding, exit types, and that task LUT writes are ignored while
// active while loop parameter writes are accepted in either mode.
module zolc_task_selection_unit
  import zolc_pkg::*;
#(
  parameter int unsigned N_TASKS = zolc_pkg::NUM_TASKS,
  parameter int unsigned N_LOOPS = zolc_pkg::NUM_LOOPS,
  parameter int unsigned N_EXITS = zolc_pkg::NUM_EXITS,
  parameter int unsigned D_W     = zolc_pkg::DATA_W,
  parameter int unsigned P_W     = zolc_pkg::PC_W,
  parameter int unsigned R_AW    = zolc_pkg::REG_AW,
  localparam int unsigned T_AW   = (N_TASKS > 1) ? $clog2(N_TASKS) : 1,
  localparam int unsigned L_AW   = (N_LOOPS > 1) ? $clog2(N_LOOPS) : 1,
  localparam int unsigned E_AW   = (N_EXITS > 1) ? $clog2(N_EXITS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the instruction decoder
  input  zolc_ctrl_e        zolc_ctrl,
  input  zolc_page_e        page_sel,
  input  logic [R_AW-1:0]   reg_addr,
  input  logic [D_W-1:0]    immediate,
  // from/to the PC decoding unit
  input  logic              task_end,
  input  logic [E_AW-1:0]   task_entry_sel,
  output logic [P_W-1:0]    zolc_pc_target,
  output logic [P_W-1:0]    task_exit_pc    [N_EXITS],
  output logic [N_EXITS-1:0] task_exit_valid,
  // to the loop parameter tables and index calculation unit
  output logic [L_AW-1:0]   loop_addr,
  output exit_type_e        task_type,
  input  logic              end_of_loop,
  output logic              lpt_wr_en,
  output loop_field_e       lpt_wr_field,
  output logic [L_AW-1:0]   lpt_wr_loop,
  // status
  output logic              active,
  output logic [T_AW-1:0]   cur_task
);

  // Row addresses come on the register-address field.
  initial begin
    assert (N_TASKS <= 2**R_AW && N_LOOPS <= 2**R_AW && N_EXITS <= 4)
      else $error("sizes exceed the configuration address space");
  end

  typedef struct packed {
    exit_type_e      etype;
    logic [L_AW-1:0] loop;
    logic [T_AW-1:0] next_a;
    logic [T_AW-1:0] next_b;
  } exit_cfg_t;

  // Task LUT.
  logic [P_W-1:0] entry_pc_q [N_TASKS];
  logic [P_W-1:0] exit_pc_q  [N_TASKS][N_EXITS];
  exit_cfg_t      exit_cfg_q [N_TASKS][N_EXITS];

  logic           active_q;
  logic [T_AW-1:0] cur_q;

  // Decode of a configuration write.
  logic            cfg_wr;
  logic [T_AW-1:0] wr_task;
  logic [1:0]      wr_exit;
  exit_cfg_t       wr_cfg;

  always_comb begin
    cfg_wr  = (zolc_ctrl == ZC_WRITE) && !active_q;
    wr_task = reg_addr[T_AW-1:0];
    wr_exit = page_sel[1:0];
    wr_cfg.etype  = exit_type_e'(immediate[CFG_TYPE_LSB +: 3]);
    wr_cfg.loop   = immediate[CFG_LOOP_LSB  +: L_AW];
    wr_cfg.next_a = immediate[CFG_NEXTA_LSB +: T_AW];
    wr_cfg.next_b = immediate[CFG_NEXTB_LSB +: T_AW];

    // Loop parameters may also be rewritten in active mode (e.g. a bound
    // that depends on an outer index); the task LUT may not.
    lpt_wr_en    = (zolc_ctrl == ZC_WRITE) && (page_sel[3:2] == 2'b00);
    lpt_wr_field = loop_field_e'(page_sel[1:0]);
    lpt_wr_loop  = reg_addr[L_AW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < N_TASKS; t++) begin
        entry_pc_q[t] <= '0;
        for (int e = 0; e < N_EXITS; e++) begin
          exit_pc_q[t][e]  <= '0;
          exit_cfg_q[t][e] <= '0;
        end
      end
    end else if (cfg_wr) begin
      if (page_sel == PG_TASK_ENTRY)
        entry_pc_q[wr_task] <= immediate[P_W-1:0];
      else if (page_sel[3:2] == 2'b10 && 32'(wr_exit) < N_EXITS)
        exit_pc_q[wr_task][wr_exit[E_AW-1:0]] <= immediate[P_W-1:0];
      else if (page_sel[3:2] == 2'b11 && 32'(wr_exit) < N_EXITS)
        exit_cfg_q[wr_task][wr_exit[E_AW-1:0]] <= wr_cfg;
    end
  end

  // Selection of the next task.
  exit_cfg_t       sel_cfg;
  logic [T_AW-1:0] next_task;

  // Exit lookup (towards the loop parameter tables and index calculation
  // unit) and next-task choice (on their answer) are kept apart, so that no
  // combinational block both drives loop_addr and reads end_of_loop.
  assign sel_cfg   = exit_cfg_q[cur_q][task_entry_sel];
  assign loop_addr = sel_cfg.loop;
  assign task_type = active_q ? sel_cfg.etype : EX_NONE;

  always_comb begin
    if (sel_cfg.etype == EX_LOOP && end_of_loop) next_task = sel_cfg.next_b;
    else                                         next_task = sel_cfg.next_a;
    zolc_pc_target = entry_pc_q[next_task];
  end

  always_comb begin
    for (int e = 0; e < N_EXITS; e++) begin
      task_exit_pc[e]    = exit_pc_q[cur_q][e];
      task_exit_valid[e] = active_q && (exit_cfg_q[cur_q][e].etype != EX_NONE);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      cur_q    <= '0;
    end else if (active_q) begin
      if (zolc_ctrl == ZC_STOP) begin
        active_q <= 1'b0;
      end else if (task_end) begin
        cur_q <= next_task;
        if (sel_cfg.etype == EX_END) active_q <= 1'b0;
      end
    end else if (zolc_ctrl == ZC_START) begin
      active_q <= 1'b1;
      cur_q    <= reg_addr[T_AW-1:0];
    end
  end

  assign active   = active_q;
  assign cur_task = cur_q;

  // Handshake rules towards the PC decoding unit.
  a_end_only_active : assert property (@(posedge clk) disable iff (!rst_n)
    task_end |-> active_q);
  a_end_on_valid_exit : assert property (@(posedge clk) disable iff (!rst_n)
    task_end |-> task_exit_valid[task_entry_sel]);

endmodule
