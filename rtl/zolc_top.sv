// zolc_top: the zero-overhead loop controller (ZOLC) for a RISC core.
//
// The ZOLC sits beside the core's instruction decoder, PC decoding unit and
// general-purpose register file. Software first runs an initialization
// sequence that loads the loop bounds and the task structure of a loop nest
// (ZC_WRITE commands), then starts the controller (ZC_START). From then on
// the loop code carries no index updates, compares or backward branches:
// the PC decoding unit compares the fetch PC with the exit PCs of the
// current task (task_exit_pc/task_exit_valid), and on a match reports a task
// end with the exit taken. In the same cycle the ZOLC returns the entry PC
// of the next task (zolc_pc_target), and at the clock edge writes the
// updated loop index into the register file (index_wb_*).
//
// Inside: the task selection unit (LUT and mode), the loop parameter tables
// and the index calculation unit, connected as in the paper's block diagram.
// The index read port (index_rd_addr/index_rd_data) and the write-back port
// are a register-file port of the core; index_rd_data must be the register's
// current value, combinationally. Writing a loop's initial value also copies
// it into the loop's index register, so the index register number must be
// written before the initial value. That copy is this design's own choice,
// as is everything about encodings noted in zolc_pkg.
module zolc_top
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
  input  logic               clk,
  input  logic               rst_n,
  // instruction decoder
  input  logic [1:0]         zolc_ctrl,       // zolc_ctrl_e
  input  logic [3:0]         page_sel,        // zolc_page_e
  input  logic [R_AW-1:0]    reg_addr,
  input  logic [D_W-1:0]     immediate,
  // PC decoding unit
  input  logic               task_end,
  input  logic [E_AW-1:0]    task_entry_sel,
  output logic [P_W-1:0]     zolc_pc_target,
  output logic [P_W-1:0]     task_exit_pc    [N_EXITS],
  output logic [N_EXITS-1:0] task_exit_valid,
  // general-purpose register file
  output logic [R_AW-1:0]    index_rd_addr,
  input  logic [D_W-1:0]     index_rd_data,
  output logic               index_wb_en,
  output logic [R_AW-1:0]    index_wb_addr,
  output logic [D_W-1:0]     index_wb_data,
  // status
  output logic               active,
  output logic [T_AW-1:0]    cur_task
);

  logic [L_AW-1:0] loop_addr;
  exit_type_e      task_type;
  logic            end_of_loop;
  logic            lpt_wr_en;
  loop_field_e     lpt_wr_field;
  logic [L_AW-1:0] lpt_wr_loop;
  logic [R_AW-1:0] wr_idx_reg, idx_reg;
  logic [D_W-1:0]  initial_v, step_v, final_v;
  logic            icu_wb_en;
  logic [D_W-1:0]  icu_wb_data;

  zolc_task_selection_unit #(
    .N_TASKS(N_TASKS), .N_LOOPS(N_LOOPS), .N_EXITS(N_EXITS),
    .D_W(D_W), .P_W(P_W), .R_AW(R_AW)
  ) u_tsu (
    .clk, .rst_n,
    .zolc_ctrl(zolc_ctrl_e'(zolc_ctrl)),
    .page_sel(zolc_page_e'(page_sel)),
    .reg_addr, .immediate,
    .task_end, .task_entry_sel,
    .zolc_pc_target, .task_exit_pc, .task_exit_valid,
    .loop_addr, .task_type, .end_of_loop,
    .lpt_wr_en, .lpt_wr_field, .lpt_wr_loop,
    .active, .cur_task
  );

  zolc_loop_param_tables #(
    .N_LOOPS(N_LOOPS), .D_W(D_W), .R_AW(R_AW)
  ) u_lpt (
    .clk, .rst_n,
    .wr_en(lpt_wr_en), .wr_field(lpt_wr_field), .wr_loop(lpt_wr_loop),
    .wr_data(immediate), .wr_idx_reg,
    .loop_addr, .initial_v, .step_v, .final_v, .idx_reg
  );

  zolc_index_calc_unit #(.D_W(D_W)) u_icu (
    .task_end, .task_type, .initial_v, .step_v, .final_v,
    .index_rd(index_rd_data),
    .end_of_loop, .wb_en(icu_wb_en), .wb_data(icu_wb_data)
  );

  // Index register port: ZOLC index update in active mode, copy of the
  // initial value during initialization.
  logic init_copy;
  always_comb begin
    index_rd_addr = idx_reg;
    init_copy     = lpt_wr_en && (lpt_wr_field == LF_INITIAL);
    if (init_copy) begin
      index_wb_en   = 1'b1;
      index_wb_addr = wr_idx_reg;
      index_wb_data = immediate;
    end else begin
      index_wb_en   = icu_wb_en;
      index_wb_addr = idx_reg;
      index_wb_data = icu_wb_data;
    end
  end

endmodule
