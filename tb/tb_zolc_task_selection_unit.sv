// tb_zolc_task_selection_unit: fills the task LUT with random entries
// through configuration commands, mirrored in a testbench model, then runs
// random task-end sequences in active mode. Every cycle it compares the exit
// PCs and valid bits shown to the PC decoding unit, the loop address and
// task type of the selected exit, and the ZOLC PC target for the given
// end-of-loop answer with the model; at each edge it follows the current
// task and the mode. Also checks the decode of loop-table writes, that
// task LUT writes are ignored while active, loop-table
// writes are not, ZC_START/ZC_STOP and EX_END.
module tb_zolc_task_selection_unit;
  import zolc_pkg::*;
  localparam int unsigned T_AW = $clog2(NUM_TASKS);
  localparam int unsigned L_AW = $clog2(NUM_LOOPS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  zolc_ctrl_e           zolc_ctrl;
  zolc_page_e           page_sel;
  logic [REG_AW-1:0]    reg_addr;
  logic [DATA_W-1:0]    immediate;
  logic                 task_end;
  logic [1:0]           task_entry_sel;
  logic [PC_W-1:0]      zolc_pc_target;
  logic [PC_W-1:0]      task_exit_pc [NUM_EXITS];
  logic [NUM_EXITS-1:0] task_exit_valid;
  logic [L_AW-1:0]      loop_addr;
  exit_type_e           task_type;
  logic                 end_of_loop;
  logic                 lpt_wr_en;
  loop_field_e          lpt_wr_field;
  logic [L_AW-1:0]      lpt_wr_loop;
  logic                 active;
  logic [T_AW-1:0]      cur_task;

  zolc_task_selection_unit dut (.*);

  // model of the LUT
  logic [31:0] m_entry [NUM_TASKS];
  logic [31:0] m_xpc   [NUM_TASKS][NUM_EXITS];
  exit_type_e  m_type  [NUM_TASKS][NUM_EXITS];
  int          m_loop  [NUM_TASKS][NUM_EXITS];
  int          m_a     [NUM_TASKS][NUM_EXITS];
  int          m_b     [NUM_TASKS][NUM_EXITS];
  int          m_cur;
  bit          m_active;

  int checks = 0, failures = 0;
  int n_end = 0, n_eol = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cmd(zolc_ctrl_e c, zolc_page_e p, int row, logic [31:0] d);
    @(negedge clk);
    zolc_ctrl = c; page_sel = p; reg_addr = REG_AW'(row); immediate = d;
    @(posedge clk); #1;
    zolc_ctrl = ZC_NOP;
  endtask

  task automatic write_task(int t);
    m_entry[t] = $urandom;
    cmd(ZC_WRITE, PG_TASK_ENTRY, t, m_entry[t]);
    for (int j = 0; j < NUM_EXITS; j++) begin
      m_xpc[t][j]  = $urandom;
      // EX_NEXT/EX_LOOP/EX_BREAK, some unused exits, no EX_END here
      m_type[t][j] = exit_type_e'((j == 0) ? 2 : $urandom_range(0, 3));
      m_loop[t][j] = $urandom_range(0, NUM_LOOPS - 1);
      m_a[t][j]    = $urandom_range(0, NUM_TASKS - 1);
      m_b[t][j]    = $urandom_range(0, NUM_TASKS - 1);
      cmd(ZC_WRITE, zolc_page_e'(8 + j), t, m_xpc[t][j]);
      cmd(ZC_WRITE, zolc_page_e'(12 + j), t,
          (32'(m_type[t][j]) << CFG_TYPE_LSB) | (32'(m_loop[t][j]) << CFG_LOOP_LSB) |
          (32'(m_a[t][j]) << CFG_NEXTA_LSB) | (32'(m_b[t][j]) << CFG_NEXTB_LSB));
    end
  endtask

  task automatic check_outputs(string when);
    int nxt;
    for (int j = 0; j < NUM_EXITS; j++)
      check(task_exit_pc[j] == m_xpc[m_cur][j] &&
            task_exit_valid[j] == (m_active && m_type[m_cur][j] != EX_NONE),
            $sformatf("%s: exit %0d of task %0d shown as %h/%0b", when, j, m_cur,
                      task_exit_pc[j], task_exit_valid[j]));
    nxt = (m_type[m_cur][task_entry_sel] == EX_LOOP && end_of_loop)
          ? m_b[m_cur][task_entry_sel] : m_a[m_cur][task_entry_sel];
    check(loop_addr == L_AW'(m_loop[m_cur][task_entry_sel]) &&
          task_type == (m_active ? m_type[m_cur][task_entry_sel] : EX_NONE) &&
          zolc_pc_target == m_entry[nxt],
          $sformatf("%s: task %0d exit %0d eol %0b: loop %0d type %s target %h, expected %0d %s %h",
                    when, m_cur, task_entry_sel, end_of_loop, loop_addr, task_type.name(),
                    zolc_pc_target, m_loop[m_cur][task_entry_sel],
                    m_type[m_cur][task_entry_sel].name(), m_entry[nxt]));
  endtask

  initial begin
    zolc_ctrl = ZC_NOP; page_sel = PG_LOOP_INITIAL; reg_addr = '0; immediate = '0;
    task_end = 0; task_entry_sel = '0; end_of_loop = 0;
    for (int t = 0; t < NUM_TASKS; t++) begin
      m_entry[t] = '0;
      for (int j = 0; j < NUM_EXITS; j++) begin
        m_xpc[t][j] = '0; m_type[t][j] = EX_NONE; m_loop[t][j] = 0; m_a[t][j] = 0; m_b[t][j] = 0;
      end
    end
    m_cur = 0; m_active = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1 check(!active, "reset into initialization mode");

    // loop-table write decode
    @(negedge clk);
    zolc_ctrl = ZC_WRITE; page_sel = PG_LOOP_FINAL; reg_addr = 5'd6;
    #1 check(lpt_wr_en && lpt_wr_field == LF_FINAL && lpt_wr_loop == 3'd6, "loop-table write decode");
    page_sel = PG_TASK_ENTRY;
    #1 check(!lpt_wr_en, "task page is not a loop-table write");
    zolc_ctrl = ZC_NOP;

    for (int t = 0; t < NUM_TASKS; t++) write_task(t);
    // one EX_END exit on task 5, exit 3
    m_type[5][3] = EX_END;
    cmd(ZC_WRITE, PG_EXIT_CFG3, 5, (32'(EX_END) << CFG_TYPE_LSB) | (32'(m_a[5][3]) << CFG_NEXTA_LSB));
    m_loop[5][3] = 0; m_b[5][3] = 0;

    for (int run = 0; run < 20; run++) begin
      m_cur = $urandom_range(0, NUM_TASKS - 1);
      cmd(ZC_START, PG_LOOP_INITIAL, m_cur, 0);
      m_active = 1;
      check(active && cur_task == T_AW'(m_cur), "ZC_START enters active mode at the given task");
      // ignored write
      cmd(ZC_WRITE, PG_TASK_ENTRY, m_cur, 32'hFFFF_FFFF);
      @(negedge clk);
      zolc_ctrl = ZC_WRITE; page_sel = PG_LOOP_STEP; reg_addr = 5'd2;
      #1 check(lpt_wr_en && lpt_wr_field == LF_STEP && lpt_wr_loop == 3'd2,
               "loop-table write accepted while active");
      zolc_ctrl = ZC_NOP;
      for (int n = 0; n < 100 && m_active; n++) begin
        @(negedge clk);
        task_entry_sel = 2'($urandom_range(0, NUM_EXITS - 1));
        end_of_loop = 1'($urandom);
        #1;
        task_end = task_exit_valid[task_entry_sel] && ($urandom_range(0, 3) != 0);
        #1 check_outputs("active");
        @(posedge clk);
        if (task_end) begin
          n_end++;
          if (m_type[m_cur][task_entry_sel] == EX_LOOP && end_of_loop) begin
            m_cur = m_b[m_cur][task_entry_sel]; n_eol++;
          end else begin
            if (m_type[m_cur][task_entry_sel] == EX_END) m_active = 0;
            m_cur = m_a[m_cur][task_entry_sel];
          end
        end
        #1;
        task_end = 0;
        check(cur_task == T_AW'(m_cur) && active == m_active,
              $sformatf("current task %0d active %0b, expected %0d %0b", cur_task, active, m_cur, m_active));
      end
      if (m_active) begin
        cmd(ZC_STOP, PG_LOOP_INITIAL, 0, 0);
        m_active = 0;
        check(!active, "ZC_STOP leaves active mode");
      end
      #1 check_outputs("initialization");
    end
    check(n_end > 100 && n_eol > 10, "enough task ends and loop ends");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
