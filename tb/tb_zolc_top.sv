// tb_zolc_top: end-to-end test of the zero-overhead loop controller at its
// default (full) size: 32 tasks, 8 loops, 4 exits per task, 32-bit data.
//
// The testbench plays the rest of the processor: a register file with a
// port for the ZOLC, an instruction decoder that issues the configuration
// commands, and a one-instruction-per-cycle fetch unit whose PC decoding
// follows the ZOLC protocol (compare the PC with the current task's exit
// PCs, report task end and the exit taken, jump to the ZOLC PC target).
// The "instructions" do nothing but record the PC and the loop index
// registers they see. That trace is compared, entry by entry, with one
// computed by ordinary nested loops in the testbench, so both the order of
// execution and every index value are checked, and its length checks that
// no cycle is spent on loop overhead.
//
// Program 1: three nested loops (steps +1, -3, +2) with code before, between
// and after the inner loops, ending with an EX_END exit.
// Program 2: one loop with two entries and two exits: entered at its head or
// half-way through its body, left at its end or by an early break.
// Task LUT writes issued while active must be ignored, and ZC_STOP must
// leave active mode.
module tb_zolc_top;
  import zolc_pkg::*;

  localparam int unsigned T_AW = $clog2(NUM_TASKS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [1:0]           zolc_ctrl;
  logic [3:0]           page_sel;
  logic [REG_AW-1:0]    reg_addr;
  logic [DATA_W-1:0]    immediate;
  logic                 task_end;
  logic [1:0]           task_entry_sel;
  logic [PC_W-1:0]      zolc_pc_target;
  logic [PC_W-1:0]      task_exit_pc [NUM_EXITS];
  logic [NUM_EXITS-1:0] task_exit_valid;
  logic [REG_AW-1:0]    index_rd_addr;
  logic [DATA_W-1:0]    index_rd_data;
  logic                 index_wb_en;
  logic [REG_AW-1:0]    index_wb_addr;
  logic [DATA_W-1:0]    index_wb_data;
  logic                 active;
  logic [T_AW-1:0]      cur_task;

  zolc_top dut (.*);

  // ---- register file (model of the core's, ZOLC port only) ----
  logic [DATA_W-1:0] gpr [32];
  assign index_rd_data = gpr[index_rd_addr];
  always_ff @(posedge clk) if (index_wb_en) gpr[index_wb_addr] <= index_wb_data;

  // ---- fetch / PC decoding model ----
  localparam logic [PC_W-1:0] HALT_PC = 32'h500;
  logic [PC_W-1:0] pc;
  logic            running;
  logic            load;       // load start_pc into the PC
  logic [PC_W-1:0] start_pc;
  longint          t_start, t_halt;
  logic            entry2;     // take the second entry of program 2
  logic [31:0]     brk_val;    // index value at which program 2 breaks

  typedef struct packed {
    logic [31:0] pc;
    logic [31:0] r1, r2, r3, r4;
  } rec_t;
  rec_t trace[$];
  rec_t expect_q[$];

  function automatic logic exit_cond(int j, logic [31:0] p);
    if (j == 0)         return 1'b1;
    if (p == 32'h2F4)   return entry2;
    if (p == 32'h304)   return gpr[4] == brk_val;
    return 1'b0;
  endfunction

  always_comb begin
    task_end = 1'b0;
    task_entry_sel = '0;
    if (running && active && pc != HALT_PC) begin
      for (int j = 0; j < NUM_EXITS; j++)   // exit 0 (the loop end) has lowest priority
        if (!task_end && task_exit_valid[NUM_EXITS-1-j] && task_exit_pc[NUM_EXITS-1-j] == pc
            && exit_cond(NUM_EXITS-1-j, pc)) begin
          task_end = 1'b1;
          task_entry_sel = 2'(NUM_EXITS-1-j);
        end
    end
  end

  // mechanism counters
  int n_continue, n_loop_end, n_break, n_entry2, n_end, n_neg_step, n_ignored_wr, n_stop, n_plain;

  always_ff @(posedge clk) begin
    if (load) begin
      pc <= start_pc;
    end else if (running && pc == HALT_PC) begin
      if (t_halt == 0) t_halt = $time;
    end else if (running) begin
      if (trace.size() == 0) t_start = $time;
      trace.push_back('{pc, gpr[1], gpr[2], gpr[3], gpr[4]});
      pc <= task_end ? zolc_pc_target : pc + 4;
      if (task_end) begin
        case (dut.task_type)
          EX_LOOP:  if (dut.end_of_loop) n_loop_end++; else n_continue++;
          EX_BREAK: n_break++;
          EX_END:   n_end++;
          EX_NEXT:  n_plain++;
          default: ;
        endcase
        if (dut.task_type == EX_LOOP && $signed(dut.step_v) < 0) n_neg_step++;
        if (task_entry_sel == 1 && pc == 32'h2F4) n_entry2++;
      end
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- instruction decoder model: configuration commands ----
  task automatic cmd(zolc_ctrl_e c, zolc_page_e p, int row, logic [31:0] d);
    zolc_ctrl <= c; page_sel <= p; reg_addr <= REG_AW'(row); immediate <= d;
    @(posedge clk);
    #1;
    zolc_ctrl <= ZC_NOP;
  endtask

  task automatic loop_cfg(int l, int r, int ini, int stp, int fin);
    cmd(ZC_WRITE, PG_LOOP_IDXREG, l, r);
    cmd(ZC_WRITE, PG_LOOP_STEP, l, stp);
    cmd(ZC_WRITE, PG_LOOP_FINAL, l, fin);
    cmd(ZC_WRITE, PG_LOOP_INITIAL, l, ini);
  endtask

  function automatic logic [31:0] cfgw(exit_type_e t, int l, int a, int b);
    return (32'(t) << CFG_TYPE_LSB) | (32'(l) << CFG_LOOP_LSB) |
           (32'(a) << CFG_NEXTA_LSB) | (32'(b) << CFG_NEXTB_LSB);
  endfunction

  task automatic task_cfg(int t, logic [31:0] entry);
    cmd(ZC_WRITE, PG_TASK_ENTRY, t, entry);
  endtask

  task automatic exit_cfg(int t, int j, logic [31:0] xpc, exit_type_e ty, int l, int a, int b);
    cmd(ZC_WRITE, zolc_page_e'(8 + j), t, xpc);
    cmd(ZC_WRITE, zolc_page_e'(12 + j), t, cfgw(ty, l, a, b));
  endtask

  // ---- reference traces ----
  logic [31:0] ri, rj, rk, rm;
  task automatic emit(logic [31:0] p);
    expect_q.push_back('{p, ri, rj, rk, rm});
  endtask

  task automatic ref_prog1();
    ri = 0; rj = 10; rk = 1; rm = 0;
    for (int i = 0; i <= 3; i += 1) begin
      ri = i;
      emit(32'h100); emit(32'h104);
      for (int j = 10; j >= 4; j -= 3) begin
        rj = j;
        emit(32'h108); emit(32'h10C); emit(32'h110);
        for (int k = 1; k <= 5; k += 2) begin
          rk = k;
          emit(32'h114); emit(32'h118);
        end
        rk = 1;
        emit(32'h11C);
      end
      rj = 10;
      emit(32'h120);
    end
    ri = 0;
    emit(32'h200); emit(32'h204);
  endtask

  task automatic ref_prog2(bit second_entry, int brk);
    rm = 0;
    emit(32'h2F0); emit(32'h2F4);
    for (int m = 0; m <= 9; m++) begin
      rm = m;
      if (!(second_entry && m == 0)) begin
        emit(32'h300); emit(32'h304);
        if (m == brk) break;
      end
      emit(32'h308); emit(32'h30C);
    end
    rm = 0;
    emit(32'h400);
  endtask

  task automatic run_from(int first_task, logic [31:0] entry_pc, string name);
    longint cycles;
    trace.delete();
    t_halt = 0;
    start_pc <= entry_pc; load <= 1'b1;
    cmd(ZC_START, PG_LOOP_INITIAL, first_task, 0);
    check(active === 1'b1, {name, ": active after ZC_START"});
    load <= 1'b0; running <= 1'b1;
    for (int n = 0; n < 5000 && t_halt == 0; n++) begin
      if (n == 7 && name == "prog1") begin
        // a write while active must be ignored
        cmd(ZC_WRITE, PG_TASK_ENTRY, 2, 32'h700);
        n_ignored_wr++;
      end else @(posedge clk);
    end
    #1;
    running <= 1'b0;
    @(posedge clk); #1;
    cycles = (t_halt - t_start) / 10;
    check(active === 1'b0, {name, ": back in initialization mode after EX_END"});
    check(trace.size() == expect_q.size(),
          $sformatf("%s: executed %0d instructions, expected %0d (no loop overhead)",
                    name, trace.size(), expect_q.size()));
    check(cycles == longint'(expect_q.size()),
          $sformatf("%s: took %0d cycles for %0d instructions", name, cycles, expect_q.size()));
    for (int n = 0; n < expect_q.size() && n < trace.size(); n++) begin
      check(trace[n] == expect_q[n],
            $sformatf("%s[%0d]: got pc=%h i=%0d j=%0d k=%0d m=%0d, expected pc=%h i=%0d j=%0d k=%0d m=%0d",
                      name, n, trace[n].pc, trace[n].r1, trace[n].r2, trace[n].r3, trace[n].r4,
                      expect_q[n].pc, expect_q[n].r1, expect_q[n].r2, expect_q[n].r3, expect_q[n].r4));
    end
    expect_q.delete();
  endtask

  initial begin
    zolc_ctrl = ZC_NOP; page_sel = '0; reg_addr = '0; immediate = '0;
    running = 1'b0; load = 1'b0; start_pc = '0; t_halt = 0; t_start = 0; entry2 = 1'b0; brk_val = 100;
    for (int r = 0; r < 32; r++) gpr[r] = 32'hDEAD_0000 + r;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    check(active === 1'b0, "reset into initialization mode");

    // loops: 0 = i (r1), 1 = j (r2), 2 = k (r3), 3 = m (r4)
    loop_cfg(0, 1, 0, 1, 3);
    loop_cfg(1, 2, 10, -3, 4);
    loop_cfg(2, 3, 1, 2, 5);
    loop_cfg(3, 4, 0, 1, 9);
    @(posedge clk);
    check(gpr[1] == 0 && gpr[2] == 10 && gpr[3] == 1 && gpr[4] == 0,
          "initial values copied into the index registers");

    // program 1
    task_cfg(0, 32'h100); exit_cfg(0, 0, 32'h104, EX_NEXT, 0, 1, 0);
    task_cfg(1, 32'h108); exit_cfg(1, 0, 32'h110, EX_NEXT, 0, 2, 0);
    task_cfg(2, 32'h114); exit_cfg(2, 0, 32'h118, EX_LOOP, 2, 2, 3);
    task_cfg(3, 32'h11C); exit_cfg(3, 0, 32'h11C, EX_LOOP, 1, 1, 4);
    task_cfg(4, 32'h120); exit_cfg(4, 0, 32'h120, EX_LOOP, 0, 0, 5);
    task_cfg(5, 32'h200); exit_cfg(5, 0, 32'h204, EX_END, 0, 10, 0);
    task_cfg(10, 32'h500);
    // program 2
    task_cfg(9, 32'h2F0);
    exit_cfg(9, 0, 32'h2F4, EX_NEXT, 0, 6, 0);
    exit_cfg(9, 1, 32'h2F4, EX_NEXT, 0, 8, 0);
    task_cfg(6, 32'h300);
    exit_cfg(6, 0, 32'h30C, EX_LOOP, 3, 6, 7);
    exit_cfg(6, 1, 32'h304, EX_BREAK, 3, 7, 0);
    task_cfg(8, 32'h308);
    exit_cfg(8, 0, 32'h30C, EX_LOOP, 3, 6, 7);
    task_cfg(7, 32'h400); exit_cfg(7, 0, 32'h400, EX_END, 0, 10, 0);

    ref_prog1();
    run_from(0, 32'h100, "prog1");

    entry2 = 1'b0; brk_val = 6;
    ref_prog2(1'b0, 6);
    run_from(9, 32'h2F0, "prog2-break");
    check(gpr[4] == 0, "break resets the loop index");

    entry2 = 1'b1; brk_val = 100;
    ref_prog2(1'b1, 100);
    run_from(9, 32'h2F0, "prog2-entry2");

    // ZC_STOP leaves active mode
    cmd(ZC_START, PG_LOOP_INITIAL, 0, 0);
    check(active === 1'b1, "active before ZC_STOP");
    cmd(ZC_STOP, PG_LOOP_INITIAL, 0, 0);
    check(active === 1'b0, "ZC_STOP returns to initialization mode");
    n_stop++;

    // every mechanism must have happened
    check(n_continue > 0,   "mechanism: loop continues");
    check(n_loop_end > 0,   "mechanism: loop ends");
    check(n_break > 0,      "mechanism: early exit (multiple-exit loop)");
    check(n_entry2 > 0,     "mechanism: second loop entry (multiple-entry loop)");
    check(n_end > 0,        "mechanism: leave the loop structure");
    check(n_neg_step > 0,   "mechanism: negative step");
    check(n_plain > 0,      "mechanism: plain task switch");
    check(n_ignored_wr > 0, "mechanism: write ignored while active");
    check(n_stop > 0,       "mechanism: ZC_STOP");
    $display("mechanisms: continue=%0d loop_end=%0d break=%0d entry2=%0d end=%0d neg_step=%0d plain=%0d",
             n_continue, n_loop_end, n_break, n_entry2, n_end, n_neg_step, n_plain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
