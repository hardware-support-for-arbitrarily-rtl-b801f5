// tb_zolc_kernels: two benchmark kernels run under the zero-overhead loop
// controller at its default size, with a behavioural core around it.
//
// The core model executes one instruction per cycle. Its "instructions" are
// written as testbench code selected by the PC, and its PC decoding follows
// the ZOLC protocol: compare the PC with the current task's exit PCs (exits
// other than exit 0 also need their branch condition), report the task end
// and the exit taken, and jump to the ZOLC PC target. Loop indices live in
// the model's register file and are only ever changed by the ZOLC.
//
// bubblesort: two loops; the inner bound follows the outer index, so the
// outer body rewrites the inner loop's final value (a loop-parameter write
// in active mode), and the outer loop has a second exit taken when a pass
// made no swap. Result and cycle count are checked against a plain
// bubblesort in the testbench.
// fsme: full-search motion estimation of a 4x4 block over a +/-2 window,
// four nested loops (dy, dx, y, x). The best SAD and motion vector and the
// cycle count are checked against a plain nested-loop computation.
// The cycle count of each kernel must equal the number of loop-body
// instructions: no instruction is spent on index updates, compares or
// branches of the loops.
module tb_zolc_kernels;
  import zolc_pkg::*;

  localparam int unsigned T_AW = $clog2(NUM_TASKS);
  localparam logic [31:0] HALT_PC = 32'h500;
  localparam int N  = 16;   // bubblesort length
  localparam int B  = 4;    // fsme block size
  localparam int R  = 2;    // fsme search range
  localparam int W  = B + 2 * R;

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

  // ---- core model state ----
  logic [DATA_W-1:0] gpr [32];
  int                a [N];          // bubblesort data
  bit                swapped;
  int                cur_blk [B][B];
  int                ref_win [W][W];
  int                sad, best_sad, best_dy, best_dx;

  logic [31:0] pc;
  logic        running, load;
  logic [31:0] start_pc;
  int          n_instr;
  int          n_break, n_bound_wr;

  // instruction decoder model: configuration commands from the testbench
  // program, or the bound rewrite issued by the bubblesort outer body
  logic [1:0]        tb_ctrl;
  logic [3:0]        tb_page;
  logic [REG_AW-1:0] tb_row;
  logic [31:0]       tb_imm;
  always_comb begin
    zolc_ctrl = tb_ctrl; page_sel = tb_page; reg_addr = tb_row; immediate = tb_imm;
    if (running && pc == 32'h100) begin
      // ZC_WRITE loop 1 final <- r1 (register operand forwarded as immediate)
      zolc_ctrl = ZC_WRITE; page_sel = PG_LOOP_FINAL; reg_addr = 5'd1; immediate = gpr[1];
    end
  end

  assign index_rd_data = gpr[index_rd_addr];

  function automatic logic exit_cond(int j, logic [31:0] p);
    if (j == 0)       return 1'b1;
    if (p == 32'h108) return !swapped;   // bubblesort: no swap in this pass
    return 1'b0;
  endfunction

  always_comb begin
    task_end = 1'b0;
    task_entry_sel = '0;
    if (running && active && pc != HALT_PC)
      for (int j = NUM_EXITS - 1; j >= 0; j--)
        if (!task_end && task_exit_valid[j] && task_exit_pc[j] == pc && exit_cond(j, pc)) begin
          task_end = 1'b1;
          task_entry_sel = 2'(j);
        end
  end

  function automatic int absd(int x, int y);
    return (x > y) ? x - y : y - x;
  endfunction

  always_ff @(posedge clk) begin
    if (index_wb_en) gpr[index_wb_addr] <= index_wb_data;
    if (load) pc <= start_pc;
    else if (running && pc != HALT_PC) begin
      n_instr++;
      if (task_end && task_entry_sel == 1 && pc == 32'h108) n_break++;
      if (pc == 32'h100) n_bound_wr++;
      case (pc)
        // bubblesort (r1 = i, r2 = j)
        32'h100: swapped = 1'b0;
        32'h104: if (a[gpr[2]] > a[gpr[2] + 1]) begin
                   int t;
                   t = a[gpr[2]]; a[gpr[2]] = a[gpr[2] + 1]; a[gpr[2] + 1] = t;
                   swapped = 1'b1;
                 end
        32'h108: ;  // branch on swapped (an exit of the task)
        // fsme (r3 = dy, r4 = dx, r5 = y, r6 = x)
        32'h300: sad = 0;
        32'h304: sad += absd(cur_blk[gpr[5]][gpr[6]],
                             ref_win[int'(gpr[5]) + int'($signed(gpr[3])) + R]
                                    [int'(gpr[6]) + int'($signed(gpr[4])) + R]);
        32'h308: ;  // end of y body
        32'h30C: if (sad < best_sad) begin
                   best_sad = sad; best_dy = $signed(gpr[3]); best_dx = $signed(gpr[4]);
                 end
        32'h310: ;  // end of dy body
        default: ;
      endcase
      pc <= task_end ? zolc_pc_target : pc + 4;
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cmd(zolc_ctrl_e c, zolc_page_e p, int row, logic [31:0] d);
    tb_ctrl <= c; tb_page <= p; tb_row <= REG_AW'(row); tb_imm <= d;
    @(posedge clk); #1;
    tb_ctrl <= ZC_NOP;
  endtask

  task automatic loop_cfg(int l, int r, int ini, int stp, int fin);
    cmd(ZC_WRITE, PG_LOOP_IDXREG, l, r);
    cmd(ZC_WRITE, PG_LOOP_STEP, l, stp);
    cmd(ZC_WRITE, PG_LOOP_FINAL, l, fin);
    cmd(ZC_WRITE, PG_LOOP_INITIAL, l, ini);
  endtask

  task automatic exit_cfg(int t, int j, logic [31:0] xpc, exit_type_e ty, int l, int na, int nb);
    cmd(ZC_WRITE, zolc_page_e'(8 + j), t, xpc);
    cmd(ZC_WRITE, zolc_page_e'(12 + j), t,
        (32'(ty) << CFG_TYPE_LSB) | (32'(l) << CFG_LOOP_LSB) |
        (32'(na) << CFG_NEXTA_LSB) | (32'(nb) << CFG_NEXTB_LSB));
  endtask

  task automatic run(int first_task, logic [31:0] entry, output int cycles);
    n_instr = 0;
    start_pc <= entry; load <= 1'b1;
    cmd(ZC_START, PG_LOOP_INITIAL, first_task, 0);
    load <= 1'b0; running <= 1'b1;
    for (int n = 0; n < 20000 && pc != HALT_PC; n++) @(posedge clk);
    #1;
    running <= 1'b0;
    cycles = n_instr;
    @(posedge clk); #1;
    check(!active, "kernel left active mode through its EX_END exit");
  endtask

  // ---- bubblesort ----
  task automatic bubblesort(string name);
    int ref_a [N];
    int exp_cycles, cycles;
    bit sw;
    foreach (a[k]) ref_a[k] = a[k];
    // reference: same algorithm, counting loop-body instructions only
    exp_cycles = 0;
    for (int i = N - 2; i >= 0; i--) begin
      sw = 0;
      exp_cycles += 1;                       // 0x100
      for (int j = 0; j <= i; j++) begin
        exp_cycles += 1;                     // 0x104
        if (ref_a[j] > ref_a[j + 1]) begin
          int t; t = ref_a[j]; ref_a[j] = ref_a[j + 1]; ref_a[j + 1] = t; sw = 1;
        end
      end
      exp_cycles += 1;                       // 0x108
      if (!sw) break;
    end
    exp_cycles += 1;                         // 0x200
    loop_cfg(0, 1, N - 2, -1, 0);
    loop_cfg(1, 2, 0, 1, N - 2);
    run(0, 32'h100, cycles);
    for (int k = 0; k < N; k++)
      check(a[k] == ref_a[k], $sformatf("%s: a[%0d] = %0d, expected %0d", name, k, a[k], ref_a[k]));
    for (int k = 0; k + 1 < N; k++)
      check(a[k] <= a[k + 1], $sformatf("%s: not sorted at %0d", name, k));
    check(cycles == exp_cycles, $sformatf("%s: %0d cycles, expected %0d", name, cycles, exp_cycles));
    $display("%s: %0d cycles", name, cycles);
  endtask

  // ---- fsme ----
  task automatic fsme();
    int e_sad, e_best, e_dy, e_dx, exp_cycles, cycles;
    foreach (cur_blk[y, x]) cur_blk[y][x] = $urandom_range(0, 255);
    foreach (ref_win[y, x]) ref_win[y][x] = $urandom_range(0, 255);
    // plant the block at a known displacement so the minimum is unique
    foreach (cur_blk[y, x]) ref_win[y + R + 1][x + R - 2] = cur_blk[y][x];
    e_best = 32'h7FFF_FFFF; e_dy = 0; e_dx = 0; exp_cycles = 0;
    for (int dy = -R; dy <= R; dy++) begin
      for (int dx = -R; dx <= R; dx++) begin
        e_sad = 0; exp_cycles += 1;                        // 0x300
        for (int y = 0; y < B; y++) begin
          for (int x = 0; x < B; x++) begin
            e_sad += absd(cur_blk[y][x], ref_win[y + dy + R][x + dx + R]);
            exp_cycles += 1;                               // 0x304
          end
          exp_cycles += 1;                                 // 0x308
        end
        if (e_sad < e_best) begin e_best = e_sad; e_dy = dy; e_dx = dx; end
        exp_cycles += 1;                                   // 0x30C
      end
      exp_cycles += 1;                                     // 0x310
    end
    exp_cycles += 1;                                       // 0x314
    best_sad = 32'h7FFF_FFFF; best_dy = 99; best_dx = 99;
    run(5, 32'h300, cycles);
    check(best_sad == e_best && best_dy == e_dy && best_dx == e_dx,
          $sformatf("fsme: best sad %0d at (%0d,%0d), expected %0d at (%0d,%0d)",
                    best_sad, best_dy, best_dx, e_best, e_dy, e_dx));
    check(best_sad == 0 && best_dy == 1 && best_dx == -2, "fsme: planted block found");
    check(cycles == exp_cycles, $sformatf("fsme: %0d cycles, expected %0d", cycles, exp_cycles));
    $display("fsme: %0d cycles", cycles);
  endtask

  initial begin
    tb_ctrl = ZC_NOP; tb_page = '0; tb_row = '0; tb_imm = '0;
    running = 1'b0; load = 1'b0; start_pc = '0; pc = '0; n_instr = 0;
    n_break = 0; n_bound_wr = 0; swapped = 1'b0;
    for (int r = 0; r < 32; r++) gpr[r] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;

    // task structure, written once for both kernels
    cmd(ZC_WRITE, PG_TASK_ENTRY, 0, 32'h100); exit_cfg(0, 0, 32'h100, EX_NEXT, 0, 1, 0);
    cmd(ZC_WRITE, PG_TASK_ENTRY, 1, 32'h104); exit_cfg(1, 0, 32'h104, EX_LOOP, 1, 1, 2);
    cmd(ZC_WRITE, PG_TASK_ENTRY, 2, 32'h108);
    exit_cfg(2, 0, 32'h108, EX_LOOP, 0, 0, 3);
    exit_cfg(2, 1, 32'h108, EX_BREAK, 0, 3, 0);
    cmd(ZC_WRITE, PG_TASK_ENTRY, 3, 32'h200); exit_cfg(3, 0, 32'h200, EX_END, 0, 4, 0);
    cmd(ZC_WRITE, PG_TASK_ENTRY, 4, HALT_PC);
    cmd(ZC_WRITE, PG_TASK_ENTRY, 5, 32'h300); exit_cfg(5, 0, 32'h300, EX_NEXT, 0, 6, 0);
    cmd(ZC_WRITE, PG_TASK_ENTRY, 6, 32'h304); exit_cfg(6, 0, 32'h304, EX_LOOP, 5, 6, 7);
    cmd(ZC_WRITE, PG_TASK_ENTRY, 7, 32'h308); exit_cfg(7, 0, 32'h308, EX_LOOP, 4, 6, 8);
    cmd(ZC_WRITE, PG_TASK_ENTRY, 8, 32'h30C); exit_cfg(8, 0, 32'h30C, EX_LOOP, 3, 5, 9);
    cmd(ZC_WRITE, PG_TASK_ENTRY, 9, 32'h310); exit_cfg(9, 0, 32'h310, EX_LOOP, 2, 5, 10);
    cmd(ZC_WRITE, PG_TASK_ENTRY, 10, 32'h314); exit_cfg(10, 0, 32'h314, EX_END, 0, 4, 0);

    // bubblesort on random data and on nearly sorted data (early exit)
    foreach (a[k]) a[k] = $urandom_range(0, 999);
    bubblesort("bubblesort-random");
    foreach (a[k]) a[k] = 10 * k;
    a[3] = 75; a[7] = 25;
    bubblesort("bubblesort-nearly-sorted");
    check(n_break > 0, "mechanism: early exit taken");
    check(n_bound_wr > 0, "mechanism: inner bound rewritten in active mode");

    loop_cfg(2, 3, -R, 1, R);
    loop_cfg(3, 4, -R, 1, R);
    loop_cfg(4, 5, 0, 1, B - 1);
    loop_cfg(5, 6, 0, 1, B - 1);
    fsme();

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
