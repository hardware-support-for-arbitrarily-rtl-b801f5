// tb_zolc_index_calc_unit: checks the index calculation unit against an
// independent 64-bit reference: next index = index + step; the loop ends
// when the next index passes the final value (greater for a non-negative
// step, smaller for a negative one); the written-back value is the next
// index while the loop goes on and the initial value at loop end or on a
// break. Directed cases cover the exact bound, both step signs and every
// exit type; random cases cover the rest.
module tb_zolc_index_calc_unit;
  import zolc_pkg::*;

  logic              task_end;
  exit_type_e        task_type;
  logic [DATA_W-1:0] initial_v, step_v, final_v, index_rd, wb_data;
  logic              end_of_loop, wb_en;

  zolc_index_calc_unit dut (.*);

  int checks = 0, failures = 0;

  task automatic apply(logic te, exit_type_e ty, int ini, int stp, int fin, int idx);
    longint nxt;
    bit     pass, e_eol, e_wb;
    int     e_data;
    task_end = te; task_type = ty; initial_v = ini; step_v = stp; final_v = fin; index_rd = idx;
    #1;
    nxt   = longint'(idx) + longint'(stp);
    pass  = (stp < 0) ? (nxt < longint'(fin)) : (nxt > longint'(fin));
    e_eol = (ty == EX_LOOP) && pass;
    e_wb  = te && (ty == EX_LOOP || ty == EX_BREAK);
    e_data = (ty == EX_LOOP && !pass) ? int'(nxt) : ini;
    checks++;
    if (end_of_loop !== e_eol || wb_en !== e_wb || (e_wb && wb_data !== e_data)) begin
      failures++;
      $display("FAIL: type=%s idx=%0d step=%0d final=%0d: eol=%0b wb=%0b data=%0d, expected %0b %0b %0d",
               ty.name(), idx, stp, fin, end_of_loop, wb_en, $signed(wb_data), e_eol, e_wb, e_data);
    end
  endtask

  initial begin
    // directed: at, below and above the bound, both step signs
    apply(1, EX_LOOP, 0, 1, 3, 2);     // 3 <= 3: goes on
    apply(1, EX_LOOP, 0, 1, 3, 3);     // 4 > 3: ends
    apply(1, EX_LOOP, 10, -3, 4, 7);   // 4 >= 4: goes on
    apply(1, EX_LOOP, 10, -3, 4, 4);   // 1 < 4: ends
    apply(1, EX_LOOP, 1, 2, 5, 3);     // 5: goes on
    apply(1, EX_LOOP, 1, 2, 6, 5);     // 7 > 6: ends
    apply(1, EX_LOOP, -5, 1, -1, -2);  // negative indices
    apply(1, EX_BREAK, 7, 1, 9, 4);
    apply(1, EX_NEXT, 7, 1, 9, 4);
    apply(1, EX_END, 7, 1, 9, 9);
    apply(0, EX_LOOP, 0, 1, 3, 3);     // no task end: no write-back
    for (int n = 0; n < 2000; n++)
      apply(1'($urandom), exit_type_e'($urandom_range(0, 4)),
            $urandom_range(0, 200) - 100, $urandom_range(0, 20) - 10,
            $urandom_range(0, 200) - 100, $urandom_range(0, 200) - 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
