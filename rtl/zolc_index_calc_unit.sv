// zolc_index_calc_unit: the index calculation unit of the ZOLC.
//
// When a task ends on an exit that closes a loop (EX_LOOP), the unit adds the
// loop's step to the index it reads from the register file and compares the
// sum with the final value. If the sum has passed the final value (greater
// for a non-negative step, smaller for a negative one, signed compare) the
// loop is over: end_of_loop is raised and the index is reset to the initial
// value, ready for the next time the loop is entered. Otherwise the summed
// index is written back. An early exit from a loop (EX_BREAK) also resets
// the index to its initial value. Other exit types leave indices alone.
//
// The paper gives the unit's inputs (initial, step, final, index read, task
// type) and outputs (end of loop, index write-back); the arithmetic, the
// inclusive bound and the reset of the index at loop exit are this design's
// choices. Because the test is made at the end of the body, every loop runs
// its body at least once.
//
// Timing: purely combinational. end_of_loop is valid in the cycle the task
// ends, so the next task can be chosen without a lost cycle; wb_en/wb_data
// are written into the register file at the next clock edge.
module zolc_index_calc_unit
  import zolc_pkg::*;
#(
  parameter int unsigned D_W = zolc_pkg::DATA_W
) (
  input  logic           task_end,    // the current task ends this cycle
  input  exit_type_e     task_type,   // type of the exit taken
  input  logic [D_W-1:0] initial_v,
  input  logic [D_W-1:0] step_v,
  input  logic [D_W-1:0] final_v,
  input  logic [D_W-1:0] index_rd,    // current index from the register file
  output logic           end_of_loop,
  output logic           wb_en,
  output logic [D_W-1:0] wb_data
);

  logic signed [D_W-1:0] next_idx;
  logic                  passed;

  always_comb begin
    next_idx = $signed(index_rd) + $signed(step_v);
    if ($signed(step_v) < 0) passed = next_idx < $signed(final_v);
    else                     passed = next_idx > $signed(final_v);

    end_of_loop = (task_type == EX_LOOP) && passed;
    wb_en       = task_end && (task_type == EX_LOOP || task_type == EX_BREAK);
    if (task_type == EX_LOOP && !passed) wb_data = next_idx;
    else                                 wb_data = initial_v;
  end

endmodule
