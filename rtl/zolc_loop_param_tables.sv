// zolc_loop_param_tables: the loop parameter tables of the ZOLC.
//
// For each of NUM_LOOPS loops the tables keep the initial index value, the
// step, the final value and the number of the general-purpose register that
// holds the loop's index. The three values are the loop bounds that the
// initialization instruction sequence loads; the register number is this
// design's own addition, so that the index calculation unit knows which
// register to read and write back.
//
// Interface: one synchronous write port (field, loop, data), written in
// initialization mode; one combinational read port addressed by the loop
// address that the task selection unit drives in active mode; and a second
// read of the index-register field at the write address, used when the
// initial value is written so that it can be copied into the index register.
// Timing: a write is visible on the read ports from the next cycle. All
// entries reset to zero.
module zolc_loop_param_tables
  import zolc_pkg::*;
#(
  parameter int unsigned N_LOOPS = zolc_pkg::NUM_LOOPS,
  parameter int unsigned D_W     = zolc_pkg::DATA_W,
  parameter int unsigned R_AW    = zolc_pkg::REG_AW,
  localparam int unsigned L_AW   = (N_LOOPS > 1) ? $clog2(N_LOOPS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // write port (initialization mode)
  input  logic             wr_en,
  input  loop_field_e      wr_field,
  input  logic [L_AW-1:0]  wr_loop,
  input  logic [D_W-1:0]   wr_data,
  output logic [R_AW-1:0]  wr_idx_reg,   // index register of loop wr_loop
  // read port (active mode)
  input  logic [L_AW-1:0]  loop_addr,
  output logic [D_W-1:0]   initial_v,
  output logic [D_W-1:0]   step_v,
  output logic [D_W-1:0]   final_v,
  output logic [R_AW-1:0]  idx_reg
);

  logic [D_W-1:0]  init_q  [N_LOOPS];
  logic [D_W-1:0]  step_q  [N_LOOPS];
  logic [D_W-1:0]  final_q [N_LOOPS];
  logic [R_AW-1:0] ireg_q  [N_LOOPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_LOOPS; i++) begin
        init_q[i]  <= '0;
        step_q[i]  <= '0;
        final_q[i] <= '0;
        ireg_q[i]  <= '0;
      end
    end else if (wr_en) begin
      unique case (wr_field)
        LF_INITIAL: init_q[wr_loop]  <= wr_data;
        LF_STEP:    step_q[wr_loop]  <= wr_data;
        LF_FINAL:   final_q[wr_loop] <= wr_data;
        LF_IDXREG:  ireg_q[wr_loop]  <= wr_data[R_AW-1:0];
      endcase
    end
  end

  always_comb begin
    initial_v  = init_q[loop_addr];
    step_v     = step_q[loop_addr];
    final_v    = final_q[loop_addr];
    idx_reg    = ireg_q[loop_addr];
    wr_idx_reg = ireg_q[wr_loop];
  end

endmodule
