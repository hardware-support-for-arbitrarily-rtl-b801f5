// tb_zolc_loop_param_tables: random writes to the loop parameter tables,
// mirrored in a testbench array; after each write every loop is read back
// through both read ports and compared with the mirror. Also checks the
// reset values and that a write shows on the read port one cycle later.
module tb_zolc_loop_param_tables;
  import zolc_pkg::*;
  localparam int unsigned L_AW = $clog2(NUM_LOOPS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              wr_en;
  loop_field_e       wr_field;
  logic [L_AW-1:0]   wr_loop, loop_addr;
  logic [DATA_W-1:0] wr_data, initial_v, step_v, final_v;
  logic [REG_AW-1:0] wr_idx_reg, idx_reg;

  zolc_loop_param_tables dut (.*);

  logic [DATA_W-1:0] m_init [NUM_LOOPS], m_step [NUM_LOOPS], m_fin [NUM_LOOPS];
  logic [REG_AW-1:0] m_reg  [NUM_LOOPS];
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic read_all();
    for (int l = 0; l < NUM_LOOPS; l++) begin
      loop_addr = L_AW'(l); wr_loop = L_AW'(l);
      #1;
      check(initial_v == m_init[l] && step_v == m_step[l] && final_v == m_fin[l]
            && idx_reg == m_reg[l] && wr_idx_reg == m_reg[l],
            $sformatf("loop %0d: got %h %h %h r%0d, expected %h %h %h r%0d", l,
                      initial_v, step_v, final_v, idx_reg, m_init[l], m_step[l], m_fin[l], m_reg[l]));
    end
  endtask

  initial begin
    wr_en = 0; wr_field = LF_INITIAL; wr_loop = '0; wr_data = '0; loop_addr = '0;
    for (int l = 0; l < NUM_LOOPS; l++) begin
      m_init[l] = '0; m_step[l] = '0; m_fin[l] = '0; m_reg[l] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1 read_all();
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      wr_en    = 1'b1;
      wr_field = loop_field_e'($urandom_range(0, 3));
      wr_loop  = L_AW'($urandom_range(0, NUM_LOOPS - 1));
      wr_data  = $urandom;
      loop_addr = wr_loop;
      #1;
      // not yet written before the edge
      case (wr_field)
        LF_INITIAL: check(initial_v == m_init[wr_loop], "write is not visible before the edge");
        LF_STEP:    check(step_v == m_step[wr_loop], "write is not visible before the edge");
        LF_FINAL:   check(final_v == m_fin[wr_loop], "write is not visible before the edge");
        LF_IDXREG:  check(idx_reg == m_reg[wr_loop], "write is not visible before the edge");
      endcase
      @(posedge clk);
      case (wr_field)
        LF_INITIAL: m_init[wr_loop] = wr_data;
        LF_STEP:    m_step[wr_loop] = wr_data;
        LF_FINAL:   m_fin[wr_loop]  = wr_data;
        LF_IDXREG:  m_reg[wr_loop]  = wr_data[REG_AW-1:0];
      endcase
      @(negedge clk);
      wr_en = 1'b0;
      if (n % 10 == 9) read_all();
    end
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
