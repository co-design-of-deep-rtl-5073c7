// Self-checking test of one processing element.
//
// Drives random commands (operand load, multiply on/off, adder operand from
// above or from the register file, register-file clear/write, output write)
// with random operands for 4000 cycles and compares the operand register,
// the partial-sum output and every register-file entry it reads with a model
// kept in the testbench. Also checks the one-cycle latency of a MAC directly.
module tb_pe;
  import sqz_pkg::*;

  localparam int RF = 16;

  logic     clk = 0, rst_n = 0;
  pe_ctrl_t ctrl;
  data_t    act_in, bcast_in, act_out;
  acc_t     psum_in, psum_out;

  always #5 clk = ~clk;

  pe #(.RF_DEPTH(RF)) dut (.*);

  int checks = 0, failures = 0;
  longint m_act, m_psum;
  longint m_rf [RF];
  bit     m_rf_ok [RF];

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    ctrl = '0; act_in = 0; bcast_in = 0; psum_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    m_act = 0; m_psum = 0;
    // clear all entries first
    for (int i = 0; i < RF; i++) begin
      @(negedge clk);
      ctrl = '0; ctrl.rf_clr = 1; ctrl.rf_we = 1; ctrl.rf_addr = RFA_W'(i);
      m_rf[i] = 0; m_rf_ok[i] = 1;
    end
    // directed: load 7, multiply by -3 into rf[2], result next cycle
    @(negedge clk); ctrl = '0; ctrl.act_ld = 1; act_in = 7;
    @(negedge clk); ctrl = '0; ctrl.mul_en = 1; bcast_in = -3; ctrl.rf_we = 1; ctrl.out_we = 1; ctrl.rf_addr = 2;
    @(negedge clk); ctrl = '0;
    chk(psum_out, -21, "directed MAC latency");
    chk(dut.rf[2], -21, "directed MAC rf");
    m_act = 7; m_psum = -21; m_rf[2] = -21;
    for (int t = 0; t < 4000; t++) begin
      longint prod, add, sum;
      @(negedge clk);
      ctrl         = pe_ctrl_t'($urandom);
      ctrl.rf_addr = RFA_W'($urandom % RF);
      act_in       = data_t'($urandom);
      bcast_in     = data_t'($urandom);
      psum_in      = acc_t'($urandom);
      prod = ctrl.mul_en ? m_act * longint'(bcast_in) : 0;
      add  = ctrl.add_top ? longint'(psum_in) : (ctrl.rf_clr ? 0 : m_rf[ctrl.rf_addr]);
      sum  = longint'(acc_t'(prod + add));
      @(posedge clk); #1;
      if (ctrl.act_ld) m_act = act_in;
      if (ctrl.out_we) m_psum = sum;
      if (ctrl.rf_we) m_rf[ctrl.rf_addr] = sum;
      chk(act_out, m_act, "act_out");
      chk(psum_out, m_psum, "psum_out");
      chk(dut.rf[ctrl.rf_addr], m_rf[ctrl.rf_addr], "rf");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
