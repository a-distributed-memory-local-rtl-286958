// tb_safe_state_ctrl: self-checking test of the safe-state controller.
//
// Drives random halt requests and busy levels and compares safe and run_en with
// a reference model every cycle: leave reset safe, enter safe only when
// halt_req is high and busy is low, leave as soon as halt_req falls. Also counts
// that halts delayed by busy and both transitions were exercised.
module tb_safe_state_ctrl;
  logic clk = 0, rst_n = 0;
  logic halt_req = 1, busy = 0;
  logic safe, run_en;
  bit   m_safe;
  int   checks = 0, failures = 0;
  int   n_enter = 0, n_leave = 0, n_delayed = 0;

  safe_state_ctrl dut (.clk(clk), .rst_n(rst_n), .halt_req(halt_req), .busy(busy),
                       .safe(safe), .run_en(run_en));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_safe = 1;
    repeat (2) @(negedge clk);
    check(safe == 1 && run_en == 0, "reset state is not SAFE");
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      // hold each level for a few cycles so both branches occur
      if (i % 4 == 0) halt_req = ($urandom_range(0, 1) == 1);
      busy = ($urandom_range(0, 2) == 0);
      @(posedge clk);
      if (!m_safe && halt_req && !busy) begin m_safe = 1; n_enter++; end
      else if (m_safe && !halt_req)     begin m_safe = 0; n_leave++; end
      else if (!m_safe && halt_req && busy) n_delayed++;
      @(negedge clk);
      check(safe == m_safe, $sformatf("safe=%0b expected %0b", safe, m_safe));
      check(run_en == !m_safe, $sformatf("run_en=%0b expected %0b", run_en, !m_safe));
    end
    check(n_enter > 0 && n_leave > 0 && n_delayed > 0, "a transition was never exercised");
    $display("enter=%0d leave=%0d delayed_by_busy=%0d", n_enter, n_leave, n_delayed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
