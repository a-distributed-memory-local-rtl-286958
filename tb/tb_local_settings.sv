// tb_local_settings: self-checking test of the per-module settings registers.
//
// Drives random bus writes (selected and unselected, in range and out of range)
// into a 226-register instance and keeps its own copy of what each register
// should hold. After every write it compares the touched register, the
// out-of-range flag and, every few writes, the whole register file.
module tb_local_settings;
  import cfg_pkg::*;

  localparam int unsigned NUM_REGS = 226;

  logic  clk = 0, rst_n = 0;
  logic  sel = 0;
  addr_t addr = '0;
  data_t data = '0;
  data_t settings [NUM_REGS];
  logic  addr_err;
  data_t model [NUM_REGS];
  int    checks = 0, failures = 0;

  local_settings #(.NUM_REGS(NUM_REGS)) dut (
    .clk(clk), .rst_n(rst_n), .sel(sel), .addr(addr), .data(data),
    .settings(settings), .addr_err_o(addr_err));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_all();
    for (int r = 0; r < NUM_REGS; r++)
      check(settings[r] == model[r], $sformatf("reg %0d = %h, expected %h", r, settings[r], model[r]));
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < NUM_REGS; r++) model[r] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int i = 0; i < 2000; i++) begin
      bit s; bit [7:0] a; bit [31:0] d;
      s = ($urandom_range(0, 3) != 0);
      a = (i % 50 == 7) ? 8'($urandom_range(NUM_REGS, 255)) : 8'($urandom_range(0, NUM_REGS - 1));
      d = $urandom;
      sel = s; addr = a; data = d;
      @(negedge clk);
      sel = 0;
      if (s && a < NUM_REGS) model[a] = d;
      check(addr_err == (s && a >= NUM_REGS), $sformatf("addr_err=%0b for sel=%0b addr=%0d", addr_err, s, a));
      if (a < NUM_REGS)
        check(settings[a] == model[a], $sformatf("reg %0d after write: %h, expected %h", a, settings[a], model[a]));
      if (i % 97 == 0) check_all();
    end
    check_all();
    // reset clears everything
    rst_n = 0; #1;
    for (int r = 0; r < NUM_REGS; r++) model[r] = '0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
