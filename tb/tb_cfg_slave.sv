// tb_cfg_slave: self-checking test of one module's configuration end.
//
// The bus clock (10 ns) and the module clock (7 ns) are unrelated. The test
// plays the decoder: it writes settings only while Ready is high, and checks
// that Ready follows the module's safe state within two to three bus clocks,
// that a halt request waits for busy to clear, that the module's logic is
// disabled while Ready is high, and that every written value arrives.
module tb_cfg_slave;
  import cfg_pkg::*;

  localparam int unsigned NUM_REGS = 226;

  logic  bus_clk = 0, bus_rst_n = 0, mod_clk = 0, mod_rst_n = 0;
  logic  bus_sel = 0;
  addr_t bus_addr = '0;
  data_t bus_data = '0;
  logic  bus_ready, addr_err, run_en;
  logic  halt_req = 1, busy = 0;
  data_t settings [NUM_REGS];
  data_t model [NUM_REGS];
  int    checks = 0, failures = 0;

  cfg_slave #(.NUM_REGS(NUM_REGS)) dut (
    .bus_clk(bus_clk), .bus_rst_n(bus_rst_n), .bus_sel(bus_sel), .bus_addr(bus_addr),
    .bus_data(bus_data), .bus_ready(bus_ready), .addr_err_o(addr_err),
    .mod_clk(mod_clk), .mod_rst_n(mod_rst_n), .halt_req(halt_req), .busy(busy),
    .run_en(run_en), .settings(settings));

  always #5   bus_clk = ~bus_clk;
  always #3.5 mod_clk = ~mod_clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // bus clock edges from the module's safe flag changing until Ready follows
  task automatic ready_latency(input bit level, output int edges);
    edges = 0;
    while (bus_ready != level && edges < 20) begin
      @(posedge bus_clk); #1; edges++;
    end
  endtask

  task automatic bus_write(input addr_t a, input data_t d);
    @(negedge bus_clk);
    check(bus_ready, "write attempted while not Ready");
    bus_sel = 1; bus_addr = a; bus_data = d;
    @(negedge bus_clk);
    bus_sel = 0;
    if (32'(a) < NUM_REGS) model[a] = d;
    check(addr_err == (32'(a) >= NUM_REGS), "addr_err mismatch");
  endtask

  task automatic check_all();
    for (int r = 0; r < NUM_REGS; r++)
      check(settings[r] == model[r], $sformatf("reg %0d = %h expected %h", r, settings[r], model[r]));
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    for (int r = 0; r < NUM_REGS; r++) model[r] = '0;
    #22 mod_rst_n = 1; bus_rst_n = 1;
    // out of reset the module is halted and, after the synchroniser, Ready
    check(run_en == 0, "module runs straight out of reset");
    @(posedge bus_clk); #1;
    ready_latency(1, e);
    check(e <= 3, $sformatf("Ready after reset took %0d extra bus edges", e));
    check_all();
    for (int round = 0; round < 4; round++) begin
      // configure
      for (int i = 0; i < 120; i++)
        bus_write((i % 40 == 39) ? addr_t'(NUM_REGS + round) : addr_t'($urandom_range(0, NUM_REGS - 1)),
                  $urandom);
      check_all();
      // release: safe drops on the module clock, Ready follows within 2-3 bus edges
      halt_req = 0;
      @(posedge mod_clk); #1;
      check(run_en == 1, "module did not resume");
      ready_latency(0, e);
      check(e >= 1 && e <= 3, $sformatf("Ready fell %0d bus edges after safe", e));
      // run for a while with a busy operation; halt must wait for it
      busy = 1;
      repeat (10) @(posedge mod_clk);
      #1 halt_req = 1;
      repeat (10) @(posedge mod_clk);
      #1;
      check(run_en == 1 && bus_ready == 0, "module halted while busy");
      busy = 0;
      @(posedge mod_clk); #1;
      check(run_en == 0, "module did not halt once idle");
      ready_latency(1, e);
      check(e >= 1 && e <= 3, $sformatf("Ready rose %0d bus edges after safe", e));
      // settings unchanged while running
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
