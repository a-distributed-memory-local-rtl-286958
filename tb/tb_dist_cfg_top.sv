// tb_dist_cfg_top: end-to-end test of the distributed configuration system.
//
// Four modules run on their own clocks (7, 9, 13 and 4 ns) next to a 10 ns bus
// clock. A model of each module's logic runs while run_en is high, raises busy
// for random stretches, and on every one of its clock edges compares the
// settings it sees with the copy it took when it last started: the settings
// must never change under running logic. The host sends rounds of commands.
// In each round some modules are halted first; other writes are aimed at a
// module that is still running and is halted only later, so the host has to
// stall until that module reaches its safe state. Commands for an absent
// module and for registers past the end are mixed in. After each round the
// whole register file is compared with the host's own record, then the
// modules are released. Every mechanism (stall, drop, address error, halt
// delayed by busy, safe entry and resume on every module) is counted and must
// occur at least once.
module tb_dist_cfg_top;
  import cfg_pkg::*;

  localparam int unsigned N      = 4;
  localparam int unsigned R      = 16;
  localparam int          ROUNDS = 12;
  localparam int          WRITES = 40;   // per round

  logic         bus_clk = 0, bus_rst_n = 0;
  host_word_t   host_data = '0;
  logic         host_valid = 0;
  logic         host_ready, drop;
  logic [N-1:0] mod_clk = '0, mod_rst_n = '0;
  logic [N-1:0] halt_req = '1, busy = '0;
  logic [N-1:0] run_en, mod_ready, addr_err;
  data_t        settings [N][R];

  data_t        model [N][R];
  data_t        snap  [N][R];
  int checks = 0, failures = 0;
  int n_stall = 0, n_drop = 0, n_addr_err = 0, n_busy_delay = 0;
  int n_safe [N], n_resume [N], n_wr [N];

  dist_cfg_top #(.NUM_REGS(R)) dut (
    .bus_clk(bus_clk), .bus_rst_n(bus_rst_n),
    .host_data(host_data), .host_valid(host_valid), .host_ready(host_ready), .drop_o(drop),
    .mod_clk(mod_clk), .mod_rst_n(mod_rst_n), .halt_req(halt_req), .busy(busy),
    .run_en(run_en), .mod_ready(mod_ready), .addr_err_o(addr_err), .settings(settings));

  always #5   bus_clk    = ~bus_clk;
  always #3.5 mod_clk[0] = ~mod_clk[0];
  always #4.5 mod_clk[1] = ~mod_clk[1];
  always #6.5 mod_clk[2] = ~mod_clk[2];
  always #2   mod_clk[3] = ~mod_clk[3];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    #(ROUNDS * WRITES * 2000 + 200000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- module logic models: one per clock domain ----
  for (genvar m = 0; m < N; m++) begin : g_logic
    bit was_running = 0;
    always @(posedge mod_clk[m]) begin
      #0.1;
      if (run_en[m]) begin
        if (!was_running) n_resume[m]++;
        for (int r = 0; r < R; r++)
          if (settings[m][r] != snap[m][r]) begin
            failures++;
            $display("FAIL @%0t: module %0d reg %0d changed while running", $time, m, r);
          end
        checks++;
        // random operations; a pending halt lets the current one finish
        busy[m] = halt_req[m] ? ($urandom_range(0, 2) != 0 && busy[m]) : ($urandom_range(0, 3) != 0);
        if (halt_req[m] && busy[m]) n_busy_delay++;
      end else begin
        if (was_running) n_safe[m]++;
        busy[m] = 0;
        for (int r = 0; r < R; r++) snap[m][r] = settings[m][r];
      end
      was_running = run_en[m];
    end
  end

  // ---- bus-side monitors ----
  always @(negedge bus_clk) begin
    if (drop) n_drop++;
    for (int m = 0; m < N; m++) if (addr_err[m]) n_addr_err++;
  end

  task automatic host_write(input int m, input int a, input data_t d);
    @(negedge bus_clk);
    host_data.module_id = mod_t'(m);
    host_data.addr      = addr_t'(a);
    host_data.data      = d;
    host_valid = 1;
    #1;
    while (!host_ready) begin n_stall++; @(negedge bus_clk); end
    @(posedge bus_clk);
    #1 host_valid = 0;
    if (m < N && a < R) begin model[m][a] = d; n_wr[m]++; end
  endtask

  task automatic wait_idle();
    // the decoder holds no word and the last write has landed
    @(negedge bus_clk);
    while (!host_ready) @(negedge bus_clk);
    repeat (2) @(negedge bus_clk);
  endtask

  initial begin
    foreach (n_safe[m]) begin n_safe[m] = 0; n_resume[m] = 0; n_wr[m] = 0; end
    for (int m = 0; m < N; m++) for (int r = 0; r < R; r++) model[m][r] = '0;
    #23 bus_rst_n = 1; mod_rst_n = '1;
    for (int round = 0; round < ROUNDS; round++) begin
      int late;
      late = round % N;                // module halted only after writes are queued
      for (int m = 0; m < N; m++) if (m != late && $urandom_range(0, 1)) halt_req[m] = 1;
      fork
        begin
          repeat (30 + $urandom_range(0, 30)) @(posedge mod_clk[late]);
          halt_req[late] = 1;
        end
        begin
          for (int i = 0; i < WRITES; i++) begin
            int m, a;
            m = (i == 0) ? late : $urandom_range(0, N - 1);
            if (!halt_req[m] && m != late) m = late;
            a = $urandom_range(0, R - 1);
            if (i == 5) m = N + (round % 3);          // absent module
            if (i == 6) begin m = late; a = R + round; end  // past the last register
            host_write(m, a, $urandom);
          end
        end
      join
      wait_idle();
      for (int m = 0; m < N; m++)
        for (int r = 0; r < R; r++)
          check(settings[m][r] == model[m][r],
                $sformatf("round %0d module %0d reg %0d = %h expected %h", round, m, r, settings[m][r], model[m][r]));
      halt_req = '0;
      repeat (40 + $urandom_range(0, 40)) @(negedge bus_clk);
    end
    check(n_stall > 0, "host never stalled");
    check(n_drop > 0, "no command for an absent module");
    check(n_addr_err > 0, "no write past the last register");
    check(n_busy_delay > 0, "no halt was delayed by busy logic");
    for (int m = 0; m < N; m++) begin
      check(n_safe[m] > 0, $sformatf("module %0d never entered its safe state", m));
      check(n_resume[m] > 0, $sformatf("module %0d never resumed", m));
      check(n_wr[m] > 0, $sformatf("module %0d never written", m));
    end
    $display("stall_cycles=%0d drops=%0d addr_errs=%0d busy_delays=%0d", n_stall, n_drop, n_addr_err, n_busy_delay);
    for (int m = 0; m < N; m++)
      $display("module %0d: writes=%0d safe_entries=%0d resumes=%0d", m, n_wr[m], n_safe[m], n_resume[m]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
