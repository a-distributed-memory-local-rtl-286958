// tb_sweep_point: one point of the size sweep, used by tb_dist_cfg_sweep.
//
// Builds a dist_cfg_top with S modules of R registers, holds every module in
// its safe state, writes every register once at the decoder's full rate and
// checks them all. The load of S*R registers must take exactly 2*S*R bus
// clocks from the first word offered to the last word taken (one write per two
// clocks). It then releases the modules, checks they run, and reports its
// check and failure counts with `done`.
module tb_sweep_point
  import cfg_pkg::*;
#(
  parameter int unsigned S = 1,
  parameter int unsigned R = 1
) (
  input  logic bus_clk,
  output logic done,
  output int   checks,
  output int   failures
);

  logic         bus_rst_n = 0;
  host_word_t   host_data = '0;
  logic         host_valid = 0;
  logic         host_ready, drop;
  logic [S-1:0] halt_req = '1, busy = '0;
  logic [S-1:0] run_en, mod_ready, addr_err;
  data_t        settings [S][R];

  dist_cfg_top #(.N_MODULES(S), .NUM_REGS(R)) dut (
    .bus_clk(bus_clk), .bus_rst_n(bus_rst_n),
    .host_data(host_data), .host_valid(host_valid), .host_ready(host_ready), .drop_o(drop),
    .mod_clk({S{bus_clk}}), .mod_rst_n({S{bus_rst_n}}), .halt_req(halt_req), .busy(busy),
    .run_en(run_en), .mod_ready(mod_ready), .addr_err_o(addr_err), .settings(settings));

  function automatic data_t value(int m, int r);
    return data_t'((S * 1000003) ^ (m * 65537) ^ (r * 2654435761));
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL S=%0d R=%0d: %s", S, R, what); end
  endtask

  initial begin
    int t0, t1, cyc;
    done = 0; checks = 0; failures = 0;
    repeat (3) @(negedge bus_clk);
    bus_rst_n = 1;
    // wait until every module reports Ready
    while (mod_ready != '1) @(negedge bus_clk);
    cyc = 0;
    for (int m = 0; m < S; m++)
      for (int r = 0; r < R; r++) begin
        host_data.module_id = mod_t'(m);
        host_data.addr      = addr_t'(r);
        host_data.data      = value(m, r);
        host_valid = 1;
        #1;
        while (!host_ready) begin cyc++; @(negedge bus_clk); #1; end
        @(negedge bus_clk);
        cyc++;
      end
    host_valid = 0;
    check(cyc == 2 * S * R - 1, $sformatf("load took %0d clocks, expected %0d", cyc + 1, 2 * S * R));
    repeat (2) @(negedge bus_clk);
    for (int m = 0; m < S; m++)
      for (int r = 0; r < R; r++)
        check(settings[m][r] == value(m, r), $sformatf("module %0d reg %0d = %h", m, r, settings[m][r]));
    halt_req = '0;
    repeat (5) @(negedge bus_clk);
    check(run_en == '1 && mod_ready == '0, "modules did not resume");
    done = 1;
  end
endmodule
