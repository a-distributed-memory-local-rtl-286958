// tb_dist_cfg_sweep: the size sweep of the distributed configuration system.
//
// Runs 1, 2, 3 and 4 modules with 1, 26, 126 and 226 registers each (16
// systems side by side on one clock). Each point loads all of its registers
// through the decoder, checks them and checks the load time; see
// tb_sweep_point. 226 registers and 1 to 4 modules are the evaluated range;
// the intermediate register counts are picked to span it.
module tb_dist_cfg_sweep;
  localparam int NS = 4;
  localparam int NR = 4;
  localparam int RS [NR] = '{1, 26, 126, 226};

  logic bus_clk = 0;
  always #5 bus_clk = ~bus_clk;

  logic done [NS][NR];
  int   chk  [NS][NR];
  int   fl   [NS][NR];

  for (genvar s = 0; s < NS; s++) begin : g_s
    for (genvar r = 0; r < NR; r++) begin : g_r
      tb_sweep_point #(.S(s + 1), .R(RS[r])) u_pt (
        .bus_clk(bus_clk), .done(done[s][r]), .checks(chk[s][r]), .failures(fl[s][r]));
    end
  end

  initial begin
    #2000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=1 failures=1");
    $finish;
  end

  initial begin
    bit all_done;
    int checks, failures;
    all_done = 0;
    while (!all_done) begin
      @(negedge bus_clk);
      all_done = 1;
      for (int s = 0; s < NS; s++) for (int r = 0; r < NR; r++) all_done &= done[s][r];
    end
    checks = 0; failures = 0;
    for (int s = 0; s < NS; s++)
      for (int r = 0; r < NR; r++) begin
        checks += chk[s][r]; failures += fl[s][r];
        $display("modules=%0d registers=%0d: checks=%0d failures=%0d", s + 1, RS[r], chk[s][r], fl[s][r]);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
