// tb_mm_decoder: self-checking test of the memory map module decoder.
//
// A random host offers command words (including words for modules that do not
// exist) while the four modules' Ready lines go up and down at random, some for
// long stretches. A cycle-level reference of the intended behaviour predicts,
// for every clock, host_ready, the Select/Address/Data on the bus and the drop
// flag: a word is taken when the decoder holds none, written one cycle later if
// its module is Ready, held while it is not, and dropped if its module is
// absent. The test counts stalls, drops and writes per module and fails if any
// never occurred.
module tb_mm_decoder;
  import cfg_pkg::*;

  localparam int unsigned N = 4;

  logic         clk = 0, rst_n = 0;
  host_word_t   host_data = '0;
  logic         host_valid = 0;
  logic         host_ready;
  data_t        bus_data;
  addr_t        bus_addr;
  logic [N-1:0] bus_sel;
  logic [N-1:0] mod_ready = '0;
  logic         drop;

  int checks = 0, failures = 0;
  int n_stall = 0, n_drop = 0, n_fast = 0;
  int n_wr [N];

  mm_decoder #(.N_MODULES(N)) dut (
    .clk(clk), .rst_n(rst_n), .host_data(host_data), .host_valid(host_valid),
    .host_ready(host_ready), .bus_data(bus_data), .bus_addr(bus_addr),
    .bus_sel(bus_sel), .mod_ready(mod_ready), .drop_o(drop));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  bit         r_pend;
  host_word_t r_word;
  bit [N-1:0] e_sel;
  data_t      e_data;
  addr_t      e_addr;
  bit         e_drop;
  int         wait_cycles;
  bit         taken;

  initial begin
    taken = 1; r_pend = 0; e_sel = '0; e_drop = 0; e_data = '0; e_addr = '0; wait_cycles = 0;
    foreach (n_wr[m]) n_wr[m] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      // --- drive inputs for the coming edge (a taken-or-not word is kept) ---
      if (!host_valid || taken) begin
        host_valid = ($urandom_range(0, 2) != 0);
        host_data.module_id = ($urandom_range(0, 15) == 0) ? mod_t'($urandom_range(N, 15))
                                                           : mod_t'($urandom_range(0, N - 1));
        host_data.addr = addr_t'($urandom);
        host_data.data = $urandom;
      end
      for (int m = 0; m < N; m++)
        if ($urandom_range(0, (m == 3) ? 40 : 4) == 0) mod_ready[m] = ~mod_ready[m];
      #1;
      // --- check outputs against the reference for this cycle ---
      check(host_ready == !r_pend, $sformatf("host_ready=%0b expected %0b", host_ready, !r_pend));
      check(bus_sel == e_sel, $sformatf("bus_sel=%b expected %b", bus_sel, e_sel));
      if (e_sel != 0) begin
        check(bus_data == e_data && bus_addr == e_addr,
              $sformatf("bus addr/data %h/%h expected %h/%h", bus_addr, bus_data, e_addr, e_data));
      end
      check(drop == e_drop, $sformatf("drop=%0b expected %0b", drop, e_drop));
      if (host_valid && !host_ready) n_stall++;
      taken = host_valid && host_ready;
      // --- advance the reference over the edge ---
      e_sel = '0; e_drop = 0;
      if (r_pend) begin
        if (r_word.module_id >= N) begin
          r_pend = 0; e_drop = 1; n_drop++;
        end else if (mod_ready[r_word.module_id]) begin
          r_pend = 0;
          e_sel[r_word.module_id] = 1'b1;
          e_data = r_word.data; e_addr = r_word.addr;
          n_wr[r_word.module_id]++;
          if (wait_cycles == 0) n_fast++;  // written the cycle after it was taken
        end else wait_cycles++;
      end else if (host_valid) begin
        r_pend = 1; r_word = host_data; wait_cycles = 0;
      end
      @(negedge clk);
    end
    check(n_stall > 0, "no host stall happened");
    check(n_drop > 0, "no word for an absent module");
    check(n_fast > 0, "no write issued one cycle after acceptance");
    for (int m = 0; m < N; m++) check(n_wr[m] > 0, $sformatf("module %0d never written", m));
    $display("stall_cycles=%0d drops=%0d one_cycle_writes=%0d writes=%0d/%0d/%0d/%0d",
             n_stall, n_drop, n_fast, n_wr[0], n_wr[1], n_wr[2], n_wr[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
