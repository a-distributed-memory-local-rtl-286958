// mm_decoder: memory map module decoder of the distributed configuration system.
//
// The host side delivers command words on a Valid/Ready handshake. Each word
// names a module, a register inside that module and the value to write. The
// decoder takes one word at a time into a holding register, then waits until
// the named module reports Ready, which means its logic is in a safe state.
// When that happens it drives the word's data and local address on the common
// configuration bus and raises that module's Select for exactly one clock.
// A word that names a module that does not exist is discarded and flagged on
// drop_o, so the host is never blocked by it.
//
// Timing (all on clk): a word is taken at the edge where host_valid and
// host_ready are both high. host_ready is low while a word is held, so the
// host is stalled for as long as the target module is not Ready. If the
// target is already Ready, the write appears on the bus one cycle after the
// word was taken, and host_ready is high again in that same cycle: the peak
// rate is one write every two cycles. Bus outputs come straight from flops.
//
// The Data/Valid/Ready host port, the Data/Address/Select bus and the per-module
// Ready lines are the ones the architecture shows. The command format, the
// one-word holding register, the one-cycle select pulse and the drop of words to
// absent modules are this design's choices.
module mm_decoder
  import cfg_pkg::*;
#(
  parameter int unsigned N_MODULES = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host landing point side
  input  host_word_t           host_data,
  input  logic                 host_valid,
  output logic                 host_ready,
  // common configuration bus
  output data_t                bus_data,
  output addr_t                bus_addr,
  output logic [N_MODULES-1:0] bus_sel,
  input  logic [N_MODULES-1:0] mod_ready,   // already in the clk domain
  // status
  output logic                 drop_o       // one-cycle pulse: word discarded
);

  logic       pend_q;
  host_word_t word_q;
  logic       target_ok;
  logic       target_rdy;
  logic       issue;

  // Is the held word addressed to an existing module, and is that module Ready?
  always_comb begin
    target_ok  = (32'(word_q.module_id) < N_MODULES);
    target_rdy = 1'b0;
    for (int unsigned m = 0; m < N_MODULES; m++)
      if (32'(word_q.module_id) == m) target_rdy = mod_ready[m];
  end

  assign issue      = pend_q && target_ok && target_rdy;
  assign host_ready = !pend_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q   <= 1'b0;
      word_q   <= '0;
      bus_data <= '0;
      bus_addr <= '0;
      bus_sel  <= '0;
      drop_o   <= 1'b0;
    end else begin
      bus_sel <= '0;
      drop_o  <= 1'b0;
      if (host_valid && host_ready) begin
        pend_q <= 1'b1;
        word_q <= host_data;
      end else if (pend_q && !target_ok) begin
        pend_q <= 1'b0;
        drop_o <= 1'b1;
      end else if (issue) begin
        pend_q   <= 1'b0;
        bus_data <= word_q.data;
        bus_addr <= word_q.addr;
        for (int unsigned m = 0; m < N_MODULES; m++)
          bus_sel[m] <= (32'(word_q.module_id) == m);
      end
    end
  end

  // At most one module is selected at a time.
  a_sel_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(bus_sel))
    else $error("mm_decoder: more than one Select active");
  // A module is only selected if it was Ready when the write was issued.
  a_sel_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                issue |-> target_rdy);
  // Host rule: a word offered and not yet taken stays the same.
  a_host_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                  host_valid && !host_ready |=> host_valid && $stable(host_data))
    else $error("mm_decoder: host changed or withdrew a word before it was taken");

endmodule
