// dist_cfg_top: distributed configuration memory with a common configuration bus.
//
// Instead of one central register map whose entries are routed to every user,
// each module keeps its own settings registers. A single memory map module
// decoder takes host commands and writes them over one narrow shared bus
// (Data, Address, one Select per module). Each module returns a Ready line that
// is high only while its logic is in a safe state, and the decoder writes a
// module only then. Settings therefore never change while a module's logic,
// which may run on its own clock, is using them.
//
// Interface: the host port (host_data/host_valid/host_ready) and the bus are on
// bus_clk. Each module m has its own clock mod_clk[m] and reset, a halt request
// and busy input from its logic, a run enable back to it, and its settings
// registers settings[m][*]. drop_o flags a command for a module that does not
// exist, addr_err_o[m] a write beyond module m's last register.
//
// Defaults: 4 modules of 226 32-bit registers, the largest distributed
// configuration evaluated. The host link itself is outside this block.
module dist_cfg_top
  import cfg_pkg::*;
#(
  parameter int unsigned N_MODULES = 4,
  parameter int unsigned NUM_REGS  = 226
) (
  input  logic                 bus_clk,
  input  logic                 bus_rst_n,
  // host landing point
  input  host_word_t           host_data,
  input  logic                 host_valid,
  output logic                 host_ready,
  output logic                 drop_o,
  // modules
  input  logic [N_MODULES-1:0] mod_clk,
  input  logic [N_MODULES-1:0] mod_rst_n,
  input  logic [N_MODULES-1:0] halt_req,
  input  logic [N_MODULES-1:0] busy,
  output logic [N_MODULES-1:0] run_en,
  output logic [N_MODULES-1:0] mod_ready,
  output logic [N_MODULES-1:0] addr_err_o,
  output data_t                settings [N_MODULES][NUM_REGS]
);

  data_t                bus_data;
  addr_t                bus_addr;
  logic [N_MODULES-1:0] bus_sel;

  mm_decoder #(.N_MODULES(N_MODULES)) u_decoder (
    .clk        (bus_clk),
    .rst_n      (bus_rst_n),
    .host_data  (host_data),
    .host_valid (host_valid),
    .host_ready (host_ready),
    .bus_data   (bus_data),
    .bus_addr   (bus_addr),
    .bus_sel    (bus_sel),
    .mod_ready  (mod_ready),
    .drop_o     (drop_o)
  );

  for (genvar m = 0; m < N_MODULES; m++) begin : g_mod
    cfg_slave #(.NUM_REGS(NUM_REGS)) u_slave (
      .bus_clk    (bus_clk),
      .bus_rst_n  (bus_rst_n),
      .bus_sel    (bus_sel[m]),
      .bus_addr   (bus_addr),
      .bus_data   (bus_data),
      .bus_ready  (mod_ready[m]),
      .addr_err_o (addr_err_o[m]),
      .mod_clk    (mod_clk[m]),
      .mod_rst_n  (mod_rst_n[m]),
      .halt_req   (halt_req[m]),
      .busy       (busy[m]),
      .run_en     (run_en[m]),
      .settings   (settings[m])
    );
  end

endmodule
