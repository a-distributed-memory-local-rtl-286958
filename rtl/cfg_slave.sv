// cfg_slave: the configuration end of one module on the common bus.
//
// It joins three parts. local_settings holds the module's NUM_REGS settings
// registers and is written from the bus (bus_clk domain). safe_state_ctrl runs on
// the module's clock (mod_clk) and brings the module's logic to a safe state on
// request. sync2 carries that safe flag into the bus_clk domain, where it is
// this module's Ready to the decoder. Because the decoder only selects a module
// whose Ready is high, settings change only while the module's logic is halted,
// and the logic never samples a register that is changing. This is how the
// settings cross from the bus clock into the module clock without a
// synchroniser per settings bit.
//
// Timing: Ready rises two to three bus_clk edges after the controller enters
// SAFE and falls as late after it leaves. A write lands one bus_clk edge after
// Select. The ports match the per-module bus shown in the architecture (Data,
// Address, Select in, Ready out); the settings, halt_req, busy and run_en ports
// are this design's connection to the module's own logic.
module cfg_slave
  import cfg_pkg::*;
#(
  parameter int unsigned NUM_REGS = 226
) (
  // configuration bus side (bus_clk)
  input  logic  bus_clk,
  input  logic  bus_rst_n,
  input  logic  bus_sel,
  input  addr_t bus_addr,
  input  data_t bus_data,
  output logic  bus_ready,
  output logic  addr_err_o,
  // module side (mod_clk)
  input  logic  mod_clk,
  input  logic  mod_rst_n,
  input  logic  halt_req,
  input  logic  busy,
  output logic  run_en,
  output data_t settings [NUM_REGS]
);

  logic safe;

  safe_state_ctrl u_ctrl (
    .clk      (mod_clk),
    .rst_n    (mod_rst_n),
    .halt_req (halt_req),
    .busy     (busy),
    .safe     (safe),
    .run_en   (run_en)
  );

  sync2 #(.STAGES(SYNC_STAGES)) u_rdy_sync (
    .clk   (bus_clk),
    .rst_n (bus_rst_n),
    .d     (safe),
    .q     (bus_ready)
  );

  local_settings #(.NUM_REGS(NUM_REGS)) u_regs (
    .clk        (bus_clk),
    .rst_n      (bus_rst_n),
    .sel        (bus_sel),
    .addr       (bus_addr),
    .data       (bus_data),
    .settings   (settings),
    .addr_err_o (addr_err_o)
  );

  // The bus may only write this module while it reports Ready.
  a_write_when_ready: assert property (@(posedge bus_clk) disable iff (!bus_rst_n)
                                       bus_sel |-> bus_ready)
    else $error("cfg_slave: written while not Ready");

endmodule
