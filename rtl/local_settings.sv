// local_settings: the settings registers that sit inside one module.
//
// NUM_REGS registers of DATA_W bits hold the values that set the module's mode
// of operation. They are written only from the common configuration bus: when
// the module's Select is high on a clk edge, the register named by Address takes
// Data. An address at or beyond NUM_REGS writes nothing and is flagged on
// addr_err_o for one cycle. All registers are visible in parallel on
// `settings`, for the module's own logic to read, with no read port or read
// latency. Reset clears every register to zero.
//
// clk is the configuration bus clock. The module's logic may run on another
// clock; it is the module's Ready/safe-state handshake, not this block, that
// keeps writes away from times when that logic samples the registers.
//
// The default of 226 32-bit registers per module is the largest size evaluated
// for the distributed architecture. Zero reset values and the address-range
// flag are this design's choices.
module local_settings
  import cfg_pkg::*;
#(
  parameter int unsigned NUM_REGS = 226
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  sel,                      // this module's Select
  input  addr_t addr,
  input  data_t data,
  output data_t settings [NUM_REGS],
  output logic  addr_err_o                // write to a non-existent register
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < NUM_REGS; r++) settings[r] <= '0;
      addr_err_o <= 1'b0;
    end else begin
      addr_err_o <= sel && (32'(addr) >= NUM_REGS);
      if (sel && (32'(addr) < NUM_REGS)) settings[addr] <= data;
    end
  end

endmodule
