// cfg_pkg: widths and types shared by the distributed configuration system.
//
// The configuration bus is the same for every module: a data word, a local
// register address and one select line per module, plus a Ready line back from
// each module. Its width does not depend on how many registers a module holds.
// A host command is one packed word that names the target module, the register
// inside it and the value to write.
//
// DATA_W = 32 follows the 32-bit configuration registers used in the evaluated
// designs. ADDR_W, MOD_W and the command layout are this design's choices: an
// 8-bit local address covers the 226 registers per module, a 4-bit module field
// allows up to 16 modules on one bus. SYNC_STAGES = 2 is the synchroniser
// length used for clock-domain crossing registers in the evaluated designs.
package cfg_pkg;

  localparam int unsigned DATA_W      = 32;  // configuration register width
  localparam int unsigned ADDR_W      = 8;   // local register address width
  localparam int unsigned MOD_W       = 4;   // module number field width
  localparam int unsigned SYNC_STAGES = 2;   // Ready synchroniser length

  typedef logic [DATA_W-1:0] data_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [MOD_W-1:0]  mod_t;

  // One host command: write `data` to register `addr` of module `module_id`.
  typedef struct packed {
    mod_t  module_id;
    addr_t addr;
    data_t data;
  } host_word_t;


endpackage
