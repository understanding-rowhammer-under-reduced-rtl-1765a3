// pacram_pkg: types and constants shared by the PaCRAM memory-controller slice.
//
// PaCRAM (Partial Charge Restoration for Aggressive Mitigation) lets the
// memory controller refresh RowHammer victim rows with a shortened
// charge-restoration time (tRAS(Red)) instead of the nominal tRAS, as long
// as a row does not receive too many partial restorations in a row.
//
// All timing is counted in controller clock cycles. This design assumes a
// 1 GHz controller clock (1 cycle = 1 ns), so the nanosecond values quoted
// for DDR4 translate one-to-one into cycles:
//   tRAS(Nom) = 33 ns   (characterisation nominal tRAS)
//   tRAS(Red) = 12 ns   (0.36 tRAS, the best latency found for the
//                        manufacturer-H configuration)
//   tRP       = 15 ns   (own choice; with tRAS this gives tRC = 48 ns, which
//                        reproduces the published full-restoration intervals)
//   tREFW     = 64 ms
// The system geometry (1 channel, 2 ranks, 16 banks per rank, 64K rows per
// bank) follows the evaluated DDR5 system.
package pacram_pkg;

  // ---------------- geometry ----------------
  localparam int unsigned NUM_RANKS      = 2;
  localparam int unsigned BANKS_PER_RANK = 16;     // 8 bank groups x 2 banks
  localparam int unsigned NUM_BANKS      = NUM_RANKS * BANKS_PER_RANK;
  localparam int unsigned ROWS_PER_BANK  = 65536;
  // address widths for users of the package (testbenches, integration)
  localparam int unsigned ROW_W          = $clog2(ROWS_PER_BANK);
  localparam int unsigned BANK_W         = $clog2(NUM_BANKS);

  // ---------------- timing (cycles at 1 GHz) ----------------
  localparam int unsigned T_RAS_NOM      = 33;
  localparam int unsigned T_RAS_RED_DEF  = 12;
  localparam int unsigned T_RP           = 15;
  localparam int unsigned T_RC           = T_RAS_NOM + T_RP;  // 48
  localparam int unsigned T_RCD          = 14;
  localparam longint unsigned T_REFW     = 64_000_000;        // 64 ms

  // ---------------- configuration defaults ----------------
  // Module H5 at tRAS(Red) = 0.36 tRAS: N_RH = 10.2K, N_PCR = 15.0K.
  localparam int unsigned NRH_DEF        = 10200;
  localparam int unsigned NPCR_DEF       = 15000;
  localparam int unsigned BLAST_RADIUS   = 2;

  // Register field widths
  localparam int unsigned NRH_W   = 17;   // N_RH up to 100K (profiling upper bound)
  localparam int unsigned NPCR_W  = 16;   // N_PCR up to 15K as profiled
  localparam int unsigned TRAS_W  = 8;
  localparam int unsigned TIME_W  = 48;   // tFCRI in cycles (tens of seconds)

  // DRAM commands issued by the scheduler
  typedef enum logic [1:0] {
    CMD_ACT = 2'd0,
    CMD_RD  = 2'd1,
    CMD_WR  = 2'd2,
    CMD_PRE = 2'd3
  } dram_cmd_e;

  // Configuration register map (pacram_config)
  typedef enum logic [1:0] {
    CFG_ENABLE    = 2'd0,
    CFG_NRH       = 2'd1,
    CFG_NPCR      = 2'd2,
    CFG_TRAS_RED  = 2'd3
  } cfg_addr_e;

endpackage
