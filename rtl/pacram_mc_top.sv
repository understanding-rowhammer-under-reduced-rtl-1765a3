// pacram_mc_top: memory-controller slice with PaCRAM (partial charge
// restoration for preventive refreshes).
//
// Data flow (numbers as in the usual overview of the mechanism):
//   (1) every ACT the scheduler puts on the DRAM command bus is shown to
//       PaCRAM and, through the act_* ports, to the existing RowHammer
//       mitigation mechanism (outside this module);
//   (2) the mitigation mechanism requests preventive refreshes of likely
//       aggressor rows on pr_* (configured with the reduced threshold
//       nrh_mitigation that PaCRAM supplies);
//   (3) when the scheduler activates a victim row for such a refresh, PaCRAM
//       looks up the row's FR bit and returns the restoration time: nominal
//       tRAS for the first refresh of the row in a full-restoration interval,
//       tRAS(Red) afterwards;
//   (4) the scheduler closes the victim row after that time and moves on.
// The DRAM module itself and the mitigation mechanism are not part of this
// RTL; their signals are ports. Demand traffic enters on dem_*.
//
// The statistics outputs count preventive-refresh activations answered with
// nominal (stat_full) and reduced (stat_partial) latency, and tFCRI resets.
module pacram_mc_top
  import pacram_pkg::*;
#(
  parameter int unsigned     NBANKS     = NUM_BANKS,
  parameter int unsigned     ROWS       = ROWS_PER_BANK,
  parameter int unsigned     WORD_W     = 64,
  parameter int unsigned     RADIUS     = BLAST_RADIUS,
  parameter longint unsigned P_T_REFW   = T_REFW,
  localparam int unsigned    BW         = (NBANKS > 1) ? $clog2(NBANKS) : 1,
  localparam int unsigned    RW         = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,        // async active-low; assertions also use it in disable iff
  // configuration (profiling results)
  input  logic              cfg_we,
  input  cfg_addr_e         cfg_addr,
  input  logic [31:0]       cfg_wdata,
  // demand requests
  input  logic              dem_valid,
  output logic              dem_ready,
  input  logic [BW-1:0]     dem_bank,
  input  logic [RW-1:0]     dem_row,
  input  logic              dem_we,
  // existing RowHammer mitigation mechanism
  output logic              act_valid,
  output logic [BW-1:0]     act_bank,
  output logic [RW-1:0]     act_row,
  output logic              act_prev_ref,
  output logic [NRH_W-1:0]  nrh_mitigation,
  input  logic              pr_valid,
  output logic              pr_ready,
  input  logic [BW-1:0]     pr_bank,
  input  logic [RW-1:0]     pr_row,
  // DRAM command bus
  output logic              cmd_valid,
  output dram_cmd_e         cmd,
  output logic [BW-1:0]     cmd_bank,
  output logic [RW-1:0]     cmd_row,
  output logic              cmd_prev_ref,
  // status
  output logic              pacram_active,
  output logic              pacram_reduce_all,
  output logic [TIME_W-1:0] tfcri,
  output logic              fr_clearing,
  output logic [31:0]       stat_full,
  output logic [31:0]       stat_partial,
  output logic [31:0]       stat_resets,
  output logic [NBANKS-1:0] bank_busy
);

  logic              lat_valid, lat_partial, clear_pulse;
  logic [BW-1:0]     lat_bank;
  logic [TRAS_W-1:0] lat_tras;

  mem_sched #(
    .NBANKS (NBANKS),
    .ROWS   (ROWS),
    .RADIUS (RADIUS)
  ) u_sched (
    .clk          (clk),
    .rst_n        (rst_n),
    .dem_valid    (dem_valid),
    .dem_ready    (dem_ready),
    .dem_bank     (dem_bank),
    .dem_row      (dem_row),
    .dem_we       (dem_we),
    .pr_valid     (pr_valid),
    .pr_ready     (pr_ready),
    .pr_bank      (pr_bank),
    .pr_row       (pr_row),
    .lat_valid    (lat_valid),
    .lat_bank     (lat_bank),
    .lat_tras     (lat_tras),
    .cmd_valid    (cmd_valid),
    .cmd          (cmd),
    .cmd_bank     (cmd_bank),
    .cmd_row      (cmd_row),
    .cmd_prev_ref (cmd_prev_ref),
    .bank_busy    (bank_busy)
  );

  assign act_valid    = cmd_valid && (cmd == CMD_ACT);
  assign act_bank     = cmd_bank;
  assign act_row      = cmd_row;
  assign act_prev_ref = cmd_prev_ref;

  pacram #(
    .NBANKS   (NBANKS),
    .ROWS     (ROWS),
    .WORD_W   (WORD_W),
    .P_T_REFW (P_T_REFW)
  ) u_pacram (
    .clk            (clk),
    .rst_n          (rst_n),
    .cfg_we         (cfg_we),
    .cfg_addr       (cfg_addr),
    .cfg_wdata      (cfg_wdata),
    .act_valid      (act_valid),
    .act_bank       (act_bank),
    .act_row        (act_row),
    .act_prev_ref   (act_prev_ref),
    .lat_valid      (lat_valid),
    .lat_bank       (lat_bank),
    .lat_partial    (lat_partial),
    .lat_tras       (lat_tras),
    .nrh_mitigation (nrh_mitigation),
    .active         (pacram_active),
    .reduce_all     (pacram_reduce_all),
    .tfcri          (tfcri),
    .clear_pulse    (clear_pulse),
    .clearing_any   (fr_clearing)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_full    <= '0;
      stat_partial <= '0;
      stat_resets  <= '0;
    end else begin
      if (lat_valid &&  lat_partial) stat_partial <= stat_partial + 32'd1;
      if (lat_valid && !lat_partial) stat_full    <= stat_full + 32'd1;
      if (clear_pulse)               stat_resets  <= stat_resets + 32'd1;
    end
  end

endmodule
