// pacram: the PaCRAM unit of the memory controller.
//
// PaCRAM sits beside an existing RowHammer mitigation mechanism. Both watch
// the activated row addresses on the DRAM command bus. The mitigation
// mechanism decides when a preventive refresh is needed; PaCRAM decides how
// long that refresh has to keep the victim row open: nominal tRAS (full
// charge restoration) or tRAS(Red) (partial charge restoration). The
// scheduler then closes the row after that time.
//
// Contents: pacram_config (registers, tFCRI), fcri_timer (periodic reset to
// state F) and one pacram_bank per DRAM bank (FR bit vector and lookup).
// Every bank is cleared after reset, on every tFCRI pulse and on every
// configuration change.
//
// Interface:
//   act_valid/act_bank/act_row/act_prev_ref : an ACT on the command bus;
//       only ACTs that belong to a preventive refresh (act_prev_ref) are
//       looked up.
//   lat_valid/lat_bank/lat_partial/lat_tras : one cycle after such an ACT,
//       the restoration time in cycles the scheduler must wait before PRE.
//   nrh_mitigation : the (reduced) RowHammer threshold to configure the
//       mitigation mechanism with.
// At most one ACT per cycle, and at most one preventive-refresh lookup per
// bank every two cycles.
module pacram
  import pacram_pkg::*;
#(
  parameter int unsigned     NBANKS     = NUM_BANKS,
  parameter int unsigned     ROWS       = ROWS_PER_BANK,
  parameter int unsigned     WORD_W     = 64,
  parameter int unsigned     P_T_RAS    = T_RAS_NOM,
  parameter int unsigned     P_T_RC     = T_RC,
  parameter int unsigned     P_T_RP     = T_RP,
  parameter longint unsigned P_T_REFW   = T_REFW,
  parameter int unsigned     P_NRH_DEF  = NRH_DEF,
  parameter int unsigned     P_NPCR_DEF = NPCR_DEF,
  localparam int unsigned    BW         = (NBANKS > 1) ? $clog2(NBANKS) : 1,
  localparam int unsigned    RW         = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_we,
  input  cfg_addr_e         cfg_addr,
  input  logic [31:0]       cfg_wdata,
  // activations seen on the command bus
  input  logic              act_valid,
  input  logic [BW-1:0]     act_bank,
  input  logic [RW-1:0]     act_row,
  input  logic              act_prev_ref,
  // preventive refresh latency to the scheduler
  output logic              lat_valid,
  output logic [BW-1:0]     lat_bank,
  output logic              lat_partial,
  output logic [TRAS_W-1:0] lat_tras,
  // to the mitigation mechanism / status
  output logic [NRH_W-1:0]  nrh_mitigation,
  output logic              active,
  output logic              reduce_all,
  output logic [TIME_W-1:0] tfcri,
  output logic              clear_pulse,
  output logic              clearing_any
);

  logic [TRAS_W-1:0] tras_red;
  logic              cfg_update;
  logic              timer_clear;

  pacram_config #(
    .P_T_RC     (P_T_RC),
    .P_T_RP     (P_T_RP),
    .P_T_REFW   (P_T_REFW),
    .P_NRH_DEF  (P_NRH_DEF),
    .P_NPCR_DEF (P_NPCR_DEF)
  ) u_cfg (
    .clk        (clk),
    .rst_n      (rst_n),
    .cfg_we     (cfg_we),
    .cfg_addr   (cfg_addr),
    .cfg_wdata  (cfg_wdata),
    .active     (active),
    .nrh        (nrh_mitigation),
    .npcr       (),            // read back only; tFCRI already includes it
    .tras_red   (tras_red),
    .tfcri      (tfcri),
    .reduce_all (reduce_all),
    .cfg_update (cfg_update)
  );

  fcri_timer #(.CLEAR_MARGIN(2 * (ROWS / WORD_W))) u_timer (
    .clk     (clk),
    .rst_n   (rst_n),
    .run     (active && !reduce_all),
    .restart (cfg_update),
    .tfcri   (tfcri),
    .clear   (timer_clear)
  );

  assign clear_pulse = timer_clear;

  logic [NBANKS-1:0] b_rsp_valid, b_rsp_partial, b_clearing;

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    pacram_bank #(.ROWS(ROWS), .WORD_W(WORD_W)) u_bank (
      .clk         (clk),
      .rst_n       (rst_n),
      .enable      (active),
      .reduce_all  (reduce_all),
      .act_valid   (act_valid && act_prev_ref && (act_bank == BW'(b))),
      .act_row     (act_row),
      .clear_start (timer_clear),
      .rsp_valid   (b_rsp_valid[b]),
      .rsp_partial (b_rsp_partial[b]),
      .clearing    (b_clearing[b])
    );
  end

  // Only one ACT per cycle, so at most one bank answers per cycle.
  logic [BW-1:0] act_bank_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) act_bank_q <= '0;
    else        act_bank_q <= act_bank;
  end

  assign lat_valid    = |b_rsp_valid;
  assign lat_bank     = act_bank_q;
  assign lat_partial  = b_rsp_partial[act_bank_q];
  assign lat_tras     = lat_partial ? tras_red : TRAS_W'(P_T_RAS);
  assign clearing_any = |b_clearing;

  a_one_response: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(b_rsp_valid));

endmodule
