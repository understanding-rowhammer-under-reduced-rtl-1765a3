// pacram_config: PaCRAM configuration registers and full-charge-restoration
// interval (tFCRI) computation.
//
// PaCRAM is configured per DRAM module from profiling data (taken at first
// boot, at manufacturing time and stored in the SPD, or online). The values
// are written through a simple register port:
//   CFG_ENABLE   (bit 0)  PaCRAM on/off
//   CFG_NRH      N_RH at the reduced latency; also the threshold handed to
//                the RowHammer mitigation mechanism (PaCRAM lowers it)
//   CFG_NPCR     N_PCR, the largest number of consecutive partial charge
//                restorations that the module tolerates
//   CFG_TRAS_RED tRAS(Red) in cycles
//
// From them it computes, as the paper defines it,
//   tFCRI = N_PCR * (N_RH * tRC + tRAS(Red) + tRP)
// which is the shortest time in which a row can receive N_PCR preventive
// refreshes if it is hammered at the maximum rate (one activation per tRC,
// a preventive refresh after N_RH of them). If tFCRI exceeds the refresh
// window tREFW, periodic refresh fully restores every row first, so
// reduce_all is raised and every preventive refresh may be partial.
// active is low when PaCRAM is disabled or the module has no usable
// configuration (N_RH = 0 or N_PCR = 0, the "not applicable" entries of the
// profiling tables).
//
// Timing: two register stages; tfcri/reduce_all follow a write by two
// cycles, and cfg_update pulses in the cycle they become valid. The register
// port, its encoding and the reset values (module H5 at 0.36 tRAS:
// N_RH = 10.2K, N_PCR = 15.0K, tRAS(Red) = 12 ns) are this design's choices.
// tfcri is 48 bits wide to leave headroom for a faster clock; with the
// register widths used here the largest product needs 39 bits, so the top
// bits of tfcri are always zero.
module pacram_config
  import pacram_pkg::*;
#(
  parameter int unsigned     P_T_RC      = T_RC,
  parameter int unsigned     P_T_RP      = T_RP,
  parameter longint unsigned P_T_REFW    = T_REFW,
  parameter int unsigned     P_NRH_DEF   = NRH_DEF,
  parameter int unsigned     P_NPCR_DEF  = NPCR_DEF,
  parameter int unsigned     P_TRAS_RED  = T_RAS_RED_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  cfg_addr_e         cfg_addr,
  input  logic [31:0]       cfg_wdata,   // 32-bit bus; each field uses its low bits only
  output logic              active,
  output logic [NRH_W-1:0]  nrh,
  output logic [NPCR_W-1:0] npcr,
  output logic [TRAS_W-1:0] tras_red,
  output logic [TIME_W-1:0] tfcri,
  output logic              reduce_all,
  output logic              cfg_update
);

  logic enable;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enable   <= 1'b1;
      nrh      <= NRH_W'(P_NRH_DEF);
      npcr     <= NPCR_W'(P_NPCR_DEF);
      tras_red <= TRAS_W'(P_TRAS_RED);
    end else if (cfg_we) begin
      unique case (cfg_addr)
        CFG_ENABLE:   enable   <= cfg_wdata[0];
        CFG_NRH:      nrh      <= cfg_wdata[NRH_W-1:0];
        CFG_NPCR:     npcr     <= cfg_wdata[NPCR_W-1:0];
        CFG_TRAS_RED: tras_red <= cfg_wdata[TRAS_W-1:0];
        default: ;
      endcase
    end
  end

  // Stage 1: minimum interval between two preventive refreshes of one row.
  // Stage 2: N_PCR of them.
  logic [TIME_W-1:0] per_ref;
  logic [1:0]        upd_pipe;

  // Values of the reset configuration, so that the outputs are valid from
  // the first cycle after reset.
  localparam logic [TIME_W-1:0] PER_REF_DEF =
      TIME_W'(P_NRH_DEF) * TIME_W'(P_T_RC) + TIME_W'(P_TRAS_RED) + TIME_W'(P_T_RP);
  localparam logic [TIME_W-1:0] TFCRI_DEF = TIME_W'(P_NPCR_DEF) * PER_REF_DEF;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      per_ref    <= PER_REF_DEF;
      tfcri      <= TFCRI_DEF;
      reduce_all <= TFCRI_DEF > TIME_W'(P_T_REFW);
      upd_pipe   <= 2'b01;   // publish the reset configuration once
    end else begin
      per_ref    <= TIME_W'(nrh) * TIME_W'(P_T_RC) + TIME_W'(tras_red) + TIME_W'(P_T_RP);
      tfcri      <= TIME_W'(npcr) * per_ref;
      reduce_all <= (TIME_W'(npcr) * per_ref) > TIME_W'(P_T_REFW);
      upd_pipe   <= {upd_pipe[0], cfg_we};
    end
  end

  assign active     = enable && (nrh != '0) && (npcr != '0);
  assign cfg_update = upd_pipe[1];

endmodule
