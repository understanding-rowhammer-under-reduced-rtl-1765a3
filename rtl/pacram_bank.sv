// pacram_bank: PaCRAM row-state logic for one DRAM bank.
//
// Every row is in one of two states, kept in the bank's FR bit vector
// (fr_array): F (bit 0) - the next preventive refresh must restore the row's
// charge fully, with nominal tRAS; P (bit 1) - the row was fully restored in
// the current full-restoration interval (tFCRI), so further preventive
// refreshes may restore it partially, with the reduced tRAS(Red).
//
// How it works (state rules follow the paper; the pipeline is this design's):
//   * A preventive-refresh activation of a victim row (act_valid/act_row)
//     reads the row's FR word. One cycle later rsp_valid is raised with
//     rsp_partial = 1 if the row is in state P, else 0. A row found in state
//     F is written back as P, so it is refreshed fully exactly once per
//     interval and partially afterwards.
//   * clear_start (the periodic tFCRI pulse, a configuration change, and
//     reset) pulls every row back to F. The paper only says this happens;
//     here it is a sweep that writes one all-zero word per free SRAM cycle.
//     While the sweep is running, a row whose word has not been cleared yet
//     is treated as F and answered with nominal latency but left unwritten,
//     which can only cause extra full restorations, never fewer.
//   * enable = 0 answers every refresh with nominal latency (no PaCRAM).
//     reduce_all = 1 (tFCRI longer than the refresh window, so periodic
//     refresh restores every row fully before N_PCR partial restorations can
//     accumulate) answers every refresh with reduced latency.
//
// Timing: rsp_* one cycle after act_valid. The SRAM is single ported; the
// lookup uses it in the act cycle (read) and the next cycle (write-back), so
// lookups to one bank must be at least two cycles apart. The scheduler
// guarantees far more (one activation per bank per tRC).
module pacram_bank #(
  parameter int unsigned ROWS   = 65536,
  parameter int unsigned WORD_W = 64,
  localparam int unsigned ROW_W  = $clog2(ROWS),
  localparam int unsigned DEPTH  = ROWS / WORD_W,
  localparam int unsigned ADDR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned BIT_W  = $clog2(WORD_W)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,
  input  logic             reduce_all,
  input  logic             act_valid,
  input  logic [ROW_W-1:0] act_row,
  input  logic             clear_start,
  output logic             rsp_valid,
  output logic             rsp_partial,
  output logic             clearing
);

  // ---------------- sweep state ----------------
  logic [ADDR_W-1:0] sweep_ptr;

  // ---------------- lookup pipeline ----------------
  logic              p_valid;
  logic [BIT_W-1:0]  p_bit;
  logic [ADDR_W-1:0] p_word;
  logic              p_pending;   // word still waiting for the sweep at lookup time
  logic              p_enable;
  logic              p_reduce_all;

  logic [ADDR_W-1:0] act_word;
  logic [BIT_W-1:0]  act_bit;
  assign act_word = ADDR_W'(act_row >> BIT_W);
  assign act_bit  = act_row[BIT_W-1:0];

  logic              sram_en, sram_we;
  logic [ADDR_W-1:0] sram_addr;
  logic [WORD_W-1:0] sram_wdata, sram_wmask, sram_rdata;
  logic              sweep_go;

  logic              cur_bit;
  logic              wb_needed;
  assign cur_bit   = sram_rdata[p_bit];
  assign wb_needed = p_valid && p_enable && !p_reduce_all && !p_pending && !cur_bit;

  // ---------------- SRAM port arbitration ----------------
  // Priority: lookup read > write-back of state P > sweep clear.

  always_comb begin
    sram_en    = 1'b0;
    sram_we    = 1'b0;
    sram_addr  = act_word;
    sram_wdata = '0;
    sram_wmask = '0;
    sweep_go   = 1'b0;
    if (act_valid) begin
      sram_en = 1'b1;
    end else if (wb_needed) begin
      sram_en    = 1'b1;
      sram_we    = 1'b1;
      sram_addr  = p_word;
      sram_wdata = '1;
      sram_wmask = WORD_W'(1) << p_bit;
    end else if (clearing && !clear_start) begin
      sram_en    = 1'b1;
      sram_we    = 1'b1;
      sram_addr  = sweep_ptr;
      sram_wdata = '0;
      sram_wmask = '1;
      sweep_go   = 1'b1;
    end
  end

  fr_array #(.ROWS(ROWS), .WORD_W(WORD_W)) u_fr (
    .clk   (clk),
    .en    (sram_en),
    .we    (sram_we),
    .addr  (sram_addr),
    .wdata (sram_wdata),
    .wmask (sram_wmask),
    .rdata (sram_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing  <= 1'b1;            // all rows start in state F
      sweep_ptr <= '0;
    end else if (clear_start) begin
      clearing  <= 1'b1;
      sweep_ptr <= '0;
    end else if (sweep_go) begin
      if (sweep_ptr == ADDR_W'(DEPTH - 1)) clearing <= 1'b0;
      sweep_ptr <= sweep_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid      <= 1'b0;
      p_bit        <= '0;
      p_word       <= '0;
      p_pending    <= 1'b0;
      p_enable     <= 1'b0;
      p_reduce_all <= 1'b0;
    end else begin
      p_valid      <= act_valid;
      p_bit        <= act_bit;
      p_word       <= act_word;
      p_pending    <= clear_start || (clearing && (act_word >= sweep_ptr));
      p_enable     <= enable;
      p_reduce_all <= reduce_all;
    end
  end

  assign rsp_valid   = p_valid;
  assign rsp_partial = p_valid && p_enable && (p_reduce_all || (!p_pending && cur_bit));

  // Lookups to one bank are at least two cycles apart (write-back slot).
  a_lookup_spacing: assert property (@(posedge clk) disable iff (!rst_n)
                                     act_valid |=> !act_valid);

endmodule
