// mem_sched: memory request scheduler (row-command part) of the PaCRAM
// memory controller.
//
// It turns two request streams into DRAM row commands on a single command
// bus, one command per cycle:
//   * demand requests (bank, row, read/write) from the processor side,
//     served closed-page: ACT, RD or WR after tRCD, PRE after tRAS, tRP;
//   * preventive refresh requests (bank, aggressor row) from the existing
//     RowHammer mitigation mechanism. Each refreshes the victim rows within
//     BLAST_RADIUS of the aggressor (aggressor-2, -1, +1, +2 for radius 2),
//     one after the other, by ACT of the victim, PRE after the restoration
//     time and tRP before the next ACT.
// The restoration time of a preventive-refresh ACT is not fixed: PaCRAM sees
// the ACT (cmd_* with cmd_prev_ref = 1) and answers one cycle later on
// lat_valid/lat_bank/lat_tras with either nominal tRAS or tRAS(Red). The
// bank keeps the victim open until lat_tras cycles after its ACT. A
// partially restoring refresh therefore costs tRAS(Red) + tRP per victim.
//
// What follows the paper: preventive refreshes come from the mitigation
// mechanism, their latency from PaCRAM, the blast radius of 2, and the
// latency formula. What is this design's own: everything else. Real
// controllers reorder demand requests (FR-FCFS), keep request queues, issue
// periodic REF and obey rank-level limits (tRRD, tFAW, bus turnaround);
// none of that is modelled here. Preventive refreshes take priority over
// demand requests for the same bank; within a command class the banks are
// served round robin. A command that loses arbitration is issued later,
// which only lengthens the time a row stays open or closed.
//
// Interface timing: *_ready is combinational from bank state; a request is
// taken in the cycle *_valid && *_ready.
module mem_sched
  import pacram_pkg::*;
#(
  parameter int unsigned NBANKS  = NUM_BANKS,
  parameter int unsigned ROWS    = ROWS_PER_BANK,
  parameter int unsigned RADIUS  = BLAST_RADIUS,
  parameter int unsigned P_T_RAS = T_RAS_NOM,
  parameter int unsigned P_T_RP  = T_RP,
  parameter int unsigned P_T_RCD = T_RCD,
  localparam int unsigned BW     = (NBANKS > 1) ? $clog2(NBANKS) : 1,
  localparam int unsigned RW     = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // demand requests
  input  logic              dem_valid,
  output logic              dem_ready,
  input  logic [BW-1:0]     dem_bank,
  input  logic [RW-1:0]     dem_row,
  input  logic              dem_we,
  // preventive refresh requests from the mitigation mechanism
  input  logic              pr_valid,
  output logic              pr_ready,
  input  logic [BW-1:0]     pr_bank,
  input  logic [RW-1:0]     pr_row,
  // restoration latency from PaCRAM
  input  logic              lat_valid,
  input  logic [BW-1:0]     lat_bank,
  input  logic [TRAS_W-1:0] lat_tras,
  // DRAM command bus
  output logic              cmd_valid,
  output dram_cmd_e         cmd,
  output logic [BW-1:0]     cmd_bank,
  output logic [RW-1:0]     cmd_row,
  output logic              cmd_prev_ref,
  // bank status
  output logic [NBANKS-1:0] bank_busy
);

  localparam int unsigned NVICT = 2 * RADIUS;
  localparam int unsigned VW    = $clog2(NVICT + 1);

  typedef enum logic [1:0] {
    B_IDLE = 2'd0,   // nothing to do
    B_ACT  = 2'd1,   // wants to activate (after tRP since last PRE)
    B_OPEN = 2'd2    // row open: RD/WR (demand), then PRE after restoration time
  } bank_state_e;

  typedef struct packed {
    bank_state_e        st;
    logic               is_pr;      // serving a preventive refresh
    logic               we;         // demand write
    logic               col_done;   // demand RD/WR issued
    logic               lat_wait;   // waiting for PaCRAM's answer
    logic [RW-1:0]      row;        // demand row or aggressor row
    logic [VW-1:0]      vi;         // victim index 0 .. NVICT-1
    logic [TRAS_W-1:0]  ras;        // restoration time of the open row
    logic [7:0]         cnt;        // cycles since last ACT or PRE (saturating)
  } bank_t;

  bank_t bank_q [NBANKS];

  // ------------- victim address of each bank -------------
  logic [RW-1:0]     vic_row   [NBANKS];
  logic [NBANKS-1:0] vic_ok;

  always_comb begin
    automatic int off, r;
    off = 0;
    r   = 0;
    for (int b = 0; b < NBANKS; b++) begin
      off = (int'(bank_q[b].vi) < int'(RADIUS)) ? (int'(bank_q[b].vi) - int'(RADIUS))
                                                : (int'(bank_q[b].vi) - int'(RADIUS) + 1);
      r = int'(bank_q[b].row) + off;
      vic_ok[b]  = (r >= 0) && (r < int'(ROWS));
      vic_row[b] = RW'(r);
    end
  end

  // ------------- per-bank command wishes -------------
  logic [NBANKS-1:0] want_pre, want_col, want_act;
  always_comb begin
    for (int b = 0; b < NBANKS; b++) begin
      want_pre[b] = (bank_q[b].st == B_OPEN) && !bank_q[b].lat_wait
                 && (bank_q[b].is_pr || bank_q[b].col_done)
                 && (bank_q[b].cnt >= 8'(bank_q[b].ras));
      want_col[b] = (bank_q[b].st == B_OPEN) && !bank_q[b].is_pr && !bank_q[b].col_done
                 && (bank_q[b].cnt >= 8'(P_T_RCD));
      want_act[b] = (bank_q[b].st == B_ACT) && (bank_q[b].cnt >= 8'(P_T_RP))
                 && (!bank_q[b].is_pr || vic_ok[b]);
      bank_busy[b] = (bank_q[b].st != B_IDLE);
    end
  end

  // ------------- command arbitration -------------
  logic [BW-1:0] rr;
  logic          grant;
  logic [BW-1:0] gbank;
  dram_cmd_e     gcmd;

  always_comb begin
    automatic int  b;      // bank index; int for loop arithmetic, only the low BW bits matter
    automatic logic w;
    grant = 1'b0;
    gbank = '0;
    gcmd  = CMD_ACT;
    b     = 0;
    w     = 1'b0;
    // class 0: PRE, class 1: RD/WR, class 2: preventive ACT, class 3: demand ACT
    for (int c = 0; c < 4; c++) begin
      for (int i = 0; i < NBANKS; i++) begin
        b = (int'(rr) + i) % int'(NBANKS);
        unique case (c)
          0: w = want_pre[b];
          1: w = want_col[b];
          2: w = want_act[b] && bank_q[b].is_pr;
          default: w = want_act[b] && !bank_q[b].is_pr;
        endcase
        if (w && !grant) begin
          grant = 1'b1;
          gbank = BW'(b);
          gcmd  = (c == 0) ? CMD_PRE : (c == 1) ? (bank_q[b].we ? CMD_WR : CMD_RD) : CMD_ACT;
        end
      end
    end
  end

  assign cmd_valid    = grant;
  assign cmd          = gcmd;
  assign cmd_bank     = gbank;
  assign cmd_row      = bank_q[gbank].is_pr ? vic_row[gbank] : bank_q[gbank].row;
  assign cmd_prev_ref = bank_q[gbank].is_pr;

  // ------------- request acceptance -------------
  assign pr_ready  = (bank_q[pr_bank].st == B_IDLE);
  assign dem_ready = (bank_q[dem_bank].st == B_IDLE) && !(pr_valid && pr_bank == dem_bank);

  // ------------- bank state update -------------
  bank_t bank_d [NBANKS];

  always_comb begin
    for (int b = 0; b < NBANKS; b++) begin
      bank_d[b] = bank_q[b];
      if (bank_q[b].cnt != 8'hFF) bank_d[b].cnt = bank_q[b].cnt + 8'd1;
      // PaCRAM answer for the row just activated
      if (lat_valid && lat_bank == BW'(b) && bank_q[b].lat_wait) begin
        bank_d[b].lat_wait = 1'b0;
        bank_d[b].ras      = lat_tras;
      end
      unique case (bank_q[b].st)
        B_IDLE: begin
          if (pr_valid && pr_ready && pr_bank == BW'(b)) begin
            bank_d[b].st    = B_ACT;
            bank_d[b].is_pr = 1'b1;
            bank_d[b].row   = pr_row;
            bank_d[b].vi    = '0;
          end else if (dem_valid && dem_ready && dem_bank == BW'(b)) begin
            bank_d[b].st    = B_ACT;
            bank_d[b].is_pr = 1'b0;
            bank_d[b].row   = dem_row;
            bank_d[b].we    = dem_we;
          end
        end
        B_ACT: begin
          if (grant && gbank == BW'(b)) begin
            bank_d[b].st       = B_OPEN;
            bank_d[b].cnt      = 8'd1;
            bank_d[b].col_done = 1'b0;
            bank_d[b].lat_wait = bank_q[b].is_pr;
            bank_d[b].ras      = TRAS_W'(P_T_RAS);
          end else if (bank_q[b].is_pr && !vic_ok[b]) begin
            // victim outside the bank: skip it
            if (int'(bank_q[b].vi) == NVICT - 1) bank_d[b].st = B_IDLE;
            else                                 bank_d[b].vi = bank_q[b].vi + 1'b1;
          end
        end
        B_OPEN: begin
          if (grant && gbank == BW'(b)) begin
            if (gcmd == CMD_PRE) begin
              bank_d[b].cnt = 8'd1;
              if (bank_q[b].is_pr && int'(bank_q[b].vi) != NVICT - 1) begin
                bank_d[b].st = B_ACT;
                bank_d[b].vi = bank_q[b].vi + 1'b1;
              end else begin
                bank_d[b].st = B_IDLE;
              end
            end else begin
              bank_d[b].col_done = 1'b1;
            end
          end
        end
        default: bank_d[b].st = B_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0;
      for (int b = 0; b < NBANKS; b++) begin
        bank_q[b]     <= '0;
        bank_q[b].st  <= B_IDLE;
        bank_q[b].cnt <= 8'hFF;
      end
    end else begin
      if (grant) rr <= (rr == BW'(NBANKS - 1)) ? '0 : rr + 1'b1;
      for (int b = 0; b < NBANKS; b++) bank_q[b] <= bank_d[b];
    end
  end

  // PaCRAM must answer every preventive-refresh ACT in the next cycle.
  a_lat_answer: assert property (@(posedge clk) disable iff (!rst_n)
      (cmd_valid && cmd == CMD_ACT && cmd_prev_ref) |=> (lat_valid && lat_bank == $past(cmd_bank)));

endmodule
