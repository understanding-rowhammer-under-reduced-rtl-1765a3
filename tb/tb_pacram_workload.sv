// tb_pacram_workload: worst-case hammering of the full-size controller slice
// (default parameters) with published module configurations, checking the
// property PaCRAM exists to keep: a row never receives more than N_PCR
// consecutive partially restoring refreshes.
//
// The testbench supplies what lies outside the RTL:
//   * an attacker that activates its aggressor rows as fast as the bank
//     allows (one ACT per tRC, closed page), in four banks at once:
//       bank 0  single-sided, aggressor 1000      (victims 998..1002)
//       bank 1  single-sided, aggressor 65535     (last row; two victims)
//       bank 2  double-sided, aggressors 2000 and 2004 (shared victim 2002)
//       bank 17 single-sided, aggressor 40000     (second rank)
//   * an ideal counter-based mitigation mechanism: it counts the demand ACTs
//     of every row and requests a preventive refresh of that row's victims
//     when the count reaches the N_RH that PaCRAM hands out, then restarts
//     the count. This is the model behind the interval formula: one
//     preventive refresh per N_RH activations, at most one ACT per tRC.
//   * a DRAM-side monitor that classifies every preventive refresh by how
//     long the row stays open (nominal tRAS = full, tRAS(Red) = partial) and
//     keeps, per victim row, the run of partial refreshes since its last
//     full one.
// Configurations (N_RH, N_PCR, tRAS(Red) in cycles of 1 ns), from the
// published per-module tables at 0.27 tRAS:
//   S0 : 6200, 1, 9  -> tFCRI = 297,624 cycles
//   S13: 3900, 5, 9  -> tFCRI = 936,120 cycles
// Each runs for a little more than two intervals.
//
// Checks: every run of partial refreshes is at most N_PCR long; every
// refresh is held exactly tRAS or tRAS(Red); back-to-back demand
// activations of one bank are at least tRC apart; every requested victim is
// refreshed; the controller's
// statistics agree with the monitor. Counted mechanisms: full and partial
// refreshes, periodic resets, and, for the configuration with N_PCR > 1, a
// run of at least two partial refreshes (PaCRAM is not trivially
// conservative).
module tb_pacram_workload;
  import pacram_pkg::*;
  localparam int unsigned BW = 5, RW = 16;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_addr_e cfg_addr = CFG_ENABLE;
  logic [31:0] cfg_wdata = 0;
  logic dem_valid = 0, dem_ready, dem_we = 0;
  logic [BW-1:0] dem_bank = 0;
  logic [RW-1:0] dem_row = 0;
  logic act_valid, act_prev_ref;
  logic [BW-1:0] act_bank;
  logic [RW-1:0] act_row;
  logic [NRH_W-1:0] nrh_mitigation;
  logic pr_valid, pr_ready;
  logic [BW-1:0] pr_bank;
  logic [RW-1:0] pr_row;
  logic cmd_valid, cmd_prev_ref;
  dram_cmd_e cmd;
  logic [BW-1:0] cmd_bank;
  logic [RW-1:0] cmd_row;
  logic pacram_active, pacram_reduce_all, fr_clearing;
  logic [TIME_W-1:0] tfcri;
  logic [31:0] stat_full, stat_partial, stat_resets;
  logic [NUM_BANKS-1:0] bank_busy;

  pacram_mc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  int cur_npcr = 0, cur_tras_red = 0;
  bit running = 0;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d %s", cyc, msg);
    end
  endtask

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- ideal counter-based mitigation ----------------
  typedef struct packed { logic [BW-1:0] b; logic [RW-1:0] r; } req_t;
  req_t pr_q [$];
  int   act_cnt [longint];
  int   exp_vict = 0, got_vict = 0;
  assign pr_valid = (pr_q.size() != 0);
  assign pr_bank  = pr_valid ? pr_q[0].b : '0;
  assign pr_row   = pr_valid ? pr_q[0].r : '0;

  always @(posedge clk) if (rst_n) begin
    if (pr_q.size() != 0 && pr_ready) begin
      for (int o = -int'(BLAST_RADIUS); o <= int'(BLAST_RADIUS); o++)
        if (o != 0 && int'(pr_q[0].r) + o >= 0 && int'(pr_q[0].r) + o < int'(ROWS_PER_BANK)) exp_vict++;
      void'(pr_q.pop_front());
    end
    if (act_valid && !act_prev_ref) begin
      longint key;
      key = (longint'(act_bank) << 16) | longint'(act_row);
      if (!act_cnt.exists(key)) act_cnt[key] = 0;
      act_cnt[key]++;
      if (act_cnt[key] >= int'(nrh_mitigation)) begin
        act_cnt[key] = 0;
        pr_q.push_back('{act_bank, act_row});
      end
    end
  end

  // ---------------- DRAM-side monitor ----------------
  longint t_act [NUM_BANKS];
  bit     act_pr [NUM_BANKS];
  int     run [longint];
  int     m_full = 0, m_partial = 0, max_run = 0, max_run_cfg = 0;

  initial foreach (t_act[b]) t_act[b] = -1000;

  always @(posedge clk) begin
    cyc++;
    if (cmd_valid && cmd == CMD_ACT && cmd_prev_ref) got_vict++;
    if (cmd_valid && running) begin
      int b;
      b = int'(cmd_bank);
      if (cmd == CMD_ACT) begin
        if (!cmd_prev_ref && !act_pr[b])
          chk(cyc - t_act[b] >= 64'(T_RC), "demand ACT to ACT in one bank shorter than tRC");
        t_act[b] = cyc; act_pr[b] = cmd_prev_ref;
      end else if (cmd == CMD_PRE && act_pr[b]) begin
        longint ras;
        longint key;
        ras = cyc - t_act[b];
        key = (longint'(b) << 16) | longint'(cmd_row);
        chk(ras == 64'(T_RAS_NOM) || ras == 64'(cur_tras_red),
            $sformatf("refresh held %0d cycles", ras));
        if (!run.exists(key)) run[key] = 0;
        if (ras == 64'(T_RAS_NOM)) begin
          m_full++;
          run[key] = 0;
        end else begin
          m_partial++;
          run[key]++;
          chk(run[key] <= cur_npcr,
              $sformatf("row %0d/%0d: %0d consecutive partial refreshes, N_PCR %0d", b, cmd_row, run[key], cur_npcr));
          if (run[key] > max_run_cfg) max_run_cfg = run[key];
        end
      end
    end
  end

  // ---------------- attacker ----------------
  int pat_bank [4] = '{0, 1, 2, 17};
  task automatic hammer(input longint until_cyc);
    int k = 0;
    @(negedge clk);
    while (cyc < until_cyc) begin
      int sel;
      sel = k % 4;
      dem_valid = 1;
      dem_bank  = BW'(pat_bank[sel]);
      dem_we    = 1'b0;
      case (sel)
        0: dem_row = RW'(1000);
        1: dem_row = RW'(65535);
        2: dem_row = RW'(((k / 4) % 2 == 0) ? 2000 : 2004);
        default: dem_row = RW'(40000);
      endcase
      // sample the ready after it has settled, before the accepting edge
      #1;
      while (!dem_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      k++;
    end
    dem_valid = 0;
  endtask

  task automatic wr(input cfg_addr_e a, input int d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run_config(input string name, input int nrh, input int npcr, input int tras_red,
                            input longint exp_tfcri);
    longint t0;
    int r0, f0, p0;
    wr(CFG_NRH, nrh); wr(CFG_NPCR, npcr); wr(CFG_TRAS_RED, tras_red);
    repeat (3) @(negedge clk);
    chk(tfcri == TIME_W'(exp_tfcri), $sformatf("%s: tFCRI %0d, expected %0d", name, tfcri, exp_tfcri));
    chk(!pacram_reduce_all && pacram_active, $sformatf("%s: row states must be in use", name));
    chk(nrh_mitigation == NRH_W'(nrh), $sformatf("%s: threshold to the mitigation", name));
    act_cnt.delete();
    run.delete();
    cur_npcr = npcr; cur_tras_red = tras_red; max_run_cfg = 0;
    r0 = int'(stat_resets); f0 = m_full; p0 = m_partial;
    running = 1;
    t0 = cyc;
    hammer(t0 + 2 * exp_tfcri + 200_000);
    do @(negedge clk); while (pr_valid || (|bank_busy));
    running = 0;
    $display("%s: tFCRI=%0d full=%0d partial=%0d resets=%0d longest partial run=%0d (N_PCR %0d)",
             name, tfcri, m_full - f0, m_partial - p0, int'(stat_resets) - r0, max_run_cfg, npcr);
    chk(m_full - f0 > 0, $sformatf("%s: mechanism never seen: full restoration", name));
    chk(m_partial - p0 > 0, $sformatf("%s: mechanism never seen: partial restoration", name));
    chk(int'(stat_resets) - r0 >= 2, $sformatf("%s: mechanism never seen: periodic reset to F (>= 2)", name));
    if (npcr > 1)
      chk(max_run_cfg >= 2, $sformatf("%s: mechanism never seen: run of partial refreshes", name));
    if (max_run_cfg > max_run) max_run = max_run_cfg;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    run_config("S0@0.27",  6200, 1, 9, 64'd1 * (64'd6200 * 48 + 9 + 15));
    run_config("S13@0.27", 3900, 5, 9, 64'd5 * (64'd3900 * 48 + 9 + 15));
    repeat (10) @(negedge clk);
    chk(exp_vict == got_vict, $sformatf("victim ACTs %0d expected %0d", got_vict, exp_vict));
    chk(stat_full == 32'(m_full) && stat_partial == 32'(m_partial),
        $sformatf("statistics %0d/%0d vs monitor %0d/%0d", stat_full, stat_partial, m_full, m_partial));
    $display("cycles=%0d full=%0d partial=%0d longest partial run=%0d", cyc, m_full, m_partial, max_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
