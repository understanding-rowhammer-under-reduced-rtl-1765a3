// tb_pacram_mc_top: end-to-end test of the memory-controller slice at its
// full default size (2 ranks x 16 banks x 64K rows, 2 Mbit of FR vectors).
//
// The testbench supplies what lies outside the RTL:
//   * demand traffic to a few hot rows of a few banks (including the first
//     and last row of a bank);
//   * a PARA-like mitigation mechanism: after each demand ACT it requests a
//     preventive refresh of that row with probability 1/4;
//   * a DRAM-side monitor that timestamps every command and checks
//       - ACT->PRE >= tRAS for demand rows and for fully restoring refreshes,
//         >= tRAS(Red) for partially restoring ones, PRE->ACT >= tRP;
//       - the latency class of every refresh against the mode: all partial
//         when tFCRI > tREFW, all full when PaCRAM is disabled;
//       - safety: a partially restoring refresh of a row only happens within
//         tFCRI of a fully restoring refresh of the same row.
// Three phases: reset configuration (module H5 at 0.36 tRAS, tFCRI > tREFW),
// a short interval (N_RH = 40, N_PCR = 20, tFCRI = 38940 cycles) with several
// periodic resets, and PaCRAM disabled. Every mechanism is counted and a
// mechanism that never happened is a failure.
module tb_pacram_mc_top;
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
  int phase = 0;          // 0 reset config, 1 short tFCRI, 2 disabled
  int cur_tras_red = 12;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d %s", cyc, msg);
    end
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int m_full = 0, m_partial = 0, m_reset = 0, m_reduce_all = 0, m_disabled = 0;
  int m_edge_skip = 0, m_dem_blocked = 0, m_sweep_lookup = 0, m_dem = 0;

  // ---------------- PARA-like mitigation model ----------------
  typedef struct packed { logic [BW-1:0] b; logic [RW-1:0] r; } req_t;
  req_t pr_q [$];
  assign pr_valid = (pr_q.size() != 0);
  assign pr_bank  = pr_valid ? pr_q[0].b : '0;
  assign pr_row   = pr_valid ? pr_q[0].r : '0;

  int exp_vict = 0, got_vict = 0;
  // the model, like a real requester, only talks to the controller out of reset
  always @(posedge clk) if (rst_n) begin
    if (pr_q.size() != 0 && pr_ready) begin
      for (int o = -int'(BLAST_RADIUS); o <= int'(BLAST_RADIUS); o++)
        if (o != 0 && int'(pr_q[0].r) + o >= 0 && int'(pr_q[0].r) + o < int'(ROWS_PER_BANK)) exp_vict++;
      if (pr_q[0].r == 0 || pr_q[0].r == RW'(ROWS_PER_BANK - 1)) m_edge_skip++;
      void'(pr_q.pop_front());
    end
    if (act_valid && !act_prev_ref && ($urandom_range(3) == 0) && pr_q.size() < 8)
      pr_q.push_back('{act_bank, act_row});
    if (dem_valid && !dem_ready && pr_valid && pr_bank == dem_bank) m_dem_blocked++;
  end

  // ---------------- DRAM-side monitor ----------------
  longint t_act [NUM_BANKS];
  longint t_pre [NUM_BANKS];
  bit     act_pr [NUM_BANKS];
  longint last_full [longint];

  initial foreach (t_pre[b]) begin t_pre[b] = -100; t_act[b] = -100; end

  always @(posedge clk) begin
    cyc++;
    if (cmd_valid) begin
      int b;
      b = int'(cmd_bank);
      if (cmd == CMD_ACT) begin
        chk(cyc - t_pre[b] >= 64'(T_RP), "PRE->ACT shorter than tRP");
        t_act[b] = cyc; act_pr[b] = cmd_prev_ref;
        if (cmd_prev_ref && fr_clearing) m_sweep_lookup++;
        if (!cmd_prev_ref) m_dem++;
      end else if (cmd == CMD_PRE) begin
        longint ras;
        longint key;
        ras = cyc - t_act[b];
        t_pre[b] = cyc;
        key = (longint'(b) << 16) | longint'(cmd_row);
        if (!act_pr[b]) begin
          chk(ras >= 64'(T_RAS_NOM), "demand row closed before tRAS");
        end else begin
          bit partial;
          partial = (ras < 64'(T_RAS_NOM));
          chk(ras >= 64'(cur_tras_red), "refresh shorter than tRAS(Red)");
          chk(ras == 64'(T_RAS_NOM) || ras == 64'(cur_tras_red), $sformatf("refresh held %0d cycles", ras));
          if (partial) m_partial++; else m_full++;
          case (phase)
            0: begin chk(partial, "reduce_all phase: full refresh"); if (partial) m_reduce_all++; end
            2: begin chk(!partial, "disabled phase: partial refresh"); if (!partial) m_disabled++; end
            default: begin
              if (partial) begin
                chk(last_full.exists(key), $sformatf("partial refresh of row %0d/%0d never fully restored", b, cmd_row));
                if (last_full.exists(key))
                  chk(t_act[b] - last_full[key] <= longint'(tfcri),
                      $sformatf("partial refresh %0d cycles after full", t_act[b] - last_full[key]));
              end else begin
                last_full[key] = t_act[b];
              end
            end
          endcase
        end
      end
    end
  end

  // victims outside the bank are skipped: the number of refresh ACTs must
  // equal the number of in-range victims of the accepted requests
  // (accepted requests are counted in the queue process above, before the
  // pop, so the count never races with the queue update)
  always @(posedge clk)
    if (cmd_valid && cmd == CMD_ACT && cmd_prev_ref) got_vict++;

  // ---------------- stimulus ----------------
  int hot_rows [6] = '{0, 1, 100, 102, 30000, 65535};

  task automatic wr(input cfg_addr_e a, input int d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic traffic(input int n);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      dem_valid = 1;
      dem_bank  = BW'((k % 5 == 0) ? $urandom_range(NUM_BANKS - 1) : $urandom_range(2));
      dem_row   = RW'(hot_rows[$urandom_range(5)]);
      dem_we    = 1'($urandom_range(1));
      do @(negedge clk); while (!dem_ready);
      dem_valid = 0;
    end
  endtask

  task automatic quiesce();
    do @(negedge clk); while (pr_valid || (|bank_busy));
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // phase 0: reset configuration, tFCRI = 7.34 s > 64 ms
    repeat (3) @(negedge clk);
    chk(pacram_active && pacram_reduce_all, "reset config: active, reduce_all");
    chk(nrh_mitigation == 10200, "reset config: mitigation threshold");
    chk(tfcri == 48'(64'd15000 * (64'd10200 * 48 + 27)), "reset config: tFCRI");
    phase = 0;
    traffic(1500);
    quiesce();
    // phase 1: short interval
    wr(CFG_NRH, 40); wr(CFG_NPCR, 20);
    repeat (3) @(negedge clk);
    chk(tfcri == 38940 && !pacram_reduce_all, "short config: tFCRI");
    chk(nrh_mitigation == 40, "short config: mitigation threshold");
    last_full.delete();
    phase = 1;
    traffic(5000);
    quiesce();
    // phase 2: disabled
    wr(CFG_ENABLE, 0);
    repeat (3) @(negedge clk);
    chk(!pacram_active, "disabled");
    phase = 2;
    traffic(800);
    quiesce();
    repeat (10) @(negedge clk);

    chk(exp_vict == got_vict, $sformatf("victim ACTs %0d expected %0d", got_vict, exp_vict));
    m_reset = int'(stat_resets);
    chk(stat_full == 32'(m_full) && stat_partial == 32'(m_partial),
        $sformatf("statistics %0d/%0d vs monitor %0d/%0d", stat_full, stat_partial, m_full, m_partial));
    chk(m_full > 0,         "mechanism never seen: full restoration");
    chk(m_partial > 0,      "mechanism never seen: partial restoration");
    chk(m_reset >= 3,       "mechanism never seen: periodic reset to F (>= 3)");
    chk(m_reduce_all > 0,   "mechanism never seen: reduce-all mode");
    chk(m_disabled > 0,     "mechanism never seen: disabled mode");
    chk(m_edge_skip > 0,    "mechanism never seen: victim outside bank skipped");
    chk(m_dem_blocked > 0,  "mechanism never seen: refresh before demand");
    chk(m_sweep_lookup > 0, "mechanism never seen: lookup during FR sweep");
    $display("cycles=%0d demand_acts=%0d full=%0d partial=%0d resets=%0d reduce_all=%0d disabled=%0d edge_skip=%0d dem_blocked=%0d sweep_lookup=%0d",
             cyc, m_dem, m_full, m_partial, m_reset, m_reduce_all, m_disabled, m_edge_skip, m_dem_blocked, m_sweep_lookup);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
