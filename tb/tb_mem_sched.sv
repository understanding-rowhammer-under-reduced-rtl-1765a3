// tb_mem_sched: checks the command sequences and timing of the scheduler.
// The testbench plays PaCRAM: it answers every preventive-refresh ACT one
// cycle later with a restoration time it picks (12 or 33 cycles).
// Checked: victims aggressor-2, -1, +1, +2 in that order, victims outside
// the bank skipped, ACT->PRE equal to the answered time, PRE->ACT = tRP,
// demand ACT->RD/WR = tRCD and ACT->PRE = tRAS, preventive refresh before
// demand for the same bank, one command per cycle, several banks in parallel.
module tb_mem_sched;
  import pacram_pkg::*;
  localparam int unsigned NB = 4, ROWS = 256, BW = 2, RW = 8;

  logic clk = 0, rst_n = 0;
  logic dem_valid = 0, dem_we = 0, dem_ready;
  logic [BW-1:0] dem_bank = 0;
  logic [RW-1:0] dem_row = 0;
  logic pr_valid = 0, pr_ready;
  logic [BW-1:0] pr_bank = 0;
  logic [RW-1:0] pr_row = 0;
  logic lat_valid = 0;
  logic [BW-1:0] lat_bank = 0;
  logic [TRAS_W-1:0] lat_tras = 0;
  logic cmd_valid, cmd_prev_ref;
  dram_cmd_e cmd;
  logic [BW-1:0] cmd_bank;
  logic [RW-1:0] cmd_row;
  logic [NB-1:0] bank_busy;
  int checks = 0, failures = 0;
  longint cyc = 0;

  mem_sched #(.NBANKS(NB), .ROWS(ROWS)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0d %s", cyc, msg); end
  endtask

  // ---------------- PaCRAM stand-in and command log ----------------
  typedef struct { longint t; dram_cmd_e c; int bank; int row; bit pr; int tras; } ev_t;
  ev_t log_q [$];
  int  pick = 0;
  int  tras_of [NB];

  always @(posedge clk) begin
    cyc++;
    lat_valid <= 1'b0;
    if (cmd_valid) begin
      ev_t e;
      e.t = cyc; e.c = cmd; e.bank = int'(cmd_bank); e.row = int'(cmd_row); e.pr = cmd_prev_ref;
      e.tras = 0;
      if (cmd == CMD_ACT && cmd_prev_ref) begin
        pick++;
        tras_of[cmd_bank] = (pick % 3 == 0) ? 33 : 12;
        e.tras = tras_of[cmd_bank];
        lat_valid <= 1'b1;
        lat_bank  <= cmd_bank;
        lat_tras  <= TRAS_W'(tras_of[cmd_bank]);
      end
      log_q.push_back(e);
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_pr(input int b, input int r);
    @(negedge clk);
    pr_valid = 1; pr_bank = BW'(b); pr_row = RW'(r);
    while (!pr_ready) @(negedge clk);
    @(negedge clk); pr_valid = 0;
  endtask

  task automatic send_dem(input int b, input int r, input bit w);
    @(negedge clk);
    dem_valid = 1; dem_bank = BW'(b); dem_row = RW'(r); dem_we = w;
    while (!dem_ready) @(negedge clk);
    @(negedge clk); dem_valid = 0;
  endtask

  task automatic drain();
    do @(negedge clk); while (|bank_busy);
    repeat (2) @(negedge clk);
  endtask

  // check the commands of one bank in the log
  task automatic check_pr(input int b, input int agg);
    int exp_rows [$];
    ev_t ev [$];
    for (int o = -2; o <= 2; o++)
      if (o != 0 && agg + o >= 0 && agg + o < ROWS) exp_rows.push_back(agg + o);
    foreach (log_q[i]) if (log_q[i].bank == b) ev.push_back(log_q[i]);
    chk(ev.size() == 2 * exp_rows.size(), $sformatf("bank %0d: %0d commands for %0d victims", b, ev.size(), exp_rows.size()));
    for (int v = 0; v < exp_rows.size() && 2 * v + 1 < ev.size(); v++) begin
      ev_t a, p;
      a = ev[2 * v]; p = ev[2 * v + 1];
      chk(a.c == CMD_ACT && a.pr && a.row == exp_rows[v], $sformatf("victim %0d: ACT row %0d expected %0d", v, a.row, exp_rows[v]));
      chk(p.c == CMD_PRE, "PRE expected");
      chk(p.t - a.t == a.tras, $sformatf("ACT->PRE %0d expected %0d", p.t - a.t, a.tras));
      if (v > 0) chk(a.t - ev[2 * v - 1].t == T_RP, $sformatf("PRE->ACT %0d expected tRP", a.t - ev[2 * v - 1].t));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // 1. preventive refresh in the middle of the bank
    log_q.delete(); send_pr(1, 100); drain(); check_pr(1, 100);
    // 2. at the bank edges: victims outside are skipped
    log_q.delete(); send_pr(2, 0); drain(); check_pr(2, 0);
    log_q.delete(); send_pr(3, ROWS - 2); drain(); check_pr(3, ROWS - 2);
    // 3. demand read and write: ACT, RD/WR after tRCD, PRE after tRAS
    for (int w = 0; w < 2; w++) begin
      ev_t e [$];
      log_q.delete(); send_dem(0, 42, w[0]); drain();
      e = log_q;
      chk(e.size() == 3, "demand: 3 commands");
      if (e.size() == 3) begin
        chk(e[0].c == CMD_ACT && !e[0].pr && e[0].row == 42, "demand ACT");
        chk(e[1].c == (w ? CMD_WR : CMD_RD) && e[1].t - e[0].t == T_RCD, "demand column command at tRCD");
        chk(e[2].c == CMD_PRE && e[2].t - e[0].t == T_RAS_NOM, "demand PRE at tRAS");
      end
    end
    // 4. preventive refresh wins over a demand request to the same bank
    log_q.delete();
    @(negedge clk);
    pr_valid = 1; pr_bank = 2; pr_row = 50;
    dem_valid = 1; dem_bank = 2; dem_row = 7;
    #1 chk(pr_ready && !dem_ready, "priority: demand must wait");
    @(negedge clk); pr_valid = 0;
    while (!dem_ready) @(negedge clk);
    @(negedge clk); dem_valid = 0;
    drain();
    chk(log_q[0].pr && log_q[$].c == CMD_PRE && !log_q[$].pr, "demand served after the refresh");
    // 5. all banks at once: one command per cycle, per-bank timing kept
    log_q.delete();
    @(negedge clk);
    for (int b = 0; b < NB; b++) begin
      pr_valid = 1; pr_bank = BW'(b); pr_row = RW'(20 + 10 * b);
      @(negedge clk);
    end
    pr_valid = 0;
    drain();
    for (int i = 1; i < log_q.size(); i++) chk(log_q[i].t != log_q[i-1].t, "two commands in one cycle");
    for (int b = 0; b < NB; b++) begin
      ev_t ev [$];
      ev.delete();
      foreach (log_q[i]) if (log_q[i].bank == b) ev.push_back(log_q[i]);
      chk(ev.size() == 8, $sformatf("bank %0d parallel: %0d commands", b, ev.size()));
      for (int v = 0; v + 1 < ev.size(); v += 2) begin
        chk(ev[v + 1].t - ev[v].t >= ev[v].tras, "ACT->PRE shorter than answered time");
        if (v > 0) chk(ev[v].t - ev[v - 1].t >= T_RP, "PRE->ACT shorter than tRP");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
