// tb_pacram: the PaCRAM unit with 4 banks. Programs a short full-restoration
// interval, drives preventive-refresh activations to random banks and rows,
// and checks every answer (latency value and timing) against a reference
// model of the per-row F/P states, including the periodic reset every
// tFCRI - margin cycles, the N_RH handed to the mitigation mechanism, and
// that demand activations are not looked up.
module tb_pacram;
  import pacram_pkg::*;
  localparam int unsigned NB = 4, ROWS = 256, WORD_W = 16;
  localparam int unsigned BW = 2, RW = 8;
  localparam int unsigned MARGIN = 2 * ROWS / WORD_W;

  logic clk = 0, rst_n = 0, cfg_we = 0;
  cfg_addr_e cfg_addr = CFG_ENABLE;
  logic [31:0] cfg_wdata = 0;
  logic act_valid = 0, act_prev_ref = 0;
  logic [BW-1:0] act_bank = 0;
  logic [RW-1:0] act_row = 0;
  logic lat_valid, lat_partial, active, reduce_all, clear_pulse, clearing_any;
  logic [BW-1:0] lat_bank;
  logic [TRAS_W-1:0] lat_tras;
  logic [NRH_W-1:0] nrh_mitigation;
  logic [TIME_W-1:0] tfcri;
  int checks = 0, failures = 0;
  bit st [NB][ROWS];
  int n_full = 0, n_partial = 0, n_clear = 0;
  longint cyc = 0, last_clear = -1, last_cfg = -100;

  pacram #(.NBANKS(NB), .ROWS(ROWS), .WORD_W(WORD_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (cfg_we) last_cfg = cyc;
    if (clear_pulse) begin
      n_clear++;
      if (last_clear >= 0 && last_clear > last_cfg + 4) begin
        checks++;
        if (cyc - last_clear != longint'(tfcri) - MARGIN) begin
          failures++;
          $display("FAIL clear period %0d expected %0d", cyc - last_clear, longint'(tfcri) - MARGIN);
        end
      end
      last_clear = cyc;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(input cfg_addr_e a, input int d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic wait_clean();
    do @(negedge clk); while (clearing_any);
    foreach (st[b, r]) st[b][r] = 1'b0;
  endtask

  // preventive-refresh ACT; model answer; a clear may land mid-way
  task automatic pref(input int b, input int r);
    bit exp_p;
    @(negedge clk);
    if (clearing_any || clear_pulse) begin
      wait_clean();
      @(negedge clk);
    end
    act_valid = 1; act_prev_ref = 1; act_bank = BW'(b); act_row = RW'(r);
    exp_p = st[b][r];
    @(negedge clk); act_valid = 0; act_prev_ref = 0;
    chk(lat_valid && lat_bank == BW'(b), "missing/misrouted answer");
    if (clear_pulse) begin
      // the reset hit during the lookup; any answer is safe, state is F
      wait_clean();
      return;
    end
    chk(lat_partial == exp_p, $sformatf("bank %0d row %0d partial=%0b expected %0b", b, r, lat_partial, exp_p));
    chk(lat_tras == (exp_p ? 8'd12 : 8'd33), $sformatf("lat_tras %0d", lat_tras));
    if (lat_partial) n_partial++; else n_full++;
    st[b][r] = 1'b1;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // reset configuration: H5 at 0.36 tRAS -> tFCRI > tREFW, all partial
    repeat (4) @(negedge clk);
    chk(nrh_mitigation == 10200, "N_RH for mitigation at reset");
    chk(reduce_all && active, "reset config must reduce all");
    wait_clean();
    for (int k = 0; k < 10; k++) begin
      @(negedge clk); act_valid = 1; act_prev_ref = 1; act_bank = BW'(k % NB); act_row = RW'(k);
      @(negedge clk); act_valid = 0; act_prev_ref = 0;
      chk(lat_valid && lat_partial && lat_tras == 12, "reduce_all answer");
    end
    // demand activations are not looked up
    @(negedge clk); act_valid = 1; act_prev_ref = 0; act_bank = 1; act_row = 5;
    @(negedge clk); act_valid = 0;
    chk(!lat_valid, "demand ACT answered");

    // short interval: N_RH = 40, N_PCR = 2 -> tFCRI = 2*(40*48+27) = 3894
    wr(CFG_NRH, 40); wr(CFG_NPCR, 2);
    repeat (3) @(negedge clk);
    chk(tfcri == 3894 && !reduce_all, "short tFCRI");
    chk(nrh_mitigation == 40, "N_RH for mitigation");
    wait_clean();
    for (int k = 0; k < 3000; k++) begin
      pref($urandom_range(NB - 1), $urandom_range(15));   // few rows: many repeats
      repeat ($urandom_range(3)) @(negedge clk);
    end
    chk(n_clear >= 3, $sformatf("only %0d clears", n_clear));
    // disabled: nominal always
    wr(CFG_ENABLE, 0);
    repeat (3) @(negedge clk);
    for (int k = 0; k < 10; k++) begin
      @(negedge clk); act_valid = 1; act_prev_ref = 1; act_bank = BW'(k % NB); act_row = 3;
      @(negedge clk); act_valid = 0; act_prev_ref = 0;
      chk(lat_valid && !lat_partial && lat_tras == 33, "disabled answer");
    end
    chk(n_full > 0 && n_partial > 0, "full/partial never happened");
    $display("full=%0d partial=%0d clears=%0d", n_full, n_partial, n_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
