// tb_pacram_config: checks reset values, register writes, the tFCRI formula
// N_PCR*(N_RH*tRC + tRAS(Red) + tRP) against the published intervals, the
// tFCRI > tREFW case, the 'not applicable' case and the update timing.
module tb_pacram_config;
  import pacram_pkg::*;

  logic clk = 0, rst_n = 0, cfg_we = 0;
  cfg_addr_e cfg_addr = CFG_ENABLE;
  logic [31:0] cfg_wdata = 0;
  logic active, reduce_all, cfg_update;
  logic [NRH_W-1:0] nrh;
  logic [NPCR_W-1:0] npcr;
  logic [TRAS_W-1:0] tras_red;
  logic [TIME_W-1:0] tfcri;
  int checks = 0, failures = 0;

  pacram_config dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
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

  // program a module, then check tFCRI (ns = cycles) within 1 % of the table
  task automatic module_case(input string name, input int nrh_v, input int npcr_v,
                             input int tras_v, input real table_ns, input bit exp_all);
    longint expv;
    wr(CFG_NRH, nrh_v); wr(CFG_NPCR, npcr_v); wr(CFG_TRAS_RED, tras_v);
    repeat (3) @(negedge clk);
    expv = longint'(npcr_v) * (longint'(nrh_v) * 48 + tras_v + 15);
    chk(tfcri == TIME_W'(expv), $sformatf("%s tFCRI %0d expected %0d", name, tfcri, expv));
    chk((real'(tfcri) > 0.99 * table_ns) && (real'(tfcri) < 1.01 * table_ns),
        $sformatf("%s tFCRI %0d ns not within 1%% of %0f ns", name, tfcri, table_ns));
    chk(reduce_all == exp_all, $sformatf("%s reduce_all %0b", name, reduce_all));
    chk(active, $sformatf("%s active", name));
  endtask

  initial begin
    int upd_at, wr_at, cyc;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (4) @(negedge clk);
    // reset values: module H5 at 0.36 tRAS
    chk(nrh == 10200 && npcr == 15000 && tras_red == 12, "reset values");
    chk(active, "active after reset");
    // H5 @0.36: 7.3 s > 64 ms
    chk(tfcri == 48'(64'd15000 * (64'd10200 * 48 + 27)), "reset tFCRI");
    chk(reduce_all, "reset reduce_all");
    // published intervals
    module_case("S6@0.36", 3900, 2000, 12, 374.0e6, 1'b1);
    module_case("H5@0.27", 9400, 300, 9, 135.0e6, 1'b1);
    module_case("S0@0.27", 6200, 1, 9, 300.0e3, 1'b0);
    module_case("S13@0.27", 3900, 5, 9, 937.0e3, 1'b0);
    module_case("H2@0.18", 37900, 1, 6, 1.82e6, 1'b0);
    // boundary: tFCRI just above/below tREFW
    wr(CFG_NRH, 1000); wr(CFG_TRAS_RED, 12);
    wr(CFG_NPCR, 1332); repeat (3) @(negedge clk);   // 1332*48027 = 63.97 ms
    chk(!reduce_all, "63.97 ms must not reduce all");
    wr(CFG_NPCR, 1333); repeat (3) @(negedge clk);   // 64.02 ms
    chk(reduce_all, "64.02 ms must reduce all");
    // update pulse: two cycles after the write
    @(negedge clk); cfg_we = 1; cfg_addr = CFG_NPCR; cfg_wdata = 7;
    @(negedge clk); cfg_we = 0;
    chk(!cfg_update, "update too early (1)");
    @(negedge clk);
    chk(cfg_update, "update not 2 cycles after write");
    chk(tfcri == 48'(7 * (1000 * 48 + 27)), "tFCRI valid with update");
    @(negedge clk);
    chk(!cfg_update, "update longer than one cycle");
    // not applicable / disabled
    wr(CFG_NPCR, 0); @(negedge clk);
    chk(!active, "N_PCR = 0 must deactivate");
    wr(CFG_NPCR, 5); wr(CFG_NRH, 0); @(negedge clk);
    chk(!active, "N_RH = 0 must deactivate");
    wr(CFG_NRH, 100); @(negedge clk);
    chk(active, "reactivate");
    wr(CFG_ENABLE, 0); @(negedge clk);
    chk(!active, "enable = 0");
    wr(CFG_ENABLE, 1); @(negedge clk);
    chk(active && nrh == 100, "enable = 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
