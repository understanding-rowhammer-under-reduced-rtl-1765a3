// tb_fcri_timer: checks the period of the reset-to-F pulse (tFCRI minus the
// clear margin), that run = 0 stops it, and that restart pulses at once.
module tb_fcri_timer;
  import pacram_pkg::*;
  localparam int unsigned MARGIN = 10;

  logic clk = 0, rst_n = 0, run = 0, restart = 0, clear;
  logic [TIME_W-1:0] tfcri = 100;
  int checks = 0, failures = 0;
  longint cyc = 0, last = -1;
  int pulses = 0;
  longint gaps [$];

  fcri_timer #(.CLEAR_MARGIN(MARGIN)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (clear) begin
      pulses++;
      if (last >= 0) gaps.push_back(cyc - last);
      last = cyc;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // not running: no pulses
    repeat (300) @(negedge clk);
    chk(pulses == 0, "pulse while run=0");
    // running with tFCRI = 100: period 90
    run = 1;
    repeat (1000) @(negedge clk);
    chk(gaps.size() >= 9, "too few pulses");
    foreach (gaps[i]) chk(gaps[i] == 90, $sformatf("gap %0d = %0d, expected 90", i, gaps[i]));
    // restart: pulse in the next cycle, then a full period again
    gaps.delete(); last = -1; pulses = 0;
    @(negedge clk); restart = 1; @(negedge clk); restart = 0;
    chk(clear == 1'b1, "no pulse right after restart");
    repeat (200) @(negedge clk);
    foreach (gaps[i]) chk(gaps[i] == 90, $sformatf("gap after restart %0d", gaps[i]));
    chk(gaps.size() == 2, $sformatf("pulses after restart: %0d gaps", gaps.size()));
    // tFCRI smaller than the margin: pulse every cycle
    tfcri = 5; gaps.delete(); last = -1;
    repeat (20) @(negedge clk);
    chk(gaps.size() >= 15, "tiny tFCRI must pulse continuously");
    foreach (gaps[i]) chk(gaps[i] == 1, "tiny tFCRI gap");
    run = 0; repeat (3) @(negedge clk); pulses = 0;
    repeat (200) @(negedge clk);
    chk(pulses == 0, "pulse after run dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
