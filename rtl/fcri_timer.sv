// fcri_timer: periodic "pull every row back to F" pulse of PaCRAM.
//
// PaCRAM must fully restore a row at least once in every window in which
// the row could otherwise collect N_PCR consecutive partial restorations;
// that window is tFCRI (see pacram_config). This timer counts clock cycles
// and raises clear for one cycle every period, where
//   period = tFCRI - CLEAR_MARGIN   (at least 1 cycle).
// The margin is this design's addition: the FR vectors are cleared by a
// sweep that takes about one SRAM word per cycle, so the pulse is moved
// ahead by the worst-case sweep length so that the last row is back in F
// within tFCRI of the previous pulse.
//
// run = 0 (PaCRAM inactive, or reduce_all) holds the counter at zero.
// restart (configuration change) zeroes the counter and raises clear too.
module fcri_timer
  import pacram_pkg::*;
#(
  parameter int unsigned CLEAR_MARGIN = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  logic              restart,
  input  logic [TIME_W-1:0] tfcri,
  output logic              clear
);

  logic [TIME_W-1:0] count;
  logic [TIME_W-1:0] period;

  assign period = (tfcri > TIME_W'(CLEAR_MARGIN) + TIME_W'(1))
                ? tfcri - TIME_W'(CLEAR_MARGIN) : TIME_W'(1);

  logic expire;
  assign expire = run && (count >= period - TIME_W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      clear <= 1'b0;
    end else begin
      clear <= restart || expire;
      if (restart || !run || expire) count <= '0;
      else                           count <= count + TIME_W'(1);
    end
  end

endmodule
