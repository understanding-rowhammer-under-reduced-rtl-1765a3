// tb_fr_array: self-checking test of the FR bit-vector SRAM.
// Writes random words under random bit masks, keeps a shadow copy, and reads
// every word back, checking the value and the one-cycle read latency.
module tb_fr_array;
  localparam int unsigned ROWS = 1024, WORD_W = 32, DEPTH = ROWS / WORD_W;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 0, en = 0, we = 0;
  logic [AW-1:0] addr = '0;
  logic [WORD_W-1:0] wdata = '0, wmask = '0, rdata;
  int checks = 0, failures = 0;
  logic [WORD_W-1:0] shadow [DEPTH];

  fr_array #(.ROWS(ROWS), .WORD_W(WORD_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input logic [WORD_W-1:0] d, input logic [WORD_W-1:0] m);
    @(negedge clk); en = 1; we = 1; addr = AW'(a); wdata = d; wmask = m;
    @(negedge clk); en = 0; we = 0;
  endtask

  task automatic rd_check(input int a);
    @(negedge clk); en = 1; we = 0; addr = AW'(a);
    @(negedge clk); en = 0;
    checks++;
    if (rdata !== shadow[a]) begin
      failures++;
      $display("FAIL word %0d: got %h expected %h", a, rdata, shadow[a]);
    end
    // rdata must hold while the port is idle
    @(negedge clk);
    checks++;
    if (rdata !== shadow[a]) begin failures++; $display("FAIL hold word %0d", a); end
  endtask

  initial begin
    // full writes give a known start
    for (int a = 0; a < DEPTH; a++) begin
      logic [WORD_W-1:0] d;
      d = $urandom;
      wr(a, d, '1);
      shadow[a] = d;
    end
    // masked writes (single-bit masks as PaCRAM uses, and random masks)
    for (int k = 0; k < 400; k++) begin
      int a;
      logic [WORD_W-1:0] d, m;
      a = $urandom_range(DEPTH - 1);
      d = $urandom;
      m = (k % 2 == 0) ? (WORD_W'(1) << $urandom_range(WORD_W - 1)) : WORD_W'($urandom);
      wr(a, d, m);
      shadow[a] = (shadow[a] & ~m) | (d & m);
    end
    for (int a = 0; a < DEPTH; a++) rd_check(a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
