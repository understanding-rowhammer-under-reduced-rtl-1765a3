// tb_pacram_bank: checks the F/P row-state rules of one PaCRAM bank.
//  - after reset the sweep clears the FR vector in exactly DEPTH cycles;
//  - the first preventive refresh of a row is full, later ones partial;
//  - a clear pulls every row back to F; lookups of not-yet-cleared words
//    during the sweep are answered with nominal latency;
//  - reduce_all answers partial, enable = 0 answers full;
//  - the answer comes exactly one cycle after the lookup.
// A reference model of the row states is kept in the testbench.
module tb_pacram_bank;
  localparam int unsigned ROWS = 256, WORD_W = 16, DEPTH = ROWS / WORD_W;
  localparam int unsigned RW = $clog2(ROWS);

  logic clk = 0, rst_n = 0, enable = 1, reduce_all = 0;
  logic act_valid = 0, clear_start = 0;
  logic [RW-1:0] act_row = '0;
  logic rsp_valid, rsp_partial, clearing;
  int checks = 0, failures = 0;
  bit state_p [ROWS];   // reference: 1 = state P
  int n_full = 0, n_partial = 0, n_sweep_nominal = 0;

  pacram_bank #(.ROWS(ROWS), .WORD_W(WORD_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // one lookup; returns the answer; checks the one-cycle latency
  task automatic lookup(input int row, output bit partial);
    @(negedge clk); act_valid = 1; act_row = RW'(row);
    @(negedge clk); act_valid = 0;
    chk(rsp_valid, $sformatf("no response for row %0d", row));
    partial = rsp_partial;
    @(negedge clk);
    chk(!rsp_valid, "response longer than one cycle");
  endtask

  task automatic lookup_model(input int row);
    bit p;
    lookup(row, p);
    chk(p == state_p[row], $sformatf("row %0d: partial=%0b expected %0b", row, p, state_p[row]));
    if (p) n_partial++; else n_full++;
    state_p[row] = 1'b1;
  endtask

  initial begin
    int cyc;
    bit p;
    // reset: sweep length
    @(negedge clk); rst_n = 1;
    cyc = 0;
    while (clearing) begin @(negedge clk); cyc++; end
    chk(cyc == DEPTH, $sformatf("reset sweep took %0d cycles, expected %0d", cyc, DEPTH));
    foreach (state_p[r]) state_p[r] = 1'b0;

    // random refresh traffic against the model
    for (int k = 0; k < 600; k++) lookup_model($urandom_range(ROWS - 1));
    // same row twice in a row: full then partial
    lookup_model(17); lookup_model(17);
    // neighbouring rows in one word are independent
    lookup_model(32); lookup_model(33);

    // clear: every row back to F
    @(negedge clk); clear_start = 1; @(negedge clk); clear_start = 0;
    chk(clearing, "clear did not start a sweep");
    // during the sweep, a row in a word not yet cleared gets nominal latency
    lookup(ROWS - 1, p);
    chk(!p, "row pending clear answered partial");
    if (!p) n_sweep_nominal++;
    while (clearing) @(negedge clk);
    foreach (state_p[r]) state_p[r] = 1'b0;
    for (int k = 0; k < 300; k++) lookup_model($urandom_range(ROWS - 1));

    // reduce_all: all partial, state untouched
    reduce_all = 1;
    for (int k = 0; k < 20; k++) begin
      lookup($urandom_range(ROWS - 1), p);
      chk(p, "reduce_all must answer partial");
    end
    reduce_all = 0;
    // enable = 0: all full, state untouched
    enable = 0;
    for (int k = 0; k < 20; k++) begin
      lookup($urandom_range(ROWS - 1), p);
      chk(!p, "disabled must answer full");
    end
    enable = 1;
    for (int k = 0; k < 200; k++) lookup_model($urandom_range(ROWS - 1));

    chk(n_full > 0 && n_partial > 0 && n_sweep_nominal > 0, "a mechanism never happened");
    $display("full=%0d partial=%0d sweep_nominal=%0d", n_full, n_partial, n_sweep_nominal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
