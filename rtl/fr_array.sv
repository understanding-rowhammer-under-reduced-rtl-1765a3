// fr_array: storage for the Fully Restored (FR) bit vector of one DRAM bank.
//
// PaCRAM keeps one bit per DRAM row. Bit = 0 means the row is in state F
// (its next preventive refresh must restore the charge fully, with nominal
// tRAS); bit = 1 means state P (it was fully restored in the current
// full-restoration interval and may be refreshed partially). The paper only
// says the vector lives in an SRAM in the memory controller, one bit per row
// (8 KB per 64K-row bank); the word organisation, the single port and the
// bit write mask are choices of this design.
//
// Interface: single-port synchronous SRAM of ROWS/WORD_W words.
//   en & !we : read, rdata valid on the next clock edge (1-cycle latency)
//   en &  we : write wdata into the bits selected by wmask
// The array is not reset; the owner clears it after reset (see pacram_bank).
module fr_array #(
  parameter int unsigned ROWS   = 65536,
  parameter int unsigned WORD_W = 64,
  localparam int unsigned DEPTH  = ROWS / WORD_W,
  localparam int unsigned ADDR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [WORD_W-1:0] wdata,
  input  logic [WORD_W-1:0] wmask,
  output logic [WORD_W-1:0] rdata
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < WORD_W; b++)
          if (wmask[b]) mem[addr][b] <= wdata[b];
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
