// ebbi_sram: single-port SRAM with a per-bit write mask, one bank of one EBBI
// pair.
//
// The filter stores each EBBI pair in N_MEM such memories; with three pairs
// that makes the fifteen SRAM instances of the filter. Every word holds four
// neighbouring pixels of one image row, for both polarities: bits [3:0] the
// positive image, bits [7:4] the negative image, pixel x = 4*word + i in bit i.
//
// Interface and timing: one access per cycle when cs is high. A write (we=1)
// updates only the bits whose wmask bit is 1 and leaves rdata unchanged. A
// read (we=0) returns the word on rdata one clock after the address is
// sampled (synchronous read, as a compiled SRAM macro behaves).
// Contents are not reset; the stack controller clears the memory by writing
// zeros after reset.
//
// Follows the paper: single-port SRAMs, one per bank and pair. Own choice:
// the bit-write mask (so that setting a pixel needs no read-modify-write) and
// the word layout.
module ebbi_sram #(
  parameter int unsigned DEPTH = 4524,  // 52 rows x 87 words (346 x 260 sensor)
  parameter int unsigned DW    = 8,
  parameter int unsigned AW    = (DEPTH <= 2) ? 1 : $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          cs,
  input  logic          we,
  input  logic [DW-1:0] wmask,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (cs && we) begin
      mem[addr] <= (mem[addr] & ~wmask) | (wdata & wmask);
    end
    if (cs && !we) begin
      rdata <= mem[addr];
    end
  end

endmodule
