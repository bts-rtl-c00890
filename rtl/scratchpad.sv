// scratchpad: per-PE single-ported SRAM scratchpad, 128 bits per line.
// The paper builds 512 MB of scratchpad from single-ported 128-bit-wide
// SRAMs, 256 KB per PE for 2,048 PEs; it holds temporary data, prefetched
// evaluation keys and software-cached ciphertexts. Modelled here as a
// synthesizable array: one access per cycle, a read returns the line one
// cycle later, a write updates the 64-bit halves selected by wmask.
// LINES = 16384 gives 256 KB.
module scratchpad #(
  parameter int unsigned LINES = 16384,
  parameter int unsigned AW    = $clog2(LINES)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [1:0]    wmask,
  input  logic [AW-1:0] addr,
  input  logic [127:0]  wdata,
  output logic [127:0]  rdata
);
  logic [127:0] mem [LINES];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        if (wmask[0]) mem[addr][63:0]   <= wdata[63:0];
        if (wmask[1]) mem[addr][127:64] <= wdata[127:64];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
