// sram_bank: one single-port synchronous SRAM bank (one read or one write per
// cycle, read data valid the cycle after the read).
//
// Used for the N banks of each Read Pipeline (256 x 16 b for the 16 KB RP,
// 128 x 16 b for the 8 KB RP) and, DEPTH x (N*16) wide, for the Compute
// Pipeline's 5 KB partial-sum SRAM. The paper's chip uses single-port
// memory-compiler macros; here it is an array that maps to a memory cell.
// Read data hold their value until the next read.
module sram_bank #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = 16
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
