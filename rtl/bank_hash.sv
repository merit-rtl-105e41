// bank_hash: maps an SRAM word address to (bank, row) for a Read Pipeline.
//
// The bank index is the low LB address bits put through the two binary
// matrices of the paper's bank-conflict analysis: first the XOR hash X, whose
// row i has at most one off-diagonal term (bank bit i = a_i XOR (x_i AND
// a_(i+1)); x_(LB-1) reaches a_LB, the lowest row bit, which gives the
// "every other row" swizzle), then the bit rotation R applied `rot` times
// (rotate left by rot, modulo LB). The row is addr >> LB. For any fixed row
// the map is a bijection on the banks, so a row of N words always fills N
// different banks.
//
// The paper places (X, R) in a 3-stage omega network after the collector's
// butterfly; this module implements that stage's function on the address bits.
// Combinational.
module bank_hash #(
  parameter int unsigned LB = 5,
  parameter int unsigned AW = 13
) (
  input  logic [AW-1:0]    addr,
  input  logic [LB-1:0]    xmask,
  input  logic [2:0]       rot,
  output logic [LB-1:0]    bank,
  output logic [AW-LB-1:0] row
);
  logic [LB-1:0] h;
  always_comb begin
    int unsigned r;
    for (int i = 0; i < int'(LB); i++) h[i] = addr[i] ^ (xmask[i] & addr[i+1]);
    r = int'(rot) % LB;
    for (int i = 0; i < int'(LB); i++) bank[(i + int'(r)) % LB] = h[i];
  end
  assign row = addr[AW-1:LB];
endmodule
