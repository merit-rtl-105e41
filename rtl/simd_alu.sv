// simd_alu: one 16-bit fixed-point lane of the SIMD array.
//
// It executes the seven kinds of operation of the MERIT-z ISA:
//   add   a + ((b + c) >>> s)        sub  a + ((b - c) >>> s)
//   1-norm a + (|b - c| >>> s)       MAC  a + ((b * c) >>> s)
//   logical max(a,b), min(a,b), a ? b : c, and/or/xor
//   index  the tensor index given on `index`
//   lookup table lookup of b with linear interpolation: entry b[15:12] and
//          the next, weighted by the fraction b[11:0].
// Intermediate values are kept wide (sum 17 b, product 32 b) and the final
// result wraps to 16 b; shifts are arithmetic.
//
// The operation list is the paper's; the wrap-around, the lookup table of 17
// entries and its index/fraction split are this design's choices.
// Combinational.
module simd_alu
  import merit_pkg::*;
(
  input  op_e                   op,
  input  logic signed [DW-1:0]  a,
  input  logic signed [DW-1:0]  b,
  input  logic signed [DW-1:0]  c,
  input  logic [3:0]            sh,
  input  logic [DW-1:0]         index,
  input  logic [NLUT-1:0][DW-1:0] lut,
  output logic [DW-1:0]         y
);
  logic signed [DW:0]     sum, dif, adif;
  logic signed [2*DW-1:0] prod, lerp;
  logic [3:0]             e;
  logic signed [DW:0]     step;
  logic signed [DW-1:0]   l0, l1;

  always_comb begin
    sum  = DW'(0) + {b[DW-1], b} + {c[DW-1], c};
    dif  = {b[DW-1], b} - {c[DW-1], c};
    adif = dif[DW] ? -dif : dif;
    prod = b * c;
    e    = b[15:12];
    l0   = lut[e];
    l1   = lut[32'(e) + 1];
    step = {l1[DW-1], l1} - {l0[DW-1], l0};
    lerp = (2*DW)'(step) * $signed({1'b0, b[11:0]});
    unique case (op)
      OP_ADD:  y = a + DW'(sum  >>> sh);
      OP_SUB:  y = a + DW'(dif  >>> sh);
      OP_ABS:  y = a + DW'(adif >>> sh);
      OP_MAC:  y = a + DW'(prod >>> sh);
      OP_MAX:  y = (a > b) ? a : b;
      OP_MIN:  y = (a < b) ? a : b;
      OP_SEL:  y = (a != 0) ? b : c;
      OP_AND:  y = a & b;
      OP_OR:   y = a | b;
      OP_XOR:  y = a ^ b;
      OP_IDX:  y = index;
      OP_LUT:  y = l0 + DW'(lerp >>> 12);
      default: y = a;
    endcase
  end
endmodule
