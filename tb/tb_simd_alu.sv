// tb_simd_alu: random operands for every operation of the lane, compared
// with a model written with 32-bit integers (then wrapped to 16 b), plus
// directed cases: ReLU via max, the MAC shift, 1-norm of a negative
// difference, and lookup interpolation half-way between two entries.
module tb_simd_alu;
  import merit_pkg::*;
  op_e op;
  logic signed [15:0] a, b, c;
  logic [3:0] sh;
  logic [15:0] index, y;
  logic [NLUT-1:0][15:0] lut;
  int checks = 0, failures = 0;

  simd_alu dut (.op, .a, .b, .c, .sh, .index, .lut, .y);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [15:0] model();
    int ia = int'(a), ib = int'(b), ic = int'(c), r;
    int e = (int'(b) >> 12) & 15, f = int'(b) & 12'hfff;
    int l0 = int'($signed(lut[e])), l1 = int'($signed(lut[e + 1]));
    case (op)
      OP_ADD: r = ia + ((ib + ic) >>> sh);
      OP_SUB: r = ia + ((ib - ic) >>> sh);
      OP_ABS: r = ia + (((ib > ic) ? ib - ic : ic - ib) >>> sh);
      OP_MAC: r = ia + ((ib * ic) >>> sh);
      OP_MAX: r = (ia > ib) ? ia : ib;
      OP_MIN: r = (ia < ib) ? ia : ib;
      OP_SEL: r = (ia != 0) ? ib : ic;
      OP_AND: r = ia & ib;
      OP_OR:  r = ia | ib;
      OP_XOR: r = ia ^ ib;
      OP_IDX: r = int'(index);
      OP_LUT: r = l0 + (((l1 - l0) * f) >>> 12);
      default: r = ia;
    endcase
    return 16'(r);
  endfunction

  task automatic chk(bit cnd, string m);
    checks++; if (!cnd) begin failures++; $display("%s", m); end
  endtask

  initial begin
    for (int e = 0; e < NLUT; e++) lut[e] = 16'(e * e * 37 - 900);
    for (int t = 0; t < 5000; t++) begin
      op = op_e'($urandom_range(0, 12));
      a = 16'($urandom); b = 16'($urandom); c = 16'($urandom); sh = 4'($urandom);
      if (t % 2) begin a = 16'($urandom_range(0, 600)) - 16'd300; b = 16'($urandom_range(0, 200)) - 16'd100; c = 16'($urandom_range(0, 200)) - 16'd100; end
      index = 16'($urandom);
      #1;
      chk(y == model(), $sformatf("op %s a %0d b %0d c %0d sh %0d: y %0d exp %0d", op.name(), a, b, c, sh, $signed(y), $signed(model())));
    end
    op = OP_MAX; a = -16'sd5; b = 16'sd0; #1; chk(y == 16'd0, "relu of negative");
    op = OP_MAC; a = 16'sd10; b = 16'sd12; c = -16'sd3; sh = 4'd1; #1; chk($signed(y) == -16'sd8, "mac shift");
    op = OP_ABS; a = 16'sd1; b = -16'sd7; c = 16'sd2; sh = 4'd0; #1; chk($signed(y) == 16'sd10, "1-norm");
    op = OP_LUT; lut[2] = 16'd100; lut[3] = 16'd300; b = 16'h2800; #1; chk(y == 16'd200, "lookup midpoint");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
