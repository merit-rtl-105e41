// tb_bank_hash: checks the (X, R) bank mapping against its definition written
// independently (bit list, XOR with the next higher bit, rotate) and that for
// every row and every setting the 32 addresses of the row land in 32
// different banks.
module tb_bank_hash;
  localparam int LB = 5, AW = 13;
  logic [AW-1:0] addr;
  logic [LB-1:0] xmask, bank;
  logic [2:0] rot;
  logic [AW-LB-1:0] row;
  int checks = 0, failures = 0;

  bank_hash #(.LB(LB), .AW(AW)) dut (.addr, .xmask, .rot, .bank, .row);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int model(int a, int x, int r);
    int h = 0, out = 0;
    for (int i = 0; i < LB; i++) h |= ((((a >> i) & 1) ^ (((x >> i) & 1) & ((a >> (i + 1)) & 1))) << i);
    r = r % LB;
    out = ((h << r) | (h >> (LB - r))) & ((1 << LB) - 1);
    return out;
  endfunction

  initial begin
    for (int t = 0; t < 64; t++) begin
      bit [31:0] seen;
      xmask = LB'($urandom); rot = 3'($urandom);
      if (t == 0) begin xmask = 0; rot = 0; end
      addr = AW'($urandom) & ~AW'(31);
      seen = 0;
      for (int k = 0; k < 32; k++) begin
        addr[4:0] = 5'(k);
        #1;
        checks++;
        if (int'(bank) != model(int'(addr), int'(xmask), int'(rot)) || row != addr[AW-1:LB]) begin
          failures++; $display("addr %0d x %b r %0d: bank %0d exp %0d", addr, xmask, rot, bank,
                               model(int'(addr), int'(xmask), int'(rot)));
        end
        seen[bank] = 1'b1;
      end
      checks++;
      if (seen != '1) begin failures++; $display("not a bijection x=%b r=%0d", xmask, rot); end
    end
    // the paper's XOR-hash example: x_(LB-1)=1 swaps bank halves on odd rows
    xmask = 5'b10000; rot = 0; addr = 13'd32 + 13'd3; #1;
    checks++; if (bank != 5'd19) begin failures++; $display("odd-row swizzle bank %0d", bank); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
