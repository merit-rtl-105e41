// tb_sram_bank: writes every row of a 256 x 16 b bank with random data, reads
// it back in random order and checks the one-cycle read latency and that a
// cycle without access keeps the read data.
module tb_sram_bank;
  logic clk = 0, en = 0, we = 0;
  logic [7:0] addr = 0;
  logic [15:0] wdata = 0, rdata;
  logic [15:0] ref_mem [256];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sram_bank #(.DEPTH(256), .W(16)) dut (.clk, .en, .we, .addr, .wdata, .rdata);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 8'(i); wdata = 16'($urandom); ref_mem[i] = wdata;
    end
    for (int t = 0; t < 500; t++) begin
      int a = $urandom_range(0, 255);
      @(negedge clk); en = 1; we = 0; addr = 8'(a);
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== ref_mem[a]) begin failures++; $display("row %0d got %h exp %h", a, rdata, ref_mem[a]); end
      @(negedge clk);
      checks++;
      if (rdata !== ref_mem[a]) begin failures++; $display("hold failed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
