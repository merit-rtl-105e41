// tb_collector: sends random DRAM lines with random (off, cnt, dst) and random
// bank-hash settings through the collector, applies random write-grant
// stalls, models the banks as a memory written from the collector's strobes,
// and after each line checks that every tile word sits in bank hash(addr),
// row addr>>5. No conflict may be reported (the butterfly only rotates); lines that straddle two rows must take two
// write cycles.
module tb_collector;
  import merit_pkg::*;
  localparam int CAP = 8192;
  logic clk = 0, rst_n = 0;
  logic line_valid = 0, line_ready, wr_gnt = 1, conflict;
  logic [N-1:0][DW-1:0] line, bank_wdata;
  logic [4:0] off, xmask;
  logic [5:0] cnt;
  logic [12:0] dst;
  logic [2:0] rot;
  logic [N-1:0] bank_we;
  logic [7:0] bank_row;
  int checks = 0, failures = 0, two_row_lines = 0, conflicts = 0;
  logic [15:0] mem [int];
  always #5 clk = ~clk;

  collector #(.CAP(CAP)) dut (.clk, .rst_n, .line_valid, .line_ready, .line, .off, .cnt, .dst,
    .xmask, .rot, .wr_gnt, .bank_we, .bank_row, .bank_wdata, .conflict);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int hb(int a, int x, int r);
    int h = 0;
    for (int i = 0; i < 5; i++) h |= ((((a >> i) & 1) ^ (((x >> i) & 1) & ((a >> (i + 1)) & 1))) << i);
    r = r % 5;
    return ((h << r) | (h >> (5 - r))) & 31;
  endfunction

  always @(posedge clk) for (int b = 0; b < N; b++)
    if (bank_we[b]) mem[b * 1024 + int'(bank_row)] = bank_wdata[b];

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("%s", m); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      automatic int cycles = 0;
      automatic bit saw_conflict = 0, straddle;
      @(negedge clk);
      for (int k = 0; k < N; k++) line[k] = DW'($urandom);
      off = 5'($urandom); cnt = 6'($urandom_range(1, 32 - int'(off)));
      dst = 13'($urandom);
      xmask = (t < 200) ? 5'd0 : 5'($urandom);
      rot = (t < 200) ? 3'd0 : 3'($urandom_range(0, 4));
      straddle = ((int'(dst) % 32) + int'(cnt)) > 32;
      line_valid = 1;
      forever begin
        automatic bit fin;
        wr_gnt = ($urandom_range(0, 3) != 0);
        #1;
        if (conflict) saw_conflict = 1;
        if (wr_gnt) cycles++;
        fin = line_ready;
        @(posedge clk);
        @(negedge clk);
        if (fin) break;
      end
      line_valid = 0;
      if (straddle) two_row_lines++;
      if (saw_conflict) conflicts++;
      chk(!saw_conflict, "conflict reported");
      chk(cycles == (straddle ? 2 : 1), $sformatf("passes %0d straddle %0d", cycles, straddle));
      if (!saw_conflict)
        for (int k = int'(off); k < int'(off) + int'(cnt); k++) begin
          automatic int a = (int'(dst) + k - int'(off)) % CAP;
          automatic int key = hb(a, int'(xmask), int'(rot)) * 1024 + (a >> 5);
          chk(mem.exists(key) && mem[key] == line[k], $sformatf("word %0d addr %0d misplaced", k, a));
        end
    end
    chk(two_row_lines > 50, "coverage: straddling lines");
    $display("two_row_lines=%0d conflicts=%0d", two_row_lines, conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
