// tb_tile_dma: runs the tile DMA on random tile shapes and pitches and
// compares every step with a word-by-word walk of the footprint: each step
// must cover the next words of the current row, inside one aligned 32-word
// line, with consecutive buffer addresses; `done` must come with the last
// step. Random step_ready stalls are applied.
module tb_tile_dma;
  import merit_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, step_valid, step_ready = 0, done;
  addr_t base, line_addr;
  logic [12:0] sram_base, dst;
  rp_cfg_t cfg;
  logic [4:0] off;
  logic [5:0] cnt;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tile_dma #(.CAP(8192)) dut (.clk, .rst_n, .start, .base, .sram_base, .cfg, .busy,
    .step_valid, .step_ready, .line_addr, .off, .cnt, .dst, .done);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("%s", m); end
  endtask

  initial begin
    cfg = '0; base = '0; sram_base = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      automatic int words[$];
      automatic int k = 0, sp;
      cfg.row_len = 16'($urandom_range(1, 70));
      cfg.rows = 16'($urandom_range(1, 5));
      cfg.planes = 16'($urandom_range(1, 3));
      cfg.row_pitch = addr_t'($urandom_range(70, 100));
      cfg.plane_pitch = addr_t'($urandom_range(600, 700));
      base = addr_t'($urandom_range(0, 5000));
      sram_base = 13'($urandom);
      for (int p = 0; p < cfg.planes; p++)
        for (int r = 0; r < cfg.rows; r++)
          for (int c = 0; c < cfg.row_len; c++)
            words.push_back(int'(base) + p * int'(cfg.plane_pitch) + r * int'(cfg.row_pitch) + c);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      sp = int'(sram_base);
      while (k < words.size()) begin
        step_ready = ($urandom_range(0, 3) != 0);
        #1;
        chk(step_valid, "step_valid low while words remain");
        if (step_valid && step_ready) begin
          chk(int'(line_addr) % 32 == 0, "line not aligned");
          chk(int'(line_addr) + int'(off) == words[k], $sformatf("start word %0d exp %0d", int'(line_addr) + int'(off), words[k]));
          chk(int'(off) + int'(cnt) <= 32 && cnt > 0, "count out of line");
          chk(int'(dst) == sp % 8192, "dst");
          for (int i = 1; i < int'(cnt); i++) chk(words[k + i] == words[k] + i, "words not contiguous");
          k += int'(cnt); sp += int'(cnt);
          if (k < words.size()) chk(words[k] != words[k - 1] + 1 || (words[k] % 32) == 0, "step split a contiguous line");
          chk(done == (k == words.size()), "done");
        end
        @(negedge clk);
      end
      step_ready = 0; #1;
      chk(!busy, "busy after last step");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
