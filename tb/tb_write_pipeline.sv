// tb_write_pipeline: the Write Pipeline with random output vectors, random
// memory back-pressure and random job sizes and output pitches. Checks that
// output line i of a job goes to base + i * out_pitch with its data in order,
// that base_ready pulses exactly with job_done, and that the offset restarts
// for the next job's base.
module tb_write_pipeline;
  import merit_pkg::*;
  logic clk = 0, rst_n = 0;
  addr_t out_pitch, base;
  logic base_valid = 0, base_ready, job_done = 0;
  logic in_valid = 0, in_ready, wr_valid, wr_ready = 0;
  logic [N-1:0][DW-1:0] in_data, wr_data;
  addr_t wr_addr;
  int checks = 0, failures = 0, stalls = 0;
  addr_t exp_a[$];
  logic [N-1:0][DW-1:0] exp_d[$];
  always #5 clk = ~clk;

  write_pipeline dut (.clk, .rst_n, .out_pitch, .base_valid, .base_ready, .base, .job_done,
    .in_valid, .in_ready, .in_data, .wr_valid, .wr_ready, .wr_addr, .wr_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 20) $display("%s", m); end
  endtask

  always @(negedge clk) wr_ready = ($urandom_range(0, 99) < 60);
  always @(posedge clk) if (rst_n) begin
    chk(base_ready == job_done, "base_ready");
    if (wr_valid && !wr_ready) stalls++;
    if (wr_valid && wr_ready) begin
      automatic addr_t a = exp_a.pop_front();
      automatic logic [N-1:0][DW-1:0] d = exp_d.pop_front();
      chk(wr_addr == a && wr_data == d, $sformatf("write %h exp %h", wr_addr, a));
    end
  end

  initial begin
    out_pitch = '0; base = '0; in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int j = 0; j < 200; j++) begin
      int m = $urandom_range(0, 12);
      @(negedge clk);
      base = addr_t'($urandom); base_valid = 1;
      out_pitch = addr_t'($urandom_range(0, 3) == 0 ? N : $urandom_range(0, 4000));
      for (int i = 0; i < m; i++) begin
        @(negedge clk);
        while ($urandom_range(0, 2) == 0) @(negedge clk);
        in_valid = 1;
        for (int n = 0; n < N; n++) in_data[n] = 16'($urandom);
        exp_a.push_back(base + addr_t'(i) * out_pitch); exp_d.push_back(in_data);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk); in_valid = 0;
      end
      job_done = 1;
      @(negedge clk); job_done = 0;
      if ($urandom_range(0, 1)) base_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    chk(exp_a.size() == 0 && stalls > 0, "writes missing or no stall");
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
