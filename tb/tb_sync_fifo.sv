// tb_sync_fifo: the first-word-fall-through FIFO used for the TAU job queues.
// Random push/pop traffic against a queue model at DEPTH = 4: checks data
// order, that in_ready is low exactly when full, and out_valid when non-empty.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [31:0] din = '0, dout;
  int checks = 0, failures = 0, fulls = 0;
  logic [31:0] q[$];
  always #5 clk = ~clk;
  sync_fifo #(.W(32), .DEPTH(4)) dut (.clk, .rst_n, .in_valid, .in_ready, .din,
    .out_valid, .out_ready, .dout);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 20) $display("%s", m); end
  endtask
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 99) < (t < 2500 ? 70 : 30));
      out_ready = ($urandom_range(0, 99) < (t < 2500 ? 30 : 70));
      din = $urandom;
      #1;
      chk(in_ready == (q.size() < 4), "in_ready");
      chk(out_valid == (q.size() > 0), "out_valid");
      if (out_valid) chk(dout == q[0], "data order");
      if (!in_ready) fulls++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(din);
    end
    chk(fulls > 0, "never full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
