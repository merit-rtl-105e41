// tb_tile_fifo: drives random allocate/commit/free traffic on a 256-word,
// 4-descriptor circular tile buffer and compares with a queue model: grants
// (space and descriptor checks, including the buffer-full stall), tile base
// addresses with wrap-around, head readiness and used words.
module tb_tile_fifo;
  localparam int CAP = 256, NT = 4;
  logic clk = 0, rst_n = 0;
  logic alloc_req = 0, commit = 0, free = 0;
  logic [8:0] alloc_size = 0;
  logic alloc_gnt, head_valid, head_ready;
  logic [7:0] alloc_base, head_base;
  logic [8:0] used_words;
  logic [2:0] ntiles;
  int checks = 0, failures = 0, stalls = 0, wraps = 0;
  always #5 clk = ~clk;

  tile_fifo #(.CAP(CAP), .NT(NT)) dut (.clk, .rst_n, .alloc_req, .alloc_size, .alloc_gnt,
    .alloc_base, .commit, .free, .head_valid, .head_ready, .head_base, .used_words, .ntiles);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int q_base[$], q_size[$], q_rdy[$];
  int tail = 0, used = 0, ncommitted = 0;

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("%s", m); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      alloc_req = ($urandom_range(0, 2) != 0);
      alloc_size = 9'($urandom_range(1, 120));
      commit = (ncommitted < q_base.size()) && ($urandom_range(0, 3) == 0);
      free = (q_base.size() > 0) && q_rdy[0] && ($urandom_range(0, 3) == 0);
      #1;
      // model of the grant
      begin
        automatic bit exp_gnt = alloc_req && (q_base.size() < NT) && (int'(alloc_size) <= CAP - used);
        chk(alloc_gnt == exp_gnt, $sformatf("gnt %0d exp %0d used %0d", alloc_gnt, exp_gnt, used));
        if (alloc_req && !exp_gnt) stalls++;
        chk(head_valid == (q_base.size() > 0), "head_valid");
        if (q_base.size() > 0) begin
          chk(int'(head_base) == q_base[0], $sformatf("head_base %0d exp %0d", head_base, q_base[0]));
          chk(head_ready == q_rdy[0][0], "head_ready");
        end
        chk(int'(used_words) == used, $sformatf("used %0d exp %0d", used_words, used));
        if (exp_gnt) chk(int'(alloc_base) == tail, $sformatf("base %0d exp %0d", alloc_base, tail));
        @(posedge clk);
        if (free && q_base.size() > 0 && q_rdy[0]) begin
          used -= q_size[0];
          void'(q_base.pop_front()); void'(q_size.pop_front()); void'(q_rdy.pop_front());
          ncommitted--;
        end
        if (commit) begin q_rdy[ncommitted] = 1; ncommitted++; end
        if (exp_gnt) begin
          q_base.push_back(tail); q_size.push_back(int'(alloc_size)); q_rdy.push_back(0);
          if (tail + int'(alloc_size) >= CAP) wraps++;
          tail = (tail + int'(alloc_size)) % CAP; used += int'(alloc_size);
        end
      end
    end
    chk(stalls > 10 && wraps > 5, $sformatf("coverage stalls=%0d wraps=%0d", stalls, wraps));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
