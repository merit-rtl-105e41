// tb_mem_arbiter: the shared memory port with 8 read ports and 4 write ports,
// all driven at random against the DRAM model. Each read port checks that its
// responses come back in its own request order with the data of the line it
// asked for; each write port's lines are checked in the memory at the end.
// Counts grant contention (two or more ports requesting in one cycle).
module tb_mem_arbiter;
  import merit_pkg::*;
  localparam int NR = 8, NW = 4;
  logic clk = 0, rst_n = 0;
  logic [NR-1:0] rd_req_valid = '0, rd_req_ready, rd_resp_valid, rd_resp_ready = '0;
  addr_t [NR-1:0] rd_req_addr;
  logic [N-1:0][DW-1:0] rd_resp_data;
  logic [NW-1:0] wr_valid = '0, wr_ready;
  addr_t [NW-1:0] wr_addr;
  logic [NW-1:0][N-1:0][DW-1:0] wr_data;
  logic mrq_v, mrq_r, mrs_v, mrs_r, mw_v, mw_r;
  addr_t mrq_a, mw_a;
  logic [2:0] mrq_t, mrs_t;
  logic [N-1:0][DW-1:0] mrs_d, mw_d;
  int checks = 0, failures = 0, contention = 0, reads_done = 0, writes_done = 0;
  addr_t pend[NR][$];
  always #5 clk = ~clk;

  mem_arbiter #(.NR(NR), .NW(NW)) dut (.clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr,
    .rd_resp_valid, .rd_resp_ready, .rd_resp_data, .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .m_rd_req_valid(mrq_v), .m_rd_req_ready(mrq_r), .m_rd_req_addr(mrq_a), .m_rd_req_tag(mrq_t),
    .m_rd_resp_valid(mrs_v), .m_rd_resp_ready(mrs_r), .m_rd_resp_data(mrs_d), .m_rd_resp_tag(mrs_t),
    .m_wr_valid(mw_v), .m_wr_ready(mw_r), .m_wr_addr(mw_a), .m_wr_data(mw_d));
  dram_model #(.TW(3), .LAT(4)) u_mem (.clk, .rst_n, .req_stall_pct(25), .wr_stall_pct(25),
    .req_valid(mrq_v), .req_ready(mrq_r), .req_addr(mrq_a), .req_tag(mrq_t),
    .resp_valid(mrs_v), .resp_ready(mrs_r), .resp_data(mrs_d), .resp_tag(mrs_t),
    .wr_valid(mw_v), .wr_ready(mw_r), .wr_addr(mw_a), .wr_data(mw_d));

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 20) $display("%s", m); end
  endtask

  // write ports write to disjoint regions: port w, line k at (w << 20) + k*N
  int wcount[NW];
  logic [N-1:0][DW-1:0] wlog[NW][$];
  bit running = 1;
  logic [NR-1:0] rfire = '0;
  logic [NW-1:0] wfire = '0;

  always @(posedge clk) if (rst_n) begin
    rfire = rd_req_valid & rd_req_ready; wfire = wr_valid & wr_ready;
    if ($countones(rd_req_valid) > 1 || $countones(wr_valid) > 1) contention++;
    for (int p = 0; p < NR; p++) begin
      if (rd_req_valid[p] && rd_req_ready[p]) pend[p].push_back(rd_req_addr[p]);
      if (rd_resp_valid[p] && rd_resp_ready[p]) begin
        automatic addr_t a = pend[p].pop_front();
        automatic bit ok = 1;
        for (int k = 0; k < N; k++) if (rd_resp_data[k] != u_mem.rd(int'(a) + k)) ok = 0;
        chk(ok, $sformatf("port %0d data for %h", p, a));
        reads_done++;
      end
    end
    for (int w = 0; w < NW; w++) if (wr_valid[w] && wr_ready[w]) begin
      wlog[w].push_back(wr_data[w]); wcount[w]++; writes_done++;
    end
  end

  always @(negedge clk) if (rst_n) begin
    for (int p = 0; p < NR; p++) begin
      if (!rd_req_valid[p] || rfire[p]) begin
        rd_req_valid[p] = running && ($urandom_range(0, 2) == 0);
        rd_req_addr[p] = addr_t'($urandom_range(0, 1 << 16));
      end
      rd_resp_ready[p] = ($urandom_range(0, 3) != 0);
    end
    for (int w = 0; w < NW; w++) begin
      if (!wr_valid[w] || wfire[w]) begin
        wr_valid[w] = running && ($urandom_range(0, 3) == 0);
        wr_addr[w] = addr_t'((w + 1) << 20) + addr_t'(wcount[w] * N);
        for (int k = 0; k < N; k++) wr_data[w][k] = 16'($urandom);
      end
    end
  end

  initial begin
    rd_req_addr = '0; wr_addr = '0; wr_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (3000) @(posedge clk);
    @(negedge clk); running = 0;
    repeat (300) @(posedge clk);
    for (int p = 0; p < NR; p++) chk(pend[p].size() == 0, "read responses missing");
    for (int w = 0; w < NW; w++) for (int k = 0; k < wcount[w]; k++) begin
      automatic bit ok = 1;
      for (int i = 0; i < N; i++) if (u_mem.rd(((w + 1) << 20) + k * N + i) != wlog[w][k][i]) ok = 0;
      chk(ok, $sformatf("write port %0d line %0d", w, k));
    end
    chk(contention > 0, "no contention");
    $display("reads=%0d writes=%0d contention=%0d", reads_done, writes_done, contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
