// tb_merit_z: end-to-end and full-size test of the processor at its default
// size (4 TAUs of 32 lanes, 16 KB / 8 KB read buffers, 5 KB partial sums),
// against the DRAM model.
//
// Workload: a 3x3 multi-channel convolution with ReLU, the paper's headline
// kernel class. Input IC x H x W, weights OC x IC x 3 x 3, output
// OC x (H-2) x 64. One job = 32 outputs of one output row of one output
// channel:
//   RP0 tile  = 3 rows x 34 columns x IC planes of the input, lanes read
//               consecutive columns (c = 1,2,4,8,16), loop strides
//               (102, 34, 1) over (ic, ky, kx);
//   RP1 tile  = the IC x 9 weights of the channel, broadcast (c = 0) to all
//               lanes with strides (9, 3, 1);
//   program   = PreLoop r0 = 0 | Loop r0 += RP0 * RP1 | PostLoop OUT = max(r0, 0).
// With IC = 48 one RP0 tile is 4896 words, so the next tile of a TAU does
// not fit beside it in the 8192-word buffer and prefetch must stall.
// The configuration is written through the control interface, jobs are
// issued through the job port, and the written output is compared word by
// word with a reference computed here in 16-bit wrap-around arithmetic.
// Mechanism counters (each must be non-zero): buffer-full stalls, tile
// prefetch overlapping compute, write back-pressure, two or more TAUs busy at
// once, read-bus contention, broadcast RP1 vectors, completed jobs. A bank or
// butterfly conflict must never occur for these mappings.
module tb_merit_z;
  import merit_pkg::*;
  localparam int NT = 4;
  localparam int IC = 48, H = 6, W = 66, OC = 4, HO = H - 2, WO = 64;
  localparam int IN_BASE = 'h1000, W_BASE = 'h80000, OUT_BASE = 'h100000;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [9:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  logic job_valid = 0, job_ready;
  job_t job;
  logic mrq_v, mrq_r, mrs_v, mrs_r, mw_v, mw_r;
  addr_t mrq_a, mw_a;
  logic [2:0] mrq_t, mrs_t;
  logic [N-1:0][DW-1:0] mrs_d, mw_d;
  logic idle, conflict;
  logic [NT-1:0] full_stall, job_done;
  int checks = 0, failures = 0;
  int n_full = 0, n_overlap = 0, n_wstall = 0, n_multi = 0, n_contend = 0;
  int n_bcast = 0, n_done = 0, n_conflict = 0;
  always #5 clk = ~clk;

  merit_z dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .job_valid, .job_ready, .job,
    .m_rd_req_valid(mrq_v), .m_rd_req_ready(mrq_r), .m_rd_req_addr(mrq_a), .m_rd_req_tag(mrq_t),
    .m_rd_resp_valid(mrs_v), .m_rd_resp_ready(mrs_r), .m_rd_resp_data(mrs_d), .m_rd_resp_tag(mrs_t),
    .m_wr_valid(mw_v), .m_wr_ready(mw_r), .m_wr_addr(mw_a), .m_wr_data(mw_d),
    .idle, .full_stall, .conflict, .job_done);

  dram_model #(.TW(3), .LAT(8)) u_mem (.clk, .rst_n, .req_stall_pct(10), .wr_stall_pct(40),
    .req_valid(mrq_v), .req_ready(mrq_r), .req_addr(mrq_a), .req_tag(mrq_t),
    .resp_valid(mrs_v), .resp_ready(mrs_r), .resp_data(mrs_d), .resp_tag(mrs_t),
    .wr_valid(mw_v), .wr_ready(mw_r), .wr_addr(mw_a), .wr_data(mw_d));

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 20) $display("%s", m); end
  endtask

  // mechanism counters
  logic [NT-1:0] cp_busy, rp0_fill, rp1_v;
  logic [NT-1:0][N-1:0][DW-1:0] rp1_vec;
  for (genvar t = 0; t < NT; t++) begin : g_mon
    assign cp_busy[t]  = dut.g_tau[t].u_tau.u_cp.busy;
    assign rp0_fill[t] = dut.g_tau[t].u_tau.u_rp0.fill_busy;
    assign rp1_v[t]    = dut.g_tau[t].u_tau.u_rp1.vec_valid && dut.g_tau[t].u_tau.u_rp1.vec_ready;
    assign rp1_vec[t]  = dut.g_tau[t].u_tau.u_rp1.vec;
  end
  always @(posedge clk) if (rst_n) begin
    if (|full_stall) n_full++;
    if (|(cp_busy & rp0_fill)) n_overlap++;
    if (mw_v && !mw_r) n_wstall++;
    if ($countones(cp_busy) >= 2) n_multi++;
    if ($countones(dut.u_bus.rd_req_valid) >= 2) n_contend++;
    if (conflict) n_conflict++;
    n_done += $countones(job_done);
    for (int t = 0; t < NT; t++) if (rp1_v[t]) begin
      automatic bit same = 1;
      for (int n = 1; n < N; n++) if (rp1_vec[t][n] != rp1_vec[t][0]) same = 0;
      if (same) n_bcast++;
    end
  end

  task automatic cfg_write(int a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 10'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic logic [31:0] ins(op_e op, logic [3:0] dst, sa, sb, sc);
    instr_t i;
    i = '{op: op, dst: dst, sa: sa, sb: sb, sc: sc, shamt: 4'd0, imm: 8'd0};
    return 32'(i);
  endfunction

  logic signed [15:0] in_v [IC][H][W];
  logic signed [15:0] w_v [OC][IC][3][3];

  initial begin
    job = '0;
    for (int c = 0; c < IC; c++) for (int r = 0; r < H; r++) for (int x = 0; x < W; x++) begin
      in_v[c][r][x] = 16'($urandom_range(0, 8) - 4);
      u_mem.mem[IN_BASE + c * H * W + r * W + x] = in_v[c][r][x];
    end
    for (int o = 0; o < OC; o++) for (int c = 0; c < IC; c++) for (int ky = 0; ky < 3; ky++)
      for (int kx = 0; kx < 3; kx++) begin
        w_v[o][c][ky][kx] = 16'($urandom_range(0, 6) - 3);
        u_mem.mem[W_BASE + (o * IC + c) * 9 + ky * 3 + kx] = w_v[o][c][ky][kx];
      end
    repeat (3) @(posedge clk); rst_n = 1;

    // program and kernel registers
    cfg_write(CFG_PROG + 0, ins(OP_ADD, 4'd0, SRC_ZERO, SRC_ZERO, SRC_ZERO));
    cfg_write(CFG_PROG + 1, ins(OP_MAC, 4'd0, 4'd0, SRC_RP0, SRC_RP1));
    cfg_write(CFG_PROG + 2, ins(OP_MAX, DST_OUT, 4'd0, SRC_ZERO, SRC_ZERO));
    cfg_write(CFG_REG + 0, IC);
    cfg_write(CFG_REG + 1, 3);
    cfg_write(CFG_REG + 2, 3);
    cfg_write(CFG_REG + 3, (1 << 7) | (1 << 14) | (1 << 21));        // start_tab {0,1,1,1}
    cfg_write(CFG_REG + 4, 2 | (2 << 7) | (2 << 14) | (3 << 21));    // end_tab {2,2,2,3}
    cfg_write(CFG_REG + 5, 1);
    cfg_write(CFG_REG + 6, N);
    // RP0: input tile
    cfg_write(CFG_REG + 7 + 0, 34 | (3 << 16));
    cfg_write(CFG_REG + 7 + 1, IC);
    cfg_write(CFG_REG + 7 + 2, W);
    cfg_write(CFG_REG + 7 + 3, H * W);
    cfg_write(CFG_REG + 7 + 4, 1 | (2 << 16));
    cfg_write(CFG_REG + 7 + 5, 4 | (8 << 16));
    cfg_write(CFG_REG + 7 + 6, 16);
    cfg_write(CFG_REG + 7 + 7, 102 | (34 << 16));
    cfg_write(CFG_REG + 7 + 8, 1);
    // RP1: weights of one output channel, broadcast
    cfg_write(CFG_REG + 16 + 0, (IC * 9) | (1 << 16));
    cfg_write(CFG_REG + 16 + 1, 1);
    cfg_write(CFG_REG + 16 + 2, IC * 9);
    cfg_write(CFG_REG + 16 + 3, IC * 9);
    cfg_write(CFG_REG + 16 + 4, 0);
    cfg_write(CFG_REG + 16 + 5, 0);
    cfg_write(CFG_REG + 16 + 6, 0);
    cfg_write(CFG_REG + 16 + 7, 9 | (3 << 16));
    cfg_write(CFG_REG + 16 + 8, 1);

    // jobs
    for (int o = 0; o < OC; o++) for (int y = 0; y < HO; y++) for (int xs = 0; xs < WO / N; xs++) begin
      @(negedge clk);
      job_valid = 1;
      job.rp0_base = addr_t'(IN_BASE + y * W + xs * N);
      job.rp1_base = addr_t'(W_BASE + o * IC * 9);
      job.out_base = addr_t'(OUT_BASE + (o * HO + y) * WO + xs * N);
      @(posedge clk);
      while (!job_ready) @(posedge clk);
      @(negedge clk); job_valid = 0;
    end
    while (n_done < OC * HO * (WO / N)) @(negedge clk);
    repeat (20) @(negedge clk);
    chk(idle, "not idle at the end");

    // compare outputs
    for (int o = 0; o < OC; o++) for (int y = 0; y < HO; y++) for (int x = 0; x < WO; x++) begin
      automatic logic [15:0] acc = 0;
      for (int c = 0; c < IC; c++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++)
        acc += 16'(int'(in_v[c][y + ky][x + kx]) * int'(w_v[o][c][ky][kx]));
      if ($signed(acc) < 0) acc = 0;
      chk(u_mem.rd(OUT_BASE + (o * HO + y) * WO + x) == acc,
          $sformatf("out[%0d][%0d][%0d] = %h exp %h", o, y, x, u_mem.rd(OUT_BASE + (o * HO + y) * WO + x), acc));
    end

    $display("cycles_full_stall=%0d prefetch_overlap=%0d write_stall=%0d multi_tau=%0d bus_contention=%0d broadcast_vectors=%0d jobs_done=%0d conflicts=%0d",
             n_full, n_overlap, n_wstall, n_multi, n_contend, n_bcast, n_done, n_conflict);
    chk(n_full > 0, "mechanism never happened: buffer-full stall");
    chk(n_overlap > 0, "mechanism never happened: prefetch during compute");
    chk(n_wstall > 0, "mechanism never happened: write back-pressure");
    chk(n_multi > 0, "mechanism never happened: several TAUs busy");
    chk(n_contend > 0, "mechanism never happened: read-bus contention");
    chk(n_bcast > 0, "mechanism never happened: broadcast");
    chk(n_done == OC * HO * (WO / N), "job count");
    chk(n_conflict == 0, "bank/butterfly conflict on a conflict-free mapping");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
