// tb_tau: one TAU (two Read Pipelines, Compute Pipeline, Write Pipeline and
// the three job queues) on the DRAM model through a two-port bus arbiter.
// Kernel: sum of absolute differences (the paper's 1-norm / motion-estimation
// class) accumulated in the partial-sum SRAM: for each of 32 consecutive
// positions, sum over (ic, ky, kx) of |in - t|, where the template value t
// is broadcast from RP1. Program: PreLoop PS[3] = 0 | Loop r1 = PS[3] +
// |RP0 - RP1|, PS[3] = r1 | PostLoop OUT = PS[3]. 24 jobs with random bases
// are queued back to back; outputs are checked in memory. Counts partial-sum
// reads, queue back-pressure (job_ready low) and tile prefetch during compute.
module tb_tau;
  import merit_pkg::*;
  localparam int IC = 3, H = 40, W = 80, NJ = 24;
  localparam int IN_BASE = 'h2000, T_BASE = 'h40000, OUT_BASE = 'h90000;
  logic clk = 0, rst_n = 0;
  k_cfg_t kcfg;
  rp_cfg_t rp0_cfg, rp1_cfg;
  instr_t [PDEPTH-1:0] prog;
  logic [NLUT-1:0][DW-1:0] lut;
  logic job_valid = 0, job_ready;
  job_t job;
  logic [1:0] rq_v, rq_r, rs_v, rs_r, full_stall;
  addr_t [1:0] rq_a;
  logic [N-1:0][DW-1:0] rs_d, wd, mrs_d, mw_d;
  logic wv, wr, conflict, job_done, idle;
  addr_t wa, mrq_a, mw_a;
  logic mrq_v, mrq_r, mrs_v, mrs_r, mw_v, mw_r;
  logic [0:0] mrq_t, mrs_t;
  int checks = 0, failures = 0, n_ps = 0, n_bp = 0, n_overlap = 0, n_done = 0, n_conf = 0;
  always #5 clk = ~clk;

  tau dut (.clk, .rst_n, .kcfg, .rp0_cfg, .rp1_cfg, .prog, .lut, .job_valid, .job_ready, .job,
    .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a), .rd_resp_valid(rs_v),
    .rd_resp_ready(rs_r), .rd_resp_data(rs_d), .wr_valid(wv), .wr_ready(wr), .wr_addr(wa),
    .wr_data(wd), .full_stall, .conflict, .job_done, .idle);
  mem_arbiter #(.NR(2), .NW(1)) u_bus (.clk, .rst_n, .rd_req_valid(rq_v), .rd_req_ready(rq_r),
    .rd_req_addr(rq_a), .rd_resp_valid(rs_v), .rd_resp_ready(rs_r), .rd_resp_data(rs_d),
    .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd),
    .m_rd_req_valid(mrq_v), .m_rd_req_ready(mrq_r), .m_rd_req_addr(mrq_a), .m_rd_req_tag(mrq_t),
    .m_rd_resp_valid(mrs_v), .m_rd_resp_ready(mrs_r), .m_rd_resp_data(mrs_d), .m_rd_resp_tag(mrs_t),
    .m_wr_valid(mw_v), .m_wr_ready(mw_r), .m_wr_addr(mw_a), .m_wr_data(mw_d));
  dram_model #(.TW(1), .LAT(6)) u_mem (.clk, .rst_n, .req_stall_pct(15), .wr_stall_pct(50),
    .req_valid(mrq_v), .req_ready(mrq_r), .req_addr(mrq_a), .req_tag(mrq_t),
    .resp_valid(mrs_v), .resp_ready(mrs_r), .resp_data(mrs_d), .resp_tag(mrs_t),
    .wr_valid(mw_v), .wr_ready(mw_r), .wr_addr(mw_a), .wr_data(mw_d));

  initial begin
    repeat (500000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 20) $display("%s", m); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (dut.u_cp.in_range && dut.u_cp.reads_ps && !dut.u_cp.ps_ok) n_ps++;
    if (job_valid && !job_ready) n_bp++;
    if (dut.u_cp.busy && (dut.u_rp0.fill_busy || dut.u_rp1.fill_busy)) n_overlap++;
    if (job_done) n_done++;
    if (conflict) n_conf++;
  end

  function automatic instr_t mk(op_e op, logic [3:0] dst, sa, sb, sc, logic [7:0] imm);
    return '{op: op, dst: dst, sa: sa, sb: sb, sc: sc, shamt: 4'd0, imm: imm};
  endfunction

  int ix[NJ], iy[NJ], it[NJ];
  logic [15:0] in_v [IC][H][W];
  logic [15:0] t_v [NJ][IC][3][3];

  initial begin
    prog = '0; lut = '0; job = '0;
    prog[0] = mk(OP_ADD, DST_PS, SRC_ZERO, SRC_ZERO, SRC_ZERO, 8'd3);
    prog[1] = mk(OP_ABS, 4'd1, SRC_PS, SRC_RP0, SRC_RP1, 8'd3);
    prog[2] = mk(OP_ADD, DST_PS, 4'd1, SRC_ZERO, SRC_ZERO, 8'd3);
    prog[3] = mk(OP_ADD, DST_OUT, SRC_PS, SRC_ZERO, SRC_ZERO, 8'd3);
    kcfg = '0;
    kcfg.cnt[0] = IC; kcfg.cnt[1] = 3; kcfg.cnt[2] = 3;
    kcfg.start_tab[0] = 0; for (int k = 1; k <= NLOOP; k++) kcfg.start_tab[k] = 1;
    for (int k = 0; k < NLOOP; k++) kcfg.end_tab[k] = 3;
    kcfg.end_tab[NLOOP] = 4;
    kcfg.rp1_en = 1; kcfg.out_pitch = N;
    rp0_cfg = '0;
    rp0_cfg.row_len = 34; rp0_cfg.rows = 3; rp0_cfg.planes = IC;
    rp0_cfg.row_pitch = W; rp0_cfg.plane_pitch = H * W;
    for (int i = 0; i < 5; i++) rp0_cfg.c[i] = 16'(1 << i);
    rp0_cfg.s[0] = 102; rp0_cfg.s[1] = 34; rp0_cfg.s[2] = 1;
    rp1_cfg = '0;
    rp1_cfg.row_len = 16'(IC * 9); rp1_cfg.rows = 1; rp1_cfg.planes = 1;
    rp1_cfg.row_pitch = IC * 9; rp1_cfg.plane_pitch = IC * 9;
    rp1_cfg.s[0] = 9; rp1_cfg.s[1] = 3; rp1_cfg.s[2] = 1;
    for (int c = 0; c < IC; c++) for (int r = 0; r < H; r++) for (int x = 0; x < W; x++) begin
      in_v[c][r][x] = 16'($urandom_range(0, 255));
      u_mem.mem[IN_BASE + c * H * W + r * W + x] = in_v[c][r][x];
    end
    for (int j = 0; j < NJ; j++) begin
      ix[j] = $urandom_range(0, W - 34); iy[j] = $urandom_range(0, H - 3);
      for (int c = 0; c < IC; c++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        t_v[j][c][ky][kx] = 16'($urandom_range(0, 255));
        u_mem.mem[T_BASE + j * 64 + c * 9 + ky * 3 + kx] = t_v[j][c][ky][kx];
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int j = 0; j < NJ; j++) begin
      @(negedge clk);
      job_valid = 1;
      job.rp0_base = addr_t'(IN_BASE + iy[j] * W + ix[j]);
      job.rp1_base = addr_t'(T_BASE + j * 64);
      job.out_base = addr_t'(OUT_BASE + j * N);
      @(posedge clk);
      while (!job_ready) @(posedge clk);
      @(negedge clk); job_valid = 0;
    end
    while (n_done < NJ) @(negedge clk);
    repeat (20) @(negedge clk);
    chk(idle, "TAU not idle");
    for (int j = 0; j < NJ; j++) for (int n = 0; n < N; n++) begin
      automatic logic [15:0] acc = 0;
      for (int c = 0; c < IC; c++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        automatic int d = int'(in_v[c][iy[j] + ky][ix[j] + n + kx]) - int'(t_v[j][c][ky][kx]);
        acc += 16'(d < 0 ? -d : d);
      end
      chk(u_mem.rd(OUT_BASE + j * N + n) == acc, $sformatf("job %0d lane %0d: %h exp %h", j, n, u_mem.rd(OUT_BASE + j * N + n), acc));
    end
    chk(n_ps > 0 && n_bp > 0 && n_overlap > 0 && n_conf == 0, "mechanism missing or conflict");
    $display("ps_reads=%0d queue_backpressure=%0d prefetch_overlap=%0d conflicts=%0d", n_ps, n_bp, n_overlap, n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
