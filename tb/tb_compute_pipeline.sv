// tb_compute_pipeline: the Compute Pipeline against a reference interpreter.
// Each of 60 jobs gets a random program (mixed arithmetic, compare, select,
// logic and index operations; register, partial-sum and output destinations),
// random range tables splitting it into PreLoop / Loop / PostLoop pieces, a
// random loop nest and random input vectors. The reference model selects the
// slice for every step from the first/last flags and runs it lane by lane;
// every output vector, job_done and the register file at job end are
// compared. Inputs arrive with random gaps and the output side drops ready
// at random, so the OUT stall and the partial-sum read cycle are exercised.
module tb_compute_pipeline;
  import merit_pkg::*;
  logic clk = 0, rst_n = 0;
  k_cfg_t kcfg;
  instr_t [PDEPTH-1:0] prog;
  logic [NLUT-1:0][DW-1:0] lut;
  logic vec0_valid = 0, vec0_ready, vec1_valid = 0, vec1_ready;
  logic [N-1:0][DW-1:0] vec0, vec1, out_data;
  logic [NLOOP-1:0][15:0] vec0_idx;
  logic [NLOOP-1:0] vec0_first, vec0_last;
  logic out_valid, out_ready = 0, job_done, busy;
  int checks = 0, failures = 0, out_stalls = 0, ps_reads = 0, dones = 0;
  always #5 clk = ~clk;

  compute_pipeline dut (.clk, .rst_n, .kcfg, .prog, .lut,
    .vec0_valid, .vec0_ready, .vec0, .vec0_idx, .vec0_first, .vec0_last,
    .vec1_valid, .vec1_ready, .vec1, .out_valid, .out_ready, .out_data, .job_done, .busy);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 20) $display("%s", m); end
  endtask

  // reference state
  logic [DW-1:0] rf [N][8];
  logic [DW-1:0] ps [8][N];
  logic [N-1:0][DW-1:0] exp_q[$];
  int pending_done = 0;

  function automatic logic [DW-1:0] alu(op_e op, logic [DW-1:0] a, b, c, int sh, logic [DW-1:0] ix);
    int sa = int'($signed(a)), sb = int'($signed(b)), sc = int'($signed(c));
    int d;
    case (op)
      OP_ADD: return a + DW'((sb + sc) >>> sh);
      OP_SUB: return a + DW'((sb - sc) >>> sh);
      OP_ABS: begin d = sb - sc; if (d < 0) d = -d; return a + DW'(d >>> sh); end
      OP_MAC: return a + DW'((sb * sc) >>> sh);
      OP_MAX: return (sa > sb) ? a : b;
      OP_MIN: return (sa < sb) ? a : b;
      OP_SEL: return (a != 0) ? b : c;
      OP_AND: return a & b;
      OP_OR:  return a | b;
      OP_XOR: return a ^ b;
      OP_IDX: return ix;
      default: return a;
    endcase
  endfunction

  function automatic logic [DW-1:0] opnd(logic [3:0] code, int n, logic [N-1:0][DW-1:0] v0, v1, instr_t i);
    if (code < 8) return rf[n][code];
    case (code)
      SRC_RP0: return v0[n];
      SRC_RP1: return v1[n];
      SRC_PS:  return ps[i.imm][n];
      SRC_IMM: return DW'($signed(i.imm));
      default: return '0;
    endcase
  endfunction

  task automatic ref_step(logic [N-1:0][DW-1:0] v0, v1, logic [NLOOP-1:0][15:0] idx,
                          logic [NLOOP-1:0] first, last);
    int f = 0, l = 0, ps_, pe;
    for (int j = NLOOP - 1; j >= 0 && first[j]; j--) f++;
    for (int j = NLOOP - 1; j >= 0 && last[j]; j--) l++;
    ps_ = int'(kcfg.start_tab[NLOOP - f]);
    pe  = int'(kcfg.end_tab[l]);
    for (int pc = ps_; pc < pe; pc++) begin
      automatic instr_t i = prog[pc];
      automatic logic [N-1:0][DW-1:0] r;
      for (int n = 0; n < N; n++) begin
        automatic logic [DW-1:0] ix = (int'(i.imm[1:0]) < NLOOP) ? idx[i.imm[1:0]] : DW'(n);
        r[n] = alu(i.op, opnd(i.sa, n, v0, v1, i), opnd(i.sb, n, v0, v1, i), opnd(i.sc, n, v0, v1, i), int'(i.shamt), ix);
      end
      if (i.dst < 8) for (int n = 0; n < N; n++) rf[n][i.dst] = r[n];
      else if (i.dst == DST_PS) for (int n = 0; n < N; n++) ps[i.imm][n] = r[n];
      else if (i.dst == DST_OUT) exp_q.push_back(r);
    end
    if (&last) pending_done++;
  endtask

  function automatic instr_t rnd_instr();
    instr_t i;
    op_e ops[11] = '{OP_ADD, OP_SUB, OP_ABS, OP_MAC, OP_MAX, OP_MIN, OP_SEL, OP_AND, OP_OR, OP_XOR, OP_IDX};
    logic [3:0] srcs[12] = '{0, 1, 2, 3, 4, 5, 6, 7, SRC_RP0, SRC_RP1, SRC_PS, SRC_IMM};
    int d = $urandom_range(0, 9);
    i.op  = ops[$urandom_range(0, 10)];
    i.dst = (d < 7) ? 4'($urandom_range(0, 7)) : (d < 8 ? DST_PS : (d < 9 ? DST_OUT : DST_NONE));
    i.sa  = srcs[$urandom_range(0, 11)];
    i.sb  = srcs[$urandom_range(0, 11)];
    i.sc  = ($urandom_range(0, 5) == 0) ? SRC_ZERO : srcs[$urandom_range(0, 11)];
    i.shamt = 4'($urandom_range(0, 3) == 0 ? $urandom_range(0, 15) : 0);
    i.imm = 8'($urandom_range(0, 7));
    return i;
  endfunction

  // output checker
  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) out_stalls++;
    if (dut.in_range && dut.reads_ps && !dut.ps_ok) ps_reads++;
    if (out_valid && out_ready) begin
      if (exp_q.size() == 0) chk(0, "unexpected output");
      else begin
        automatic logic [N-1:0][DW-1:0] e = exp_q.pop_front();
        chk(out_data == e, $sformatf("output %h exp %h", out_data, e));
      end
    end
    if (job_done) begin dones++; chk(pending_done > 0, "unexpected job_done"); pending_done--; end
  end
  always @(negedge clk) out_ready = ($urandom_range(0, 99) < 60);

  task automatic run_job(bit rp1, bit init_ps);
    int len = init_ps ? 8 : $urandom_range(4, PDEPTH);
    int p1, p2;
    logic [NLOOP-1:0][15:0] cnt;
    for (int j = 0; j < NLOOP; j++) cnt[j] = 16'($urandom_range(1, 3));
    for (int k = 0; k < PDEPTH; k++) prog[k] = rnd_instr();
    if (init_ps) for (int k = 0; k < 8; k++) prog[k] = '{op: OP_ADD, dst: DST_PS, sa: SRC_ZERO, sb: SRC_ZERO, sc: SRC_ZERO, shamt: 0, imm: 8'(k)};
    p1 = $urandom_range(0, len); p2 = $urandom_range(p1, len);
    kcfg = '0; kcfg.cnt = cnt; kcfg.rp1_en = rp1;
    kcfg.start_tab[0] = '0; kcfg.end_tab[NLOOP] = PAW'(len);
    for (int k = 1; k <= NLOOP; k++) kcfg.start_tab[k] = PAW'($urandom_range(int'(kcfg.start_tab[k-1]), p1));
    kcfg.start_tab[NLOOP] = PAW'(p1);
    for (int k = NLOOP - 1; k >= 0; k--) kcfg.end_tab[k] = PAW'($urandom_range(p2, int'(kcfg.end_tab[k+1])));
    kcfg.end_tab[0] = PAW'(p2);
    if (init_ps) begin
      for (int k = 0; k <= NLOOP; k++) begin kcfg.start_tab[k] = 0; kcfg.end_tab[k] = 8; end
      kcfg.cnt = {16'd1, 16'd1, 16'd1}; cnt = kcfg.cnt;
    end
    for (int k0 = 0; k0 < cnt[0]; k0++) for (int k1 = 0; k1 < cnt[1]; k1++) for (int k2 = 0; k2 < cnt[2]; k2++) begin
      logic [N-1:0][DW-1:0] a, b;
      logic [NLOOP-1:0][15:0] idx;
      logic [NLOOP-1:0] fs, ls;
      idx[0] = 16'(k0); idx[1] = 16'(k1); idx[2] = 16'(k2);
      for (int j = 0; j < NLOOP; j++) begin fs[j] = idx[j] == 0; ls[j] = idx[j] == cnt[j] - 1; end
      for (int n = 0; n < N; n++) begin a[n] = 16'($urandom); b[n] = 16'($urandom); end
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      vec0_valid = 1; vec0 = a; vec0_idx = idx; vec0_first = fs; vec0_last = ls;
      vec1_valid = rp1; vec1 = b;
      @(posedge clk);
      while (!(vec0_ready && (vec1_ready || !rp1))) @(posedge clk);
      ref_step(a, b, idx, fs, ls);
      @(negedge clk); vec0_valid = 0; vec1_valid = 0;
    end
    while (pending_done > 0 || busy) @(negedge clk);
    repeat (2) @(negedge clk);
    chk(exp_q.size() == 0, "outputs missing");
    for (int n = 0; n < N; n++) for (int r = 0; r < 8; r++)
      chk(dut.rf[n][r] == rf[n][r], $sformatf("rf lane %0d r%0d %h exp %h", n, r, dut.rf[n][r], rf[n][r]));
  endtask

  initial begin
    kcfg = '0; prog = '0; vec0 = '0; vec1 = '0; vec0_idx = '0; vec0_first = '0; vec0_last = '0;
    for (int k = 0; k < NLUT; k++) lut[k] = 16'(k * 1000);
    for (int n = 0; n < N; n++) for (int r = 0; r < 8; r++) rf[n][r] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run_job(0, 1);
    for (int t = 0; t < 60; t++) run_job(t % 2, 0);
    chk(out_stalls > 0 && ps_reads > 0 && dones == 61, "mechanism not seen");
    $display("outputs stalls=%0d ps_reads=%0d dones=%0d", out_stalls, ps_reads, dones);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
