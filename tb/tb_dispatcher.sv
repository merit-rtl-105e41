// tb_dispatcher: the control-register file and job dispatcher. Random writes
// over the whole control address map are mirrored in a model; after each
// write the decoded program, LUT, kernel and both RP configurations are
// compared with the model's decoding of the documented register layout.
// Jobs are then offered against random TAU readiness: at most one TAU gets
// a job per cycle, only a ready one, job_ready means exactly that a job was
// taken, and among TAUs that stay ready the grants rotate (round robin).
module tb_dispatcher;
  import merit_pkg::*;
  localparam int NT = 4;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [9:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  k_cfg_t kcfg;
  rp_cfg_t rp0_cfg, rp1_cfg;
  instr_t [PDEPTH-1:0] prog;
  logic [NLUT-1:0][DW-1:0] lut;
  logic job_valid = 0, job_ready;
  logic [NT-1:0] tv, tr = '0;
  int checks = 0, failures = 0;
  logic [31:0] m_prog [PDEPTH], m_regs [25];
  logic [15:0] m_lut [NLUT];
  int grants[NT];
  always #5 clk = ~clk;

  dispatcher #(.NTAU(NT)) dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .kcfg, .rp0_cfg,
    .rp1_cfg, .prog, .lut, .job_valid, .job_ready, .tau_job_valid(tv), .tau_job_ready(tr));

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 20) $display("%s", m); end
  endtask

  function automatic rp_cfg_t dec(int q);
    rp_cfg_t c;
    c = '0;
    {c.rows, c.row_len} = m_regs[q];
    {c.o, c.planes} = m_regs[q + 1];
    c.row_pitch = m_regs[q + 2];
    c.plane_pitch = m_regs[q + 3];
    {c.c[1], c.c[0]} = m_regs[q + 4];
    {c.c[3], c.c[2]} = m_regs[q + 5];
    c.c[4] = m_regs[q + 6][15:0]; c.xmask = m_regs[q + 6][20:16]; c.rot = m_regs[q + 6][23:21];
    {c.s[1], c.s[0]} = m_regs[q + 7];
    c.s[2] = m_regs[q + 8][15:0];
    return c;
  endfunction

  task automatic compare();
    for (int k = 0; k < PDEPTH; k++) chk(32'(prog[k]) == m_prog[k], $sformatf("prog %0d", k));
    for (int k = 0; k < NLUT; k++) chk(lut[k] == m_lut[k], $sformatf("lut %0d", k));
    for (int j = 0; j < NLOOP; j++) chk(kcfg.cnt[j] == m_regs[j][15:0], "cnt");
    for (int e = 0; e <= NLOOP; e++) begin
      chk(kcfg.start_tab[e] == m_regs[3][e * PAW +: PAW], "start_tab");
      chk(kcfg.end_tab[e] == m_regs[4][e * PAW +: PAW], "end_tab");
    end
    chk(kcfg.rp1_en == m_regs[5][0] && kcfg.out_pitch == m_regs[6], "rp1_en/out_pitch");
    chk(rp0_cfg == dec(7), "rp0 cfg");
    chk(rp1_cfg == dec(16), "rp1 cfg");
  endtask

  initial begin
    for (int k = 0; k < PDEPTH; k++) m_prog[k] = 0;
    for (int k = 0; k < 25; k++) m_regs[k] = 0;
    for (int k = 0; k < NLUT; k++) m_lut[k] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      int a = $urandom_range(0, 'h80);
      logic [31:0] d = $urandom;
      @(negedge clk); cfg_we = 1; cfg_addr = 10'(a); cfg_wdata = d;
      @(negedge clk); cfg_we = 0;
      if (a < 'h40) m_prog[a] = d;
      else if (a < 'h40 + NLUT) m_lut[a - 'h40] = d[15:0];
      else if (a >= 'h60 && a < 'h60 + 25) m_regs[a - 'h60] = d;
      compare();
    end
    // job issue
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      job_valid = ($urandom_range(0, 3) != 0);
      tr = (t < 1500) ? NT'($urandom) : '1;
      #1;
      chk($countones(tv) <= 1 && (tv & ~tr) == '0, "grant to a busy TAU or several grants");
      chk(job_ready == (|tr), "job_ready");
      chk((tv != 0) == (job_valid && |tr), "valid without a grant");
      for (int k = 0; k < NT; k++) if (tv[k]) grants[k]++;
    end
    // with all TAUs ready the last 1500 cycles must spread evenly
    for (int k = 1; k < NT; k++) chk(grants[k] - grants[0] < 400 && grants[0] - grants[k] < 400, "round robin");
    $display("grants %0d %0d %0d %0d", grants[0], grants[1], grants[2], grants[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
