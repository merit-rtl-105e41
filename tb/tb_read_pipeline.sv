// tb_read_pipeline: one Read Pipeline (16 KB, 32 banks) on a DRAM model.
// Random tile shapes, loop nests and lane strides; each phase queues several
// tile jobs and checks every vector the RP delivers against the MERIT
// formula evaluated here: lane n of step k carries the tile word
// o + sum k_j s_j + sum c_i b_(n,i), whose DRAM address follows from the
// tile's planes/rows/row length. One phase uses large tiles and a slow
// consumer so that allocation must stall on a full buffer; one uses the XOR
// hash and rotation; one uses broadcast (all lanes one word).
module tb_read_pipeline;
  import merit_pkg::*;
  logic clk = 0, rst_n = 0;
  rp_cfg_t cfg;
  logic [NLOOP-1:0][15:0] kcnt;
  logic job_valid = 0, job_ready;
  addr_t job_base;
  logic rq_valid, rq_ready, rs_valid, rs_ready;
  addr_t rq_addr;
  logic [N-1:0][DW-1:0] rs_data, vec;
  logic vec_valid, vec_ready = 0, full_stall, conflict, idle;
  logic [NLOOP-1:0][15:0] vec_idx;
  logic [NLOOP-1:0] vec_first, vec_last;
  logic [0:0] rs_tag;
  int req_stall = 20;
  bit conf_seen = 0;
  int hashed_ok = 0;
  int checks = 0, failures = 0, stall_cycles = 0, vectors = 0, conflicts = 0;
  always #5 clk = ~clk;

  read_pipeline dut (.clk, .rst_n, .cfg, .kcnt, .job_valid, .job_ready, .job_base,
    .rd_req_valid(rq_valid), .rd_req_ready(rq_ready), .rd_req_addr(rq_addr),
    .rd_resp_valid(rs_valid), .rd_resp_ready(rs_ready), .rd_resp_data(rs_data),
    .vec_valid, .vec_ready, .vec, .vec_idx, .vec_first, .vec_last, .full_stall, .conflict, .idle);

  dram_model #(.TW(1), .LAT(5)) u_mem (.clk, .rst_n, .req_stall_pct(req_stall), .wr_stall_pct(0),
    .req_valid(rq_valid), .req_ready(rq_ready), .req_addr(rq_addr), .req_tag(1'b0),
    .resp_valid(rs_valid), .resp_ready(rs_ready), .resp_data(rs_data), .resp_tag(rs_tag),
    .wr_valid(1'b0), .wr_ready(), .wr_addr('0), .wr_data('0));

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    if (full_stall) stall_cycles++;
    if (conflict) begin conflicts++; conf_seen = 1; end
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 0) $display("%s", m); end
  endtask

  addr_t bases[$];

  // consumer: checks vectors in job order
  task automatic consume(int njobs, int ready_pct, bit check_vals);
    for (int j = 0; j < njobs; j++) begin
      int words = int'(cfg.row_len) * int'(cfg.rows) * int'(cfg.planes);
      for (int k0 = 0; k0 < kcnt[0]; k0++) for (int k1 = 0; k1 < kcnt[1]; k1++)
        for (int k2 = 0; k2 < kcnt[2]; k2++) begin
          @(negedge clk);
          vec_ready = ($urandom_range(0, 99) < ready_pct);
          while (!(vec_valid && vec_ready)) begin
            @(negedge clk); vec_ready = ($urandom_range(0, 99) < ready_pct);
          end
          #1;
          chk(int'(vec_idx[0]) == k0 && int'(vec_idx[1]) == k1 && int'(vec_idx[2]) == k2, "loop index");
          if (check_vals && !conf_seen) for (int n = 0; n < N; n++) begin
            automatic int t = int'(cfg.o) + k0 * int'(cfg.s[0]) + k1 * int'(cfg.s[1]) + k2 * int'(cfg.s[2]);
            automatic int p, r, c;
            automatic int unsigned a;
            for (int i = 0; i < 5; i++) if ((n >> i) & 1) t += int'(cfg.c[i]);
            p = t / (int'(cfg.rows) * int'(cfg.row_len));
            r = (t / int'(cfg.row_len)) % int'(cfg.rows);
            c = t % int'(cfg.row_len);
            a = int'(bases[j]) + p * int'(cfg.plane_pitch) + r * int'(cfg.row_pitch) + c;
            chk(t < words && vec[n] == u_mem.rd(a), $sformatf("rl %0d rows %0d pl %0d rp %0d o %0d t %0d job %0d step (%0d,%0d,%0d) lane %0d: %h exp %h", cfg.row_len, cfg.rows, cfg.planes, cfg.row_pitch, cfg.o, t, j, k0, k1, k2, n, vec[n], u_mem.rd(a)));
          end
          if (!conf_seen && cfg.xmask != 0) hashed_ok++;
          conf_seen = 0;
          vectors++;
        end
    end
    @(negedge clk); vec_ready = 0;
  endtask

  task automatic produce(int njobs);
    for (int j = 0; j < njobs; j++) begin
      @(negedge clk);
      job_valid = 1; job_base = bases[j];
      @(posedge clk);
      while (!job_ready) @(posedge clk);
      @(negedge clk); job_valid = 0;
    end
  endtask

  task automatic phase(int rl_lo, int rl_hi, int rows, int planes, int njobs, int ready_pct, int mode);
    int words, budget;
    cfg = '0;
    cfg.row_len = 16'($urandom_range(rl_lo, rl_hi));
    cfg.rows = 16'(rows); cfg.planes = 16'(planes);
    cfg.row_pitch = addr_t'(int'(cfg.row_len) + $urandom_range(0, 40));
    cfg.plane_pitch = cfg.row_pitch * addr_t'(rows + 1);
    words = int'(cfg.row_len) * rows * planes;
    budget = words - 32;
    for (int j = 0; j < NLOOP; j++) kcnt[j] = 16'($urandom_range(1, 3));
    if (ready_pct < 10) kcnt = {16'd3, 16'd3, 16'd3};
    cfg.o = 16'($urandom_range(0, budget / 4));
    for (int j = 0; j < NLOOP; j++) cfg.s[j] = 16'($urandom_range(0, budget / (4 * 2)));
    for (int i = 0; i < 5; i++) cfg.c[i] = (mode == 2) ? 16'd0 : 16'(1 << i);
    cfg.xmask = (mode == 1) ? 5'($urandom) : 5'd0;
    cfg.rot = (mode == 1) ? 3'($urandom_range(0, 4)) : 3'd0;
    bases.delete();
    for (int j = 0; j < njobs; j++) bases.push_back(addr_t'($urandom_range(0, 1 << 20)));
    fork
      produce(njobs);
      consume(njobs, ready_pct, 1);
    join
    repeat (3) @(negedge clk);
    chk(idle, "not idle after phase");
    $display("phase rl %0d rows %0d planes %0d words %0d stalls %0d conflicts %0d failures %0d vectors %0d", cfg.row_len, cfg.rows, cfg.planes, words, stall_cycles, conflicts, failures, vectors);
  endtask

  initial begin
    cfg = '0; kcnt = '0; job_base = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) phase(20, 70, $urandom_range(1, 4), $urandom_range(1, 3), 3, 70, 0);
    phase(20, 40, 3, 2, 3, 70, 2);                 // broadcast
    phase(90, 100, 10, 4, 5, 3, 0);                // ~4000-word tiles: buffer full
    chk(stall_cycles > 0, "no buffer-full stall seen");
    chk(conflicts == 0, "conflict on consecutive lanes");
    for (int t = 0; t < 4; t++) phase(32, 64, 2, 2, 2, 80, 1); // hashed layout
    chk(hashed_ok > 0, "no conflict-free hashed vector");
    $display("hashed_ok=%0d vectors=%0d stall_cycles=%0d conflicts=%0d", hashed_ok, vectors, stall_cycles, conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
