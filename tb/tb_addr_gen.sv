// tb_addr_gen: runs the address generator over random loop nests, lane
// strides, offsets and bank-hash settings and checks every step against the
// MERIT address formula computed here: lane n reads address
// base + o + sum k_j s_j + sum c_i b_(n,i) (mod 8192), i.e. bank hash(addr)
// and row addr>>5; the loop indices must count innermost-last with correct
// first/last flags, and the conflict flag must match a pairwise bank check.
module tb_addr_gen;
  import merit_pkg::*;
  localparam int CAP = 8192;
  logic clk = 0, rst_n = 0, start = 0, step = 0, busy, last, conflict;
  logic [12:0] tile_base;
  rp_cfg_t cfg;
  logic [NLOOP-1:0][15:0] cnt, idx;
  logic [N-1:0] bank_en;
  logic [N-1:0][7:0] bank_row;
  logic [N-1:0][4:0] lane_src;
  logic [NLOOP-1:0] is_first, is_last;
  int checks = 0, failures = 0, nconf = 0, steps = 0;
  always #5 clk = ~clk;

  addr_gen #(.CAP(CAP)) dut (.clk, .rst_n, .start, .tile_base, .cfg, .cnt, .step, .busy,
    .bank_en, .bank_row, .lane_src, .idx, .is_first, .is_last, .last, .conflict);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int hb(int a, int x, int r);
    int h = 0;
    for (int i = 0; i < 5; i++) h |= ((((a >> i) & 1) ^ (((x >> i) & 1) & ((a >> (i + 1)) & 1))) << i);
    r = r % 5;
    return ((h << r) | (h >> (5 - r))) & 31;
  endfunction

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("%s", m); end
  endtask

  initial begin
    cfg = '0; cnt = '0; tile_base = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      cfg.o = 16'($urandom_range(0, 100));
      for (int j = 0; j < NLOOP; j++) begin
        cnt[j] = 16'($urandom_range(1, 4));
        cfg.s[j] = 16'($urandom_range(0, 300));
      end
      for (int i = 0; i < 5; i++) cfg.c[i] = (t % 3 == 0) ? 16'(1 << i) : 16'($urandom_range(0, 40));
      cfg.xmask = (t % 2) ? 5'($urandom) : 5'd0;
      cfg.rot = 3'($urandom_range(0, 4));
      tile_base = 13'($urandom);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int k0 = 0; k0 < cnt[0]; k0++)
        for (int k1 = 0; k1 < cnt[1]; k1++)
          for (int k2 = 0; k2 < cnt[2]; k2++) begin
            automatic int ab[N], ar[N];
            automatic bit exp_conf = 0;
            automatic int k[3] = '{k0, k1, k2};
            step = ($urandom_range(0, 1) == 1);
            while (!step) begin @(negedge clk); step = ($urandom_range(0, 1) == 1); end
            #1;
            chk(busy, "not busy");
            for (int j = 0; j < 3; j++) begin
              chk(int'(idx[j]) == k[j], $sformatf("idx[%0d]=%0d exp %0d", j, idx[j], k[j]));
              chk(is_first[j] == (k[j] == 0) && is_last[j] == (k[j] == int'(cnt[j]) - 1), "flags");
            end
            chk(last == (k0 == cnt[0] - 1 && k1 == cnt[1] - 1 && k2 == cnt[2] - 1), "last");
            for (int n = 0; n < N; n++) begin
              automatic int a = int'(tile_base) + int'(cfg.o) + k0 * int'(cfg.s[0]) + k1 * int'(cfg.s[1]) + k2 * int'(cfg.s[2]);
              for (int i = 0; i < 5; i++) if ((n >> i) & 1) a += int'(cfg.c[i]);
              a = a % CAP;
              ab[n] = hb(a, int'(cfg.xmask), int'(cfg.rot)); ar[n] = a >> 5;
              for (int m = 0; m < n; m++) if (ab[m] == ab[n] && ar[m] != ar[n]) exp_conf = 1;
            end
            chk(conflict == exp_conf, "conflict flag");
            if (exp_conf) nconf++;
            if (!exp_conf) for (int n = 0; n < N; n++) begin
              chk(int'(lane_src[n]) == ab[n], $sformatf("lane %0d bank %0d exp %0d", n, lane_src[n], ab[n]));
              chk(bank_en[ab[n]] && int'(bank_row[ab[n]]) == ar[n], $sformatf("lane %0d row", n));
            end
            steps++;
            @(negedge clk); step = 0;
          end
      #1; chk(!busy, "busy after last step");
    end
    chk(nconf > 0 && steps > 100, "coverage");
    $display("steps=%0d conflicts=%0d", steps, nconf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
