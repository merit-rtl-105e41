// tb_butterfly_net: checks the butterfly gather network against an
// independent model. For every pattern the expected conflict flag is computed
// pairwise (two enabled destinations that share a switch node at some stage
// but want different sources), and when routable each destination must get
// exactly din[src]. Patterns: identity, all 32 rotations, broadcast, the
// lane-bit strided patterns of the paper's A_n formula, and random ones.
module tb_butterfly_net;
  localparam int N = 32, W = 16, L = 5;
  logic [N-1:0][W-1:0] din, dout;
  logic [N-1:0][L-1:0] src;
  logic [N-1:0] en;
  logic conflict;
  int checks = 0, failures = 0, routed = 0, blocked = 0;

  butterfly_net #(.N(N), .W(W)) dut (.din, .src, .dst_en(en), .dout, .conflict);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic bit model_conflict();
    for (int s = 0; s < L; s++)
      for (int a = 0; a < N; a++)
        for (int b = a + 1; b < N; b++) begin
          int m = (1 << (s + 1)) - 1;
          if (en[a] && en[b] && src[a] != src[b] &&
              ((a & m) == (b & m)) && ((int'(src[a]) & ~m) == (int'(src[b]) & ~m))) return 1;
        end
    return 0;
  endfunction

  task automatic check();
    bit exp;
    #1;
    exp = model_conflict();
    checks++;
    if (conflict !== exp) begin failures++; $display("conflict mismatch exp %0d got %0d", exp, conflict); end
    if (!exp) begin
      routed++;
      for (int n = 0; n < N; n++) if (en[n]) begin
        checks++;
        if (dout[n] !== din[src[n]]) begin failures++; $display("lane %0d got %h exp %h", n, dout[n], din[src[n]]); end
      end
    end else blocked++;
  endtask

  initial begin
    for (int i = 0; i < N; i++) din[i] = W'($urandom);
    en = '1;
    for (int n = 0; n < N; n++) src[n] = L'(n);
    check();
    for (int r = 0; r < N; r++) begin
      for (int n = 0; n < N; n++) src[n] = L'(n + r);
      check();
    end
    for (int n = 0; n < N; n++) src[n] = 5'd7;
    check();
    // strided lane patterns A_n = A0 + sum c_i b_i (mod 32), c = (1,2,4,8,16) and others
    for (int t = 0; t < 40; t++) begin
      int c[5];
      int a0 = $urandom_range(0, 31);
      for (int i = 0; i < 5; i++) c[i] = (t < 20) ? (1 << i) * (1 + (t % 2)) : $urandom_range(0, 3) << i;
      for (int n = 0; n < N; n++) begin
        int a = a0;
        for (int i = 0; i < 5; i++) if ((n >> i) & 1) a += c[i];
        src[n] = L'(a);
      end
      check();
    end
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) din[i] = W'($urandom);
      for (int n = 0; n < N; n++) src[n] = L'($urandom);
      en = N'($urandom) | N'($urandom);
      if (t % 4 == 0) en = N'(1 << (t % 32)) | N'(1 << ((t * 7) % 32));
      check();
    end
    checks++;
    if (routed < 30 || blocked < 10) begin failures++; $display("coverage routed=%0d blocked=%0d", routed, blocked); end
    $display("routed=%0d blocked=%0d", routed, blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
