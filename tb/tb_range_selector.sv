// tb_range_selector: checks the paper's two-loop example (start table 0,5,9,
// end table 16,22,25; steps (0,0),(0,1),(1,0),(1,1) run [0,16), [9,22),
// [5,16), [9,25)) on a 2-level instance, then all first/last flag patterns of
// the default 3-level unit against a model: the step starts at the outermost
// level from which every inner loop is at its first index and ends at the
// outermost level from which every inner loop is at its last index.
module tb_range_selector;
  int checks = 0, failures = 0;
  logic [1:0] f2, l2;
  logic [2:0][6:0] st2, en2;
  logic [6:0] ps2, pe2;
  logic [2:0] f3, l3;
  logic [3:0][6:0] st3, en3;
  logic [6:0] ps3, pe3;

  range_selector #(.NLOOP(2), .PAW(7)) dut2 (.is_first(f2), .is_last(l2), .start_tab(st2),
    .end_tab(en2), .pc_start(ps2), .pc_end(pe2));
  range_selector dut3 (.is_first(f3), .is_last(l3), .start_tab(st3), .end_tab(en3),
    .pc_start(ps3), .pc_end(pe3));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("%s", m); end
  endtask

  initial begin
    // [0] is the outer loop i, [1] the inner loop j, both 0..1
    st2 = '{7'd9, 7'd5, 7'd0};
    en2 = '{7'd25, 7'd22, 7'd16};
    for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) begin
      int es[4] = '{0, 9, 5, 9};
      int ee[4] = '{16, 22, 16, 25};
      f2 = {j == 0, i == 0}; l2 = {j == 1, i == 1};
      #1;
      chk(int'(ps2) == es[i * 2 + j] && int'(pe2) == ee[i * 2 + j],
          $sformatf("(%0d,%0d) -> [%0d,%0d)", i, j, ps2, pe2));
    end
    for (int t = 0; t < 20; t++) begin
      for (int e = 0; e < 4; e++) begin st3[e] = 7'($urandom); en3[e] = 7'($urandom); end
      for (int p = 0; p < 64; p++) begin
        automatic int s, q;
        f3 = 3'(p); l3 = 3'(p >> 3);
        #1;
        s = 3;
        for (int j = 2; j >= 0; j--) begin
          automatic bit all = 1;
          for (int m = j; m < 3; m++) all &= f3[m];
          if (all) s = j;
        end
        q = 0;
        for (int j = 2; j >= 0; j--) begin
          automatic bit all = 1;
          for (int m = j; m < 3; m++) all &= l3[m];
          if (all) q = 3 - j;
        end
        chk(ps3 == st3[s] && pe3 == en3[q], $sformatf("f=%b l=%b", f3, l3));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
