// range_selector: picks the slice of the concatenated strategy program that a
// loop step of a Ranged Inner-Product must run.
//
// The strategy functions of a nested loop (PreLoop of each level, the body,
// PostLoop of each level) are stored back to back as one program; start_tab
// and end_tab hold the NLOOP+1 boundaries. For a step, let f be the number of
// innermost loops (counted from the innermost outward, stopping at the first
// that is not) whose index equals its first value, and l the same count for
// the last value. The step runs program words [start_tab[NLOOP-f],
// end_tab[l]). The two counts are found by a prefix scan for the first
// "false". Example from the paper, two loops, start (0,5,9), end (16,22,25):
// index (0,1) runs [9,22): Loop then PostRow.
//
// The tables, the comparison with the first/last index and the prefix scan are
// the paper's; the entry order of the tables is read from its example.
// Combinational.
module range_selector #(
  parameter int unsigned NLOOP = 3,
  parameter int unsigned PAW   = 7
) (
  input  logic [NLOOP-1:0]          is_first,   // [NLOOP-1] innermost
  input  logic [NLOOP-1:0]          is_last,
  input  logic [NLOOP:0][PAW-1:0]   start_tab,
  input  logic [NLOOP:0][PAW-1:0]   end_tab,
  output logic [PAW-1:0]            pc_start,
  output logic [PAW-1:0]            pc_end
);
  // run_f[k] / run_l[k]: the k innermost first / last flags are all set
  logic [NLOOP:0] run_f, run_l;
  assign run_f[0] = 1'b1;
  assign run_l[0] = 1'b1;
  for (genvar k = 1; k <= int'(NLOOP); k++) begin : g_run
    assign run_f[k] = run_f[k-1] & is_first[NLOOP-k];
    assign run_l[k] = run_l[k-1] & is_last[NLOOP-k];
  end

  // f = number of set run_f bits beyond 0: the longest run wins
  always_comb begin
    pc_start = start_tab[NLOOP];
    pc_end   = end_tab[0];
    for (int k = 1; k <= int'(NLOOP); k++) begin
      if (run_f[k]) pc_start = start_tab[NLOOP-k];
      if (run_l[k]) pc_end   = end_tab[k];
    end
  end
endmodule
