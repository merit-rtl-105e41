// butterfly_net: log2(N)-stage butterfly that gathers words from N sources
// (SRAM banks) onto N destinations (lanes or banks), duplicating a word when
// several destinations ask for the same source.
//
// Each stage s has one 2-input selector per node m: the node keeps its own
// word or takes the word of node m ^ (1 << s). Stages run from bit 0 upward.
// After stage s, destination n's word sits at node {src[n][L-1:s+1], n[s:0]},
// so the selector of that node is src[n][s] ^ n[s]. The controls are computed
// from src[] combinationally. A pattern that no setting can route (two
// destinations needing different words at one node) is detected by routing the
// source indices through the same switches and comparing; `conflict` then rises.
// Destinations with dst_en low take part in nothing.
//
// The paper specifies the 5-stage butterfly for N = 32 and the condition under
// which MERIT access patterns route without conflict; the stage order, switch
// kind and the control computation are this design's choices. Purely
// combinational.
module butterfly_net #(
  parameter int unsigned N = 32,
  parameter int unsigned W = 16
) (
  input  logic [N-1:0][W-1:0]          din,
  input  logic [N-1:0][$clog2(N)-1:0]  src,
  input  logic [N-1:0]                 dst_en,
  output logic [N-1:0][W-1:0]          dout,
  output logic                         conflict
);
  localparam int unsigned L = $clog2(N);

  logic [L-1:0][N-1:0] sel;
  logic [L:0][N-1:0][W-1:0] d;
  logic [L:0][N-1:0][L-1:0] t;

  always_comb begin
    logic [L-1:0] node;
    logic [L-1:0] lo;
    sel = '0;
    node = '0;
    lo = '0;
    for (int s = 0; s < int'(L); s++) begin
      lo = L'((1 << (s + 1)) - 1);
      for (int n = 0; n < int'(N); n++) begin
        if (dst_en[n]) begin
          node = (src[n] & ~lo) | (L'(n) & lo);
          sel[s][node] = src[n][s] ^ n[s];
        end
      end
    end
  end

  for (genvar m = 0; m < int'(N); m++) begin : g_in
    assign d[0][m] = din[m];
    assign t[0][m] = L'(m);
  end
  for (genvar s = 0; s < int'(L); s++) begin : g_stage
    for (genvar m = 0; m < int'(N); m++) begin : g_node
      assign d[s+1][m] = sel[s][m] ? d[s][m ^ (1 << s)] : d[s][m];
      assign t[s+1][m] = sel[s][m] ? t[s][m ^ (1 << s)] : t[s][m];
    end
  end

  always_comb begin
    conflict = 1'b0;
    for (int n = 0; n < int'(N); n++) begin
      dout[n] = d[L][n];
      if (dst_en[n] && t[L][n] != src[n]) conflict = 1'b1;
    end
  end
endmodule
