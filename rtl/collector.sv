// collector: writes the useful words of a returning DRAM line into the banks
// of a Read Pipeline (partial transform mu1, tile caching).
//
// The tile DMA tells which words of the line belong to the tile (off, cnt) and
// the tile-buffer address of the first one (dst). Word k of the line goes to
// buffer address dst + (k - off); its row is address >> LB. Routing is in
// two stages: a butterfly network (in gather form) rotates word k to position
// (address mod N), which never conflicts, and the (X, R) stage then permutes
// positions to banks for the row being written. All words written in one
// cycle share one row, so a line whose words straddle two rows is written in
// two cycles ("passes"). Writes are made only when wr_gnt is high (the banks are
// single-port and reads for the Compute Pipeline come first).
//
// From the paper: the collector with its 5-stage butterfly followed by the
// 3-stage omega network for (X, R). This design's choices: the per-row passes,
// and the (X, R) stage written as its function (a per-bank selection among the
// positions) rather than as omega-network switches. `conflict` reports an
// unroutable butterfly pattern; with a rotation it cannot occur.
// Timing: line_ready rises in the cycle the last pass is written; the bank
// write strobes are combinational, the banks capture them on the clock edge.
module collector
  import merit_pkg::*;
#(
  parameter int unsigned CAP = 8192
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   line_valid,
  output logic                   line_ready,
  input  logic [N-1:0][DW-1:0]   line,
  input  logic [LB-1:0]          off,
  input  logic [LB:0]            cnt,
  input  logic [$clog2(CAP)-1:0] dst,
  input  logic [LB-1:0]          xmask,
  input  logic [2:0]             rot,
  input  logic                   wr_gnt,
  output logic [N-1:0]           bank_we,
  output logic [$clog2(CAP)-LB-1:0] bank_row,
  output logic [N-1:0][DW-1:0]   bank_wdata,
  output logic                   conflict
);
  localparam int unsigned CW = $clog2(CAP);
  localparam int unsigned RW = CW - LB;

  logic                pass;          // 0: first row touched, 1: second row
  logic [N-1:0]        wv;            // word k belongs to the tile
  logic [N-1:0][CW-1:0] wa;           // its buffer address
  logic [N-1:0][RW-1:0] wr;           // its row
  logic [RW-1:0]       row0, row_p;
  logic                two_rows;
  logic [N-1:0][LB-1:0] src;
  logic [N-1:0]        en;
  logic                bf_conflict;
  logic [N-1:0][DW-1:0] pos_data;
  logic [N-1:0][LB-1:0] pos_bank;
  logic [N-1:0]        bank_en;

  for (genvar k = 0; k < int'(N); k++) begin : g_word
    assign wv[k] = (k >= int'(off)) && (k < int'(off) + int'(cnt));
    assign wa[k] = dst + CW'(k) - CW'(off);
    assign wr[k] = wa[k][CW-1:LB];
  end

  assign row0 = dst[CW-1:LB];
  assign row_p = pass ? row0 + 1'b1 : row0;

  // stage 1: butterfly, a rotation that puts word k at position (its address mod N)
  always_comb begin
    two_rows = 1'b0;
    src = '0;
    en  = '0;
    for (int k = 0; k < int'(N); k++)
      if (wv[k] && wr[k] != row0) two_rows = 1'b1;
    for (int k = 0; k < int'(N); k++) begin
      if (wv[k] && wr[k] == row_p) begin
        src[wa[k][LB-1:0]] = LB'(k);
        en[wa[k][LB-1:0]]  = 1'b1;
      end
    end
  end

  butterfly_net #(.N(N), .W(DW)) u_bf (
    .din(line), .src(src), .dst_en(en), .dout(pos_data), .conflict(bf_conflict));

  // stage 2: (X, R) bank permutation of the positions of this row
  for (genvar i = 0; i < int'(N); i++) begin : g_pos
    bank_hash #(.LB(LB), .AW(LB + 1)) u_perm (
      .addr({row_p[0], LB'(i)}), .xmask(xmask), .rot(rot), .bank(pos_bank[i]), .row());
  end
  always_comb begin
    bank_wdata = '0;
    bank_en    = '0;
    for (int i = 0; i < int'(N); i++) begin
      bank_wdata[pos_bank[i]] = pos_data[i];
      bank_en[pos_bank[i]]    = en[i];
    end
  end

  assign bank_we    = (line_valid && wr_gnt) ? bank_en : '0;
  assign bank_row   = row_p;
  assign line_ready = line_valid && wr_gnt && (pass || !two_rows);
  assign conflict   = line_valid && bf_conflict;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                           pass <= 1'b0;
    else if (line_valid && wr_gnt) begin
      if (line_ready)                     pass <= 1'b0;
      else                                pass <= 1'b1;
    end
  end
endmodule
