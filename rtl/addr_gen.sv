// addr_gen: the Read Pipeline's address generator (partial transform mu2,
// expansion).
//
// It steps the accumulation loop nest k_0..k_(NLOOP-1) (k_(NLOOP-1) innermost)
// over one cached tile. For every step it computes the tile-buffer address of
// every lane n,
//     A_n = base + o + sum_j k_j s_j + sum_i c_i b_(n,i),
// where b_(n,i) is bit i of the lane number (the paper's A_n = A_0 + sum c_i
// b_(n,i) with A_0 from the MERIT index equation), turns each into (bank, row)
// with bank_hash, and gives for each bank the row to read and for each lane the
// bank it reads (the butterfly's source index). Several lanes may read the same
// word (duplication); two lanes that need different rows of one bank are a bank
// conflict, flagged on `conflict`. It also gives the loop indices and whether
// each is at its first or last value, which drive the Ranged Inner-Product.
//
// From the paper: the address formula and the lane-bit decomposition. This
// design's choices: NLOOP = 3 levels, innermost-last order, 16-bit strides.
// Timing: `start` (when idle) begins at all-zero indices; outputs describe the
// current step; `step` advances; `last` is high on the final step, after which
// the generator goes idle.
module addr_gen
  import merit_pkg::*;
#(
  parameter int unsigned CAP = 8192
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [$clog2(CAP)-1:0]      tile_base,
  input  rp_cfg_t                     cfg,
  input  logic [NLOOP-1:0][15:0]      cnt,
  input  logic                        step,
  output logic                        busy,
  output logic [N-1:0]                bank_en,
  output logic [N-1:0][$clog2(CAP)-LB-1:0] bank_row,
  output logic [N-1:0][LB-1:0]        lane_src,   // bank each lane reads
  output logic [N-1:0][LB-1:0]        lane_pos,   // word position (address mod N) of each lane
  output logic [N-1:0][LB-1:0]        pos_bank,   // bank holding the word at each position
  output logic [NLOOP-1:0][15:0]      idx,
  output logic [NLOOP-1:0]            is_first,
  output logic [NLOOP-1:0]            is_last,
  output logic                        last,
  output logic                        conflict
);
  localparam int unsigned CW = $clog2(CAP);
  localparam int unsigned RW = CW - LB;

  logic [CW-1:0] base_q, a0;
  logic [N-1:0][CW-1:0] an;
  logic [N-1:0][RW-1:0] rn;
  logic [N-1:0]         pos_rbit;   // lowest row bit of the word used at each position

  always_comb begin
    a0 = base_q + CW'(cfg.o);
    for (int j = 0; j < int'(NLOOP); j++) a0 = a0 + CW'(32'(idx[j]) * 32'(cfg.s[j]));
    for (int j = 0; j < int'(NLOOP); j++) begin
      is_first[j] = idx[j] == 16'd0;
      is_last[j]  = idx[j] == cnt[j] - 16'd1;
    end
    last = &is_last;
  end

  for (genvar n = 0; n < int'(N); n++) begin : g_lane
    always_comb begin
      an[n] = a0;
      for (int i = 0; i < int'(LB); i++) if (n[i]) an[n] = an[n] + CW'(cfg.c[i]);
    end
    bank_hash #(.LB(LB), .AW(CW)) u_hash (
      .addr(an[n]), .xmask(cfg.xmask), .rot(cfg.rot), .bank(lane_src[n]), .row(rn[n]));
  end

  for (genvar n = 0; n < int'(N); n++) begin : g_pos
    assign lane_pos[n] = an[n][LB-1:0];
    bank_hash #(.LB(LB), .AW(LB + 1)) u_pos_hash (
      .addr({pos_rbit[n], LB'(n)}), .xmask(cfg.xmask), .rot(cfg.rot), .bank(pos_bank[n]), .row());
  end

  always_comb begin
    pos_rbit = '0;
    for (int n = 0; n < int'(N); n++) pos_rbit[an[n][LB-1:0]] = rn[n][0];
  end

  always_comb begin
    bank_en  = '0;
    bank_row = '0;
    conflict = 1'b0;
    for (int n = 0; n < int'(N); n++) begin
      if (bank_en[lane_src[n]] && bank_row[lane_src[n]] != rn[n]) conflict = 1'b1;
      if (pos_rbit[an[n][LB-1:0]] != rn[n][0]) conflict = 1'b1;
      bank_en[lane_src[n]]  = 1'b1;
      bank_row[lane_src[n]] = rn[n];
    end
    if (!busy) begin bank_en = '0; conflict = 1'b0; end
  end

  // adv[j]: every loop inside loop j is at its last index, so loop j steps
  logic [NLOOP-1:0] adv;
  assign adv[NLOOP-1] = 1'b1;
  for (genvar j = 0; j < int'(NLOOP) - 1; j++) begin : g_adv
    assign adv[j] = adv[j+1] & is_last[j+1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; base_q <= '0; idx <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1; base_q <= tile_base; idx <= '0;
      end
    end else if (step) begin
      if (last) busy <= 1'b0;
      else begin
        // odometer, innermost loop NLOOP-1
        for (int j = 0; j < int'(NLOOP); j++)
          if (adv[j]) idx[j] <= is_last[j] ? 16'd0 : idx[j] + 1'b1;
      end
    end
  end
endmodule
