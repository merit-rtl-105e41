// read_pipeline: one Read Pipeline (RP) of a TAU. It caches tensor tiles from
// DRAM into N single-port SRAM banks and feeds the Compute Pipeline one
// expanded N-lane vector per accumulation-loop step.
//
// Fill side (mu1, tile caching): for each job (the DRAM address of a tile) the
// controller allocates the tile's words in the circular tile FIFO (stalling
// while the buffer is full), then starts two tile DMAs on the tile: the first
// issues line read requests, the second walks the same lines as their data
// return and steers the collector, which writes the words into the banks.
// When the last line is written the tile is committed (ready).
// Consume side (mu2, expansion): when the oldest tile is ready the address
// generator runs the loop nest over it. Each step reads one row from every
// bank it needs; the bank words are put back at their word positions (the
// inverse of the (X, R) bank permutation, the identity when no hash is set)
// and the expansion butterfly moves (and duplicates) them onto the N lanes.
// After the last step the tile is freed. A step that needs two rows of one
// bank, or that the butterfly cannot route, raises `conflict`; it is not
// replayed, since valid MERIT mappings are meant to be free of both.
//
// Banks are single-port: a read for the Compute Pipeline takes the cycle and
// the collector waits. One vector takes two cycles (read, then present); the
// vector is held until vec_ready. This follows the paper's RP (Tile DMAs,
// Controller, Collector, SRAM banks, Address Generator, butterfly) and its
// circular tile buffer; the controller policy, the read-side inverse (X, R)
// selector and the cycle timing are this design's choices.
// Interfaces: job (valid/ready), memory read request (valid/ready, line
// address), read response (valid/ready, N words, in request order), vector
// out (valid/ready) with its loop indices and first/last flags.
module read_pipeline
  import merit_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned NT    = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  rp_cfg_t                 cfg,
  input  logic [NLOOP-1:0][15:0]  kcnt,
  input  logic                    job_valid,
  output logic                    job_ready,
  input  addr_t                   job_base,
  output logic                    rd_req_valid,
  input  logic                    rd_req_ready,
  output addr_t                   rd_req_addr,
  input  logic                    rd_resp_valid,
  output logic                    rd_resp_ready,
  input  logic [N-1:0][DW-1:0]    rd_resp_data,
  output logic                    vec_valid,
  input  logic                    vec_ready,
  output logic [N-1:0][DW-1:0]    vec,
  output logic [NLOOP-1:0][15:0]  vec_idx,
  output logic [NLOOP-1:0]        vec_first,
  output logic [NLOOP-1:0]        vec_last,
  output logic                    full_stall,   // a job waits for buffer space
  output logic                    conflict,     // collector, bank or butterfly conflict
  output logic                    idle          // no tile held, nothing being fetched
);
  localparam int unsigned CAP = N * DEPTH;
  localparam int unsigned CW  = $clog2(CAP);
  localparam int unsigned RW  = CW - LB;

  // ---------------- tile FIFO ----------------
  logic          alloc_req, alloc_gnt, commit, free_t;
  logic [CW-1:0] alloc_base, head_base;
  logic [CW:0]   tile_words;
  logic          head_valid, head_ready;
  logic [CW:0]   used_words;
  logic [$clog2(NT):0] ntiles;
  logic          fill_busy;

  assign tile_words = (CW+1)'(32'(cfg.row_len) * 32'(cfg.rows) * 32'(cfg.planes));
  assign alloc_req  = job_valid && !fill_busy;
  assign job_ready  = alloc_gnt;
  assign full_stall = alloc_req && !alloc_gnt;

  tile_fifo #(.CAP(CAP), .NT(NT)) u_fifo (
    .clk, .rst_n, .alloc_req, .alloc_size(tile_words), .alloc_gnt, .alloc_base,
    .commit, .free(free_t), .head_valid, .head_ready, .head_base,
    .used_words, .ntiles);

  // ---------------- tile DMAs ----------------
  logic a_busy, a_valid, a_done, b_busy, b_valid, b_done;
  addr_t a_line, b_line;
  logic [LB-1:0] a_off, b_off;
  logic [LB:0]   a_cnt, b_cnt;
  logic [CW-1:0] a_dst, b_dst;
  logic          line_ready;

  tile_dma #(.CAP(CAP)) u_dma_req (
    .clk, .rst_n, .start(alloc_gnt), .base(job_base), .sram_base(alloc_base), .cfg,
    .busy(a_busy), .step_valid(a_valid), .step_ready(rd_req_ready),
    .line_addr(a_line), .off(a_off), .cnt(a_cnt), .dst(a_dst), .done(a_done));
  tile_dma #(.CAP(CAP)) u_dma_col (
    .clk, .rst_n, .start(alloc_gnt), .base(job_base), .sram_base(alloc_base), .cfg,
    .busy(b_busy), .step_valid(b_valid), .step_ready(line_ready),
    .line_addr(b_line), .off(b_off), .cnt(b_cnt), .dst(b_dst), .done(b_done));

  assign rd_req_valid  = a_valid;
  assign rd_req_addr   = a_line;
  assign rd_resp_ready = line_ready;
  assign commit        = b_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         fill_busy <= 1'b0;
    else if (alloc_gnt) fill_busy <= 1'b1;
    else if (b_done)    fill_busy <= 1'b0;
  end

  // ---------------- collector ----------------
  typedef enum logic [1:0] {C_IDLE, C_RD, C_OUT} cstate_e;
  cstate_e cs;
  logic             rd_now;
  logic [N-1:0]     col_we;
  logic [RW-1:0]    col_row;
  logic [N-1:0][DW-1:0] col_wdata;
  logic             col_conflict;

  assign rd_now = (cs == C_RD);

  collector #(.CAP(CAP)) u_col (
    .clk, .rst_n, .line_valid(rd_resp_valid && b_valid), .line_ready,
    .line(rd_resp_data), .off(b_off), .cnt(b_cnt), .dst(b_dst),
    .xmask(cfg.xmask), .rot(cfg.rot), .wr_gnt(!rd_now),
    .bank_we(col_we), .bank_row(col_row), .bank_wdata(col_wdata), .conflict(col_conflict));

  // ---------------- address generator ----------------
  logic ag_busy, ag_start, ag_step, ag_last, ag_conflict;
  logic [N-1:0] ag_en;
  logic [N-1:0][RW-1:0] ag_row;
  logic [N-1:0][LB-1:0] ag_pos, ag_pbank;

  addr_gen #(.CAP(CAP)) u_ag (
    .clk, .rst_n, .start(ag_start), .tile_base(head_base), .cfg, .cnt(kcnt),
    .step(ag_step), .busy(ag_busy), .bank_en(ag_en), .bank_row(ag_row),
    .lane_src(), .lane_pos(ag_pos), .pos_bank(ag_pbank), .idx(vec_idx), .is_first(vec_first), .is_last(vec_last),
    .last(ag_last), .conflict(ag_conflict));

  // ---------------- banks ----------------
  logic [N-1:0][DW-1:0] rdata;
  for (genvar b = 0; b < int'(N); b++) begin : g_bank
    sram_bank #(.DEPTH(DEPTH), .W(DW)) u_bank (
      .clk,
      .en   (rd_now ? ag_en[b] : col_we[b]),
      .we   (!rd_now),
      .addr (rd_now ? ag_row[b] : col_row),
      .wdata(col_wdata[b]),
      .rdata(rdata[b]));
  end

  // ---------------- inverse (X, R) and expansion butterfly ----------------
  // Bank words are first put back at their word positions (address mod N),
  // undoing the (X, R) bank permutation; with X = 0 and R = 0 this is the
  // identity. The butterfly then moves and copies positions onto lanes.
  logic bf_conflict;
  logic [N-1:0][DW-1:0] pos_data;
  logic [N-1:0][LB-1:0] pbank_q, pos_q;
  always_ff @(posedge clk) if (rd_now) begin pbank_q <= ag_pbank; pos_q <= ag_pos; end
  always_comb for (int i = 0; i < int'(N); i++) pos_data[i] = rdata[pbank_q[i]];
  butterfly_net #(.N(N), .W(DW)) u_expand (
    .din(pos_data), .src(pos_q), .dst_en({N{1'b1}}), .dout(vec), .conflict(bf_conflict));

  // ---------------- consume control ----------------
  assign ag_start  = (cs == C_IDLE) && head_ready && !ag_busy;
  assign vec_valid = (cs == C_OUT);
  assign ag_step   = vec_valid && vec_ready;
  assign free_t    = ag_step && ag_last;
  assign idle      = (ntiles == 0) && !fill_busy;
  assign conflict  = col_conflict || (rd_now && ag_conflict) || (vec_valid && bf_conflict);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cs <= C_IDLE;
    else case (cs)
      C_IDLE: if (ag_start) cs <= C_RD;
      C_RD:   cs <= C_OUT;
      C_OUT:  if (vec_ready) cs <= ag_last ? C_IDLE : C_RD;
      default: cs <= C_IDLE;
    endcase
  end
endmodule
