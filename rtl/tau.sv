// tau: one Tile Accumulation Unit, the processor's unit of replication.
//
// A TAU joins two Read Pipelines (RP0 with a 16 KB tile buffer, RP1 with an
// 8 KB one), the Compute Pipeline and the Write Pipeline. A job names the DRAM
// tiles for RP0 and RP1 and where the outputs go; the three addresses are
// queued separately, so both RPs fetch the next tiles while the CP still
// works on the current ones (prefetch overlapping compute). RP1 is given tiles
// only when the kernel uses it.
//
// Structure and buffer sizes follow the paper; the job format and the queue
// depth (JQ) are this design's choices.
// Interfaces: job (valid/ready); two memory read ports (request and response,
// valid/ready, responses in request order); one memory write port
// (valid/ready). Configuration (kcfg, rp*_cfg, prog, lut) must be static
// while the TAU works.
module tau
  import merit_pkg::*;
#(
  parameter int unsigned DEPTH0 = 256,   // RP0 rows per bank: 32 x 256 x 2 B = 16 KB
  parameter int unsigned DEPTH1 = 128,   // RP1 rows per bank: 8 KB
  parameter int unsigned JQ     = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  k_cfg_t                  kcfg,
  input  rp_cfg_t                 rp0_cfg,
  input  rp_cfg_t                 rp1_cfg,
  input  instr_t [PDEPTH-1:0]     prog,
  input  logic [NLUT-1:0][DW-1:0] lut,
  input  logic                    job_valid,
  output logic                    job_ready,
  input  job_t                    job,
  output logic [1:0]              rd_req_valid,
  input  logic [1:0]              rd_req_ready,
  output addr_t [1:0]             rd_req_addr,
  input  logic [1:0]              rd_resp_valid,
  output logic [1:0]              rd_resp_ready,
  input  logic [N-1:0][DW-1:0]    rd_resp_data,
  output logic                    wr_valid,
  input  logic                    wr_ready,
  output addr_t                   wr_addr,
  output logic [N-1:0][DW-1:0]    wr_data,
  output logic [1:0]              full_stall,
  output logic                    conflict,
  output logic                    job_done,
  output logic                    idle
);
  logic q0_ready, q1_ready, qo_ready;
  logic b0_valid, b0_ready, b1_valid, b1_ready, bo_valid, bo_ready;
  addr_t b0, b1, bo;

  assign job_ready = q0_ready && q1_ready && qo_ready;

  sync_fifo #(.W(AW), .DEPTH(JQ)) u_q0 (.clk, .rst_n,
    .in_valid(job_valid && job_ready), .in_ready(q0_ready), .din(job.rp0_base),
    .out_valid(b0_valid), .out_ready(b0_ready), .dout(b0));
  sync_fifo #(.W(AW), .DEPTH(JQ)) u_q1 (.clk, .rst_n,
    .in_valid(job_valid && job_ready && kcfg.rp1_en), .in_ready(q1_ready), .din(job.rp1_base),
    .out_valid(b1_valid), .out_ready(b1_ready), .dout(b1));
  sync_fifo #(.W(AW), .DEPTH(JQ)) u_qo (.clk, .rst_n,
    .in_valid(job_valid && job_ready), .in_ready(qo_ready), .din(job.out_base),
    .out_valid(bo_valid), .out_ready(bo_ready), .dout(bo));

  logic v0_valid, v0_ready, v1_valid, v1_ready;
  logic [N-1:0][DW-1:0] v0, v1;
  logic [NLOOP-1:0][15:0] v0_idx, v1_idx;
  logic [NLOOP-1:0] v0_first, v0_last, v1_first, v1_last;
  logic [1:0] rp_conflict, rp_idle;
  logic [1:0][N-1:0][DW-1:0] resp;
  assign resp[0] = rd_resp_data;
  assign resp[1] = rd_resp_data;

  read_pipeline #(.DEPTH(DEPTH0)) u_rp0 (
    .clk, .rst_n, .cfg(rp0_cfg), .kcnt(kcfg.cnt),
    .job_valid(b0_valid), .job_ready(b0_ready), .job_base(b0),
    .rd_req_valid(rd_req_valid[0]), .rd_req_ready(rd_req_ready[0]), .rd_req_addr(rd_req_addr[0]),
    .rd_resp_valid(rd_resp_valid[0]), .rd_resp_ready(rd_resp_ready[0]), .rd_resp_data(resp[0]),
    .vec_valid(v0_valid), .vec_ready(v0_ready), .vec(v0), .vec_idx(v0_idx),
    .vec_first(v0_first), .vec_last(v0_last), .full_stall(full_stall[0]),
    .conflict(rp_conflict[0]), .idle(rp_idle[0]));

  read_pipeline #(.DEPTH(DEPTH1)) u_rp1 (
    .clk, .rst_n, .cfg(rp1_cfg), .kcnt(kcfg.cnt),
    .job_valid(b1_valid), .job_ready(b1_ready), .job_base(b1),
    .rd_req_valid(rd_req_valid[1]), .rd_req_ready(rd_req_ready[1]), .rd_req_addr(rd_req_addr[1]),
    .rd_resp_valid(rd_resp_valid[1]), .rd_resp_ready(rd_resp_ready[1]), .rd_resp_data(resp[1]),
    .vec_valid(v1_valid), .vec_ready(v1_ready), .vec(v1), .vec_idx(v1_idx),
    .vec_first(v1_first), .vec_last(v1_last), .full_stall(full_stall[1]),
    .conflict(rp_conflict[1]), .idle(rp_idle[1]));

  logic o_valid, o_ready, cp_busy;
  logic [N-1:0][DW-1:0] o_data;

  compute_pipeline u_cp (
    .clk, .rst_n, .kcfg, .prog, .lut,
    .vec0_valid(v0_valid), .vec0_ready(v0_ready), .vec0(v0), .vec0_idx(v0_idx),
    .vec0_first(v0_first), .vec0_last(v0_last),
    .vec1_valid(v1_valid), .vec1_ready(v1_ready), .vec1(v1),
    .out_valid(o_valid), .out_ready(o_ready), .out_data(o_data),
    .job_done, .busy(cp_busy));

  write_pipeline u_wp (
    .clk, .rst_n, .out_pitch(kcfg.out_pitch),
    .base_valid(bo_valid), .base_ready(bo_ready), .base(bo), .job_done,
    .in_valid(o_valid), .in_ready(o_ready), .in_data(o_data),
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  assign conflict = |rp_conflict;
  assign idle     = !b0_valid && !b1_valid && !bo_valid && (&rp_idle) && !cp_busy;

  // RP1 loop indices must track RP0's, step for step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (v0_ready && v1_ready) |-> (v0_idx == v1_idx && v0_first == v1_first && v0_last == v1_last));
endmodule
