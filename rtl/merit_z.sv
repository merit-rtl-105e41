// merit_z: the MERIT-z vector processor, top level.
//
// NTAU Tile Accumulation Units share one kernel definition held by the
// dispatcher and one memory bus. The host writes the kernel (program, range
// tables, lookup table, MERIT transform parameters of both Read Pipelines)
// over the control interface, then streams jobs; each job is one tile pass
// (an RP0 tile, an RP1 tile, an output address) and runs on one TAU. All
// memory traffic goes through the data interface: line read requests with a
// tag, tagged read data, and line writes, each a valid/ready channel. A line
// is N = 32 words of 16 b, addressed in words.
//
// The organisation (dispatcher, TAUs, memory bus) and the 4-TAU, 128-ALU
// configuration are the paper's; interface details are this design's.
// Status: idle (no work anywhere), full_stall (some RP waits for buffer
// space), conflict (a bank or butterfly conflict: the kernel's MERIT mapping
// is not valid for this hardware) and per-TAU job_done pulses.
module merit_z
  import merit_pkg::*;
#(
  parameter int unsigned NTAU = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // control interface
  input  logic                      cfg_we,
  input  logic [9:0]                cfg_addr,
  input  logic [31:0]               cfg_wdata,
  // jobs
  input  logic                      job_valid,
  output logic                      job_ready,
  input  job_t                      job,
  // data interface
  output logic                      m_rd_req_valid,
  input  logic                      m_rd_req_ready,
  output addr_t                     m_rd_req_addr,
  output logic [$clog2(2*NTAU)-1:0] m_rd_req_tag,
  input  logic                      m_rd_resp_valid,
  output logic                      m_rd_resp_ready,
  input  logic [N-1:0][DW-1:0]      m_rd_resp_data,
  input  logic [$clog2(2*NTAU)-1:0] m_rd_resp_tag,
  output logic                      m_wr_valid,
  input  logic                      m_wr_ready,
  output addr_t                     m_wr_addr,
  output logic [N-1:0][DW-1:0]      m_wr_data,
  // status
  output logic                      idle,
  output logic [NTAU-1:0]           full_stall,
  output logic                      conflict,
  output logic [NTAU-1:0]           job_done
);
  k_cfg_t  kcfg;
  rp_cfg_t rp0_cfg, rp1_cfg;
  instr_t [PDEPTH-1:0] prog;
  logic [NLUT-1:0][DW-1:0] lut;
  logic [NTAU-1:0] t_job_valid, t_job_ready, t_idle, t_conflict;

  dispatcher #(.NTAU(NTAU)) u_disp (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .kcfg, .rp0_cfg, .rp1_cfg, .prog, .lut,
    .job_valid, .job_ready, .tau_job_valid(t_job_valid), .tau_job_ready(t_job_ready));

  logic [2*NTAU-1:0] rq_valid, rq_ready, rs_valid, rs_ready;
  addr_t [2*NTAU-1:0] rq_addr;
  logic [N-1:0][DW-1:0] rs_data;
  logic [NTAU-1:0] w_valid, w_ready;
  addr_t [NTAU-1:0] w_addr;
  logic [NTAU-1:0][N-1:0][DW-1:0] w_data;

  for (genvar t = 0; t < int'(NTAU); t++) begin : g_tau
    logic [1:0] fs;
    tau u_tau (
      .clk, .rst_n, .kcfg, .rp0_cfg, .rp1_cfg, .prog, .lut,
      .job_valid(t_job_valid[t]), .job_ready(t_job_ready[t]), .job,
      .rd_req_valid(rq_valid[2*t +: 2]), .rd_req_ready(rq_ready[2*t +: 2]),
      .rd_req_addr(rq_addr[2*t +: 2]),
      .rd_resp_valid(rs_valid[2*t +: 2]), .rd_resp_ready(rs_ready[2*t +: 2]),
      .rd_resp_data(rs_data),
      .wr_valid(w_valid[t]), .wr_ready(w_ready[t]), .wr_addr(w_addr[t]), .wr_data(w_data[t]),
      .full_stall(fs), .conflict(t_conflict[t]), .job_done(job_done[t]), .idle(t_idle[t]));
    assign full_stall[t] = |fs;
  end

  mem_arbiter #(.NR(2*NTAU), .NW(NTAU)) u_bus (
    .clk, .rst_n,
    .rd_req_valid(rq_valid), .rd_req_ready(rq_ready), .rd_req_addr(rq_addr),
    .rd_resp_valid(rs_valid), .rd_resp_ready(rs_ready), .rd_resp_data(rs_data),
    .wr_valid(w_valid), .wr_ready(w_ready), .wr_addr(w_addr), .wr_data(w_data),
    .m_rd_req_valid, .m_rd_req_ready, .m_rd_req_addr, .m_rd_req_tag,
    .m_rd_resp_valid, .m_rd_resp_ready, .m_rd_resp_data, .m_rd_resp_tag,
    .m_wr_valid, .m_wr_ready, .m_wr_addr, .m_wr_data);

  assign idle     = &t_idle && !job_valid;
  assign conflict = |t_conflict;
endmodule
