// write_pipeline: the Write Pipeline (WP) of a TAU. It holds no data: each
// output vector of the Compute Pipeline is passed straight to the DRAM write
// channel as one N-word line, with its address generated on the fly as
//     out_base + i * out_pitch,   i = 0, 1, ... within the job.
// The job's out_base is the head of a small queue filled when the TAU accepts
// the job; job_done from the Compute Pipeline retires it and restarts i.
// The WP stalls the Compute Pipeline only when the write channel is not ready.
//
// From the paper: no storage, address generation on the fly, line-aligned
// output, stall only on a full DRAM write queue. This design's choices: the
// linear address rule and one line per output vector (no lane shuffle).
// Timing: combinational from in_* to wr_*; the counter updates on the clock.
module write_pipeline
  import merit_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  addr_t                out_pitch,
  input  logic                 base_valid,
  output logic                 base_ready,
  input  addr_t                base,
  input  logic                 job_done,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [N-1:0][DW-1:0] in_data,
  output logic                 wr_valid,
  input  logic                 wr_ready,
  output addr_t                wr_addr,
  output logic [N-1:0][DW-1:0] wr_data
);
  addr_t off;
  assign wr_valid   = in_valid && base_valid;
  assign in_ready   = wr_ready && base_valid;
  assign wr_addr    = base + off;
  assign wr_data    = in_data;
  assign base_ready = job_done;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    off <= '0;
    else if (job_done)             off <= '0;
    else if (wr_valid && wr_ready) off <= off + out_pitch;
  end
  a_done_has_base: assert property (@(posedge clk) disable iff (!rst_n) job_done |-> base_valid);
endmodule
