// mem_arbiter: the memory bus between the TAUs and the processor's one
// external data interface.
//
// Read requests of NR ports are granted round-robin onto one valid/ready
// request channel and carry the port number as a tag; the memory returns data
// with the tag, and the response goes back to that port (the memory must keep
// each port's responses in order; a stalled port back-pressures the response
// channel). Write requests of NW ports are granted round-robin onto one
// valid/ready write channel. All of it is combinational; the round-robin
// pointers move after each grant.
//
// The paper gives the shared memory bus and the valid/ready, AXI-like data
// interface; tags and round-robin are this design's choices.
module mem_arbiter
  import merit_pkg::*;
#(
  parameter int unsigned NR = 8,
  parameter int unsigned NW = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // TAU side
  input  logic [NR-1:0]             rd_req_valid,
  output logic [NR-1:0]             rd_req_ready,
  input  addr_t [NR-1:0]            rd_req_addr,
  output logic [NR-1:0]             rd_resp_valid,
  input  logic [NR-1:0]             rd_resp_ready,
  output logic [N-1:0][DW-1:0]      rd_resp_data,
  input  logic [NW-1:0]             wr_valid,
  output logic [NW-1:0]             wr_ready,
  input  addr_t [NW-1:0]            wr_addr,
  input  logic [NW-1:0][N-1:0][DW-1:0] wr_data,
  // memory side
  output logic                      m_rd_req_valid,
  input  logic                      m_rd_req_ready,
  output addr_t                     m_rd_req_addr,
  output logic [$clog2(NR)-1:0]     m_rd_req_tag,
  input  logic                      m_rd_resp_valid,
  output logic                      m_rd_resp_ready,
  input  logic [N-1:0][DW-1:0]      m_rd_resp_data,
  input  logic [$clog2(NR)-1:0]     m_rd_resp_tag,
  output logic                      m_wr_valid,
  input  logic                      m_wr_ready,
  output addr_t                     m_wr_addr,
  output logic [N-1:0][DW-1:0]      m_wr_data
);
  localparam int unsigned RT = $clog2(NR);
  localparam int unsigned WT = (NW > 1) ? $clog2(NW) : 1;

  logic [RT-1:0] rptr, rsel;
  logic [WT-1:0] wptr, wsel;
  logic rfound, wfound;

  always_comb begin
    rfound = 1'b0; rsel = rptr;
    for (int i = 0; i < int'(NR); i++) begin
      // candidate (ptr + i) mod size
      if (!rfound && rd_req_valid[(int'(rptr) + i) % NR]) begin rfound = 1'b1; rsel = RT'((int'(rptr) + i) % NR); end
    end
    wfound = 1'b0; wsel = wptr;
    for (int i = 0; i < int'(NW); i++) begin
      // candidate (ptr + i) mod size
      if (!wfound && wr_valid[(int'(wptr) + i) % NW]) begin wfound = 1'b1; wsel = WT'((int'(wptr) + i) % NW); end
    end
  end

  assign m_rd_req_valid = rfound;
  assign m_rd_req_addr  = rd_req_addr[rsel];
  assign m_rd_req_tag   = rsel;
  always_comb begin
    rd_req_ready = '0;
    if (rfound) rd_req_ready[rsel] = m_rd_req_ready;
    rd_resp_valid = '0;
    rd_resp_valid[m_rd_resp_tag] = m_rd_resp_valid;
    wr_ready = '0;
    if (wfound) wr_ready[wsel] = m_wr_ready;
  end
  assign m_rd_resp_ready = rd_resp_ready[m_rd_resp_tag];
  assign rd_resp_data    = m_rd_resp_data;

  assign m_wr_valid = wfound;
  assign m_wr_addr  = wr_addr[wsel];
  assign m_wr_data  = wr_data[wsel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr <= '0; wptr <= '0;
    end else begin
      if (rfound && m_rd_req_ready) rptr <= RT'((int'(rsel) + 1) % NR);
      if (wfound && m_wr_ready)     wptr <= WT'((int'(wsel) + 1) % NW);
    end
  end
endmodule
