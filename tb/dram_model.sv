// dram_model: behavioural stand-in for the off-chip DRAM on the processor's
// data interface (test benches only). Line reads are answered in request
// order after LAT cycles with the request's tag; line writes are stored.
// Words never written read as (3*address + 1) mod 2^16. The request and
// write channels drop ready for a random share of cycles (req_stall_pct,
// wr_stall_pct) to exercise back-pressure.
module dram_model
  import merit_pkg::*;
#(
  parameter int TW  = 3,
  parameter int LAT = 6
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  int                     req_stall_pct,
  input  int                     wr_stall_pct,
  input  logic                   req_valid,
  output logic                   req_ready,
  input  addr_t                  req_addr,
  input  logic [TW-1:0]          req_tag,
  output logic                   resp_valid,
  input  logic                   resp_ready,
  output logic [N-1:0][DW-1:0]   resp_data,
  output logic [TW-1:0]          resp_tag,
  input  logic                   wr_valid,
  output logic                   wr_ready,
  input  addr_t                  wr_addr,
  input  logic [N-1:0][DW-1:0]   wr_data
);
  logic [15:0] mem [int unsigned];
  int unsigned q_addr[$], q_tag[$];
  longint q_due[$];
  longint cyc = 0;
  int reads = 0, writes = 0, wr_stalls = 0;

  function automatic logic [15:0] rd(int unsigned a);
    return mem.exists(a) ? mem[a] : 16'(a * 3 + 1);
  endfunction

  initial begin
    req_ready = 0; wr_ready = 0; resp_valid = 0; resp_data = '0; resp_tag = '0;
  end

  always @(negedge clk) begin
    req_ready = ($urandom_range(0, 99) >= req_stall_pct);
    wr_ready  = ($urandom_range(0, 99) >= wr_stall_pct);
    resp_valid = (q_addr.size() > 0) && (q_due[0] <= cyc);
    if (q_addr.size() > 0) begin
      for (int k = 0; k < N; k++) resp_data[k] = rd(q_addr[0] + k);
      resp_tag = TW'(q_tag[0]);
    end
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (req_valid && req_ready) begin
        q_addr.push_back(int'(req_addr)); q_tag.push_back(int'(req_tag)); q_due.push_back(cyc + LAT);
        reads++;
      end
      if (resp_valid && resp_ready) begin
        void'(q_addr.pop_front()); void'(q_tag.pop_front()); void'(q_due.pop_front());
      end
      if (wr_valid && wr_ready) begin
        for (int k = 0; k < N; k++) mem[int'(wr_addr) + k] = wr_data[k];
        writes++;
      end
      if (wr_valid && !wr_ready) wr_stalls++;
    end
  end
endmodule
