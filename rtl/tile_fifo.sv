// tile_fifo: bookkeeping that turns the banks of a Read Pipeline into one
// circular FIFO of tiles.
//
// A tile is allocated at the tail as an atomic block of `alloc_size` words
// (granted only if that many words and a descriptor slot are free, otherwise
// the requester stalls: "stall when SRAM is full"). The tile then fills from
// DRAM; `commit` marks the oldest still-filling tile ready. The consumer only
// ever reads the oldest tile (head) and only once it is ready, so a partly
// filled tile is never read and no read-after-write check is needed. `free`
// releases the head tile and moves the head past it.
//
// Follows the paper's circular-buffer scheme (head, tail, allocate, ready,
// free). The descriptor queue depth NT and in-order commit are this design's
// choices. Word addresses wrap modulo CAP (a power of two).
// Timing: alloc_gnt is combinational from alloc_req; state updates on the clock.
module tile_fifo #(
  parameter int unsigned CAP = 8192,
  parameter int unsigned NT  = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      alloc_req,
  input  logic [$clog2(CAP):0]      alloc_size,
  output logic                      alloc_gnt,
  output logic [$clog2(CAP)-1:0]    alloc_base,
  input  logic                      commit,
  input  logic                      free,
  output logic                      head_valid,   // a tile exists
  output logic                      head_ready,   // the oldest tile is fully filled
  output logic [$clog2(CAP)-1:0]    head_base,
  output logic [$clog2(CAP):0]      used_words,
  output logic [$clog2(NT):0]       ntiles
);
  localparam int unsigned CW = $clog2(CAP);
  localparam int unsigned TW = $clog2(NT);

  logic [CW:0]   size_q [NT];
  logic [NT-1:0] ready_q;
  logic [TW-1:0] hd, tl, cm;      // head, tail and next-to-commit descriptor
  logic [TW:0]   cnt;
  logic [CW:0]   used;
  logic [CW-1:0] tail_ptr, head_ptr;

  assign alloc_gnt  = alloc_req && (cnt < (TW+1)'(NT)) && (alloc_size <= ((CW+1)'(CAP) - used));
  assign alloc_base = tail_ptr;
  assign head_valid = cnt != 0;
  assign head_ready = head_valid && ready_q[hd];
  assign head_base  = head_ptr;
  assign used_words = used;
  assign ntiles     = cnt;

  logic do_free;
  assign do_free = free && head_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hd <= '0; tl <= '0; cm <= '0; cnt <= '0; used <= '0;
      tail_ptr <= '0; head_ptr <= '0; ready_q <= '0;
      for (int i = 0; i < int'(NT); i++) size_q[i] <= '0;
    end else begin
      if (alloc_gnt) begin
        size_q[tl]  <= alloc_size;
        ready_q[tl] <= 1'b0;
        tl          <= tl + 1'b1;
        tail_ptr    <= tail_ptr + alloc_size[CW-1:0];
      end
      if (commit) begin
        ready_q[cm] <= 1'b1;
        cm          <= cm + 1'b1;
      end
      if (do_free) begin
        hd       <= hd + 1'b1;
        head_ptr <= head_ptr + size_q[hd][CW-1:0];
      end
      cnt  <= cnt + (TW+1)'(alloc_gnt) - (TW+1)'(do_free);
      used <= used + (alloc_gnt ? alloc_size : '0) - (do_free ? size_q[hd] : '0);
    end
  end

  // commit only a tile that was allocated and is not yet ready
  a_commit: assert property (@(posedge clk) disable iff (!rst_n) commit |-> (cnt != 0 && !ready_q[cm]));
endmodule
