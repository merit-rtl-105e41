// tile_dma: walks the DRAM footprint of one tile and produces one step per
// DRAM line touched.
//
// A tile is `planes` x `rows` x `row_len` words; row r of plane p starts at
// base + p*plane_pitch + r*row_pitch. A line is N aligned words. For each step
// the DMA gives the line address, the first word used inside the line (off),
// how many words are used (cnt) and where in the tile buffer the first of them
// goes (dst, counting tile words consecutively from sram_base, modulo the
// buffer). A Read Pipeline runs two copies on the same tile: one sends the
// line addresses as read requests, the other steps once per returning line
// and tells the collector what to keep.
//
// The two Tile DMAs and their place come from the paper's Read Pipeline
// drawing; the tile shape, line size and step format are this design's.
// Timing: `start` loads the job when idle; a step is presented while busy and
// is taken on step_valid && step_ready; `done` pulses with the last step.
module tile_dma
  import merit_pkg::*;
#(
  parameter int unsigned CAP = 8192
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  addr_t                  base,
  input  logic [$clog2(CAP)-1:0] sram_base,
  input  rp_cfg_t                cfg,
  output logic                   busy,
  output logic                   step_valid,
  input  logic                   step_ready,
  output addr_t                  line_addr,
  output logic [LB-1:0]          off,
  output logic [LB:0]            cnt,
  output logic [$clog2(CAP)-1:0] dst,
  output logic                   done
);
  logic [15:0] p, r, col;
  addr_t row_addr, plane_addr, cur;
  logic [31:0] left;
  logic [$clog2(CAP)-1:0] sptr;
  logic last_in_row;

  assign cur        = row_addr + addr_t'(col);
  assign line_addr  = cur & ~addr_t'(N - 1);
  assign off        = cur[LB-1:0];
  assign left       = 32'(cfg.row_len) - 32'(col);
  assign cnt        = (left < 32'(N) - 32'(off)) ? (LB+1)'(left) : (LB+1)'(N) - (LB+1)'(off);
  assign dst        = sptr;
  assign step_valid = busy;
  assign last_in_row = (32'(cnt) == left);
  assign done       = step_valid && step_ready && last_in_row
                      && (r + 1 == cfg.rows) && (p + 1 == cfg.planes);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; p <= '0; r <= '0; col <= '0;
      row_addr <= '0; plane_addr <= '0; sptr <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1; p <= '0; r <= '0; col <= '0;
        row_addr <= base; plane_addr <= base; sptr <= sram_base;
      end
    end else if (step_ready) begin
      sptr <= sptr + ($clog2(CAP))'(cnt);
      if (!last_in_row) begin
        col <= col + 16'(cnt);
      end else begin
        col <= '0;
        if (r + 1 != cfg.rows) begin
          r        <= r + 1'b1;
          row_addr <= row_addr + cfg.row_pitch;
        end else begin
          r <= '0;
          if (p + 1 != cfg.planes) begin
            p          <= p + 1'b1;
            plane_addr <= plane_addr + cfg.plane_pitch;
            row_addr   <= plane_addr + cfg.plane_pitch;
          end else begin
            busy <= 1'b0;
          end
        end
      end
    end
  end
endmodule
