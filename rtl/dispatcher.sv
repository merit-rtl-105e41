// dispatcher: the processor's control side. It holds the kernel definition
// written over the control interface and hands jobs to the TAUs.
//
// Control interface (one 32-bit write per cycle, cfg_we/cfg_addr/cfg_wdata):
//   0x000..0x03F  program words (instr_t)
//   0x040..0x050  lookup table entries, bits [15:0]
//   0x060+r       register r:
//     r=0,1,2  loop trip count of level 0,1,2 (level 2 innermost), [15:0]
//     r=3      start table, 4 fields of PAW bits, entry e at [e*PAW +: PAW]
//     r=4      end table, same layout
//     r=5      [0] kernel reads RP1
//     r=6      output pitch (DRAM words between output lines)
//     r=7..15  RP0, r=16..24 RP1, at offset q = r-7 or r-16:
//       q=0  row_len [15:0], rows [31:16]     q=1  planes [15:0], o [31:16]
//       q=2  row_pitch                         q=3  plane_pitch
//       q=4  c0 [15:0], c1 [31:16]             q=5  c2, c3
//       q=6  c4 [15:0], xmask [20:16], rot [23:21]
//       q=7  s0 [15:0], s1 [31:16]             q=8  s2 [15:0]
// In all about 0.4 KB of registers define a kernel. The definition is
// broadcast to every TAU. Jobs are given to the TAUs in round-robin order:
// a job goes to the first ready TAU at or after the pointer, which then moves
// past it.
//
// The paper names the dispatcher, the control interface carrying the
// transform parameters and the program, and the under-0.5 KB budget; the map
// above and the round-robin policy are this design's choices.
module dispatcher
  import merit_pkg::*;
#(
  parameter int unsigned NTAU = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cfg_we,
  input  logic [9:0]                cfg_addr,
  input  logic [31:0]               cfg_wdata,
  output k_cfg_t                    kcfg,
  output rp_cfg_t                   rp0_cfg,
  output rp_cfg_t                   rp1_cfg,
  output instr_t [PDEPTH-1:0]       prog,
  output logic [NLUT-1:0][DW-1:0]   lut,
  input  logic                      job_valid,
  output logic                      job_ready,
  output logic [NTAU-1:0]           tau_job_valid,
  input  logic [NTAU-1:0]           tau_job_ready
);
  localparam int unsigned NR = 25;
  logic [31:0] regs [NR];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prog <= '0; lut <= '0;
      for (int r = 0; r < int'(NR); r++) regs[r] <= '0;
    end else if (cfg_we) begin
      if (cfg_addr < CFG_LUT)
        prog[cfg_addr[5:0]] <= instr_t'(cfg_wdata);
      else if (cfg_addr < CFG_LUT + 10'(NLUT))
        lut[cfg_addr - CFG_LUT] <= cfg_wdata[15:0];
      else if (cfg_addr >= CFG_REG && cfg_addr < CFG_REG + 10'(NR))
        regs[5'(cfg_addr - CFG_REG)] <= cfg_wdata;
    end
  end

  function automatic rp_cfg_t rp_decode(input int q0);
    rp_cfg_t c;
    c.row_len     = regs[q0][15:0];
    c.rows        = regs[q0][31:16];
    c.planes      = regs[q0+1][15:0];
    c.o           = regs[q0+1][31:16];
    c.row_pitch   = regs[q0+2];
    c.plane_pitch = regs[q0+3];
    c.c[0]        = regs[q0+4][15:0];
    c.c[1]        = regs[q0+4][31:16];
    c.c[2]        = regs[q0+5][15:0];
    c.c[3]        = regs[q0+5][31:16];
    c.c[4]        = regs[q0+6][15:0];
    c.xmask       = regs[q0+6][20:16];
    c.rot         = regs[q0+6][23:21];
    c.s[0]        = regs[q0+7][15:0];
    c.s[1]        = regs[q0+7][31:16];
    c.s[2]        = regs[q0+8][15:0];
    return c;
  endfunction

  always_comb begin
    for (int j = 0; j < int'(NLOOP); j++) kcfg.cnt[j] = regs[j][15:0];
    for (int e = 0; e <= int'(NLOOP); e++) begin
      kcfg.start_tab[e] = regs[3][e*PAW +: PAW];
      kcfg.end_tab[e]   = regs[4][e*PAW +: PAW];
    end
    kcfg.rp1_en    = regs[5][0];
    kcfg.out_pitch = regs[6];
    rp0_cfg = rp_decode(7);
    rp1_cfg = rp_decode(16);
  end

  // round-robin job issue
  localparam int unsigned TW = (NTAU > 1) ? $clog2(NTAU) : 1;
  logic [TW-1:0] ptr, pick;
  logic          found;
  always_comb begin
    found = 1'b0;
    pick  = ptr;
    for (int i = 0; i < int'(NTAU); i++) begin
      // candidate (ptr + i) mod size
      if (!found && tau_job_ready[(int'(ptr) + i) % NTAU]) begin
        found = 1'b1;
        pick  = TW'((int'(ptr) + i) % NTAU);
      end
    end
    tau_job_valid = '0;
    if (job_valid && found) tau_job_valid[pick] = 1'b1;
  end
  assign job_ready = found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (job_valid && found) ptr <= TW'((int'(pick) + 1) % NTAU);
  end
endmodule
