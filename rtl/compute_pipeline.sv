// compute_pipeline: the Compute Pipeline (CP) of a TAU. It runs the Ranged
// Inner-Product program on N lanes in lock step.
//
// For every accumulation-loop step the CP takes one vector from Read Pipeline 0
// and, if the kernel uses it, one from Read Pipeline 1, together with the loop
// indices and their first/last flags. The range selector turns the flags into
// a program slice [pc_start, pc_end) of the concatenated strategy program
// (PreLoop ... Loop ... PostLoop), and the CP executes that slice, one
// instruction per cycle, on all lanes. Operands come from 8 registers per lane,
// the two input vectors, the partial-sum SRAM, an immediate or zero; results go
// to a register, to the partial-sum SRAM or out to the Write Pipeline
// (stalling while it is not ready). An instruction that reads the partial-sum
// SRAM spends one extra cycle on the read, since that SRAM is single-port.
// After the slice of the loop nest's final step, job_done pulses.
//
// From the paper: the SIMD array, the register file, the 5 KB single-port
// partial-sum SRAM (80 entries of N x 16 b here), the program selected by the
// range tables, the 32-bit instruction with seven kinds of operation. This
// design's choices: 8 registers, the operand codes, the timing above.
// Interfaces: vec0/vec1 and out are valid/ready; prog, lut and kcfg are static
// while a job runs.
module compute_pipeline
  import merit_pkg::*;
#(
  parameter int unsigned PSDEPTH = 80
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  k_cfg_t                  kcfg,
  input  instr_t [PDEPTH-1:0]     prog,
  input  logic [NLUT-1:0][DW-1:0] lut,
  input  logic                    vec0_valid,
  output logic                    vec0_ready,
  input  logic [N-1:0][DW-1:0]    vec0,
  input  logic [NLOOP-1:0][15:0]  vec0_idx,
  input  logic [NLOOP-1:0]        vec0_first,
  input  logic [NLOOP-1:0]        vec0_last,
  input  logic                    vec1_valid,
  output logic                    vec1_ready,
  input  logic [N-1:0][DW-1:0]    vec1,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [N-1:0][DW-1:0]    out_data,
  output logic                    job_done,
  output logic                    busy
);
  localparam int unsigned PSW = $clog2(PSDEPTH);

  typedef enum logic {S_WAIT, S_EXEC} state_e;
  state_e st;

  logic [N-1:0][DW-1:0]     v0, v1;
  logic [NLOOP-1:0][15:0]   idx_q;
  logic                     final_q;
  logic [PAW-1:0]           pc, pc_end_q, sel_start, sel_end;
  logic [N-1:0][7:0][DW-1:0] rf;
  logic                     ps_ok;
  logic [N-1:0][DW-1:0]     ps_rdata, res;
  instr_t                   ins;
  logic                     take, in_range, reads_ps, exec_now, advance;
  logic                     ps_en, ps_we;

  range_selector #(.NLOOP(NLOOP), .PAW(PAW)) u_range (
    .is_first(vec0_first), .is_last(vec0_last),
    .start_tab(kcfg.start_tab), .end_tab(kcfg.end_tab),
    .pc_start(sel_start), .pc_end(sel_end));

  assign take       = (st == S_WAIT) && vec0_valid && (vec1_valid || !kcfg.rp1_en);
  assign vec0_ready = take;
  assign vec1_ready = take && kcfg.rp1_en;
  assign in_range   = (st == S_EXEC) && (pc < pc_end_q);
  assign ins        = prog[pc[$clog2(PDEPTH)-1:0]];
  assign reads_ps   = (ins.sa == SRC_PS) || (ins.sb == SRC_PS) || (ins.sc == SRC_PS);
  assign exec_now   = in_range && (!reads_ps || ps_ok);
  assign out_valid  = exec_now && (ins.dst == DST_OUT);
  assign advance    = exec_now && ((ins.dst != DST_OUT) || out_ready);
  assign out_data   = res;
  assign job_done   = (st == S_EXEC) && !in_range && final_q;
  assign busy       = (st == S_EXEC);

  // partial-sum SRAM, one wide single-port array
  assign ps_en = (in_range && reads_ps && !ps_ok) || (advance && ins.dst == DST_PS);
  assign ps_we = !(in_range && reads_ps && !ps_ok);
  sram_bank #(.DEPTH(PSDEPTH), .W(N*DW)) u_ps (
    .clk, .en(ps_en), .we(ps_we), .addr(ins.imm[PSW-1:0]), .wdata(res), .rdata(ps_rdata));

  // operand selection and the lanes
  for (genvar n = 0; n < int'(N); n++) begin : g_lane
    logic [DW-1:0] a, b, c, ix;
    function automatic logic [DW-1:0] opnd(input logic [3:0] code);
      case (code)
        SRC_RP0:  return v0[n];
        SRC_RP1:  return v1[n];
        SRC_PS:   return ps_rdata[n];
        SRC_IMM:  return DW'($signed(ins.imm));
        SRC_ZERO: return '0;
        default:  return (code < 4'd8) ? rf[n][code[2:0]] : '0;
      endcase
    endfunction
    assign a  = opnd(ins.sa);
    assign b  = opnd(ins.sb);
    assign c  = opnd(ins.sc);
    assign ix = (ins.imm[1:0] < 2'(NLOOP)) ? idx_q[ins.imm[1:0]] : DW'(n);
    simd_alu u_alu (.op(ins.op), .a(a), .b(b), .c(c), .sh(ins.shamt), .index(ix), .lut, .y(res[n]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_WAIT; pc <= '0; pc_end_q <= '0; ps_ok <= 1'b0; final_q <= 1'b0;
      v0 <= '0; v1 <= '0; idx_q <= '0; rf <= '0;
    end else begin
      case (st)
        S_WAIT: if (take) begin
          v0       <= vec0;
          v1       <= vec1;
          idx_q    <= vec0_idx;
          final_q  <= &vec0_last;
          pc       <= sel_start;
          pc_end_q <= sel_end;
          ps_ok    <= 1'b0;
          st       <= S_EXEC;
        end
        S_EXEC: begin
          if (!in_range) st <= S_WAIT;
          else if (reads_ps && !ps_ok) ps_ok <= 1'b1;
          else if (advance) begin
            pc    <= pc + 1'b1;
            ps_ok <= 1'b0;
            if (ins.dst < 4'd8)
              for (int n = 0; n < int'(N); n++) rf[n][ins.dst[2:0]] <= res[n];
          end
        end
        default: st <= S_WAIT;
      endcase
    end
  end

  a_ps_addr: assert property (@(posedge clk) disable iff (!rst_n)
    ps_en |-> 32'(ins.imm) < PSDEPTH);
endmodule
