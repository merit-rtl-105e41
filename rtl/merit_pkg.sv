// merit_pkg: types and constants shared by the MERIT-z vector processor.
//
// The processor is a set of Tile Accumulation Units (TAUs). Each TAU has N = 32
// 16-bit fixed-point SIMD lanes. Data reach the lanes through two Read
// Pipelines (RPs) that cache tensor tiles from DRAM in banked SRAM and expand
// them on the fly through butterfly networks; results leave through a Write
// Pipeline (WP).
//
// From the paper: N = 32 lanes, 16-bit data, a 32-bit instruction word with
// seven kinds of operation, 16 KB / 8 KB RP buffers, a 5 KB partial-sum SRAM,
// a valid/ready data interface and a separate control interface for the
// transform parameters (d, s, o) and the program. This design's own choices:
// the instruction field layout and opcode values, the operand/destination
// codes, the configuration register map, the DRAM line of N words and the
// job descriptor.
package merit_pkg;

  localparam int unsigned N      = 32;            // lanes per TAU
  localparam int unsigned LB     = $clog2(N);     // bank-index bits
  localparam int unsigned DW     = 16;            // data word
  localparam int unsigned AW     = 32;            // DRAM word address
  localparam int unsigned NLOOP  = 3;             // accumulation loop levels
  localparam int unsigned PDEPTH = 64;            // program words
  localparam int unsigned PAW    = $clog2(PDEPTH + 1); // program address (0..PDEPTH)
  localparam int unsigned NLUT   = 17;            // lookup entries (16 segments)
  localparam int unsigned NREG   = 32;            // configuration registers

  typedef logic [DW-1:0] word_t;
  typedef logic [AW-1:0] addr_t;

  // ---- instruction set (Table 1 of the paper: seven kinds) ----
  typedef enum logic [3:0] {
    OP_NOP = 4'd0,
    OP_ADD = 4'd1,   // a + ((b + c) >>> s)
    OP_SUB = 4'd2,   // a + ((b - c) >>> s)
    OP_ABS = 4'd3,   // a + (|b - c| >>> s)      1-norm
    OP_MAC = 4'd4,   // a + ((b * c) >>> s)
    OP_MAX = 4'd5,   // max(a, b)
    OP_MIN = 4'd6,   // min(a, b)
    OP_SEL = 4'd7,   // a ? b : c
    OP_AND = 4'd8,
    OP_OR  = 4'd9,
    OP_XOR = 4'd10,
    OP_IDX = 4'd11,  // load a tensor index
    OP_LUT = 4'd12   // table lookup of b with linear interpolation
  } op_e;

  // operand sources
  localparam logic [3:0] SRC_RP0  = 4'd8;   // vector from Read Pipeline 0
  localparam logic [3:0] SRC_RP1  = 4'd9;   // vector from Read Pipeline 1
  localparam logic [3:0] SRC_PS   = 4'd10;  // partial-sum SRAM entry imm
  localparam logic [3:0] SRC_IMM  = 4'd11;  // sign-extended imm
  localparam logic [3:0] SRC_ZERO = 4'd12;
  // destinations (0..7 are lane registers)
  localparam logic [3:0] DST_PS   = 4'd8;   // partial-sum SRAM entry imm
  localparam logic [3:0] DST_OUT  = 4'd9;   // output vector to the Write Pipeline
  localparam logic [3:0] DST_NONE = 4'd15;

  typedef struct packed {
    op_e        op;    // [31:28]
    logic [3:0] dst;   // [27:24]
    logic [3:0] sa;    // [23:20]
    logic [3:0] sb;    // [19:16]
    logic [3:0] sc;    // [15:12]
    logic [3:0] shamt; // [11:8]
    logic [7:0] imm;   // [7:0]
  } instr_t;

  // ---- Read Pipeline configuration (one per RP, shared by all TAUs) ----
  typedef struct packed {
    logic [15:0]                row_len;     // tile words per DRAM row
    logic [15:0]                rows;        // rows per plane
    logic [15:0]                planes;      // planes per tile
    addr_t                      row_pitch;   // DRAM words between rows
    addr_t                      plane_pitch; // DRAM words between planes
    logic [LB-1:0][15:0]        c;           // lane strides c_0..c_4 (A_n)
    logic [15:0]                o;           // offset inside the tile
    logic [NLOOP-1:0][15:0]     s;           // accumulation loop strides
    logic [LB-1:0]              xmask;       // XOR-hash terms (matrix X)
    logic [2:0]                 rot;         // bit rotation (matrix R)
  } rp_cfg_t;

  // ---- kernel (Ranged Inner-Product) configuration ----
  typedef struct packed {
    logic [NLOOP-1:0][15:0]     cnt;         // loop trip counts, [NLOOP-1] innermost
    logic [NLOOP:0][PAW-1:0]    start_tab;   // starting addresses
    logic [NLOOP:0][PAW-1:0]    end_tab;     // ending addresses
    logic                       rp1_en;      // the kernel reads RP1
    addr_t                      out_pitch;   // DRAM words between output lines
  } k_cfg_t;

  // ---- one unit of work for a TAU ----
  typedef struct packed {
    addr_t rp0_base;   // DRAM word address of the RP0 tile
    addr_t rp1_base;   // DRAM word address of the RP1 tile
    addr_t out_base;   // DRAM word address of the first output line
  } job_t;

  // ---- control interface address map (cfg_addr) ----
  //   0x000..0x03F  program words
  //   0x040..0x050  lookup table entries
  //   0x060..0x07F  configuration registers, see merit_dispatcher
  localparam logic [9:0] CFG_PROG = 10'h000;
  localparam logic [9:0] CFG_LUT  = 10'h040;
  localparam logic [9:0] CFG_REG  = 10'h060;

endpackage
