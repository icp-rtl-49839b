// icp_pkg: types, constants and helper functions shared by the blocks of the
// instruction-correlation prefetcher (ICP).
//
// ICP watches committed instructions, learns which instruction produces the
// value a later irregular load uses for its address, and when the producer's
// cache line comes back it recomputes the consumer's address and prefetches it.
// All ICP tables key instructions by a 10-bit compressed PC. The compression
// keeps the low 4 PC bits and XOR-folds the higher bits into 6 bits; the
// 10-bit size and "keep the low bits, hash the rest" follow the paper, the
// exact fold is this design's choice.
//
// Operation classes: the seven ALU operations of the Lightweight Calculator
// (ADD, SUB, SHL, SHR, AND, OR, XOR) follow the paper. LD/ST mark memory
// instructions (the end of a chain), OP_OTHER anything the calculator cannot
// execute. The 4-bit encoding is this design's own.
// Lint note: a block that uses no line offsets (e.g. the Correlation Table)
// gets OFF_W reported as an unused parameter of this package; the other
// blocks need it.
package icp_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned PC_W      = 48;   // virtual PC width (assumed)
  localparam int unsigned ADDR_W    = 48;   // virtual address width (assumed)
  localparam int unsigned XLEN      = 64;   // register / data width (assumed)
  localparam int unsigned CPC_W     = 10;   // compressed PC, paper: 10 bits
  localparam int unsigned CPC_LOW   = 4;    // low PC bits kept verbatim
  localparam int unsigned TAG_W     = 8;    // physical register tag, paper: 8 bits
  localparam int unsigned IMM_W     = 16;   // stored immediate width (assumed)
  localparam int unsigned LINE_BYTES = 64;  // cache line, paper: 64 B
  localparam int unsigned LINE_W    = LINE_BYTES * 8;
  localparam int unsigned OFF_W     = $clog2(LINE_BYTES);

  typedef logic [CPC_W-1:0]  cpc_t;
  typedef logic [PC_W-1:0]   pc_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [XLEN-1:0]   data_t;
  typedef logic [TAG_W-1:0]  ptag_t;
  typedef logic [LINE_W-1:0] line_t;

  // ---------------------------------------------------------------- ops
  typedef enum logic [3:0] {
    OP_ADD   = 4'd0,
    OP_SUB   = 4'd1,
    OP_SHL   = 4'd2,
    OP_SHR   = 4'd3,
    OP_AND   = 4'd4,
    OP_OR    = 4'd5,
    OP_XOR   = 4'd6,
    OP_LD    = 4'd7,
    OP_ST    = 4'd8,
    OP_OTHER = 4'd15
  } op_e;

  // Cache level a pair was learned at (Correlation Table "Level" field).
  typedef enum logic {
    LVL_L1 = 1'b0,
    LVL_L2 = 1'b1
  } level_e;

  // Node attribute in the Node Table.
  typedef enum logic [1:0] {
    ATTR_NONE   = 2'd0,
    ATTR_PRE_F  = 2'd1,
    ATTR_PRE_NF = 2'd2,
    ATTR_SUC    = 2'd3
  } attr_e;

  // One committed instruction as streamed from the core's commit stage.
  // Source values are carried so that the Source Predictor can learn the
  // operands that lie outside a dependency path.
  typedef struct packed {
    pc_t             pc;
    op_e             op;
    logic            dst_v;
    ptag_t           dst;
    logic            src1_v;
    ptag_t           src1;
    logic            src2_v;     // second operand is a register
    ptag_t           src2;
    logic            use_imm;    // second operand is the immediate
    logic [IMM_W-1:0] imm;       // immediate (address offset for LD/ST)
    data_t           src1_val;
    data_t           src2_val;
  } commit_rec_t;

  // Compressed successor instruction ("Corr Inst" field of Fig. 7):
  // operation, immediate, and where the chain value and the other operand go.
  typedef struct packed {
    op_e              cop;
    logic             chain_b;   // chain value is operand b (a = other)
    logic             use_imm;   // other operand is imm, else predicted/none
    logic [IMM_W-1:0] imm;
  } cinst_t;

  // One learned edge (producer PC -> successor instruction) that the
  // detector writes into the Correlation Table.
  typedef struct packed {
    cpc_t   pc;          // producer (table key)
    cpc_t   corr_pc;     // successor PC
    cinst_t cinst;
    logic   friendly;    // producer is basic-prefetcher-friendly PC_pre
    level_e level;
    logic   src_pred;    // successor needs a predicted external operand
    logic   src_idx;     // which source operand (0: src1, 1: src2) to predict
  } ct_edge_t;

  // One successor slot of the Correlation Table.
  typedef struct packed {
    logic       valid;
    logic [3:0] counter;
    logic       friendly;
    level_e     level;
    cpc_t       corr_pc;
    cinst_t     cinst;
    logic       src_pred;
    logic       src_idx;
  } ct_slot_t;

  // Event counters exported by the top level (one count per mechanism).
  typedef struct packed {
    logic [31:0] commit_drop;   // commit record dropped, buffer full
    logic [31:0] fill_drop;     // fill lost to arbitration or a busy extractor
    logic [31:0] epochs;        // Candidate Table rewrites, both levels
    logic [31:0] trees;         // dependency-tree constructions started
    logic [31:0] nodes;         // Node Table entries appended
    logic [31:0] invals;        // Produce Map invalidations
    logic [31:0] term_full;     // constructions ended by a full Node Table
    logic [31:0] term_insts;    // constructions ended by the instruction limit
    logic [31:0] edges;         // edges written to the Correlation Table
    logic [31:0] values;        // values handed to the calculator
    logic [31:0] chain_steps;   // intermediate results pushed by the calculator
    logic [31:0] overflows;     // pushes lost to a full calculator stack
    logic [31:0] no_pred;       // steps skipped for lack of a confident prediction
    logic [31:0] pf_llc;        // prefetches from demand-fill chains (to the LLC)
    logic [31:0] pf_level;      // prefetches from prefetched-line chains
  } icp_stats_t;

  // ---------------------------------------------------------------- helpers
  localparam int unsigned CPC_HW  = CPC_W - CPC_LOW;               // hash width
  localparam int unsigned CPC_NF  = (PC_W - CPC_LOW + CPC_HW - 1) / CPC_HW;

  function automatic cpc_t compress_pc(input pc_t pc);
    logic [CPC_NF*CPC_HW-1:0] hi;
    logic [CPC_HW-1:0]        h;
    hi = '0;
    hi[PC_W-CPC_LOW-1:0] = pc[PC_W-1:CPC_LOW];
    h = '0;
    for (int unsigned i = 0; i < CPC_NF; i++) h ^= hi[i*CPC_HW +: CPC_HW];
    return {h, pc[CPC_LOW-1:0]};
  endfunction

  function automatic logic is_alu(input op_e op);
    return op inside {OP_ADD, OP_SUB, OP_SHL, OP_SHR, OP_AND, OP_OR, OP_XOR};
  endfunction

  function automatic logic is_mem(input op_e op);
    return op inside {OP_LD, OP_ST};
  endfunction

  // The Lightweight Calculator datapath (paper Table 5). LD/ST compute their
  // effective address a + b.
  function automatic data_t alu(input op_e op, input data_t a, input data_t b);
    unique case (op)
      OP_ADD, OP_LD, OP_ST: return a + b;
      OP_SUB:               return a - b;
      OP_SHL:               return a << b[5:0];
      OP_SHR:               return a >> b[5:0];
      OP_AND:               return a & b;
      OP_OR:                return a | b;
      OP_XOR:               return a ^ b;
      default:              return '0;
    endcase
  endfunction

  function automatic data_t sext_imm(input logic [IMM_W-1:0] imm);
    return {{(XLEN-IMM_W){imm[IMM_W-1]}}, imm};
  endfunction

endpackage
