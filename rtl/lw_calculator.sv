// lw_calculator: the Lightweight Calculator, which walks a learned dependency
// chain from a PC_pre value to the address of PC_suc and issues the prefetch.
//
// An input item is (PC, value, level, trigger kind). The calculator reads the
// PC's Correlation Table entry and executes each usable successor slot:
// operand a/b are the chain value and the slot's other operand (its
// immediate, or the Source Predictor's value when Src Pred is set; a slot
// whose prediction is not confident is skipped). The seven operations of the
// paper (ADD, SUB, SHL, SHR, AND, OR, XOR) are supported. A successor that is
// a memory instruction ends the chain: its address (value + immediate) is
// sent out as a prefetch. Any other successor's result is pushed on a small
// stack and walked further, which is how the paper's "recursive" execution
// and the two successors per entry are handled. A prefetch triggered by a
// demand-fetched line is marked for the LLC (pf_to_llc), one triggered by a
// prefetched line stays at the current level, as in the paper.
//
// Slot usability: the slot's Level must equal the item's level, and for the
// first step of a chain started by a prefetched line the slot must be marked
// Friendly (prefetched lines of non-friendly PCs are ignored, per the paper).
// This design's choices: a 4-entry stack (a push that finds it full is
// dropped and counted), a depth limit of 16 steps that keeps a cyclic table
// from looping (the paper's longest observed path has 13 instructions), one
// slot executed per cycle.
//
// Timing: an item is loaded in one cycle, then each usable slot takes one
// cycle; the prefetch is registered, so a PC_pre -> ADD -> LD chain puts its
// prefetch on pf_valid 4 cycles after the value is accepted.
// Lint note: the replacement counter of a Correlation Table slot is not
// needed to execute it, so those slot bits are reported unused.
module lw_calculator
  import icp_pkg::*;
#(
  parameter int unsigned STACK_DEPTH = 4,
  parameter int unsigned MAX_DEPTH   = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  // values from the Data Extractor
  input  logic     in_valid,
  output logic     in_ready,
  input  cpc_t     in_cpc,
  input  level_e   in_level,
  input  logic     in_is_pf,
  input  data_t    in_data,
  // Correlation Table read port
  output cpc_t     ct_cpc,
  input  logic     ct_hit,
  input  ct_slot_t ct_slot [2],
  // Source Predictor read port
  output cpc_t     sp_cpc,
  output logic     sp_idx,
  input  logic     sp_hit,
  input  data_t    sp_val,
  // prefetch requests
  output logic     pf_valid,
  output addr_t    pf_addr,
  output level_e   pf_level,
  output logic     pf_to_llc,
  // event pulses
  output logic     ev_push,
  output logic     ev_overflow,
  output logic     ev_no_pred,
  output logic     busy
);

  localparam int unsigned SP_W = $clog2(STACK_DEPTH + 1);
  localparam int unsigned DW   = $clog2(MAX_DEPTH + 1);
  localparam int unsigned SI   = (STACK_DEPTH > 1) ? $clog2(STACK_DEPTH) : 1;

  typedef struct packed {
    cpc_t          cpc;
    data_t         data;
    level_e        level;
    logic          is_pf;
    logic          first;
    logic [DW-1:0] depth;
  } item_t;

  item_t         stack [STACK_DEPTH];
  logic [SP_W-1:0] sp;
  item_t         cur;
  logic          cur_v;
  logic          sidx;

  assign busy     = cur_v || (sp != '0);
  assign in_ready = !cur_v && (sp == '0);

  // ---------------------------------------------------------------- execute
  ct_slot_t s;
  logic     usable, need_pred, other_ok;
  data_t    other, opa, opb, res;

  assign ct_cpc = cur.cpc;
  assign s      = ct_slot[sidx];
  assign sp_cpc = s.corr_pc;
  assign sp_idx = s.src_idx;

  always_comb begin
    usable    = cur_v && ct_hit && s.valid && (s.level == cur.level) &&
                (!(cur.first && cur.is_pf) || s.friendly) &&
                (is_alu(s.cinst.cop) || is_mem(s.cinst.cop));
    need_pred = s.src_pred && !s.cinst.use_imm;
    other_ok  = !need_pred || sp_hit;
    if (s.cinst.use_imm)  other = sext_imm(s.cinst.imm);
    else if (need_pred)   other = sp_val;
    else                  other = '0;
    if (is_mem(s.cinst.cop)) begin
      opa = cur.data;
      opb = sext_imm(s.cinst.imm);
    end else if (s.cinst.chain_b) begin
      opa = other;
      opb = cur.data;
    end else begin
      opa = cur.data;
      opb = other;
    end
    res = alu(s.cinst.cop, opa, opb);
  end

  logic exec_ok, do_pf, want_push, do_push, last_slot;
  assign exec_ok   = usable && other_ok;
  assign do_pf     = exec_ok && is_mem(s.cinst.cop);
  assign want_push = exec_ok && !is_mem(s.cinst.cop) && (cur.depth < DW'(MAX_DEPTH));
  assign do_push   = want_push && (sp < SP_W'(STACK_DEPTH));
  assign last_slot = sidx || !(ct_hit && ct_slot[1].valid);

  assign ev_push     = do_push;
  assign ev_overflow = want_push && !do_push;
  assign ev_no_pred  = usable && !other_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_v     <= 1'b0;
      sidx      <= 1'b0;
      sp        <= '0;
      pf_valid  <= 1'b0;
    end else begin
      pf_valid <= do_pf;
      if (cur_v) begin
        if (last_slot) begin
          cur_v <= 1'b0;
          sidx  <= 1'b0;
        end else begin
          sidx  <= 1'b1;
        end
        if (do_push) sp <= sp + 1'b1;
      end else if (sp != '0) begin
        cur_v <= 1'b1;
        sp    <= sp - 1'b1;
      end else if (in_valid) begin
        cur_v <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (do_pf) begin
      pf_addr   <= res[ADDR_W-1:0];
      pf_level  <= cur.level;
      pf_to_llc <= !cur.is_pf;
    end
    if (cur_v) begin
      if (do_push) stack[SI'(sp)] <= '{cpc: s.corr_pc, data: res, level: cur.level,
                                  is_pf: cur.is_pf, first: 1'b0,
                                  depth: cur.depth + 1'b1};
    end else if (sp != '0) begin
      cur <= stack[SI'(sp - 1'b1)];
    end else if (in_valid) begin
      cur <= '{cpc: in_cpc, data: in_data, level: in_level, is_pf: in_is_pf,
               first: 1'b1, depth: DW'(1)};
    end
  end

  // Assertions are checked once the block has left reset; live is a plain
  // flop of the reset domain so that the checks do not sample rst_n itself.
  logic live;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) live <= 1'b0;
    else        live <= 1'b1;
  end

  a_sp_range: assert property (@(posedge clk) disable iff (!live) sp <= SP_W'(STACK_DEPTH));

endmodule
