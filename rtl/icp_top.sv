// icp_top: the Instruction-Correlation Prefetcher (ICP) attached to a core's
// commit stage and to its L1 and L2 data caches.
//
// Learning path: demand requests of each cache level (PC, prefetch hit,
// demand miss) train that level's PC Selector/Classifier, which picks the
// PC_pre and PC_suc candidates each epoch. Committed instructions enter the
// commit buffer; the PC Correlation Detector builds dependency trees from
// them and writes the learned edges into the Correlation Table. Writing an
// edge also allocates a Data Extractor entry (edge leaves a friendly PC_pre)
// and a Source Predictor entry (successor needs an external operand).
//
// Prefetch path: each cache reports line fills with the MSHR slot they fill;
// the MSHR PC extension of that level returns the compressed PC of the
// instruction the line was fetched for. A fill is passed to the Data
// Extractor only if the Correlation Table has a slot for that PC and level
// (and, for a prefetched line, a Friendly slot). Extracted values go to the
// Lightweight Calculator, which walks the chain and emits prefetches:
// pf_to_llc = 1 for chains started by a demand fill (sent to the LLC), 0 for
// chains started by a prefetched line (issued at level pf_level).
//
// This design's choices: an L1 fill wins over an L2 fill in the same cycle,
// the L2 one is dropped; a fill that finds the extractor busy is dropped;
// the Data Extractor learns offsets from L1 demand requests (every load is
// seen there). The MSHR sizes default to the paper's 16 (L1) and 32 (L2)
// MSHRs with 8 targets each. One event counter per mechanism is exported in
// the stats struct, and the commit buffer's full flag and the detector and
// calculator busy flags are exported as status.
//
// Interface and timing: all inputs are sampled at the rising clock edge. A
// commit record or demand request is taken in the cycle it is valid; a fill
// is taken in its valid cycle or dropped (counted). The path from a fill to
// a prefetch is: fill -> extractor (1 cycle) -> calculator load (1 cycle)
// -> one cycle per chain step -> registered prefetch, e.g. 5 cycles for a
// producer -> ADD -> load chain.
module icp_top
  import icp_pkg::*;
#(
  parameter int unsigned L1_MSHR = 16,
  parameter int unsigned L2_MSHR = 32,
  parameter int unsigned N_TGT   = 8,
  parameter int unsigned SEL_ENTRIES = 8,
  parameter int unsigned SEL_TOP_N   = 4,
  parameter int unsigned SEL_THETA_MISS = 4,
  parameter int unsigned SEL_EPOCH_LEN  = 4096,
  parameter int unsigned SEL_COUNT_MAX  = 4,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned N_NODES    = 16,
  parameter int unsigned MAX_INSTS  = 128,
  parameter int unsigned CT_ENTRIES = 32,
  parameter int unsigned DE_ENTRIES = 32,
  parameter int unsigned SP_ENTRIES = 8,
  parameter int unsigned CALC_STACK = 4,
  parameter int unsigned CALC_MAX_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // L1 demand requests
  input  logic        l1_dem_valid,
  input  pc_t         l1_dem_pc,
  input  logic [OFF_W-1:0] l1_dem_off,   // byte offset of the access in its line
  input  logic [1:0]  l1_dem_size,
  input  logic        l1_dem_pf_hit,
  input  logic        l1_dem_miss,
  // L2 demand requests
  input  logic        l2_dem_valid,
  input  pc_t         l2_dem_pc,
  input  logic        l2_dem_pf_hit,
  input  logic        l2_dem_miss,
  // commit stream
  input  logic        commit_valid,
  input  commit_rec_t commit_rec,
  // MSHR target allocation (PC plumbing)
  input  logic                        l1_mshr_alloc,
  input  logic [$clog2(L1_MSHR)-1:0]  l1_mshr_id,
  input  logic [$clog2(N_TGT)-1:0]    l1_mshr_tgt,
  input  pc_t                         l1_mshr_pc,
  input  logic                        l2_mshr_alloc,
  input  logic [$clog2(L2_MSHR)-1:0]  l2_mshr_id,
  input  logic [$clog2(N_TGT)-1:0]    l2_mshr_tgt,
  input  pc_t                         l2_mshr_pc,
  // line fills
  input  logic                        l1_fill_valid,
  input  logic [$clog2(L1_MSHR)-1:0]  l1_fill_mshr,
  input  logic [$clog2(N_TGT)-1:0]    l1_fill_tgt,
  input  logic                        l1_fill_is_pf,
  input  logic [OFF_W-1:0]            l1_fill_off,
  input  logic [1:0]                  l1_fill_size,
  input  line_t                       l1_fill_line,
  input  logic                        l2_fill_valid,
  input  logic [$clog2(L2_MSHR)-1:0]  l2_fill_mshr,
  input  logic [$clog2(N_TGT)-1:0]    l2_fill_tgt,
  input  logic                        l2_fill_is_pf,
  input  logic [OFF_W-1:0]            l2_fill_off,
  input  logic [1:0]                  l2_fill_size,
  input  line_t                       l2_fill_line,
  // prefetch requests
  output logic        pf_valid,
  output addr_t       pf_addr,
  output level_e      pf_level,
  output logic        pf_to_llc,
  // status
  output logic        commit_full,     // commit buffer full (records are dropped)
  output logic        learning,        // a dependency tree is being built
  output logic        calculating,     // the calculator is walking a chain
  output icp_stats_t  stats
);

  // ---------------------------------------------------------------- selectors
  cpc_t l1_dem_cpc, l2_dem_cpc, lk_cpc;
  assign l1_dem_cpc = compress_pc(l1_dem_pc);
  assign l2_dem_cpc = compress_pc(l2_dem_pc);

  logic l1_pre_f, l1_suc, l1_allow, l1_inc, l1_epoch;
  logic l2_pre_f, l2_suc, l2_allow, l2_inc, l2_epoch;

  pc_selector #(
    .ENTRIES(SEL_ENTRIES), .TOP_N(SEL_TOP_N), .THETA_MISS(SEL_THETA_MISS),
    .EPOCH_LEN(SEL_EPOCH_LEN), .COUNT_MAX(SEL_COUNT_MAX)
  ) u_sel_l1 (
    .clk, .rst_n,
    .dem_valid(l1_dem_valid), .dem_cpc(l1_dem_cpc),
    .dem_pf_hit(l1_dem_pf_hit), .dem_miss(l1_dem_miss),
    .lk_cpc, .lk_pre_f(l1_pre_f), .lk_suc(l1_suc), .lk_allow(l1_allow),
    .lk_inc(l1_inc), .epoch_end(l1_epoch)
  );

  pc_selector #(
    .ENTRIES(SEL_ENTRIES), .TOP_N(SEL_TOP_N), .THETA_MISS(SEL_THETA_MISS),
    .EPOCH_LEN(SEL_EPOCH_LEN), .COUNT_MAX(SEL_COUNT_MAX)
  ) u_sel_l2 (
    .clk, .rst_n,
    .dem_valid(l2_dem_valid), .dem_cpc(l2_dem_cpc),
    .dem_pf_hit(l2_dem_pf_hit), .dem_miss(l2_dem_miss),
    .lk_cpc, .lk_pre_f(l2_pre_f), .lk_suc(l2_suc), .lk_allow(l2_allow),
    .lk_inc(l2_inc), .epoch_end(l2_epoch)
  );

  // ---------------------------------------------------------------- commit path
  logic        cf_drop, cf_valid, cf_ready;
  commit_rec_t cf_rec;

  commit_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .enq_valid(commit_valid), .enq_rec(commit_rec),
    .full(commit_full), .drop(cf_drop),
    .deq_valid(cf_valid), .deq_rec(cf_rec), .deq_ready(cf_ready)
  );

  logic     edge_valid;
  ct_edge_t edge_w;
  logic     ev_trigger, ev_node, ev_inval, ev_term_full, ev_term_insts;

  corr_detector #(.N_NODES(N_NODES), .MAX_INSTS(MAX_INSTS)) u_det (
    .clk, .rst_n,
    .in_valid(cf_valid), .in_ready(cf_ready), .in_rec(cf_rec),
    .lk_cpc,
    .l1_pre_f, .l1_suc, .l1_allow, .l1_inc,
    .l2_pre_f, .l2_suc, .l2_allow, .l2_inc,
    .edge_valid, .edge_out(edge_w),
    .busy(learning),
    .ev_trigger, .ev_node, .ev_inval, .ev_term_full, .ev_term_insts
  );

  // ---------------------------------------------------------------- tables
  cpc_t     ct_a_cpc, ct_b_cpc;
  logic     ct_a_hit, ct_b_hit;
  ct_slot_t ct_a_slot [2];
  ct_slot_t ct_b_slot [2];

  corr_table #(.ENTRIES(CT_ENTRIES)) u_ct (
    .clk, .rst_n,
    .wr_valid(edge_valid), .wr_edge(edge_w),
    .a_cpc(ct_a_cpc), .a_hit(ct_a_hit), .a_slot(ct_a_slot),
    .b_cpc(ct_b_cpc), .b_hit(ct_b_hit), .b_slot(ct_b_slot)
  );

  cpc_t  sp_cpc;
  logic  sp_idx, sp_hit;
  data_t sp_val;

  source_predictor #(.ENTRIES(SP_ENTRIES)) u_sp (
    .clk, .rst_n,
    .alloc_valid(edge_valid && edge_w.src_pred),
    .alloc_cpc(edge_w.corr_pc), .alloc_idx(edge_w.src_idx),
    .train_valid(cf_valid && cf_ready), .train_rec(cf_rec),
    .lk_cpc(sp_cpc), .lk_idx(sp_idx), .lk_hit(sp_hit), .lk_val(sp_val)
  );

  // ---------------------------------------------------------------- fills
  logic l1_fhit, l2_fhit;
  cpc_t l1_fcpc, l2_fcpc;

  mshr_pc_ext #(.N_MSHR(L1_MSHR), .N_TGT(N_TGT)) u_mshr_l1 (
    .clk, .rst_n,
    .alloc_valid(l1_mshr_alloc), .alloc_mshr(l1_mshr_id), .alloc_tgt(l1_mshr_tgt),
    .alloc_pc(l1_mshr_pc),
    .fill_valid(l1_fill_valid), .fill_mshr(l1_fill_mshr), .fill_tgt(l1_fill_tgt),
    .fill_hit(l1_fhit), .fill_cpc(l1_fcpc)
  );

  mshr_pc_ext #(.N_MSHR(L2_MSHR), .N_TGT(N_TGT)) u_mshr_l2 (
    .clk, .rst_n,
    .alloc_valid(l2_mshr_alloc), .alloc_mshr(l2_mshr_id), .alloc_tgt(l2_mshr_tgt),
    .alloc_pc(l2_mshr_pc),
    .fill_valid(l2_fill_valid), .fill_mshr(l2_fill_mshr), .fill_tgt(l2_fill_tgt),
    .fill_hit(l2_fhit), .fill_cpc(l2_fcpc)
  );

  // level arbitration: L1 first
  logic             r_valid, r_is_pf;
  level_e           r_level;
  cpc_t             r_cpc;
  logic [OFF_W-1:0] r_off;
  logic [1:0]       r_size;
  line_t            r_line;
  always_comb begin
    if (l1_fhit) begin
      r_valid = 1'b1; r_level = LVL_L1; r_cpc = l1_fcpc; r_is_pf = l1_fill_is_pf;
      r_off = l1_fill_off; r_size = l1_fill_size; r_line = l1_fill_line;
    end else begin
      r_valid = l2_fhit; r_level = LVL_L2; r_cpc = l2_fcpc; r_is_pf = l2_fill_is_pf;
      r_off = l2_fill_off; r_size = l2_fill_size; r_line = l2_fill_line;
    end
  end

  // "Exist" check against the Correlation Table
  assign ct_a_cpc = r_cpc;
  logic exist;
  always_comb begin
    exist = 1'b0;
    for (int s = 0; s < 2; s++)
      if (ct_a_hit && ct_a_slot[s].valid && ct_a_slot[s].level == r_level &&
          (!r_is_pf || ct_a_slot[s].friendly))
        exist = 1'b1;
  end

  logic de_ready, de_val_valid, de_val_ready, de_val_is_pf;
  cpc_t de_val_cpc;
  level_e de_val_level;
  data_t de_val_data;

  data_extractor #(.ENTRIES(DE_ENTRIES)) u_de (
    .clk, .rst_n,
    .alloc_valid(edge_valid && edge_w.friendly), .alloc_cpc(edge_w.pc),
    .train_valid(l1_dem_valid), .train_cpc(l1_dem_cpc),
    .train_off(l1_dem_off), .train_size(l1_dem_size),
    .resp_valid(r_valid && exist), .resp_ready(de_ready),
    .resp_cpc(r_cpc), .resp_level(r_level), .resp_is_pf(r_is_pf),
    .resp_off(r_off), .resp_size(r_size), .resp_line(r_line),
    .val_valid(de_val_valid), .val_ready(de_val_ready),
    .val_cpc(de_val_cpc), .val_level(de_val_level), .val_is_pf(de_val_is_pf),
    .val_data(de_val_data)
  );

  // ---------------------------------------------------------------- calculator
  logic ev_push, ev_overflow, ev_no_pred;

  lw_calculator #(.STACK_DEPTH(CALC_STACK), .MAX_DEPTH(CALC_MAX_DEPTH)) u_calc (
    .clk, .rst_n,
    .in_valid(de_val_valid), .in_ready(de_val_ready),
    .in_cpc(de_val_cpc), .in_level(de_val_level), .in_is_pf(de_val_is_pf),
    .in_data(de_val_data),
    .ct_cpc(ct_b_cpc), .ct_hit(ct_b_hit), .ct_slot(ct_b_slot),
    .sp_cpc, .sp_idx, .sp_hit, .sp_val,
    .pf_valid, .pf_addr, .pf_level, .pf_to_llc,
    .ev_push, .ev_overflow, .ev_no_pred, .busy(calculating)
  );

  // ---------------------------------------------------------------- counters
  logic fill_drop;
  assign fill_drop = (l1_fhit && l2_fhit) || (r_valid && exist && !de_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats <= '0;
    end else begin
      stats.commit_drop <= stats.commit_drop + 32'(cf_drop);
      stats.fill_drop   <= stats.fill_drop + 32'(fill_drop);
      stats.epochs      <= stats.epochs + 32'(l1_epoch) + 32'(l2_epoch);
      stats.trees       <= stats.trees + 32'(ev_trigger);
      stats.nodes       <= stats.nodes + 32'(ev_node);
      stats.invals      <= stats.invals + 32'(ev_inval);
      stats.term_full   <= stats.term_full + 32'(ev_term_full);
      stats.term_insts  <= stats.term_insts + 32'(ev_term_insts);
      stats.edges       <= stats.edges + 32'(edge_valid);
      stats.values      <= stats.values + 32'(de_val_valid && de_val_ready);
      stats.chain_steps <= stats.chain_steps + 32'(ev_push);
      stats.overflows   <= stats.overflows + 32'(ev_overflow);
      stats.no_pred     <= stats.no_pred + 32'(ev_no_pred);
      stats.pf_llc      <= stats.pf_llc + 32'(pf_valid && pf_to_llc);
      stats.pf_level    <= stats.pf_level + 32'(pf_valid && !pf_to_llc);
    end
  end

endmodule
