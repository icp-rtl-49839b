// corr_detector: the PC Correlation Detector.
//
// It reads committed instructions from the commit buffer, one per cycle, and
// learns the dependency paths from a PC_pre to the PC_suc instructions that
// use its value, in three phases:
//
// 1. Trigger (S_IDLE). A committed instruction whose PC is a PC_pre^f or
//    PC_pre^nf candidate of the L1 Candidate Table (else of the L2 one) and
//    whose Count allows it starts a construction: Count is incremented, the
//    instruction becomes node 0 of the Node Table ({PC, CInst, Parent,
//    Attr}) and its destination register is entered in the Produce Map.
//    Further triggers are ignored until the construction ends.
// 2. Build (S_BUILD). For each committed instruction the source registers
//    are looked up in the Produce Map. On a hit the instruction is appended
//    to the Node Table with Parent = the producer's ID, Attr = PC_suc if it
//    is a PC_suc candidate of the same level, and its destination enters the
//    Produce Map. Without a hit (or for an operation the Lightweight
//    Calculator cannot execute, so that no path goes through it) the
//    instruction is skipped and its destination register is invalidated in
//    the Produce Map. The construction stops after MAX_INSTS committed
//    instructions or when the Node Table is full, whichever comes first.
// 3. Reconstruct (S_RECON). Because a node's parent always has a smaller ID,
//    one scan from the last node down to node 1 finds every node that lies
//    on a path to a PC_suc (it is a PC_suc, or a child already marked it).
//    For each such node the edge (parent PC -> node) is written to the
//    Correlation Table, one edge per cycle, so reconstruction takes at most
//    N_NODES-1 cycles, in line with the paper's O(N) bound.
//
// Following the paper: Node Table and Produce Map fields, the five build
// steps, 128 instructions and 16 nodes, the Count guard, blocking, exclusion
// of unsupported operations. This design's choices: for memory instructions
// only the base register (src1) carries the chain; when both sources hit,
// src1's producer is the parent and the other operand is treated as external
// (Src Pred); the edge's Friendly bit is set only for edges leaving a
// PC_pre^f root; the commit stream is not read during reconstruction (the
// buffer in front absorbs it).
// Lint note: the operand values carried in the commit record are not used
// here (they train the Source Predictor), so those bits are reported unused.
module corr_detector
  import icp_pkg::*;
#(
  parameter int unsigned N_NODES   = 16,
  parameter int unsigned MAX_INSTS = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  // commit records
  input  logic        in_valid,
  output logic        in_ready,
  input  commit_rec_t in_rec,
  // Candidate Table lookups (both levels see the same PC)
  output cpc_t        lk_cpc,
  input  logic        l1_pre_f,
  input  logic        l1_suc,
  input  logic        l1_allow,
  output logic        l1_inc,
  input  logic        l2_pre_f,
  input  logic        l2_suc,
  input  logic        l2_allow,
  output logic        l2_inc,
  // learned edges to the Correlation Table
  output logic        edge_valid,
  output ct_edge_t    edge_out,
  // status
  output logic        busy,
  output logic        ev_trigger,
  output logic        ev_node,
  output logic        ev_inval,
  output logic        ev_term_full,
  output logic        ev_term_insts
);

  localparam int unsigned IW = $clog2(N_NODES);
  localparam int unsigned CW = $clog2(MAX_INSTS + 1);

  typedef struct packed {
    cpc_t          pc;
    cinst_t        cinst;
    logic [IW-1:0] parent;
    attr_e         attr;
    logic          src_pred;
    logic          src_idx;
  } node_t;

  typedef enum logic [1:0] {S_IDLE, S_BUILD, S_RECON} state_e;
  state_e state;

  node_t              nodes [N_NODES];
  logic [IW:0]        n_nodes;
  logic [CW-1:0]      n_insts;
  logic [N_NODES-1:0] need;
  logic [IW-1:0]      k;
  level_e             level;

  // ---------------------------------------------------------------- produce map
  ptag_t         pm_lk_tag [2];
  logic          pm_lk_hit [2];
  logic [IW-1:0] pm_lk_id  [2];
  logic          pm_clear, pm_wr, pm_inv;
  logic [IW-1:0] pm_wr_id;

  produce_map #(.N_NODES(N_NODES)) u_pmap (
    .clk, .rst_n,
    .clear     (pm_clear),
    .lk_tag    (pm_lk_tag),
    .lk_hit    (pm_lk_hit),
    .lk_id     (pm_lk_id),
    .wr_valid  (pm_wr),
    .wr_id     (pm_wr_id),
    .wr_tag    (in_rec.dst),
    .inv_valid (pm_inv),
    .inv_tag   (in_rec.dst)
  );

  // ---------------------------------------------------------------- decode
  cpc_t rec_cpc;
  assign rec_cpc   = compress_pc(in_rec.pc);
  assign lk_cpc    = rec_cpc;
  assign pm_lk_tag[0] = in_rec.src1;
  assign pm_lk_tag[1] = in_rec.src2;

  logic hit1, hit2, dep, supported, take;
  assign hit1      = in_rec.src1_v && pm_lk_hit[0];
  assign hit2      = in_rec.src2_v && !in_rec.use_imm && pm_lk_hit[1] && !is_mem(in_rec.op);
  assign dep       = hit1 || hit2;
  assign supported = is_alu(in_rec.op) || is_mem(in_rec.op);

  logic trig_l1, trig_l2, trig;
  assign trig_l1 = (l1_pre_f || l1_suc) && l1_allow;
  assign trig_l2 = (l2_pre_f || l2_suc) && l2_allow;
  assign trig    = in_valid && (state == S_IDLE) && (trig_l1 || trig_l2);

  logic cur_suc;
  assign cur_suc = (level == LVL_L1) ? l1_suc : l2_suc;

  node_t new_node;
  always_comb begin
    new_node.pc             = rec_cpc;
    new_node.cinst.cop      = in_rec.op;
    new_node.cinst.chain_b  = !hit1;
    new_node.cinst.use_imm  = in_rec.use_imm;
    new_node.cinst.imm      = in_rec.imm;
    new_node.parent         = hit1 ? pm_lk_id[0] : pm_lk_id[1];
    new_node.attr           = cur_suc ? ATTR_SUC : ATTR_NONE;
    if (is_mem(in_rec.op)) begin
      new_node.src_pred = 1'b0;
      new_node.src_idx  = 1'b0;
    end else if (hit1) begin
      new_node.src_pred = in_rec.src2_v && !in_rec.use_imm;
      new_node.src_idx  = 1'b1;
    end else begin
      new_node.src_pred = in_rec.src1_v;
      new_node.src_idx  = 1'b0;
    end
  end

  assign in_ready = (state != S_RECON);
  assign take     = in_valid && (state == S_BUILD) && dep && supported;

  // Produce Map control
  always_comb begin
    pm_clear = 1'b0;
    pm_wr    = 1'b0;
    pm_inv   = 1'b0;
    pm_wr_id = n_nodes[IW-1:0];
    if (trig) begin
      pm_clear = 1'b1;
      pm_wr    = in_rec.dst_v;
      pm_wr_id = '0;
    end else if (in_valid && state == S_BUILD) begin
      if (take) pm_wr  = in_rec.dst_v;
      else      pm_inv = in_rec.dst_v;
    end
  end

  assign l1_inc = trig && trig_l1;
  assign l2_inc = trig && !trig_l1;

  // ---------------------------------------------------------------- termination
  logic last_inst, table_full;
  assign last_inst  = (n_insts == CW'(MAX_INSTS - 1));
  assign table_full = take && (n_nodes == (IW+1)'(N_NODES - 1));

  // ---------------------------------------------------------------- reconstruction
  logic k_needed;
  assign k_needed = (nodes[k].attr == ATTR_SUC) || need[k];

  always_comb begin
    edge_valid              = (state == S_RECON) && k_needed && (k != '0);
    edge_out.pc             = nodes[nodes[k].parent].pc;
    edge_out.corr_pc        = nodes[k].pc;
    edge_out.cinst          = nodes[k].cinst;
    edge_out.friendly       = (nodes[k].parent == '0) && (nodes[0].attr == ATTR_PRE_F);
    edge_out.level          = level;
    edge_out.src_pred       = nodes[k].src_pred;
    edge_out.src_idx        = nodes[k].src_idx;
  end

  assign busy          = (state != S_IDLE);
  assign ev_trigger    = trig;
  assign ev_node       = take;
  assign ev_inval      = pm_inv;
  assign ev_term_full  = in_valid && state == S_BUILD && table_full;
  assign ev_term_insts = in_valid && state == S_BUILD && last_inst && !table_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      n_nodes <= '0;
      n_insts <= '0;
      need    <= '0;
      k       <= '0;
      level   <= LVL_L1;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (trig) begin
            state   <= S_BUILD;
            level   <= trig_l1 ? LVL_L1 : LVL_L2;
            n_nodes <= (IW+1)'(1);
            n_insts <= CW'(1);
            need    <= '0;
          end
        end
        S_BUILD: begin
          if (in_valid) begin
            n_insts <= n_insts + 1'b1;
            if (take) n_nodes <= n_nodes + 1'b1;
            if (last_inst || table_full) begin
              state <= S_RECON;
              k     <= take ? n_nodes[IW-1:0] : IW'(n_nodes - 1'b1);
            end
          end
        end
        S_RECON: begin
          if (k_needed && k != '0) need[nodes[k].parent] <= 1'b1;
          if (k == '0 || k == IW'(1)) state <= S_IDLE;
          else k <= k - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (trig) begin
      nodes[0].pc       <= rec_cpc;
      nodes[0].cinst    <= '{cop: in_rec.op, chain_b: 1'b0, use_imm: in_rec.use_imm, imm: in_rec.imm};
      nodes[0].parent   <= '0;
      nodes[0].attr     <= ((trig_l1 && l1_pre_f) || (!trig_l1 && l2_pre_f)) ? ATTR_PRE_F : ATTR_PRE_NF;
      nodes[0].src_pred <= 1'b0;
      nodes[0].src_idx  <= 1'b0;
    end else if (take) begin
      nodes[n_nodes[IW-1:0]] <= new_node;
    end
  end

  // Assertions are checked once the block has left reset; live is a plain
  // flop of the reset domain so that the checks do not sample rst_n itself.
  logic live;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) live <= 1'b0;
    else        live <= 1'b1;
  end

  a_parent_older: assert property (@(posedge clk) disable iff (!live)
    take |-> (new_node.parent < n_nodes[IW-1:0]) || (n_nodes == (IW+1)'(N_NODES)));

endmodule
