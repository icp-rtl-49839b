// tb_corr_detector: self-checking test of the PC Correlation Detector.
// The Candidate Tables of both levels are modelled in the testbench.
// Scenario 1 is the paper's Fig. 6 sequence
//   i   : lw  t2, 0(t5)    PC_pre^f
//   i+1 : add t3, a1, t2
//   i+2 : lw  t6, 0(t3)    PC_suc
// followed by unrelated instructions until the 128-instruction limit. The
// reconstruction must emit (i+1 -> i+2, LD) and then (i -> i+1, ADD, a1
// predicted, Friendly). Further scenarios: a chain longer than the Node
// Table (termination on a full table, only the edges on the path to the
// PC_suc), Produce Map invalidation by an unsupported producer, the Count
// guard, blocking of triggers during a construction, an L2 trigger, and the
// reconstruction latency (at most N_NODES-1 cycles with in_ready low).
module tb_corr_detector;
  import icp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock edge
  always #5 clk = ~clk;

  logic        in_valid, in_ready;
  commit_rec_t in_rec;
  cpc_t        lk_cpc;
  logic        l1_pre_f, l1_suc, l1_allow, l1_inc, l2_pre_f, l2_suc, l2_allow, l2_inc;
  logic        edge_valid, busy, ev_trigger, ev_node, ev_inval, ev_term_full, ev_term_insts;
  ct_edge_t    edge_out;

  corr_detector dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- candidate table model
  bit l1pf [cpc_t], l1sc [cpc_t], l2pf [cpc_t], l2sc [cpc_t];
  int l1cnt [cpc_t], l2cnt [cpc_t];
  always_comb begin
    l1_pre_f = l1pf.exists(lk_cpc);
    l1_suc   = l1sc.exists(lk_cpc);
    l1_allow = (l1_pre_f || l1_suc) && (!l1cnt.exists(lk_cpc) || l1cnt[lk_cpc] < 4);
    l2_pre_f = l2pf.exists(lk_cpc);
    l2_suc   = l2sc.exists(lk_cpc);
    l2_allow = (l2_pre_f || l2_suc) && (!l2cnt.exists(lk_cpc) || l2cnt[lk_cpc] < 4);
  end

  ct_edge_t edges [$];
  int trig = 0, nodes_ = 0, invals = 0, tfull = 0, tinsts = 0;
  int recon_cycles = 0, max_recon = 0;
  always @(posedge clk) if (rst_n) begin
    if (edge_valid) edges.push_back(edge_out);
    if (ev_trigger) trig++;
    if (ev_node) nodes_++;
    if (ev_inval) invals++;
    if (ev_term_full) tfull++;
    if (ev_term_insts) tinsts++;
    if (l1_inc) l1cnt[lk_cpc] = l1cnt.exists(lk_cpc) ? l1cnt[lk_cpc] + 1 : 1;
    if (l2_inc) l2cnt[lk_cpc] = l2cnt.exists(lk_cpc) ? l2cnt[lk_cpc] + 1 : 1;
    if (busy && !in_ready) begin recon_cycles++; if (recon_cycles > max_recon) max_recon = recon_cycles; end
    else recon_cycles = 0;
  end

  function automatic commit_rec_t mk(input pc_t pc, input op_e op,
                                     input int dst, input int s1, input int s2,
                                     input bit use_imm, input int imm);
    commit_rec_t r;
    r = '0;
    r.pc = pc; r.op = op;
    r.dst_v = dst >= 0; r.dst = ptag_t'(dst < 0 ? 0 : dst);
    r.src1_v = s1 >= 0; r.src1 = ptag_t'(s1 < 0 ? 0 : s1);
    r.src2_v = s2 >= 0; r.src2 = ptag_t'(s2 < 0 ? 0 : s2);
    r.use_imm = use_imm; r.imm = 16'(imm);
    return r;
  endfunction

  int n_sent = 0;
  task automatic commit(input commit_rec_t r);
    @(negedge clk);
    in_valid = 1; in_rec = r;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1;
    in_valid = 0;
    n_sent++;
  endtask

  // unrelated filler: reads and writes registers 200..250
  task automatic filler(input int n);
    for (int i = 0; i < n; i++)
      commit(mk(48'h9000 + 4*(i % 64), OP_ADD, 200 + (i % 50), 250, -1, 1, 1));
  endtask

  task automatic drain();
    @(negedge clk);
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask

  function automatic cpc_t C(input pc_t p);
    return compress_pc(p);
  endfunction

  initial begin
    int t0;
    in_valid = 0; in_rec = '0;
    l1pf[C(48'h1000)] = 1;        // PC_pre^f
    l1sc[C(48'h1008)] = 1;        // PC_suc
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- scenario 1: Fig. 6
    commit(mk(48'h1000, OP_LD,  7, 5, -1, 1, 0));     // lw t2, 0(t5)
    commit(mk(48'h1004, OP_ADD, 8, 11, 7, 0, 0));     // add t3, a1, t2
    commit(mk(48'h1008, OP_LD,  9, 8, -1, 1, 0));     // lw t6, 0(t3)
    filler(125);
    drain();
    chk(trig == 1 && tinsts == 1 && tfull == 0, "one construction ended by the instruction limit");
    chk(nodes_ == 2, $sformatf("two nodes appended (%0d)", nodes_));
    chk(edges.size() == 2, $sformatf("two edges (%0d)", edges.size()));
    if (edges.size() == 2) begin
      chk(edges[0].pc == C(48'h1004) && edges[0].corr_pc == C(48'h1008) &&
          edges[0].cinst.cop == OP_LD && edges[0].cinst.use_imm && !edges[0].friendly &&
          edges[0].level == LVL_L1, "edge i+1 -> i+2");
      chk(edges[1].pc == C(48'h1000) && edges[1].corr_pc == C(48'h1004) &&
          edges[1].cinst.cop == OP_ADD && edges[1].cinst.chain_b && edges[1].src_pred &&
          edges[1].src_idx == 1'b0 && edges[1].friendly, "edge i -> i+1 (a1 predicted, friendly)");
    end
    chk(max_recon <= 15, $sformatf("reconstruction took %0d cycles", max_recon));
    edges.delete();

    // ---- scenario 2: long chain, table full; PC_suc in the middle; an
    // unrelated dependent branch off the root that leads to no PC_suc
    l1pf[C(48'h2000)] = 1;
    l1sc[C(48'h2000 + 4*8)] = 1;
    trig = 0; nodes_ = 0; tfull = 0; tinsts = 0;
    commit(mk(48'h2000, OP_LD, 20, 5, -1, 1, 0));
    commit(mk(48'h2F00, OP_XOR, 40, 20, -1, 1, 3));   // side branch, not on a path
    for (int i = 1; i <= 20; i++)
      commit(mk(48'h2000 + 4*i, OP_ADD, 20 + i, 20 + i - 1, -1, 1, 1));
    filler(3);
    drain();
    chk(trig == 1 && tfull == 1 && tinsts == 0, "construction ended by a full Node Table");
    chk(nodes_ == 15, $sformatf("15 nodes after the root (%0d)", nodes_));
    chk(edges.size() == 8, $sformatf("8 edges on the path (%0d)", edges.size()));
    foreach (edges[j])
      chk(edges[j].corr_pc == C(48'h2000 + 4*(8 - j)) && edges[j].pc == C(48'h2000 + 4*(7 - j)),
          $sformatf("path edge %0d", j));
    if (edges.size() == 8) chk(edges[7].friendly && !edges[6].friendly, "only the root's edge is friendly");
    edges.delete();

    // ---- scenario 3: Produce Map invalidation by an unsupported producer
    trig = 0; nodes_ = 0; invals = 0;
    commit(mk(48'h1000, OP_LD, 7, 5, -1, 1, 0));      // root (count 2)
    commit(mk(48'h3000, OP_OTHER, 7, 7, -1, 0, 0));   // mul-like op overwrites t2
    commit(mk(48'h1004, OP_ADD, 8, 11, 7, 0, 0));     // reads the new t2: no node
    commit(mk(48'h1008, OP_LD, 9, 8, -1, 1, 0));
    filler(124);
    drain();
    chk(trig == 1 && nodes_ == 0 && invals >= 1 && edges.size() == 0, "invalidated register breaks the path");

    // ---- scenario 4: blocking and Count guard
    trig = 0;
    commit(mk(48'h1000, OP_LD, 7, 5, -1, 1, 0));      // count 3
    commit(mk(48'h1000, OP_LD, 7, 5, -1, 1, 0));      // during construction: ignored as trigger
    filler(126);
    drain();
    chk(trig == 1, "no trigger during a construction");
    commit(mk(48'h1000, OP_LD, 7, 5, -1, 1, 0));      // count 4
    filler(127);
    drain();
    trig = 0;
    commit(mk(48'h1000, OP_LD, 7, 5, -1, 1, 0));      // Count guard: no trigger
    filler(3);
    drain();
    chk(trig == 0 && !busy, "Count guard stops a fifth construction");
    chk(l1cnt[C(48'h1000)] == 4, "Count incremented per construction");

    // ---- scenario 5: L2 trigger
    l2pf[C(48'h5000)] = 1;
    l2sc[C(48'h5004)] = 1;
    trig = 0; edges.delete();
    commit(mk(48'h5000, OP_LD, 60, 5, -1, 1, 0));
    commit(mk(48'h5004, OP_LD, 61, 60, -1, 1, 16));
    filler(126);
    drain();
    chk(trig == 1 && edges.size() == 1 && edges[0].level == LVL_L2 && edges[0].cinst.imm == 16,
        "L2 construction");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
