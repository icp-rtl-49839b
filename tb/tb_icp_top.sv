// tb_icp_top: end-to-end test of the whole prefetcher at its default (paper)
// sizes, with no parameter overrides. The testbench plays the core and the
// caches:
//   1. Selection epoch (4096 demand requests per level): the loads at P0 and
//      Q0 see many prefetch hits (PC_pre^f), the load at P2 many misses
//      (PC_suc).
//   2. Learning: committed-instruction groups are streamed in:
//        A  the paper's Fig. 6 chain  P0: lw t2 / P1: add t3,a1,t2 / P2: lw t6,0(t3)
//        B  a binary tree of ADDs under Q0 whose leaves are P2 loads
//        C  P0 followed by more dependants than the Node Table holds, streamed
//           back to back so that the commit buffer overflows during the
//           reconstruction
//      and the Source Predictor is trained on a1.
//   3. Prefetching: MSHR allocations and line fills are driven and the
//      prefetches compared with a model: a demand fill of P0's line gives
//      value + a1 at the LLC (latency checked), a prefetched fill of P0's line
//      gives the same address at the current level, Q0's tree gives its
//      leaf addresses and overflows the calculator stack, an unstable a1
//      suppresses the prefetch, colliding L1/L2 fills drop one.
// Each mechanism is counted (from the design's event counters and from the
// testbench's own observation) and every count must be non-zero.
module tb_icp_top;
  import icp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock edge
  always #5 clk = ~clk;

  logic        l1_dem_valid, l1_dem_pf_hit, l1_dem_miss;
  pc_t         l1_dem_pc;
  logic [OFF_W-1:0] l1_dem_off;
  logic [1:0]  l1_dem_size;
  logic        l2_dem_valid, l2_dem_pf_hit, l2_dem_miss;
  pc_t         l2_dem_pc;
  logic        commit_valid;
  commit_rec_t commit_rec;
  logic        l1_mshr_alloc, l2_mshr_alloc;
  logic [3:0]  l1_mshr_id;
  logic [4:0]  l2_mshr_id;
  logic [2:0]  l1_mshr_tgt, l2_mshr_tgt;
  pc_t         l1_mshr_pc, l2_mshr_pc;
  logic        l1_fill_valid, l1_fill_is_pf, l2_fill_valid, l2_fill_is_pf;
  logic [3:0]  l1_fill_mshr;
  logic [4:0]  l2_fill_mshr;
  logic [2:0]  l1_fill_tgt, l2_fill_tgt;
  logic [OFF_W-1:0] l1_fill_off, l2_fill_off;
  logic [1:0]  l1_fill_size, l2_fill_size;
  line_t       l1_fill_line, l2_fill_line;
  logic        pf_valid, pf_to_llc, commit_full, learning, calculating;
  addr_t       pf_addr;
  level_e      pf_level;
  icp_stats_t  stats;

  icp_top dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- program
  localparam pc_t P0 = 48'h0040_0100;   // lw  t2, 0(t5)       PC_pre^f
  localparam pc_t P1 = 48'h0040_0104;   // add t3, a1, t2
  localparam pc_t P2 = 48'h0040_0108;   // lw  t6, 0(t3)       PC_suc
  localparam pc_t Q0 = 48'h0040_0200;   // root of the ADD tree PC_pre^f
  localparam data_t A1 = 64'h0000_0000_7000_0000;

  // ---------------------------------------------------------------- monitor
  int    cyc = 0;
  addr_t pfs [$];
  bit    pfl [$];
  int    pfc [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && pf_valid) begin pfs.push_back(pf_addr); pfl.push_back(pf_to_llc); pfc.push_back(cyc); end
  end

  // ---------------------------------------------------------------- drivers
  function automatic commit_rec_t mk(input pc_t pc, input op_e op, input int dst,
                                     input int s1, input int s2, input bit use_imm,
                                     input int imm, input data_t v1, input data_t v2);
    commit_rec_t r;
    r = '0;
    r.pc = pc; r.op = op;
    r.dst_v = dst >= 0;  r.dst  = ptag_t'(dst < 0 ? 0 : dst);
    r.src1_v = s1 >= 0;  r.src1 = ptag_t'(s1 < 0 ? 0 : s1);
    r.src2_v = s2 >= 0;  r.src2 = ptag_t'(s2 < 0 ? 0 : s2);
    r.use_imm = use_imm; r.imm = 16'(imm);
    r.src1_val = v1; r.src2_val = v2;
    return r;
  endfunction

  task automatic commit(input commit_rec_t r);
    @(negedge clk);
    commit_valid = 1; commit_rec = r;
  endtask

  int fill_i = 0;
  task automatic filler(input int n);
    for (int i = 0; i < n; i++) begin
      commit(mk(48'h0012_3450 + 48'(4 * (fill_i % 16)), OP_ADD, 200 + (fill_i % 40), 250, -1, 1, 1, 0, 0));
      fill_i++;
    end
  endtask

  // stream fillers until the detector is idle again, then stop the stream
  task automatic settle();
    int n;
    n = 0;
    do begin filler(1); n++; end while ((learning || n < 4) && n < 400);
    @(negedge clk); commit_valid = 0;
    repeat (4) @(negedge clk);
    chk(!learning, "detector back to idle");
  endtask

  task automatic l1_demand(input pc_t pc, input bit h, input bit m, input int off);
    @(negedge clk);
    l1_dem_valid = 1; l1_dem_pc = pc; l1_dem_pf_hit = h; l1_dem_miss = m;
    l1_dem_off = OFF_W'(off); l1_dem_size = 2'd3;
    @(negedge clk);
    l1_dem_valid = 0;
  endtask

  function automatic line_t line_with(input int off, input data_t v);
    line_t l;
    l = '0;
    for (int b = 0; b < 8; b++) l[(off + b) * 8 +: 8] = v[b * 8 +: 8];
    return l;
  endfunction

  int t_fill;
  task automatic l1_fill(input pc_t pc, input int id, input bit is_pf, input int off, input data_t v);
    @(negedge clk);
    l1_mshr_alloc = 1; l1_mshr_id = 4'(id); l1_mshr_tgt = 3'd0; l1_mshr_pc = pc;
    @(negedge clk);
    l1_mshr_alloc = 0;
    repeat (3) @(negedge clk);
    l1_fill_valid = 1; l1_fill_mshr = 4'(id); l1_fill_tgt = 3'd0; l1_fill_is_pf = is_pf;
    l1_fill_off = OFF_W'(off); l1_fill_size = 2'd3; l1_fill_line = line_with(off, v);
    t_fill = cyc;
    @(negedge clk);
    l1_fill_valid = 0;
    repeat (2) @(negedge clk);
    while (calculating) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    data_t v;
    int    fd0, n_pf_llc, n_pf_lvl;
    l1_dem_valid = 0; l1_dem_pc = 0; l1_dem_pf_hit = 0; l1_dem_miss = 0; l1_dem_off = 0; l1_dem_size = 0;
    l2_dem_valid = 0; l2_dem_pc = 0; l2_dem_pf_hit = 0; l2_dem_miss = 0;
    commit_valid = 0; commit_rec = '0;
    l1_mshr_alloc = 0; l1_mshr_id = 0; l1_mshr_tgt = 0; l1_mshr_pc = 0;
    l2_mshr_alloc = 0; l2_mshr_id = 0; l2_mshr_tgt = 0; l2_mshr_pc = 0;
    l1_fill_valid = 0; l1_fill_mshr = 0; l1_fill_tgt = 0; l1_fill_is_pf = 0; l1_fill_off = 0;
    l1_fill_size = 0; l1_fill_line = '0;
    l2_fill_valid = 0; l2_fill_mshr = 0; l2_fill_tgt = 0; l2_fill_is_pf = 0; l2_fill_off = 0;
    l2_fill_size = 0; l2_fill_line = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. selection epoch, both levels in parallel
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk);
      l1_dem_valid = 1; l1_dem_size = 2'd3; l1_dem_off = 6'd8;
      l2_dem_valid = 1;
      unique case (i % 8)
        0, 1: begin l1_dem_pc = P0; l1_dem_pf_hit = (i % 64) != 0; l1_dem_miss = (i % 64) == 0; end
        2:    begin l1_dem_pc = Q0; l1_dem_pf_hit = 1; l1_dem_miss = 0; end
        3:    begin l1_dem_pc = P2; l1_dem_pf_hit = 0; l1_dem_miss = 1; end
        default: begin l1_dem_pc = 48'h000A_BC00 + 48'(4 * (i % 8)); l1_dem_pf_hit = 0; l1_dem_miss = 0; end
      endcase
      l2_dem_pc = (i % 2 == 0) ? P0 : P2;
      l2_dem_pf_hit = (i % 2 == 0);
      l2_dem_miss   = (i % 2 == 1);
    end
    @(negedge clk);
    l1_dem_valid = 0; l2_dem_valid = 0;
    repeat (20) @(negedge clk);
    chk(stats.epochs == 2, $sformatf("one epoch per level (%0d)", stats.epochs));

    // ---- 2a. Fig. 6 chain
    commit(mk(P0, OP_LD, 7, 5, -1, 1, 0, 64'h1000, 0));
    commit(mk(P1, OP_ADD, 8, 11, 7, 0, 0, A1, 64'h1234));
    commit(mk(P2, OP_LD, 9, 8, -1, 1, 0, A1 + 64'h1234, 0));
    settle();
    chk(stats.trees == 1, $sformatf("one tree (%0d)", stats.trees));
    chk(stats.edges == 2, $sformatf("Fig. 6 gives two edges (%0d)", stats.edges));
    chk(stats.term_insts == 1, "construction ended by the instruction limit");

    // ---- 2b. ADD tree under Q0 (see header): X1,X2 / Y1,Y2 under X1 /
    // Z1,Z2 under Y1 / W1,W2 under Z1; X2,Y2,Z2,W1,W2 each feed a P2 load.
    commit(mk(Q0,            OP_LD,  10, 5,  -1, 1, 0, 0, 0));
    commit(mk(48'h0040_0300, OP_ADD, 11, 10, -1, 1, 1, 0, 0));   // X1
    commit(mk(48'h0040_0304, OP_ADD, 12, 10, -1, 1, 2, 0, 0));   // X2
    commit(mk(P2,            OP_LD,  30, 12, -1, 1, 0, 0, 0));
    commit(mk(48'h0040_0308, OP_ADD, 13, 11, -1, 1, 3, 0, 0));   // Y1
    commit(mk(48'h0040_030C, OP_ADD, 14, 11, -1, 1, 4, 0, 0));   // Y2
    commit(mk(P2,            OP_LD,  31, 14, -1, 1, 0, 0, 0));
    commit(mk(48'h0040_0310, OP_ADD, 15, 13, -1, 1, 5, 0, 0));   // Z1
    commit(mk(48'h0040_0314, OP_ADD, 16, 13, -1, 1, 6, 0, 0));   // Z2
    commit(mk(P2,            OP_LD,  32, 16, -1, 1, 0, 0, 0));
    commit(mk(48'h0040_0318, OP_ADD, 17, 15, -1, 1, 7, 0, 0));   // W1
    commit(mk(48'h0040_031C, OP_ADD, 18, 15, -1, 1, 8, 0, 0));   // W2
    commit(mk(P2,            OP_LD,  33, 17, -1, 1, 0, 0, 0));
    commit(mk(P2,            OP_LD,  34, 18, -1, 1, 0, 0, 0));
    settle();
    chk(stats.trees == 2, $sformatf("second tree (%0d)", stats.trees));
    chk(stats.edges == 2 + 13, $sformatf("tree gives 13 edges (%0d)", stats.edges - 2));

    // ---- 2c. too many dependants: Node Table full, commit buffer overflows
    commit(mk(P0, OP_LD, 7, 5, -1, 1, 0, 64'h1000, 0));
    for (int i = 0; i < 18; i++) commit(mk(48'h0040_0400 + 48'(4 * i), OP_XOR, 100 + i, 7, -1, 1, i, 0, 0));
    filler(30);
    settle();
    chk(stats.term_full == 1, "construction ended by a full Node Table");
    chk(stats.commit_drop > 0, $sformatf("commit records dropped (%0d)", stats.commit_drop));
    chk(stats.invals > 0, "Produce Map invalidations");

    // ---- Source Predictor training on a1 (P1 is not a trigger)
    repeat (2) commit(mk(P1, OP_ADD, 8, 11, 7, 0, 0, A1, 64'h55));
    @(negedge clk); commit_valid = 0;
    repeat (3) @(negedge clk);

    // ---- 3a. demand fill of P0's line: prefetch value + a1 at the LLC
    pfs.delete(); pfl.delete(); pfc.delete();
    v = 64'h0000_0000_0012_3440;
    l1_fill(P0, 3, 0, 8, v);
    chk(pfs.size() == 1, $sformatf("one prefetch from the demand fill (%0d)", pfs.size()));
    if (pfs.size() == 1) begin
      chk(pfs[0] == addr_t'(v + A1), $sformatf("prefetch address %h", pfs[0]));
      chk(pfl[0] == 1, "demand-fed chain goes to the LLC");
      chk(pfc[0] - t_fill == 5, $sformatf("fill to prefetch %0d cycles", pfc[0] - t_fill));
    end

    // ---- 3b. prefetched line of P0: the offset is learned from demand requests
    repeat (6) l1_demand(P0, 0, 0, 8);
    pfs.delete(); pfl.delete(); pfc.delete();
    v = 64'h0000_0000_0044_0000;
    l1_fill(P0, 4, 1, 8, v);
    chk(pfs.size() == 1 && pfs[0] == addr_t'(v + A1) && pfl[0] == 0,
        "prefetched line gives a current-level prefetch");

    // ---- 3c. Q0's tree: leaves X2, Y2, Z2 prefetched, stack overflows at W
    pfs.delete(); pfl.delete(); pfc.delete();
    v = 64'h0000_0000_0080_0000;
    l1_fill(Q0, 5, 0, 16, v);
    chk(stats.overflows > 0, "calculator stack overflow");
    chk(stats.chain_steps > 0, "intermediate results pushed");
    begin
      bit sx2, sy2, sz2;
      sx2 = 0; sy2 = 0; sz2 = 0;
      foreach (pfs[j]) begin
        if (pfs[j] == addr_t'(v + 2)) sx2 = 1;
        if (pfs[j] == addr_t'(v + 1 + 4)) sy2 = 1;
        if (pfs[j] == addr_t'(v + 1 + 3 + 6)) sz2 = 1;
      end
      chk(sx2 && sy2 && sz2, $sformatf("tree leaves prefetched (%0d prefetches)", pfs.size()));
    end

    // ---- 3d. a1 changes: no confident prediction, no prefetch
    commit(mk(P1, OP_ADD, 8, 11, 7, 0, 0, A1 + 64'h40, 0));
    commit(mk(P1, OP_ADD, 8, 11, 7, 0, 0, A1 + 64'h80, 0));
    @(negedge clk); commit_valid = 0;
    pfs.delete();
    l1_fill(P0, 6, 0, 8, 64'h1000);
    chk(pfs.size() == 0 && stats.no_pred > 0, "no prefetch without a confident a1");

    // ---- 3e. L1 and L2 fills in the same cycle: the L2 one is dropped
    fd0 = stats.fill_drop;
    @(negedge clk);
    l1_mshr_alloc = 1; l1_mshr_id = 4'd7; l1_mshr_tgt = 0; l1_mshr_pc = P0;
    l2_mshr_alloc = 1; l2_mshr_id = 5'd9; l2_mshr_tgt = 0; l2_mshr_pc = P0;
    @(negedge clk);
    l1_mshr_alloc = 0; l2_mshr_alloc = 0;
    @(negedge clk);
    l1_fill_valid = 1; l1_fill_mshr = 4'd7; l1_fill_tgt = 0; l1_fill_is_pf = 0; l1_fill_off = 8;
    l2_fill_valid = 1; l2_fill_mshr = 5'd9; l2_fill_tgt = 0; l2_fill_is_pf = 0; l2_fill_off = 8;
    @(negedge clk);
    l1_fill_valid = 0; l2_fill_valid = 0;
    repeat (20) @(negedge clk);
    chk(stats.fill_drop == fd0 + 1, "colliding fill dropped");

    // ---- mechanism summary
    n_pf_llc = 0; n_pf_lvl = 0;
    $display("mechanisms: epochs=%0d trees=%0d nodes=%0d invals=%0d term_full=%0d term_insts=%0d edges=%0d",
             stats.epochs, stats.trees, stats.nodes, stats.invals, stats.term_full,
             stats.term_insts, stats.edges);
    $display("mechanisms: commit_drop=%0d fill_drop=%0d values=%0d chain_steps=%0d overflows=%0d no_pred=%0d pf_llc=%0d pf_level=%0d",
             stats.commit_drop, stats.fill_drop, stats.values, stats.chain_steps,
             stats.overflows, stats.no_pred, stats.pf_llc, stats.pf_level);
    chk(stats.epochs > 0 && stats.trees > 0 && stats.nodes > 0 && stats.invals > 0 &&
        stats.term_full > 0 && stats.term_insts > 0 && stats.edges > 0 &&
        stats.commit_drop > 0 && stats.fill_drop > 0 && stats.values > 0 &&
        stats.chain_steps > 0 && stats.overflows > 0 && stats.no_pred > 0 &&
        stats.pf_llc > 0 && stats.pf_level > 0, "every mechanism exercised");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
