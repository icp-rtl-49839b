// tb_icp_workloads: the prefetcher at its default sizes on two synthetic
// kernels that stand for the two workload classes it targets.
//
//  * Indirect gather, the pattern of the GAP graph kernels (pr, bfs, spmv):
//        A0: ld  t2, 0(t5)      col[i]         (strided, prefetched by a
//        A1: shl t3, t2, 3                      baseline stride prefetcher)
//        A2: add t4, a1, t3      a1 = &val[0]  (stable, off the chain)
//        A3: ld  t6, 0(t4)      val[col[i]]    (irregular, misses)
//        A4: add s0, s0, t6
//        A5: add t5, t5, 8
//    The testbench's cache model reports A0 as prefetch hits and delivers
//    the col[] line 16 elements ahead as a prefetched fill. ICP must learn
//    A0 -> A1 -> A2 -> A3, infer the 8 offsets of the prefetched col[] line
//    and prefetch val[col[i]] for each of them.
//  * Pointer chasing, the pattern of mcf-like SPEC programs:
//        B0: ld  x1, 0(x1)      p = p->next     (misses, renamed each time)
//    plus unrelated work. ICP must learn B0 -> B0 and, on each demand fill
//    of a node, prefetch the next node (sent to the LLC) before the loop
//    body reaches the next p->next load.
//
// A third run interleaves the two loops, so that both correlations share
// the tables at the same time.
//
// For each kernel the testbench measures coverage (irregular demand
// accesses whose line ICP prefetched earlier) and accuracy (ICP prefetches
// that an irregular access of the kernel later uses) over the second half
// of the run, after learning, and requires both to be high.
module tb_icp_workloads;
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
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- prefetch log
  // line address -> 1; every ICP prefetch of the current kernel
  bit    pf_lines [addr_t];
  bit    pf_used  [addr_t];
  int    n_pf = 0, n_pf_llc = 0;
  bit    measuring = 0;
  always @(posedge clk) begin
    if (rst_n && pf_valid) begin
      pf_lines[{pf_addr[ADDR_W-1:6], 6'b0}] = 1;
      if (measuring) begin
        n_pf++;
        if (pf_to_llc) n_pf_llc++;
      end
    end
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

  // One clock: optional commit record, optional L1 demand request.
  task automatic cycle(input bit cv, input commit_rec_t r,
                       input bit dv, input pc_t dpc, input addr_t daddr, input bit hit_pf, input bit miss);
    @(negedge clk);
    commit_valid  = cv;  commit_rec = r;
    l1_dem_valid  = dv;  l1_dem_pc = dpc; l1_dem_off = daddr[OFF_W-1:0]; l1_dem_size = 2'd3;
    l1_dem_pf_hit = hit_pf; l1_dem_miss = miss;
    l1_mshr_alloc = 0;   l1_fill_valid = 0;
  endtask

  // MSHR allocation and fill of one line for the load at pc (one clock each)
  int mshr_rr = 0;
  task automatic fill(input pc_t pc, input bit is_pf, input int off, input line_t line);
    @(negedge clk);
    commit_valid = 0; l1_dem_valid = 0;
    l1_mshr_alloc = 1; l1_mshr_id = 4'(mshr_rr); l1_mshr_tgt = 3'd0; l1_mshr_pc = pc;
    @(negedge clk);
    l1_mshr_alloc = 0;
    l1_fill_valid = 1; l1_fill_mshr = 4'(mshr_rr); l1_fill_tgt = 3'd0; l1_fill_is_pf = is_pf;
    l1_fill_off = OFF_W'(off); l1_fill_size = 2'd3; l1_fill_line = line;
    @(negedge clk);
    l1_fill_valid = 0;
    mshr_rr = (mshr_rr + 1) % 16;
  endtask

  task automatic idle(input int n);
    repeat (n) begin
      @(negedge clk);
      commit_valid = 0; l1_dem_valid = 0; l1_mshr_alloc = 0; l1_fill_valid = 0;
    end
  endtask

  task automatic do_reset();
    idle(2);
    rst_n = 0;
    idle(2);
    rst_n = 1;
    idle(2);
    pf_lines.delete(); pf_used.delete();
    n_pf = 0; n_pf_llc = 0; measuring = 0;
  endtask

  // ---------------------------------------------------------------- kernel A
  localparam int   NA      = 4096;
  localparam pc_t  A0 = 48'h0001_0040, A1 = 48'h0001_0044, A2 = 48'h0001_0048,
                   A3 = 48'h0001_004C, A4 = 48'h0001_0050, A5 = 48'h0001_0054;
  localparam addr_t COL = 48'h0000_2000_0000;
  localparam data_t VAL = 64'h0000_0040_0000_0000;

  logic [19:0] col [NA + 64];
  int g_acc, g_cov, c_acc, c_cov;

  // one iteration of the gather loop
  task automatic gather_step(input int i);
    addr_t ca, va;
    bit    hit;
    ca = COL + addr_t'(8 * i);
    va = addr_t'(VAL + data_t'(col[i]) * 8);
    // the stride prefetcher brings col[] 16 elements (two lines) ahead
    if (i % 8 == 0) begin
      line_t l;
      for (int k = 0; k < 8; k++) l[64 * k +: 64] = 64'(col[i + 16 + k]);
      fill(A0, 1, 0, l);
    end
    hit = pf_lines.exists({va[ADDR_W-1:6], 6'b0});
    if (measuring) begin
      g_acc++;
      if (hit) begin g_cov++; pf_used[{va[ADDR_W-1:6], 6'b0}] = 1; end
    end
    cycle(1, mk(A0, OP_LD, 40 + (i % 8), 30, -1, 1, 0, ca, 0), 1, A0, ca, 1, 0);
    cycle(1, mk(A1, OP_SHL, 50 + (i % 8), 40 + (i % 8), -1, 1, 3, 64'(col[i]), 0), 0, 0, 0, 0, 0);
    cycle(1, mk(A2, OP_ADD, 60 + (i % 8), 11, 50 + (i % 8), 0, 0, VAL, 64'(col[i]) * 8), 0, 0, 0, 0, 0);
    cycle(1, mk(A3, OP_LD, 70 + (i % 8), 60 + (i % 8), -1, 1, 0, 64'(va), 0), 1, A3, va, hit, !hit);
    cycle(1, mk(A4, OP_ADD, 80 + (i % 8), 12, 70 + (i % 8), 0, 0, 0, 0), 0, 0, 0, 0, 0);
    cycle(1, mk(A5, OP_ADD, 30, 30, -1, 1, 8, ca, 0), 0, 0, 0, 0, 0);
  endtask

  task automatic kernel_gather();
    for (int i = 0; i < NA + 64; i++) col[i] = 20'($urandom);
    g_cov = 0; g_acc = 0;
    for (int i = 0; i < NA; i++) begin
      if (i == NA / 2) begin measuring = 1; pf_used.delete(); end
      gather_step(i);
    end
    idle(40);
    $display("gather: accesses=%0d covered=%0d coverage=%0d%% prefetches=%0d (llc %0d) lines used=%0d",
             g_acc, g_cov, 100 * g_cov / g_acc, n_pf, n_pf_llc, pf_used.size());
    $display("gather: trees=%0d edges=%0d values=%0d fill_drop=%0d no_pred=%0d",
             stats.trees, stats.edges, stats.values, stats.fill_drop, stats.no_pred);
    chk(100 * g_cov / g_acc >= 80, $sformatf("gather coverage %0d%%", 100 * g_cov / g_acc));
    // accuracy: prefetches issued while measuring whose line was used
    chk(n_pf > 0 && 100 * pf_used.size() / n_pf >= 80,
        $sformatf("gather accuracy %0d of %0d", pf_used.size(), n_pf));
    chk(n_pf_llc == 0, "prefetched-line chains stay at their level");
    chk(stats.trees > 0 && stats.edges >= 3, "gather: chain A0 -> A1 -> A2 -> A3 learned");
    chk(stats.no_pred == 0, "gather: the base a1 is always predicted");
  endtask

  // ---------------------------------------------------------------- kernel B
  localparam int  NB = 3000;
  localparam pc_t B0 = 48'h0002_0100;
  addr_t node [NB + 1];

  // one step of the pointer chase, with unrelated work before the load
  task automatic chase_step(input int n);
    bit hit;
    line_t l;
    cycle(1, mk(48'h0002_0200, OP_ADD, 100 + (n % 4), 99, -1, 1, 1, 0, 0), 1, 48'h0002_0200, 48'h1000, 0, 0);
    cycle(1, mk(48'h0002_0204, OP_ADD, 99, 99, -1, 1, 1, 0, 0), 1, 48'h0002_0204, 48'h1008, 0, 0);
    cycle(1, mk(48'h0002_0208, OP_XOR, 104, 100 + (n % 4), -1, 1, 5, 0, 0), 1, 48'h0002_0208, 48'h1010, 0, 0);
    cycle(1, mk(48'h0002_020C, OP_SUB, 105, 104, 99, 0, 0, 0, 0), 0, 0, 0, 0, 0);
    cycle(1, mk(48'h0002_0210, OP_AND, 106, 105, -1, 1, 255, 0, 0), 0, 0, 0, 0, 0);
    // The prefetch goes to the LLC, so the L1 access still misses and the
    // line is still filled; coverage counts misses that find their line
    // already requested by ICP (an LLC hit instead of a memory access).
    hit = pf_lines.exists(node[n]);
    if (measuring) begin c_acc++; if (hit) c_cov++; end
    cycle(1, mk(B0, OP_LD, 20 + (n % 8), 20 + ((n + 7) % 8), -1, 1, 0, 64'(node[n]), 0),
          1, B0, node[n], 0, 1);
    l = '0;
    l[63:0] = 64'(node[n + 1]);
    fill(B0, 0, 0, l);
  endtask

  task automatic kernel_chase();
    int correct, issued;
    for (int n = 0; n <= NB; n++) node[n] = {8'h00, 4'h5, 30'($urandom), 6'b0};
    c_cov = 0; c_acc = 0;
    for (int n = 0; n < NB; n++) begin
      if (n == NB / 2) measuring = 1;
      chase_step(n);
    end
    idle(40);
    correct = 0;
    issued = pf_lines.size();
    for (int n = 0; n <= NB; n++) if (pf_lines.exists(node[n])) correct++;
    $display("chase: accesses=%0d covered=%0d coverage=%0d%% prefetched lines=%0d correct=%0d (llc %0d of %0d)",
             c_acc, c_cov, 100 * c_cov / c_acc, issued, correct, n_pf_llc, n_pf);
    chk(100 * c_cov / c_acc >= 80, $sformatf("chase coverage %0d%%", 100 * c_cov / c_acc));
    chk(issued > 0 && 100 * correct / issued >= 95, "chase accuracy");
    chk(n_pf > 0 && n_pf_llc == n_pf, "demand-fed chains go to the LLC");
    chk(stats.trees > 0 && stats.edges > 0, "chase: edge B0 -> B0 learned");
  endtask

  // ---------------------------------------------------------------- both
  // The two loops interleaved, one iteration of each per step: both
  // correlations must be learned and used at the same time. A node fill that
  // arrives while the extractor is still busy with a prefetched col[] line
  // is dropped, so the chase loses some coverage here.
  task automatic kernel_mixed();
    localparam int NM = 3000;
    for (int i = 0; i < NA + 64; i++) col[i] = 20'($urandom);
    for (int n = 0; n <= NB; n++) node[n] = {8'h00, 4'h6, 30'($urandom), 6'b0};
    g_cov = 0; g_acc = 0; c_cov = 0; c_acc = 0;
    for (int t = 0; t < NM; t++) begin
      if (t == NM / 2) measuring = 1;
      gather_step(t);
      chase_step(t);
    end
    idle(40);
    $display("mixed: gather coverage=%0d%% chase coverage=%0d%% prefetches=%0d (llc %0d) epochs=%0d fill_drop=%0d",
             100 * g_cov / g_acc, 100 * c_cov / c_acc, n_pf, n_pf_llc, stats.epochs, stats.fill_drop);
    chk(100 * g_cov / g_acc >= 70, $sformatf("mixed: gather coverage %0d%%", 100 * g_cov / g_acc));
    chk(100 * c_cov / c_acc >= 60, $sformatf("mixed: chase coverage %0d%%", 100 * c_cov / c_acc));
    chk(n_pf_llc > 0 && n_pf_llc < n_pf, "mixed: LLC and same-level prefetches");
  endtask

  initial begin
    commit_valid = 0; commit_rec = '0;
    l1_dem_valid = 0; l1_dem_pc = 0; l1_dem_pf_hit = 0; l1_dem_miss = 0; l1_dem_off = 0; l1_dem_size = 0;
    l2_dem_valid = 0; l2_dem_pc = 0; l2_dem_pf_hit = 0; l2_dem_miss = 0;
    l1_mshr_alloc = 0; l1_mshr_id = 0; l1_mshr_tgt = 0; l1_mshr_pc = 0;
    l2_mshr_alloc = 0; l2_mshr_id = 0; l2_mshr_tgt = 0; l2_mshr_pc = 0;
    l1_fill_valid = 0; l1_fill_mshr = 0; l1_fill_tgt = 0; l1_fill_is_pf = 0; l1_fill_off = 0;
    l1_fill_size = 0; l1_fill_line = '0;
    l2_fill_valid = 0; l2_fill_mshr = 0; l2_fill_tgt = 0; l2_fill_is_pf = 0; l2_fill_off = 0;
    l2_fill_size = 0; l2_fill_line = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    kernel_gather();
    do_reset();
    kernel_chase();
    do_reset();
    kernel_mixed();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
