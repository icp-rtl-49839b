// tb_pc_selector: self-checking test of the PC Selector / Classifier.
// Uses the paper's Fig. 4 style example scaled to a short epoch: a PC with
// many prefetch hits and few misses becomes PC_pre^f, a PC with many misses
// and few hits becomes PC_suc. Also checks the miss threshold, Top-n
// selection, LRU eviction in the Sample Table, the Count guard, the epoch
// clearing the old counts, and the selection latency (epoch_end within
// 2*TOP_N+1 cycles after the last access of an epoch).
module tb_pc_selector;
  import icp_pkg::*;

  localparam int EPOCH = 128;
  localparam int TOPN  = 4;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock edge
  always #5 clk = ~clk;

  logic dem_valid, dem_pf_hit, dem_miss, lk_pre_f, lk_suc, lk_allow, lk_inc, epoch_end;
  cpc_t dem_cpc, lk_cpc;

  pc_selector #(.EPOCH_LEN(EPOCH)) dut (.*);

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

  int n_acc;
  task automatic acc(input cpc_t c, input bit h, input bit m);
    @(negedge clk);
    dem_valid = 1; dem_cpc = c; dem_pf_hit = h; dem_miss = m;
    @(negedge clk);
    dem_valid = 0;
    n_acc++;
  endtask

  // fill the epoch with plain hits of an unrelated PC, then wait for the
  // candidate table write and check its latency
  task automatic end_epoch();
    int t;
    while (n_acc < EPOCH) acc(10'h3FF, 0, 0);
    n_acc = 0;
    t = 0;
    while (!epoch_end) begin @(negedge clk); t++; end
    chk(t <= 2*TOPN + 1, $sformatf("selection took %0d cycles", t));
    @(negedge clk);
  endtask

  task automatic look(input cpc_t c, output bit pf, output bit sc, output bit al);
    lk_cpc = c;
    #1;
    pf = lk_pre_f; sc = lk_suc; al = lk_allow;
  endtask

  initial begin
    bit pf, sc, al;
    int nsuc;
    dem_valid = 0; dem_cpc = 0; dem_pf_hit = 0; dem_miss = 0; lk_cpc = 0; lk_inc = 0;
    n_acc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- epoch 1: Fig. 4 style
    for (int i = 0; i < 40; i++) acc(10'h00A, 1, 0);   // 0xA: 40 pf hits, 2 misses
    for (int i = 0; i < 2;  i++) acc(10'h00A, 0, 1);
    for (int i = 0; i < 1;  i++) acc(10'h00B, 1, 0);   // 0xB: 1 pf hit, 30 misses
    for (int i = 0; i < 30; i++) acc(10'h00B, 0, 1);
    for (int i = 0; i < 3;  i++) acc(10'h00C, 0, 1);   // 0xC: 3 misses (< theta_miss)
    acc(10'h00D, 1, 0); for (int i = 0; i < 9; i++) acc(10'h00D, 0, 1); // cov exactly 0.1
    end_epoch();
    look(10'h00A, pf, sc, al);
    chk(pf && !sc && al, "0xA classified PC_pre^f only");
    look(10'h00B, pf, sc, al);
    chk(!pf && sc && al, "0xB classified PC_suc only");
    look(10'h00C, pf, sc, al);
    chk(!pf && !sc && !al, "0xC below the miss threshold");
    look(10'h00D, pf, sc, al);
    chk(pf && sc, "0xD: 9 misses is PC_suc, coverage 0.1 is PC_pre^f");
    look(10'h3FF, pf, sc, al);
    chk(!pf && !sc, "PC without events is not sampled");

    // ---- Count guard
    for (int i = 0; i < 4; i++) begin
      look(10'h00B, pf, sc, al);
      chk(al, "allow below COUNT_MAX");
      @(negedge clk); lk_inc = 1; @(negedge clk); lk_inc = 0;
    end
    look(10'h00B, pf, sc, al);
    chk(sc && !al, "Count guard blocks a fifth construction");

    // ---- epoch 2: Top-n among 6 PCs with different miss counts; old PCs gone
    for (int p = 0; p < 6; p++)
      for (int i = 0; i < 10 + p; i++) acc(cpc_t'(10'h020 + p), 0, 1);
    end_epoch();
    for (int p = 0; p < 6; p++) begin
      look(cpc_t'(10'h020 + p), pf, sc, al);
      chk(sc == (p >= 2), $sformatf("top-%0d selection of PC %0d", TOPN, p));
    end
    look(10'h00B, pf, sc, al);
    chk(!sc && !pf, "previous epoch's candidates replaced");
    look(10'h00A, pf, sc, al);
    chk(!sc && !pf && !al, "Count reset by new epoch / entry gone");

    // ---- epoch 3: LRU eviction. 0x50 gets many misses first, then 8 other
    // PCs are sampled: 0x50 is the least recently used and is evicted.
    for (int i = 0; i < 20; i++) acc(10'h050, 0, 1);
    for (int p = 0; p < 8; p++)
      for (int i = 0; i < 5; i++) acc(cpc_t'(10'h060 + p), 0, 1);
    end_epoch();
    look(10'h050, pf, sc, al);
    chk(!sc, "LRU victim evicted from the Sample Table");
    nsuc = 0;
    for (int p = 0; p < 8; p++) begin
      look(cpc_t'(10'h060 + p), pf, sc, al);
      nsuc += sc;
    end
    chk(nsuc == TOPN, $sformatf("exactly TOP_N suc picks (%0d)", nsuc));

    // ---- random epoch: every picked suc has >= theta misses
    for (int i = 0; i < EPOCH - 8; i++) acc(cpc_t'($urandom_range(3, 0) + 10'h070), 1'($urandom), 1'($urandom));
    end_epoch();
    nsuc = 0;
    for (int p = 0; p < 4; p++) begin
      look(cpc_t'(10'h070 + p), pf, sc, al);
      nsuc += sc;
    end
    chk(nsuc >= 1, "random epoch selects some PC_suc");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
