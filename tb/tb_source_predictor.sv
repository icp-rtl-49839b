// tb_source_predictor: self-checking test of the Source Predictor.
// Allocates an entry for (PC 0xB, src1) as in the paper's example
// "0xB: add t3, a1, t2", trains it with committed values of a1 and checks
// that a prediction appears only after the same value was seen twice, that a
// changed value removes it, and that other PCs/operands are not affected.
// A second phase resets the block and runs random allocations and commits
// (with simultaneous ones) over 12 PCs, more than the 8 entries, comparing
// every lookup with a reference model of last value, confidence bit and
// round-robin replacement.
module tb_source_predictor;
  import icp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock edge
  always #5 clk = ~clk;

  logic        alloc_valid, alloc_idx, train_valid, lk_idx, lk_hit;
  cpc_t        alloc_cpc, lk_cpc;
  commit_rec_t train_rec;
  data_t       lk_val;

  source_predictor #(.ENTRIES(8)) dut (.*);

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

  task automatic commit(input pc_t pc, input data_t v1, input data_t v2);
    @(negedge clk);
    train_valid = 1;
    train_rec = '0;
    train_rec.pc = pc; train_rec.src1_val = v1; train_rec.src2_val = v2;
    @(negedge clk);
    train_valid = 0;
  endtask

  localparam pc_t PCB = 48'h0000_4000_000B;
  localparam pc_t PCX = 48'h0000_4000_0020;

  // reference model
  bit    m_vld [8], m_conf [8], m_idx [8];
  cpc_t  m_pc [8];
  data_t m_val [8];
  int    m_rr;

  task automatic random_phase();
    @(negedge clk);
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    foreach (m_vld[i]) begin m_vld[i] = 0; m_conf[i] = 0; end
    m_rr = 0;
    for (int t = 0; t < 600; t++) begin
      bit    av, ai, tv, present;
      pc_t   apc, tpc;
      data_t v1, v2;
      av  = ($urandom_range(0, 3) == 0);
      ai  = $urandom_range(0, 1);
      apc = PCX + pc_t'($urandom_range(0, 11) * 4);
      tv  = ($urandom_range(0, 1) == 0);
      tpc = PCX + pc_t'($urandom_range(0, 11) * 4);
      v1  = data_t'($urandom_range(0, 2));
      v2  = data_t'($urandom_range(0, 2));
      @(negedge clk);
      alloc_valid = av; alloc_cpc = compress_pc(apc); alloc_idx = ai;
      train_valid = tv;
      train_rec = '0; train_rec.pc = tpc; train_rec.src1_val = v1; train_rec.src2_val = v2;
      // model update of this clock
      present = 0;
      for (int i = 0; i < 8; i++)
        if (m_vld[i] && m_pc[i] == compress_pc(apc) && m_idx[i] == ai) present = 1;
      if (tv)
        for (int i = 0; i < 8; i++)
          if (m_vld[i] && m_pc[i] == compress_pc(tpc)) begin
            m_conf[i] = ((m_idx[i] ? v2 : v1) == m_val[i]);
            m_val[i]  = m_idx[i] ? v2 : v1;
          end
      if (av && !present) begin
        m_vld[m_rr] = 1; m_conf[m_rr] = 0; m_pc[m_rr] = compress_pc(apc);
        m_idx[m_rr] = ai; m_val[m_rr] = 0;
        m_rr = (m_rr + 1) % 8;
      end
      @(negedge clk);
      alloc_valid = 0; train_valid = 0;
      for (int p = 0; p < 12; p++)
        for (int x = 0; x < 2; x++) begin
          bit    eh;
          data_t ev;
          eh = 0; ev = 0;
          for (int i = 0; i < 8; i++)
            if (m_vld[i] && m_conf[i] && m_pc[i] == compress_pc(PCX + pc_t'(p * 4)) && m_idx[i] == x) begin
              eh = 1; ev = m_val[i];
            end
          lk_cpc = compress_pc(PCX + pc_t'(p * 4)); lk_idx = x;
          #1;
          if (t % 50 == 49 || lk_hit != eh || (eh && lk_val != ev))
            chk(lk_hit == eh && (!eh || lk_val == ev),
                $sformatf("random step %0d PC %0d src%0d: hit %0d val %0d", t, p, x + 1, lk_hit, lk_val));
        end
    end
  endtask

  initial begin
    alloc_valid = 0; train_valid = 0; train_rec = '0;
    alloc_idx = 0; alloc_cpc = '0; lk_cpc = '0; lk_idx = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    alloc_valid <= 1; alloc_cpc <= compress_pc(PCB); alloc_idx <= 0;
    @(posedge clk);
    alloc_valid <= 0;
    lk_cpc = compress_pc(PCB); lk_idx = 0;
    #1 chk(!lk_hit, "no prediction before training");
    commit(PCB, 64'h1000_0000, 64'h7);
    #1 chk(!lk_hit, "no prediction after first value");
    commit(PCB, 64'h1000_0000, 64'h9);
    #1 chk(lk_hit && lk_val == 64'h1000_0000, "confident prediction after repeat");
    lk_idx = 1;
    #1 chk(!lk_hit, "other operand index not predicted");
    lk_idx = 0;
    commit(PCX, 64'h5555, 64'h5555);
    #1 chk(lk_hit && lk_val == 64'h1000_0000, "other PC does not disturb");
    commit(PCB, 64'h2000_0000, 64'h9);
    #1 chk(!lk_hit, "changed value clears confidence");
    commit(PCB, 64'h2000_0000, 64'h9);
    #1 chk(lk_hit && lk_val == 64'h2000_0000, "new value predicted after repeat");
    // fill all entries with src2 predictors, the original survives until replaced
    for (int i = 1; i < 8; i++) begin
      @(negedge clk);
      alloc_valid = 1; alloc_cpc = compress_pc(PCX + pc_t'(i * 16)); alloc_idx = 1;
    end
    @(negedge clk);
    alloc_valid = 0;
    for (int i = 1; i < 8; i++) begin
      commit(PCX + pc_t'(i * 16), 0, data_t'(i * 3));
      commit(PCX + pc_t'(i * 16), 0, data_t'(i * 3));
    end
    for (int i = 1; i < 8; i++) begin
      lk_cpc = compress_pc(PCX + pc_t'(i * 16)); lk_idx = 1;
      #1 chk(lk_hit && lk_val == data_t'(i * 3), $sformatf("entry %0d predicts", i));
    end
    lk_cpc = compress_pc(PCB); lk_idx = 0;
    #1 chk(lk_hit && lk_val == 64'h2000_0000, "first entry kept");
    random_phase();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
