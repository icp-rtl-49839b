// tb_corr_table: self-checking test of the Correlation Table.
// Writes the paper's example edges (0xA -> 0xB "add", Src Pred; 0xB -> 0xC
// "ld"; 0xA -> 0xDE at level 2) and checks the slots; then checks that a
// repeated edge raises its Counter and that a third successor replaces the
// slot with the smallest Counter; finally fills more PCs than entries.
module tb_corr_table;
  import icp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock edge
  always #5 clk = ~clk;

  logic     wr_valid, a_hit, b_hit;
  ct_edge_t wr_edge;
  cpc_t     a_cpc, b_cpc;
  ct_slot_t a_slot [2];
  ct_slot_t b_slot [2];

  corr_table #(.ENTRIES(32)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ct_edge_t mk(input cpc_t p, input cpc_t s, input op_e op,
                                  input bit fr, input level_e lv, input bit sp);
    ct_edge_t e;
    e = '0;
    e.pc = p; e.corr_pc = s; e.cinst.cop = op; e.cinst.use_imm = (op == OP_LD);
    e.friendly = fr; e.level = lv; e.src_pred = sp; e.src_idx = 0;
    return e;
  endfunction

  task automatic wr(input ct_edge_t e);
    @(negedge clk);
    wr_valid = 1; wr_edge = e;
    @(negedge clk);
    wr_valid = 0;
  endtask

  // find slot with corr_pc in port B result
  function automatic int slot_of(input cpc_t s);
    for (int i = 0; i < 2; i++) if (b_slot[i].valid && b_slot[i].corr_pc == s) return i;
    return -1;
  endfunction

  initial begin
    int i;
    wr_valid = 0; wr_edge = '0; a_cpc = 0; b_cpc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    a_cpc = 10'h00A;
    #1 chk(!a_hit, "empty after reset");
    wr(mk(10'h00A, 10'h00B, OP_ADD, 1, LVL_L1, 1));
    wr(mk(10'h00B, 10'h00C, OP_LD, 0, LVL_L1, 0));
    wr(mk(10'h00A, 10'h0DE, OP_XOR, 0, LVL_L2, 0));
    b_cpc = 10'h00A;
    #1;
    i = slot_of(10'h00B);
    chk(b_hit && i >= 0, "0xA has successor 0xB");
    if (i >= 0) chk(b_slot[i].counter == 1 && b_slot[i].friendly && b_slot[i].level == LVL_L1 &&
                    b_slot[i].cinst.cop == OP_ADD && b_slot[i].src_pred, "0xA->0xB fields");
    i = slot_of(10'h0DE);
    chk(i >= 0 && b_slot[i].level == LVL_L2 && !b_slot[i].friendly, "0xA->0xDE level 2");
    a_cpc = 10'h00B;
    #1 chk(a_hit && a_slot[0].valid && a_slot[0].corr_pc == 10'h00C && a_slot[0].cinst.cop == OP_LD &&
           !a_slot[0].src_pred && !a_slot[1].valid, "0xB->0xC on port A, one slot");
    // counter: 0xA->0xB seen 3 more times
    repeat (3) wr(mk(10'h00A, 10'h00B, OP_ADD, 1, LVL_L1, 1));
    #1 i = slot_of(10'h00B);
    chk(i >= 0 && b_slot[i].counter == 4, "repeated edge counter = 4");
    // third successor replaces the smallest counter (0xDE, counter 1)
    wr(mk(10'h00A, 10'h0EF, OP_SUB, 0, LVL_L1, 0));
    #1;
    chk(slot_of(10'h00B) >= 0, "frequent successor kept");
    chk(slot_of(10'h0EF) >= 0, "new successor inserted");
    chk(slot_of(10'h0DE) < 0, "least counted successor replaced");
    // saturation
    repeat (20) wr(mk(10'h00A, 10'h00B, OP_ADD, 1, LVL_L1, 1));
    #1 i = slot_of(10'h00B);
    chk(i >= 0 && b_slot[i].counter == 15, "counter saturates at 15");
    // capacity: 40 producers in a 32-entry table; the last 32 must be present
    for (int p = 0; p < 40; p++) wr(mk(cpc_t'(10'h100 + p), cpc_t'(10'h200 + p), OP_LD, 0, LVL_L1, 0));
    for (int p = 8; p < 40; p++) begin
      b_cpc = cpc_t'(10'h100 + p);
      #1 chk(b_hit && b_slot[0].corr_pc == cpc_t'(10'h200 + p), $sformatf("producer %0d present", p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
