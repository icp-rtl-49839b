// tb_lw_calculator: self-checking test of the Lightweight Calculator.
// The Correlation Table and Source Predictor are modelled here as small
// behavioural tables holding the paper's example chain
//   0xA: lw t2,0(t5) -> 0xB: add t3,a1,t2 -> 0xC: lw t6,0(t3)
// with a1 predicted. Checks: the prefetch address (value + a1 + 0), its
// latency (4 cycles after the value is taken), the LLC flag for demand-fed
// chains, that a prefetched line of a non-friendly slot is ignored, every
// ALU operation of the operation table, no prefetch without a confident
// prediction, a level mismatch, and a stack overflow on a wide tree.
module tb_lw_calculator;
  import icp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock edge
  always #5 clk = ~clk;

  logic     in_valid, in_ready, in_is_pf, ct_hit, sp_idx, sp_hit;
  logic     pf_valid, pf_to_llc, ev_push, ev_overflow, ev_no_pred, busy;
  cpc_t     in_cpc, ct_cpc, sp_cpc;
  level_e   in_level, pf_level;
  data_t    in_data, sp_val;
  ct_slot_t ct_slot [2];
  addr_t    pf_addr;

  lw_calculator dut (.*);

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

  // ---- behavioural Correlation Table and Source Predictor
  ct_slot_t tbl [cpc_t][2];
  bit       sp_conf = 1;
  data_t    a1_val  = 64'h0000_7000_0000;

  always_comb begin
    ct_hit = tbl.exists(ct_cpc);
    ct_slot[0] = ct_hit ? tbl[ct_cpc][0] : '0;
    ct_slot[1] = ct_hit ? tbl[ct_cpc][1] : '0;
    sp_hit = sp_conf && sp_cpc == 10'h00B && sp_idx == 1'b0;
    sp_val = a1_val;
  end

  function automatic ct_slot_t sl(input cpc_t s, input op_e op, input bit fr, input level_e lv,
                                  input bit use_imm, input int imm, input bit chain_b,
                                  input bit sp, input bit sidx);
    ct_slot_t x;
    x = '0;
    x.valid = 1; x.counter = 1; x.friendly = fr; x.level = lv; x.corr_pc = s;
    x.cinst.cop = op; x.cinst.use_imm = use_imm; x.cinst.imm = 16'(imm);
    x.cinst.chain_b = chain_b; x.src_pred = sp; x.src_idx = sidx;
    return x;
  endfunction

  // ---- prefetch monitor
  addr_t got_addr [$];
  bit    got_llc  [$];
  int    got_cyc  [$];
  int    cyc = 0;
  int    pushes = 0, overflows = 0, nopreds = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && pf_valid) begin got_addr.push_back(pf_addr); got_llc.push_back(pf_to_llc); got_cyc.push_back(cyc); end
    if (rst_n && ev_push) pushes++;
    if (ev_overflow) overflows++;
    if (ev_no_pred) nopreds++;
  end

  int t_acc;
  task automatic send(input cpc_t c, input data_t v, input bit pf, input level_e lv);
    @(negedge clk);
    in_valid = 1; in_cpc = c; in_data = v; in_is_pf = pf; in_level = lv;
    while (!in_ready) @(negedge clk);
    t_acc = cyc;          // value is taken at the coming edge
    @(negedge clk);
    in_valid = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    data_t v;
    in_valid = 0; in_cpc = 0; in_data = 0; in_is_pf = 0; in_level = LVL_L1;
    tbl[10'h00A][0] = sl(10'h00B, OP_ADD, 1, LVL_L1, 0, 0, 1, 1, 0);   // add t3, a1, t2 (chain = t2 = b)
    tbl[10'h00A][1] = '0;
    tbl[10'h00B][0] = sl(10'h00C, OP_LD, 0, LVL_L1, 1, 0, 0, 0, 0);    // lw t6, 0(t3)
    tbl[10'h00B][1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // demand-fed chain
    v = 64'h0000_0000_1234_5678;
    send(10'h00A, v, 0, LVL_L1);
    chk(got_addr.size() == 1, "one prefetch from the example chain");
    if (got_addr.size() == 1) begin
      chk(got_addr[0] == addr_t'(v + a1_val), $sformatf("address %h", got_addr[0]));
      chk(got_llc[0] == 1, "demand-fed chain goes to the LLC");
      chk(got_cyc[0] - t_acc == 4, $sformatf("latency %0d cycles", got_cyc[0] - t_acc));
    end
    got_addr.delete(); got_llc.delete(); got_cyc.delete();

    // prefetch-fed, friendly slot: stays at the current level
    send(10'h00A, 64'h40, 1, LVL_L1);
    chk(got_addr.size() == 1 && got_addr[0] == addr_t'(64'h40 + a1_val) && got_llc[0] == 0,
        "prefetch-fed chain at current level");
    got_addr.delete(); got_llc.delete(); got_cyc.delete();

    // prefetch-fed line of a non-friendly slot is ignored
    tbl[10'h00A][0].friendly = 0;
    send(10'h00A, 64'h40, 1, LVL_L1);
    chk(got_addr.size() == 0, "non-friendly prefetched line ignored");
    tbl[10'h00A][0].friendly = 1;

    // level mismatch
    send(10'h00A, 64'h40, 0, LVL_L2);
    chk(got_addr.size() == 0, "level mismatch ignored");

    // no confident prediction
    sp_conf = 0;
    send(10'h00A, 64'h40, 0, LVL_L1);
    chk(got_addr.size() == 0 && nopreds > 0, "no prefetch without confident prediction");
    sp_conf = 1;

    // every ALU operation: 0x10 -> op(imm 3) -> ld 8(..)
    for (int o = 0; o < 7; o++) begin
      data_t a, exp;
      op_e op;
      op = op_e'(o);
      a = 64'h0000_0000_00F0_0F35;
      case (op)
        OP_ADD: exp = a + 3;
        OP_SUB: exp = a - 3;
        OP_SHL: exp = a << 3;
        OP_SHR: exp = a >> 3;
        OP_AND: exp = a & 3;
        OP_OR:  exp = a | 3;
        default: exp = a ^ 3;
      endcase
      tbl[10'h010][0] = sl(10'h011, op, 0, LVL_L1, 1, 3, 0, 0, 0);
      tbl[10'h010][1] = '0;
      tbl[10'h011][0] = sl(10'h012, OP_LD, 0, LVL_L1, 1, 8, 0, 0, 0);
      tbl[10'h011][1] = '0;
      send(10'h010, a, 0, LVL_L1);
      chk(got_addr.size() == 1 && got_addr[0] == addr_t'(exp + 8), $sformatf("op %s", op.name()));
      got_addr.delete(); got_llc.delete(); got_cyc.delete();
    end
    // SUB with chain as operand b: x = imm - chain
    tbl[10'h010][0] = sl(10'h011, OP_SUB, 0, LVL_L1, 1, 100, 1, 0, 0);
    send(10'h010, 64'd30, 0, LVL_L1);
    chk(got_addr.size() == 1 && got_addr[0] == addr_t'(70 + 8), "SUB with chain as second operand");
    got_addr.delete();

    // two successors: both prefetched
    tbl[10'h020][0] = sl(10'h021, OP_LD, 0, LVL_L1, 1, 0, 0, 0, 0);
    tbl[10'h020][1] = sl(10'h022, OP_LD, 0, LVL_L1, 1, 64, 0, 0, 0);
    send(10'h020, 64'h1000, 0, LVL_L1);
    chk(got_addr.size() == 2 && got_addr[0] == 48'h1000 && got_addr[1] == 48'h1040, "two successors");
    got_addr.delete();

    // wide tree overflows the 4-entry stack: 0x30 -> (0x31, 0x32), each -> two more ...
    for (int n = 0; n < 16; n++) begin
      tbl[cpc_t'(10'h030 + n)][0] = sl(cpc_t'(10'h030 + 2*n + 1), OP_ADD, 0, LVL_L1, 1, 1, 0, 0, 0);
      tbl[cpc_t'(10'h030 + n)][1] = sl(cpc_t'(10'h030 + 2*n + 2), OP_ADD, 0, LVL_L1, 1, 2, 0, 0, 0);
    end
    send(10'h030, 64'h0, 0, LVL_L1);
    chk(overflows > 0, "stack overflow observed");
    chk(pushes > 0, "pushes observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
