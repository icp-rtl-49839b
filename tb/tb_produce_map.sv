// tb_produce_map: self-checking test of the Produce Map.
// Replays the paper's dependency-tree example (root PC_i writes a1, PC_i+1
// writes a2, PC_i+2 writes a3, PC_i+3 overwrites a2 from outside the tree)
// and then random write/invalidate/lookup traffic against a reference model
// that keeps, per register tag, the last producing node.
module tb_produce_map;
  import icp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock edge
  always #5 clk = ~clk;

  logic       clear, wr_valid, inv_valid;
  ptag_t      lk_tag [2];
  logic       lk_hit [2];
  logic [3:0] lk_id  [2];
  logic [3:0] wr_id;
  ptag_t      wr_tag, inv_tag;

  produce_map #(.N_NODES(16)) dut (.*);

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

  // reference: tag -> node id, valid
  int ref_id [256];
  bit ref_v  [256];

  task automatic idle();
    clear <= 0; wr_valid <= 0; inv_valid <= 0;
  endtask

  task automatic look(input ptag_t t0, input ptag_t t1);
    lk_tag[0] = t0; lk_tag[1] = t1;
    #1;
    chk(lk_hit[0] == ref_v[t0] && (!ref_v[t0] || lk_id[0] == 4'(ref_id[t0])),
        $sformatf("lookup tag %0d", t0));
    chk(lk_hit[1] == ref_v[t1] && (!ref_v[t1] || lk_id[1] == 4'(ref_id[t1])),
        $sformatf("lookup tag %0d", t1));
  endtask

  localparam ptag_t A0 = 8'd10, A1 = 8'd11, A2 = 8'd12, A3 = 8'd13, T1 = 8'd20, T2 = 8'd21;

  initial begin
    idle(); lk_tag[0] = 0; lk_tag[1] = 0; wr_id = 0; wr_tag = 0; inv_tag = 0;
    foreach (ref_v[i]) ref_v[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // PC_i (root): clear + write node 0 <- a1
    clear <= 1; wr_valid <= 1; wr_id <= 0; wr_tag <= A1;
    @(posedge clk); idle(); ref_id[A1] = 0; ref_v[A1] = 1;
    look(A1, T1);                       // PC_i+1 sources a1 (hit id 0), t1 (miss)
    wr_valid <= 1; wr_id <= 1; wr_tag <= A2;
    @(posedge clk); idle(); ref_id[A2] = 1; ref_v[A2] = 1;
    look(A2, A0);                       // PC_i+2 source a2 -> id 1
    wr_valid <= 1; wr_id <= 2; wr_tag <= A3;
    @(posedge clk); idle(); ref_id[A3] = 2; ref_v[A3] = 1;
    look(T2, A3);                       // PC_i+3 source t2: no producer
    inv_valid <= 1; inv_tag <= A2;      // ... overwrites a2: invalidate
    @(posedge clk); idle(); ref_v[A2] = 0;
    look(A2, A1);                       // PC_i+4 source a2: no producer now
    chk(!lk_hit[0], "a2 invalidated as in the example");
    chk(lk_hit[1] && lk_id[1] == 0, "a1 still produced by node 0");
    // random traffic
    for (int c = 0; c < 2000; c++) begin
      int kind;
      ptag_t t;
      kind = $urandom_range(0, 9);
      t = ptag_t'($urandom_range(0, 23));
      if (kind == 0) begin
        clear <= 1;
        foreach (ref_v[i]) ref_v[i] = 0;
      end else if (kind < 6) begin
        int id;
        id = $urandom_range(0, 15);
        // a node id is reused only after its old entry is gone in this model
        for (int i = 0; i < 256; i++) if (ref_v[i] && ref_id[i] == id) ref_v[i] = 0;
        wr_valid <= 1; wr_id <= 4'(id); wr_tag <= t;
        ref_id[t] = id; ref_v[t] = 1;
      end else if (kind < 8) begin
        inv_valid <= 1; inv_tag <= t; ref_v[t] = 0;
      end
      @(posedge clk); idle();
      look(ptag_t'($urandom_range(0, 23)), ptag_t'($urandom_range(0, 23)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
