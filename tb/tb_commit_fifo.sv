// tb_commit_fifo: self-checking test of the commit buffer.
// Fills it to its 8 entries, checks that the 9th record is dropped, drains it
// in order, then runs random push/pop traffic against a queue model.
module tb_commit_fifo;
  import icp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock edge
  always #5 clk = ~clk;

  logic        enq_valid, full, drop, deq_valid, deq_ready;
  commit_rec_t enq_rec, deq_rec;

  commit_fifo dut (.*);

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

  function automatic commit_rec_t mk(input int n);
    commit_rec_t r;
    r = '0;
    r.pc = pc_t'(n * 4 + 32'h1000);
    r.imm = 16'(n);
    r.src1_val = data_t'(n) * 64'h9E3779B97F4A7C15;
    return r;
  endfunction

  commit_rec_t model[$];
  int n;

  initial begin
    enq_valid = 0; deq_ready = 0; enq_rec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    chk(!deq_valid && !full, "empty after reset");
    // fill 8
    for (int i = 0; i < 8; i++) begin
      enq_valid <= 1; enq_rec <= mk(i);
      @(posedge clk);
    end
    enq_valid <= 1; enq_rec <= mk(99);
    #1;
    chk(full, "full after 8 records");
    chk(drop, "9th record dropped");
    @(posedge clk);
    enq_valid <= 0;
    // drain
    for (int i = 0; i < 8; i++) begin
      deq_ready <= 1;
      #1;
      chk(deq_valid && deq_rec == mk(i), $sformatf("in-order record %0d", i));
      @(posedge clk);
    end
    deq_ready <= 0;
    #1 chk(!deq_valid, "empty after drain");
    // random traffic
    n = 1000;
    for (int c = 0; c < 3000; c++) begin
      logic e, d;
      e = $urandom_range(0, 1);
      d = $urandom_range(0, 2) != 0;
      enq_valid <= e; enq_rec <= mk(n); deq_ready <= d;
      #1;
      chk(full == (model.size() == 8), "random: full flag");
      chk(drop == (e && model.size() == 8), "random: drop flag");
      if (d && deq_valid) begin
        chk(model.size() > 0 && deq_rec == model[0], "random: head matches model");
        if (model.size() > 0) void'(model.pop_front());
      end
      if (e && !full) model.push_back(mk(n));
      @(posedge clk);
      n++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
