// tb_data_extractor: self-checking test of the Data Extractor.
// Demand fills: the value at the request's offset and size is returned once.
// Prefetched fills: after the PC's demand requests hit offsets 8 (x6), 24 (x3)
// and 40 (x1), only offsets whose share exceeds 1/10 (8 and 24) are
// extracted, in that order; a PC without history gives nothing.
// Further: a share of exactly 1/10 is not enough, the access size is taken
// from the training requests, val_* holds under back-pressure and carries
// the response's PC, level and kind, no response is taken while busy, 32
// newer allocations evict an entry (round robin), and random demand fills
// with random lines are compared with a byte-level model.
module tb_data_extractor;
  import icp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock edge
  always #5 clk = ~clk;

  logic        alloc_valid, train_valid, resp_valid, resp_ready, resp_is_pf;
  logic        val_valid, val_ready, val_is_pf;
  cpc_t        alloc_cpc, train_cpc, resp_cpc, val_cpc;
  logic [5:0]  train_off, resp_off;
  logic [1:0]  train_size, resp_size;
  level_e      resp_level, val_level;
  line_t       resp_line;
  data_t       val_data;

  data_extractor #(.ENTRIES(32)) dut (.*);

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

  // line with byte b = 8'(b*7+3)
  function automatic line_t mkline();
    line_t l;
    for (int b = 0; b < 64; b++) l[b*8 +: 8] = 8'(b * 7 + 3);
    return l;
  endfunction

  function automatic data_t refval(input int off, input int sz);
    data_t v;
    v = '0;
    for (int b = 0; b < (1 << sz); b++)
      if (off + b < 64) v[b*8 +: 8] = 8'((off + b) * 7 + 3);
    return v;
  endfunction

  level_e cur_level = LVL_L1;

  function automatic data_t refval_of(input line_t l, input int off, input int sz);
    data_t v;
    v = '0;
    for (int b = 0; b < (1 << sz); b++)
      if (off + b < 64) v[b*8 +: 8] = l[(off + b) * 8 +: 8];
    return v;
  endfunction

  task automatic send_line(input cpc_t c, input bit pf, input int off, input int sz, input line_t l);
    @(negedge clk);
    resp_valid = 1; resp_cpc = c; resp_is_pf = pf; resp_off = 6'(off);
    resp_size = 2'(sz); resp_level = cur_level; resp_line = l;
    @(negedge clk);
    resp_valid = 0;
  endtask

  task automatic alloc(input cpc_t c);
    @(negedge clk);
    alloc_valid = 1; alloc_cpc = c;
    @(negedge clk);
    alloc_valid = 0;
  endtask

  task automatic train_sz(input cpc_t c, input int off, input int sz);
    @(negedge clk);
    train_valid = 1; train_cpc = c; train_off = 6'(off); train_size = 2'(sz);
    @(negedge clk);
    train_valid = 0;
  endtask

  task automatic send(input cpc_t c, input bit pf, input int off, input int sz);
    @(negedge clk);
    resp_valid = 1; resp_cpc = c; resp_is_pf = pf; resp_off = 6'(off);
    resp_size = 2'(sz); resp_level = LVL_L1; resp_line = mkline();
    @(negedge clk);
    resp_valid = 0;
  endtask

  task automatic train(input cpc_t c, input int off);
    @(negedge clk);
    train_valid = 1; train_cpc = c; train_off = 6'(off); train_size = 2'd3;
    @(negedge clk);
    train_valid = 0;
  endtask

  task automatic expect_vals(input data_t exp [$], input string what);
    int got;
    int wait_c;
    got = 0; wait_c = 0;
    val_ready = 1;
    while (wait_c < 40) begin
      if (val_valid) begin
        chk(got < exp.size() && val_data == exp[got],
            $sformatf("%s value %0d = %h", what, got, val_data));
        got++;
      end
      @(negedge clk);
      wait_c++;
    end
    chk(got == exp.size(), $sformatf("%s: %0d values (expected %0d)", what, got, exp.size()));
  endtask

  localparam cpc_t PA = 10'h0A0, PB = 10'h0B0, PC = 10'h0C0, PD = 10'h0D0;

  initial begin
    data_t e [$];
    alloc_valid = 0; train_valid = 0; resp_valid = 0; val_ready = 0;
    alloc_cpc = 0; train_cpc = 0; train_off = 0; train_size = 0;
    resp_cpc = 0; resp_is_pf = 0; resp_off = 0; resp_size = 0; resp_level = LVL_L1; resp_line = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // demand fill, 8-byte at 16, and 4-byte at 36
    send(PB, 0, 16, 3);
    e = '{refval(16, 3)};
    expect_vals(e, "demand ld@16");
    send(PB, 0, 36, 2);
    e = '{refval(36, 2)};
    expect_vals(e, "demand lw@36");
    // prefetched line of a PC without entry: nothing
    send(PA, 1, 0, 0);
    e = {};
    expect_vals(e, "prefetch without history");
    // allocate PA, train offsets
    @(negedge clk);
    alloc_valid = 1; alloc_cpc = PA;
    @(negedge clk);
    alloc_valid = 0;
    repeat (6) train(PA, 8);
    repeat (3) train(PA, 24);
    train(PA, 40);
    send(PA, 1, 0, 0);
    e = '{refval(8, 3), refval(24, 3)};
    expect_vals(e, "prefetch with history");
    chk(resp_ready, "idle again");

    // share of exactly 1/10 (1 of 10) is not above the threshold
    alloc(PC);
    repeat (9) train_sz(PC, 12, 2);
    train_sz(PC, 52, 2);
    send(PC, 1, 0, 0);
    e = '{refval(12, 2)};   // 4-byte size learned from the training
    expect_vals(e, "share 1/10 and learned size");

    // back-pressure, sideband fields and busy
    alloc(PD);
    repeat (2) train_sz(PD, 0, 3);
    repeat (2) train_sz(PD, 32, 3);
    cur_level = LVL_L2;
    send_line(PD, 1, 0, 0, mkline());
    cur_level = LVL_L1;
    val_ready = 0;
    chk(val_valid && val_cpc == PD && val_level == LVL_L2 && val_is_pf,
        "sideband fields of a prefetched L2 line");
    chk(!resp_ready, "no response taken while busy");
    send(PB, 0, 8, 3);      // offered while busy: must be ignored
    repeat (3) @(negedge clk);
    chk(val_valid && val_data == refval(0, 3), "value held under back-pressure");
    e = '{refval(0, 3), refval(32, 3)};
    expect_vals(e, "after back-pressure (busy response ignored)");

    // 32 newer allocations evict PA (round robin)
    for (int i = 0; i < 32; i++) alloc(cpc_t'(10'h200 + i));
    send(PA, 1, 0, 0);
    e = {};
    expect_vals(e, "evicted entry");

    // random demand fills against the byte model
    for (int t = 0; t < 40; t++) begin
      line_t l;
      int sz, off;
      for (int w = 0; w < 16; w++) l[32 * w +: 32] = $urandom;
      sz  = $urandom_range(0, 3);
      off = ($urandom_range(0, 63) >> sz) << sz;
      send_line(cpc_t'($urandom), 0, off, sz, l);
      val_ready = 1;
      chk(val_valid && val_data == refval_of(l, off, sz) && !val_is_pf,
          $sformatf("random demand off %0d size %0d", off, sz));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
