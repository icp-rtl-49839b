// tb_mshr_pc_ext: self-checking test of the MSHR compressed-PC extension.
// Writes a PC into every (MSHR, target) slot and reads each back on a fill,
// comparing with a compression computed here bit by bit: low 4 PC bits kept,
// bits [47:4] XOR-folded in 6-bit groups. A second fill of a slot must miss.
module tb_mshr_pc_ext;
  import icp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock edge
  always #5 clk = ~clk;

  logic       alloc_valid, fill_valid, fill_hit;
  logic [3:0] alloc_mshr, fill_mshr;
  logic [2:0] alloc_tgt, fill_tgt;
  pc_t        alloc_pc;
  cpc_t       fill_cpc;

  mshr_pc_ext #(.N_MSHR(16), .N_TGT(8)) dut (.*);

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

  function automatic logic [9:0] ref_cpc(input logic [47:0] pc);
    logic [5:0] h;
    h = '0;
    for (int b = 4; b < 48; b++) h[(b - 4) % 6] ^= pc[b];
    return {h, pc[3:0]};
  endfunction

  logic [47:0] pcs [16][8];

  initial begin
    alloc_valid = 0; fill_valid = 0;
    alloc_mshr = 0; alloc_tgt = 0; alloc_pc = 0; fill_mshr = 0; fill_tgt = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    fill_valid <= 1; fill_mshr <= 3; fill_tgt <= 2;
    #1 chk(!fill_hit, "unwritten slot misses after reset");
    @(posedge clk);
    fill_valid <= 0;
    for (int m = 0; m < 16; m++)
      for (int t = 0; t < 8; t++) begin
        pcs[m][t] = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFF;
        alloc_valid <= 1; alloc_mshr <= 4'(m); alloc_tgt <= 3'(t); alloc_pc <= pcs[m][t];
        @(posedge clk);
      end
    alloc_valid <= 0;
    for (int m = 15; m >= 0; m--)
      for (int t = 0; t < 8; t++) begin
        fill_valid <= 1; fill_mshr <= 4'(m); fill_tgt <= 3'(t);
        #1;
        chk(fill_hit && fill_cpc == ref_cpc(pcs[m][t]),
            $sformatf("slot %0d/%0d returns compressed PC", m, t));
        @(posedge clk);
      end
    fill_valid <= 1; fill_mshr <= 5; fill_tgt <= 5;
    #1 chk(!fill_hit, "slot is free after its fill");
    @(posedge clk);
    fill_valid <= 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
