// source_predictor: last-value prediction for operands outside a dependency path.
//
// A successor instruction such as `add t3, a1, t2` takes t2 from the chain
// but a1 from somewhere else; a1 is usually a stable base address. When the
// Correlation Table learns an edge whose successor needs such an operand, an
// entry {PC, source operand index} is allocated here. Every committed
// instruction is then compared with the entries: on a PC match the committed
// value of that source operand is checked against the recorded value; equal
// sets the confidence bit, different clears it and records the new value.
// A lookup (PC, operand index) returns a prediction only when the confidence
// bit is set. The 8 entries, the single value per entry and the one-bit
// confidence follow the paper. Identifying the operand by its position in
// the instruction (src1/src2) rather than by a register tag, and round-robin
// replacement when all entries are used, are this design's choices.
//
// Timing: lookup is combinational; allocation and training update at the
// clock edge. Allocating a PC that is already present keeps its entry.
// Lint note: only the PC and the two operand values of the commit
// record are needed here; the remaining record bits are reported unused.
module source_predictor
  import icp_pkg::*;
#(
  parameter int unsigned ENTRIES = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // allocation from the Correlation Table write path
  input  logic        alloc_valid,
  input  cpc_t        alloc_cpc,
  input  logic        alloc_idx,
  // training from committed instructions
  input  logic        train_valid,
  input  commit_rec_t train_rec,
  // prediction for the Lightweight Calculator
  input  cpc_t        lk_cpc,
  input  logic        lk_idx,
  output logic        lk_hit,
  output data_t       lk_val
);

  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0] vld, conf, idx;
  cpc_t  pcs  [ENTRIES];
  data_t vals [ENTRIES];
  logic [IW-1:0] rr;

  logic  alloc_present;
  cpc_t  train_cpc;
  assign train_cpc = compress_pc(train_rec.pc);

  always_comb begin
    alloc_present = 1'b0;
    for (int i = 0; i < int'(ENTRIES); i++)
      if (vld[i] && pcs[i] == alloc_cpc && idx[i] == alloc_idx) alloc_present = 1'b1;
  end

  always_comb begin
    lk_hit = 1'b0;
    lk_val = '0;
    for (int i = 0; i < int'(ENTRIES); i++) begin
      if (vld[i] && conf[i] && pcs[i] == lk_cpc && idx[i] == lk_idx) begin
        lk_hit = 1'b1;
        lk_val = vals[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld  <= '0;
      conf <= '0;
      rr   <= '0;
    end else begin
      if (train_valid) begin
        for (int i = 0; i < int'(ENTRIES); i++) begin
          if (vld[i] && pcs[i] == train_cpc) begin
            if ((idx[i] ? train_rec.src2_val : train_rec.src1_val) == vals[i])
              conf[i] <= 1'b1;
            else
              conf[i] <= 1'b0;
          end
        end
      end
      if (alloc_valid && !alloc_present) begin
        vld[rr]  <= 1'b1;
        conf[rr] <= 1'b0;
        rr       <= (rr == IW'(ENTRIES-1)) ? '0 : rr + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (train_valid) begin
      for (int i = 0; i < int'(ENTRIES); i++)
        if (vld[i] && pcs[i] == train_cpc)
          vals[i] <= idx[i] ? train_rec.src2_val : train_rec.src1_val;
    end
    if (alloc_valid && !alloc_present) begin
      pcs[rr]  <= alloc_cpc;
      idx[rr]  <= alloc_idx;
      vals[rr] <= '0;
    end
  end

endmodule
