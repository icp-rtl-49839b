// corr_table: the PC Correlation Table, ICP's only long-lived metadata.
//
// Each entry is keyed by the compressed PC of a producer instruction and holds
// up to two successor slots, each describing one instruction that consumes
// the producer's value: Counter, Friendly, Level, Corr PC, Corr Inst
// (operation, immediate, operand placement) and Src Pred (plus the index of
// the operand to predict). The fields and the two-slot organisation follow
// the paper's table figure. Learning an edge that is already present
// increments its Counter (saturating); a new successor takes a free slot, or
// replaces the slot with the smallest Counter when both are occupied, as the
// paper describes. Fully associative lookup and round-robin replacement of
// whole entries when the table is full are this design's choices (the paper
// does not say how producer entries are replaced).
//
// The table has one write port (edges from the PC Correlation Detector) and
// two combinational read ports: port A filters incoming line responses,
// port B serves the Lightweight Calculator. A write becomes visible to the
// read ports in the cycle after it is presented.
module corr_table
  import icp_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     wr_valid,
  input  ct_edge_t wr_edge,
  input  cpc_t     a_cpc,
  output logic     a_hit,
  output ct_slot_t a_slot [2],
  input  cpc_t     b_cpc,
  output logic     b_hit,
  output ct_slot_t b_slot [2]
);

  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0] vld;
  cpc_t               tag  [ENTRIES];
  ct_slot_t           slot [ENTRIES][2];
  logic [IW-1:0]      rr;

  function automatic logic [IW:0] find(input cpc_t c);
    logic [IW:0] r;
    r = '0;
    for (int i = 0; i < int'(ENTRIES); i++)
      if (vld[i] && tag[i] == c) r = {1'b1, IW'(i)};
    return r;
  endfunction

  logic [IW:0] fa, fb, fw;
  assign fa = find(a_cpc);
  assign fb = find(b_cpc);
  assign fw = find(wr_edge.pc);

  always_comb begin
    a_hit = fa[IW];
    b_hit = fb[IW];
    for (int s = 0; s < 2; s++) begin
      a_slot[s] = fa[IW] ? slot[fa[IW-1:0]][s] : '0;
      b_slot[s] = fb[IW] ? slot[fb[IW-1:0]][s] : '0;
    end
  end

  // ---------------------------------------------------------------- write
  // target entry: existing one, else first invalid, else round-robin victim
  logic [IW-1:0] wr_idx;
  logic          wr_new;
  always_comb begin
    wr_new = !fw[IW];
    wr_idx = rr;
    if (fw[IW]) begin
      wr_idx = fw[IW-1:0];
    end else begin
      for (int i = int'(ENTRIES) - 1; i >= 0; i--)
        if (!vld[i]) wr_idx = IW'(i);
    end
  end

  // target slot inside the entry
  ct_slot_t cur [2];
  logic     slot_sel;     // which slot is written
  logic     slot_same;    // the successor is already recorded there
  always_comb begin
    for (int s = 0; s < 2; s++) cur[s] = wr_new ? '0 : slot[wr_idx][s];
    slot_same = 1'b0;
    slot_sel  = 1'b0;
    if (cur[0].valid && cur[0].corr_pc == wr_edge.corr_pc && cur[0].level == wr_edge.level) begin
      slot_same = 1'b1; slot_sel = 1'b0;
    end else if (cur[1].valid && cur[1].corr_pc == wr_edge.corr_pc && cur[1].level == wr_edge.level) begin
      slot_same = 1'b1; slot_sel = 1'b1;
    end else if (!cur[0].valid) begin
      slot_sel = 1'b0;
    end else if (!cur[1].valid) begin
      slot_sel = 1'b1;
    end else begin
      slot_sel = (cur[1].counter < cur[0].counter);   // smallest Counter is replaced
    end
  end

  ct_slot_t new_slot;
  always_comb begin
    new_slot.valid    = 1'b1;
    new_slot.counter  = slot_same ? ((cur[slot_sel].counter == 4'hF) ? 4'hF
                                     : cur[slot_sel].counter + 4'd1)
                                  : 4'd1;
    new_slot.friendly = wr_edge.friendly;
    new_slot.level    = wr_edge.level;
    new_slot.corr_pc  = wr_edge.corr_pc;
    new_slot.cinst    = wr_edge.cinst;
    new_slot.src_pred = wr_edge.src_pred;
    new_slot.src_idx  = wr_edge.src_idx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      rr  <= '0;
    end else if (wr_valid) begin
      vld[wr_idx] <= 1'b1;
      if (wr_new && wr_idx == rr) rr <= (rr == IW'(ENTRIES-1)) ? '0 : rr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      tag[wr_idx] <= wr_edge.pc;
      if (wr_new) slot[wr_idx][~slot_sel] <= '0;
      slot[wr_idx][slot_sel] <= new_slot;
    end
  end

endmodule
