// commit_fifo: the small buffer between the core's commit stage and ICP.
//
// The core pushes one commit record per cycle when enq_valid is high; ICP
// pops records at its own pace with a valid/ready handshake on the read
// side. Because ICP only needs committed-instruction information with loose
// timing, the core is never stalled: a record offered while the buffer is
// full is dropped and `drop` pulses for that cycle. The 8-entry depth follows
// the paper's storage table; dropping on overflow (rather than back-pressure)
// and the one-record-per-cycle write port are this design's choices.
//
// Timing: a record written in cycle t is visible at deq_rec in cycle t+1
// (registered storage, first-word-fall-through read). Reset empties it.
module commit_fifo
  import icp_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enq_valid,
  input  commit_rec_t enq_rec,
  output logic        full,
  output logic        drop,
  output logic        deq_valid,
  output commit_rec_t deq_rec,
  input  logic        deq_ready
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  commit_rec_t mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;

  logic do_enq, do_deq;

  assign full      = (count == (AW+1)'(DEPTH));
  assign deq_valid = (count != '0);
  assign deq_rec   = mem[rptr];
  assign do_deq    = deq_valid && deq_ready;
  assign do_enq    = enq_valid && !full;
  assign drop      = enq_valid && full;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_enq) wptr <= inc(wptr);
      if (do_deq) rptr <= inc(rptr);
      count <= count + (AW+1)'(do_enq) - (AW+1)'(do_deq);
    end
  end

  always_ff @(posedge clk) begin
    if (do_enq) mem[wptr] <= enq_rec;
  end

  // A record is dropped only when the buffer is full; the count stays in range.
  // Assertions are checked once the block has left reset; live is a plain
  // flop of the reset domain so that the checks do not sample rst_n itself.
  logic live;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) live <= 1'b0;
    else        live <= 1'b1;
  end

  a_drop_only_full: assert property (@(posedge clk) disable iff (!live) drop |-> full);
  a_count_range: assert property (@(posedge clk) disable iff (!live) count <= (AW+1)'(DEPTH));

endmodule
