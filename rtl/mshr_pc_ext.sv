// mshr_pc_ext: compressed-PC field added to every MSHR target of a cache.
//
// When a miss allocates (or merges into) an MSHR, the cache writes the PC of
// the requesting memory instruction into target slot (mshr, target); the PC
// is stored in ICP's 10-bit compressed form. When the line is filled, the
// cache names the same slot and the stored PC leaves on fill_cpc together
// with the line, so ICP knows which instruction the returned data belongs
// to. The array size N_MSHR x N_TGT x 10 bits and the compression follow the
// paper (16 MSHRs x 8 targets = 160 B for the L1 data cache). A valid bit per
// slot, cleared when the fill reads it, is this design's addition so that a
// fill of a slot never written reports fill_hit = 0.
//
// Timing: the write takes effect at the clock edge; the read is
// combinational (same-cycle) from the registered array. A write and a fill of
// the same slot in one cycle: the fill reads the old content, the write wins.
module mshr_pc_ext
  import icp_pkg::*;
#(
  parameter int unsigned N_MSHR = 16,
  parameter int unsigned N_TGT  = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        alloc_valid,
  input  logic [$clog2(N_MSHR)-1:0]   alloc_mshr,
  input  logic [$clog2(N_TGT)-1:0]    alloc_tgt,
  input  pc_t                         alloc_pc,
  input  logic                        fill_valid,
  input  logic [$clog2(N_MSHR)-1:0]   fill_mshr,
  input  logic [$clog2(N_TGT)-1:0]    fill_tgt,
  output logic                        fill_hit,
  output cpc_t                        fill_cpc
);

  cpc_t pcs   [N_MSHR][N_TGT];
  logic [N_TGT-1:0] vld [N_MSHR];

  assign fill_cpc = pcs[fill_mshr][fill_tgt];
  assign fill_hit = fill_valid && vld[fill_mshr][fill_tgt];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < int'(N_MSHR); m++) vld[m] <= '0;
    end else begin
      if (fill_valid) vld[fill_mshr][fill_tgt] <= 1'b0;
      if (alloc_valid) vld[alloc_mshr][alloc_tgt] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (alloc_valid) pcs[alloc_mshr][alloc_tgt] <= compress_pc(alloc_pc);
  end

endmodule
