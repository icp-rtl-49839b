// produce_map: which dependency-tree node last produced each physical register.
//
// During a dependency-tree construction the PC Correlation Detector asks,
// for every source register of a committed instruction, whether a node of
// the tree produced it ("Map Hit & Valid", steps 1-2 of the construction
// flow). Entry i belongs to Node Table entry i, because every node has at most
// one destination register: the map is a small CAM of N_NODES entries
// {PR tag, Valid} and a hit returns the matching entry index as the
// producer's node ID. This CAM organisation is this design's choice; the
// fields (PR Tag, ID, Valid) and the three operations follow the paper:
//   * lookup   - two source tags are compared at once (combinational);
//   * write    - a new node `wr_id` records its destination tag with Valid=1
//                (step 3); older entries holding the same tag are
//                invalidated, since the new node is now the last producer;
//   * inval    - an instruction outside the tree overwrites `inv_tag`; every
//                entry with that tag loses Valid (step 5);
//   * clear    - all entries invalid, used when a construction starts.
// Timing: lookups are combinational from the registered entries; writes,
// invalidations and clear take effect at the next clock edge. A write in the
// same cycle as clear or inval survives them, so a construction can clear
// the map and record its root in one cycle.
module produce_map
  import icp_pkg::*;
#(
  parameter int unsigned N_NODES = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  ptag_t                        lk_tag   [2],
  output logic                         lk_hit   [2],
  output logic [$clog2(N_NODES)-1:0]   lk_id    [2],
  input  logic                         wr_valid,
  input  logic [$clog2(N_NODES)-1:0]   wr_id,
  input  ptag_t                        wr_tag,
  input  logic                         inv_valid,
  input  ptag_t                        inv_tag
);

  localparam int unsigned IW = $clog2(N_NODES);

  ptag_t              tag   [N_NODES];
  logic [N_NODES-1:0] valid;

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      lk_hit[p] = 1'b0;
      lk_id[p]  = '0;
      for (int i = 0; i < int'(N_NODES); i++) begin
        if (valid[i] && tag[i] == lk_tag[p]) begin
          lk_hit[p] = 1'b1;
          lk_id[p]  = IW'(i);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
    end else begin
      if (clear) begin
        valid <= '0;
      end else begin
        for (int i = 0; i < int'(N_NODES); i++) begin
          if (inv_valid && tag[i] == inv_tag) valid[i] <= 1'b0;
          if (wr_valid && tag[i] == wr_tag)   valid[i] <= 1'b0;
        end
      end
      if (wr_valid) valid[wr_id] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid) tag[wr_id] <= wr_tag;
  end

  // Assertions are checked once the block has left reset; live is a plain
  // flop of the reset domain so that the checks do not sample rst_n itself.
  logic live;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) live <= 1'b0;
    else        live <= 1'b1;
  end

  // At most one valid entry per tag, so a lookup never sees two producers.
  for (genvar i = 0; i < N_NODES; i++) begin : g_uniq
    for (genvar j = i + 1; j < N_NODES; j++) begin : g_pair
      a_unique: assert property (@(posedge clk) disable iff (!live)
        !(valid[i] && valid[j] && tag[i] == tag[j]));
    end
  end

endmodule
