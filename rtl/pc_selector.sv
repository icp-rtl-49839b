// pc_selector: PC Selector and PC Classifier for one cache level.
//
// Sample Table: ENTRIES PCs, each with a PF_Hits and a Demand_Misses counter.
// Every demand request of the cache is one access; a request that is a
// prefetch hit or a demand miss increments its PC's counter, allocating the
// PC (true LRU replacement) if it is not present. An epoch ends after
// EPOCH_LEN accesses. Then, one pick per cycle:
//   * PC_suc (= PC_pre^nf): TOP_N PCs with the most misses among those with
//     misses >= THETA_MISS (paper Eq. 1 and 3);
//   * PC_pre^f: TOP_N PCs with the highest coverage hits/(hits+misses) among
//     those with coverage >= 0.1 (Eq. 2, the paper's theta_cov), compared by
//     cross-multiplication, no divider.
// The result is written into the Candidate Table (fields PC, PC_pre^f,
// PC_suc, Count as in the paper's figure) and the Sample Table is cleared.
// The Candidate Table has one entry per Sample Table entry; a PC with both
// flags clear is an empty entry. Count is the number of dependency-tree
// constructions already started for that PC; once it reaches COUNT_MAX the
// lookup no longer allows a new one (the paper's monopoly guard).
//
// Paper values: theta_cov = 0.1, the structure and selection rule. This
// design's choices (the paper gives no number): ENTRIES = 8, TOP_N = 4,
// THETA_MISS = 4, EPOCH_LEN = 4096, 16-bit saturating counters,
// COUNT_MAX = 4, Count restarting at 0 each epoch, and demand requests that
// arrive during the (2*TOP_N+1)-cycle selection being ignored.
//
// Interface: the detector looks a compressed PC up combinationally (lk_*)
// and pulses lk_inc to count a started construction. Candidate Table
// updates are visible the cycle after the selection's write cycle.
module pc_selector
  import icp_pkg::*;
#(
  parameter int unsigned ENTRIES    = 8,
  parameter int unsigned TOP_N      = 4,
  parameter int unsigned THETA_MISS = 4,
  parameter int unsigned EPOCH_LEN  = 4096,
  parameter int unsigned CNT_W      = 16,
  parameter int unsigned COUNT_MAX  = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  // demand requests of this cache level
  input  logic  dem_valid,
  input  cpc_t  dem_cpc,
  input  logic  dem_pf_hit,
  input  logic  dem_miss,
  // Candidate Table lookup from the PC Correlation Detector
  input  cpc_t  lk_cpc,
  output logic  lk_pre_f,
  output logic  lk_suc,          // also PC_pre^nf
  output logic  lk_allow,        // Count below COUNT_MAX
  input  logic  lk_inc,
  // status
  output logic  epoch_end        // pulses in the Candidate Table write cycle
);

  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int unsigned EW = $clog2(EPOCH_LEN + 1);
  localparam int unsigned NW = $clog2(TOP_N + 1);
  localparam int unsigned KW = $clog2(COUNT_MAX + 1);

  typedef logic [CNT_W-1:0] cnt_t;

  // ---------------------------------------------------------------- sample table
  logic [ENTRIES-1:0] s_vld;
  cpc_t               s_pc   [ENTRIES];
  cnt_t               s_hits [ENTRIES];
  cnt_t               s_miss [ENTRIES];
  logic [IW-1:0]      age    [ENTRIES];    // 0 = most recently used

  // ---------------------------------------------------------------- candidate table
  logic [ENTRIES-1:0] c_pre_f, c_suc;
  cpc_t               c_pc    [ENTRIES];
  logic [KW-1:0]      c_count [ENTRIES];

  // ---------------------------------------------------------------- control
  typedef enum logic [1:0] {S_RUN, S_SUC, S_PRE, S_WRITE} state_e;
  state_e             state;
  logic [EW-1:0]      acc_cnt;
  logic [NW-1:0]      picks;
  logic [ENTRIES-1:0] pick_suc, pick_pre;

  // ---- sample table hit / victim
  logic          hit;
  logic [IW-1:0] hit_idx, vic_idx;
  always_comb begin
    hit = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < int'(ENTRIES); i++)
      if (s_vld[i] && s_pc[i] == dem_cpc) begin hit = 1'b1; hit_idx = IW'(i); end
    vic_idx = '0;
    for (int i = 0; i < int'(ENTRIES); i++)
      if (age[i] == IW'(ENTRIES-1)) vic_idx = IW'(i);
    for (int i = int'(ENTRIES) - 1; i >= 0; i--)
      if (!s_vld[i]) vic_idx = IW'(i);
  end

  logic          lk_hit;
  logic [IW-1:0] lk_idx;
  logic          access, event_;
  logic [IW-1:0] touch_idx;
  assign access    = dem_valid && (state == S_RUN);
  assign event_    = access && (dem_pf_hit || dem_miss);
  assign touch_idx = hit ? hit_idx : vic_idx;

  // ---- selection: best remaining candidate
  function automatic logic cov_ok(input cnt_t h, input cnt_t m);
    // h / (h + m) >= 0.1  <=>  10 h >= h + m
    return (h != '0) && ((CNT_W+5)'(h) * 10 >= (CNT_W+5)'(h) + (CNT_W+5)'(m));
  endfunction

  function automatic logic cov_gt(input cnt_t h1, input cnt_t m1, input cnt_t h2, input cnt_t m2);
    // h1/(h1+m1) > h2/(h2+m2)
    return (2*CNT_W+2)'(h1) * ((2*CNT_W+2)'(h2) + (2*CNT_W+2)'(m2)) >
           (2*CNT_W+2)'(h2) * ((2*CNT_W+2)'(h1) + (2*CNT_W+2)'(m1));
  endfunction

  logic          best_v;
  logic [IW-1:0] best;
  always_comb begin
    best_v = 1'b0;
    best   = '0;
    for (int i = 0; i < int'(ENTRIES); i++) begin
      if (state == S_SUC) begin
        if (s_vld[i] && !pick_suc[i] && s_miss[i] >= cnt_t'(THETA_MISS) &&
            (!best_v || s_miss[i] > s_miss[best])) begin
          best_v = 1'b1; best = IW'(i);
        end
      end else begin
        if (s_vld[i] && !pick_pre[i] && cov_ok(s_hits[i], s_miss[i]) &&
            (!best_v || cov_gt(s_hits[i], s_miss[i], s_hits[best], s_miss[best]))) begin
          best_v = 1'b1; best = IW'(i);
        end
      end
    end
  end

  assign epoch_end = (state == S_WRITE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_RUN;
      acc_cnt  <= '0;
      picks    <= '0;
      pick_suc <= '0;
      pick_pre <= '0;
      s_vld    <= '0;
      c_pre_f  <= '0;
      c_suc    <= '0;
      for (int i = 0; i < int'(ENTRIES); i++) begin
        age[i]     <= IW'(i);
        c_count[i] <= '0;
      end
    end else begin
      unique case (state)
        S_RUN: begin
          if (access) begin
            if (acc_cnt == EW'(EPOCH_LEN - 1)) begin
              acc_cnt <= '0;
              state   <= S_SUC;
              picks   <= '0;
            end else begin
              acc_cnt <= acc_cnt + 1'b1;
            end
          end
          if (event_) begin
            s_vld[touch_idx] <= 1'b1;
            for (int i = 0; i < int'(ENTRIES); i++)
              if (age[i] < age[touch_idx]) age[i] <= age[i] + 1'b1;
            age[touch_idx] <= '0;
          end else if (access && hit) begin
            for (int i = 0; i < int'(ENTRIES); i++)
              if (age[i] < age[hit_idx]) age[i] <= age[i] + 1'b1;
            age[hit_idx] <= '0;
          end
        end
        S_SUC: begin
          if (best_v) pick_suc[best] <= 1'b1;
          if (!best_v || picks == NW'(TOP_N - 1)) begin
            state <= S_PRE;
            picks <= '0;
          end else begin
            picks <= picks + 1'b1;
          end
        end
        S_PRE: begin
          if (best_v) pick_pre[best] <= 1'b1;
          if (!best_v || picks == NW'(TOP_N - 1)) state <= S_WRITE;
          else picks <= picks + 1'b1;
        end
        S_WRITE: begin
          c_pre_f  <= pick_pre;
          c_suc    <= pick_suc;
          for (int i = 0; i < int'(ENTRIES); i++) c_count[i] <= '0;
          s_vld    <= '0;
          pick_suc <= '0;
          pick_pre <= '0;
          state    <= S_RUN;
        end
        default: state <= S_RUN;
      endcase
      if (lk_inc && lk_hit && state != S_WRITE && c_count[lk_idx] != KW'(COUNT_MAX))
        c_count[lk_idx] <= c_count[lk_idx] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (event_) begin
      s_pc[touch_idx]   <= dem_cpc;
      s_hits[touch_idx] <= hit ? ((dem_pf_hit && s_hits[touch_idx] != '1) ? s_hits[touch_idx] + 1'b1
                                                                          : s_hits[touch_idx])
                               : cnt_t'(dem_pf_hit);
      s_miss[touch_idx] <= hit ? ((dem_miss && s_miss[touch_idx] != '1) ? s_miss[touch_idx] + 1'b1
                                                                        : s_miss[touch_idx])
                               : cnt_t'(dem_miss);
    end
    if (state == S_WRITE) begin
      for (int i = 0; i < int'(ENTRIES); i++) c_pc[i] <= s_pc[i];
    end
  end

  // ---- candidate lookup
  always_comb begin
    lk_hit = 1'b0;
    lk_idx = '0;
    for (int i = 0; i < int'(ENTRIES); i++)
      if ((c_pre_f[i] || c_suc[i]) && c_pc[i] == lk_cpc) begin lk_hit = 1'b1; lk_idx = IW'(i); end
  end
  assign lk_pre_f = lk_hit && c_pre_f[lk_idx];
  assign lk_suc   = lk_hit && c_suc[lk_idx];
  assign lk_allow = lk_hit && (c_count[lk_idx] != KW'(COUNT_MAX));

endmodule
