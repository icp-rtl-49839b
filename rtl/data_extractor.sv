// data_extractor: pulls the value a PC_pre instruction loaded out of a cache line.
//
// A line response arrives with the compressed PC of the instruction it was
// fetched for. For a demand fill the request's own byte offset and size say
// where the value lies, so exactly one value is extracted. A line brought in
// by a basic prefetcher carries no offset; for those, the extractor keeps a
// history per friendly PC_pre: one saturating counter per 4-byte slot of the
// line, incremented by that PC's demand requests. Every slot whose share of
// the PC's total count exceeds 1/10 (counter*10 > sum, the paper's 0.1
// threshold) is taken as a likely offset and one value is extracted for each
// of them, lowest slot first. A prefetched line of a PC without history
// yields nothing.
//
// Entries are allocated when the Correlation Table learns an edge from a
// basic-prefetcher-friendly PC (32 entries, as in the paper). This design's
// own choices: 4-byte slot granularity, 4-bit counters that are all halved
// when one would overflow, round-robin replacement, the access size learned
// from the training requests, and zero-extension of values narrower than
// 64 bits.
//
// Interface and timing: a response is taken (resp_ready high only while idle)
// into a line buffer; from the next cycle on, one value per cycle is offered
// on val_* with a valid/ready handshake. For a prefetched line the slot mask
// is computed at the moment the response is taken.
// Lint note: training works at 4-byte slot granularity, so the two lowest
// offset bits of train_off are reported unused.
module data_extractor
  import icp_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned CNT_W   = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // allocation: a friendly PC_pre entered the Correlation Table
  input  logic        alloc_valid,
  input  cpc_t        alloc_cpc,
  // training: demand requests of the cache
  input  logic        train_valid,
  input  cpc_t        train_cpc,
  input  logic [OFF_W-1:0] train_off,
  input  logic [1:0]  train_size,      // log2 of access bytes
  // line responses
  input  logic        resp_valid,
  output logic        resp_ready,
  input  cpc_t        resp_cpc,
  input  level_e      resp_level,
  input  logic        resp_is_pf,
  input  logic [OFF_W-1:0] resp_off,   // demand only
  input  logic [1:0]  resp_size,       // demand only
  input  line_t       resp_line,
  // extracted values
  output logic        val_valid,
  input  logic        val_ready,
  output cpc_t        val_cpc,
  output level_e      val_level,
  output logic        val_is_pf,
  output data_t       val_data
);

  localparam int unsigned SLOTS = LINE_BYTES / 4;
  localparam int unsigned IW    = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int unsigned SW    = $clog2(SLOTS);
  localparam int unsigned SUM_W = CNT_W + SW + 1;

  typedef logic [CNT_W-1:0] cnt_t;

  // ---------------------------------------------------------------- table
  logic [ENTRIES-1:0] vld;
  cpc_t               pcs  [ENTRIES];
  logic [1:0]         size [ENTRIES];
  cnt_t               cnt  [ENTRIES][SLOTS];
  logic [IW-1:0]      rr;

  function automatic logic [IW:0] find(input cpc_t c);
    logic [IW:0] r;
    r = '0;
    for (int i = 0; i < int'(ENTRIES); i++)
      if (vld[i] && pcs[i] == c) r = {1'b1, IW'(i)};
    return r;
  endfunction

  logic [IW:0] f_alloc, f_train, f_resp;
  assign f_alloc = find(alloc_cpc);
  assign f_train = find(train_cpc);
  assign f_resp  = find(resp_cpc);

  // slot mask of a prefetched line: share above 1/10
  logic [SLOTS-1:0] pf_mask;
  logic [SUM_W-1:0] sum;
  always_comb begin
    sum = '0;
    pf_mask = '0;
    for (int s = 0; s < int'(SLOTS); s++) sum += SUM_W'(cnt[f_resp[IW-1:0]][s]);
    for (int s = 0; s < int'(SLOTS); s++)
      if (f_resp[IW] && (SUM_W'(cnt[f_resp[IW-1:0]][s]) * 10 > sum)) pf_mask[s] = 1'b1;
  end

  // ---------------------------------------------------------------- buffer
  logic             busy;
  line_t            line_q;
  cpc_t             cpc_q;
  level_e           level_q;
  logic             is_pf_q;
  logic [1:0]       size_q;
  logic [SLOTS-1:0] mask_q;     // remaining slots to emit (prefetch)
  logic [OFF_W-1:0] off_q;      // demand offset

  assign resp_ready = !busy;

  logic [SW-1:0] first_slot;
  always_comb begin
    first_slot = '0;
    for (int s = int'(SLOTS) - 1; s >= 0; s--) if (mask_q[s]) first_slot = SW'(s);
  end

  logic [OFF_W-1:0] cur_off;
  assign cur_off = is_pf_q ? {first_slot, 2'b00} : off_q;

  function automatic data_t extract(input line_t l, input logic [OFF_W-1:0] off,
                                    input logic [1:0] sz);
    data_t  raw;
    logic [LINE_W+XLEN-1:0] ext;
    ext = {{XLEN{1'b0}}, l};
    raw = ext[$clog2(LINE_W+XLEN)'({off, 3'b000}) +: XLEN];
    unique case (sz)
      2'd0: return {{(XLEN-8){1'b0}},  raw[7:0]};
      2'd1: return {{(XLEN-16){1'b0}}, raw[15:0]};
      2'd2: return {{(XLEN-32){1'b0}}, raw[31:0]};
      default: return raw;
    endcase
  endfunction

  assign val_valid = busy;
  assign val_cpc   = cpc_q;
  assign val_level = level_q;
  assign val_is_pf = is_pf_q;
  assign val_data  = extract(line_q, cur_off, size_q);

  logic take;
  assign take = resp_valid && resp_ready &&
                (!resp_is_pf || (f_resp[IW] && pf_mask != '0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      mask_q <= '0;
    end else begin
      if (take) begin
        busy   <= 1'b1;
        mask_q <= resp_is_pf ? pf_mask : '0;
      end else if (busy && val_ready) begin
        if (is_pf_q) begin
          mask_q[first_slot] <= 1'b0;
          if ((mask_q & ~(SLOTS'(1) << first_slot)) == '0) busy <= 1'b0;
        end else begin
          busy <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (take) begin
      line_q  <= resp_line;
      cpc_q   <= resp_cpc;
      level_q <= resp_level;
      is_pf_q <= resp_is_pf;
      off_q   <= resp_off;
      size_q  <= resp_is_pf ? size[f_resp[IW-1:0]] : resp_size;
    end
  end

  // ---------------------------------------------------------------- training
  logic [SW-1:0] train_slot;
  assign train_slot = train_off[OFF_W-1:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      rr  <= '0;
    end else if (alloc_valid && !f_alloc[IW]) begin
      vld[rr] <= 1'b1;
      rr      <= (rr == IW'(ENTRIES-1)) ? '0 : rr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (alloc_valid && !f_alloc[IW]) begin
      pcs[rr]  <= alloc_cpc;
      size[rr] <= 2'd3;
      for (int s = 0; s < int'(SLOTS); s++) cnt[rr][s] <= '0;
    end else if (train_valid && f_train[IW]) begin
      size[f_train[IW-1:0]] <= train_size;
      if (cnt[f_train[IW-1:0]][train_slot] == '1) begin
        for (int s = 0; s < int'(SLOTS); s++)
          cnt[f_train[IW-1:0]][s] <= (s == int'(train_slot))
              ? cnt_t'((cnt[f_train[IW-1:0]][s] >> 1) + 1'b1)
              : cnt[f_train[IW-1:0]][s] >> 1;
      end else begin
        cnt[f_train[IW-1:0]][train_slot] <= cnt[f_train[IW-1:0]][train_slot] + 1'b1;
      end
    end
  end

endmodule
