// wtu_core: one WiCSum threshold core with early-exit bucket sorting.
//
// For one row i of Score_cluster (one query token, one head) the core selects
// the clusters whose token-count-weighted scores, taken from the highest
// score downward, first exceed a fraction of the row's total:
//   Sum_i     = sum_j Score[i][j] * TC[j]                       (Eq. 1)
//   Th_wics_i = Sum_i * Th_r-wics                               (Eq. 2)
//   select in descending score order until Acc_i(t) > Th_wics_i (Eq. 3)
// Instead of a full sort the core walks score buckets from the highest range
// down and stops as soon as the threshold is exceeded (early exit).
//
// Memories: score MEM and token-count MEM, SCORE_DEPTH and TC_DEPTH 16-bit
// words, organised in rows of N_WTU_W words so that N_WTU_W scores and counts
// are read per cycle (synchronous read, one cycle latency).
//
// Preprocess step: one pass over the row computes Sum, min and max; then
// Th_wics = (Sum * ratio) >> 16, where ratio is Th_r-wics with 16 fraction
// bits, and the bucket width ((max - min) >> log2(NUM_BUCKETS)) + 1.
// Token selection step: the bucket range updater starts with
// [max - width + 1, max]; each bucket pass streams the row again, the upper and
// lower bucket sorters mark scores inside the range, the N_WTU_W multipliers
// and the adder tree add Score * TC of marked lanes to the running Acc, and the
// bitmask chunk is sent out on mask_*. After a pass, Acc > Th_wics ends the row
// (early_exit set when lower buckets remain); otherwise the range moves down
// by one width, clamped at min. Selection is at bucket granularity: all
// clusters of the bucket that crosses the threshold are selected.
//
// Timing with nch = ceil(n_cl / N_WTU_W): preprocess nch + 2 cycles, each
// bucket nch + 2 cycles, then one cycle to raise done.
//
// From the paper: the memories and their sizes, Eq. 1-3, the preprocess of
// sum, min/max and threshold, the bucket sorters, multipliers, adder tree,
// bucket range updater and early exit. This design's choices: 16-bit unsigned
// fixed-point scores, 16-bit counts, the bucket-width rule, NUM_BUCKETS = 16
// and the exit check at bucket boundaries.
module wtu_core
  import vrex_pkg::*;
#(
  parameter int unsigned N_WTU_W     = 16,
  parameter int unsigned SCORE_DEPTH = 4096,
  parameter int unsigned TC_DEPTH    = 4096,
  parameter int unsigned MAX_CL      = MAX_CLUSTERS,
  parameter int unsigned NUM_BUCKETS = 16,
  localparam int unsigned SROWS      = SCORE_DEPTH / N_WTU_W,
  localparam int unsigned TROWS      = TC_DEPTH / N_WTU_W,
  localparam int unsigned CHUNKS     = (MAX_CL + N_WTU_W - 1) / N_WTU_W,
  localparam int unsigned SRA_W      = $clog2(SROWS),
  localparam int unsigned TRA_W      = $clog2(TROWS),
  localparam int unsigned CK_W       = (CHUNKS > 1) ? $clog2(CHUNKS) : 1,
  localparam int unsigned NCL_W      = $clog2(MAX_CL + 1),
  localparam int unsigned WS_W       = 48
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // memory write ports, one row of N_WTU_W words per write
  input  logic                 sc_wr_en,
  input  logic [SRA_W-1:0]     sc_wr_addr,
  input  logic [SCORE_W-1:0]   sc_wr_data [N_WTU_W],
  input  logic                 tc_wr_en,
  input  logic [TRA_W-1:0]     tc_wr_addr,
  input  logic [CNT_W-1:0]     tc_wr_data [N_WTU_W],
  // control
  input  logic                 start,
  input  logic [NCL_W-1:0]     n_cl,      // clusters in the row, >= 1
  input  logic [SRA_W-1:0]     row_base,  // score MEM row of the row's chunk 0
  input  logic [15:0]          ratio,     // Th_r-wics, 16 fraction bits
  output logic                 busy,
  output logic                 done,
  // selected-cluster bitmask chunks
  output logic                 mask_valid,
  output logic [CK_W-1:0]      mask_chunk,
  output logic [N_WTU_W-1:0]   mask_bits,
  // row results (valid from done until the next start)
  output logic [WS_W-1:0]      wsum,
  output logic [WS_W-1:0]      th_wics,
  output logic [WS_W-1:0]      acc,
  output logic [SCORE_W-1:0]   s_min,
  output logic [SCORE_W-1:0]   s_max,
  output logic [7:0]           n_buckets,
  output logic                 early_exit
);

  localparam int unsigned NB_SH = $clog2(NUM_BUCKETS);

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_TH, S_BKT, S_CHK, S_DONE} state_e;
  state_e state;

  logic [N_WTU_W*SCORE_W-1:0] sc_mem [SROWS];
  logic [N_WTU_W*CNT_W-1:0]   tc_mem [TROWS];

  // write ports
  always_ff @(posedge clk) begin
    if (sc_wr_en)
      for (int i = 0; i < int'(N_WTU_W); i++) sc_mem[sc_wr_addr][i*SCORE_W +: SCORE_W] <= sc_wr_data[i];
    if (tc_wr_en)
      for (int i = 0; i < int'(N_WTU_W); i++) tc_mem[tc_wr_addr][i*CNT_W +: CNT_W] <= tc_wr_data[i];
  end

  logic [CK_W:0]  nch;
  logic [CK_W:0]  k;        // next chunk to read
  logic           issuing;
  logic           d_v, d_last;
  logic [CK_W-1:0] d_k;
  logic [N_WTU_W*SCORE_W-1:0] sc_q;
  logic [N_WTU_W*CNT_W-1:0]   tc_q;
  logic [SCORE_W-1:0] width, upper, lower;
  logic [NCL_W-1:0]   n_cl_q;

  assign nch     = (CK_W+1)'((n_cl_q + NCL_W'(N_WTU_W - 1)) / NCL_W'(N_WTU_W));
  assign issuing = (state == S_PRE || state == S_BKT) && (k < nch);
  assign busy    = (state != S_IDLE);

  // synchronous reads
  always_ff @(posedge clk) begin
    if (issuing) begin
      sc_q <= sc_mem[SRA_W'(row_base + SRA_W'(k))];
      tc_q <= tc_mem[TRA_W'(k)];
    end
  end

  // lane datapath: bucket sorters, multipliers, adder tree, min/max
  logic [N_WTU_W-1:0] lane_ok, sel;
  logic [WS_W-1:0]    row_sum, sel_sum;
  logic [SCORE_W-1:0] c_min, c_max;
  always_comb begin
    row_sum = '0;
    sel_sum = '0;
    c_min   = '1;
    c_max   = '0;
    for (int i = 0; i < int'(N_WTU_W); i++) begin
      logic [SCORE_W-1:0] s;
      logic [CNT_W-1:0]   tcv;
      logic [WS_W-1:0]    p;
      s   = sc_q[i*SCORE_W +: SCORE_W];
      tcv = tc_q[i*CNT_W +: CNT_W];
      p   = WS_W'(s) * WS_W'(tcv);
      lane_ok[i] = (32'(d_k) * N_WTU_W + 32'(i)) < 32'(n_cl_q);
      sel[i]     = lane_ok[i] && (s >= lower) && (s <= upper);
      if (lane_ok[i]) begin
        row_sum = row_sum + p;
        if (s < c_min) c_min = s;
        if (s > c_max) c_max = s;
      end
      if (sel[i]) sel_sum = sel_sum + p;
    end
  end

  assign mask_valid = d_v && (state == S_BKT);
  assign mask_chunk = d_k;
  assign mask_bits  = sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      k          <= '0;
      d_v        <= 1'b0;
      d_last     <= 1'b0;
      d_k        <= '0;
      n_cl_q     <= NCL_W'(1);
      wsum       <= '0;
      th_wics    <= '0;
      acc        <= '0;
      s_min      <= '0;
      s_max      <= '0;
      width      <= '0;
      upper      <= '0;
      lower      <= '0;
      n_buckets  <= '0;
      early_exit <= 1'b0;
      done       <= 1'b0;
    end else begin
      done   <= 1'b0;
      d_v    <= issuing;
      d_last <= issuing && (k == nch - 1'b1);
      d_k    <= CK_W'(k);
      if (issuing) k <= k + 1'b1;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            n_cl_q     <= n_cl;
            k          <= '0;
            wsum       <= '0;
            acc        <= '0;
            s_min      <= '1;
            s_max      <= '0;
            n_buckets  <= '0;
            early_exit <= 1'b0;
            state      <= S_PRE;
          end
        end
        S_PRE: begin
          if (d_v) begin
            wsum <= wsum + row_sum;
            if (c_min < s_min) s_min <= c_min;
            if (c_max > s_max) s_max <= c_max;
            if (d_last) state <= S_TH;
          end
        end
        S_TH: begin
          logic [WS_W+16-1:0] prod;
          logic [SCORE_W-1:0] w;
          prod    = (WS_W+16)'(wsum) * (WS_W+16)'(ratio);
          th_wics <= WS_W'(prod >> 16);
          w       = ((s_max - s_min) >> NB_SH) + 1'b1;
          width   <= w;
          upper   <= s_max;
          lower   <= ((s_max - s_min) < w) ? s_min : (s_max - w + 1'b1);
          k       <= '0;
          state   <= S_BKT;
        end
        S_BKT: begin
          if (d_v) begin
            acc <= acc + sel_sum;
            if (d_last) state <= S_CHK;
          end
        end
        S_CHK: begin
          n_buckets <= n_buckets + 1'b1;
          if (acc > th_wics) begin
            early_exit <= (lower != s_min);
            state      <= S_DONE;
          end else if (lower == s_min) begin
            state <= S_DONE;
          end else begin
            upper <= lower - 1'b1;
            lower <= ((lower - s_min) <= width) ? s_min : (lower - width);
            k     <= '0;
            state <= S_BKT;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == S_IDLE);

endmodule
