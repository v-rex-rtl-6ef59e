// wtu: WiCSum threshold unit, N_WTU_H parallel WTU cores and the aggregator.
//
// Each core has its own score and token-count memories and processes one
// Score_cluster row at a time (see wtu_core). The host side (the LXE and the
// HC table) fills each core's memories and starts it per row; cores run
// independently, so N_WTU_H rows are thresholded at once. Every core's
// selected-cluster bitmask chunks go to the aggregator, which ORs them across
// rows and then emits the selected cluster indices (see wtu_aggregator).
// Per-core status is returned as arrays indexed by core.
//
// The structure (parallel cores, aggregator) follows the paper's WTU; the
// per-core start and the port layout are this design's choices.
module wtu
  import vrex_pkg::*;
#(
  parameter int unsigned N_WTU_H     = 1,
  parameter int unsigned N_WTU_W     = 16,
  parameter int unsigned SCORE_DEPTH = 4096,
  parameter int unsigned TC_DEPTH    = 4096,
  parameter int unsigned MAX_CL      = MAX_CLUSTERS,
  parameter int unsigned NUM_BUCKETS = 16,
  localparam int unsigned SRA_W      = $clog2(SCORE_DEPTH / N_WTU_W),
  localparam int unsigned TRA_W      = $clog2(TC_DEPTH / N_WTU_W),
  localparam int unsigned NCL_W      = $clog2(MAX_CL + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sc_wr_en   [N_WTU_H],
  input  logic [SRA_W-1:0]   sc_wr_addr [N_WTU_H],
  input  logic [SCORE_W-1:0] sc_wr_data [N_WTU_H][N_WTU_W],
  input  logic               tc_wr_en   [N_WTU_H],
  input  logic [TRA_W-1:0]   tc_wr_addr [N_WTU_H],
  input  logic [CNT_W-1:0]   tc_wr_data [N_WTU_H][N_WTU_W],
  input  logic               start      [N_WTU_H],
  input  logic [NCL_W-1:0]   n_cl       [N_WTU_H],
  input  logic [SRA_W-1:0]   row_base   [N_WTU_H],
  input  logic [15:0]        ratio,
  output logic               core_busy  [N_WTU_H],
  output logic               core_done  [N_WTU_H],
  output logic [7:0]         core_buckets [N_WTU_H],
  output logic               core_early_exit [N_WTU_H],
  // aggregator
  input  logic               agg_clear,
  input  logic               agg_emit,
  output logic               idx_valid,
  input  logic               idx_ready,
  output logic [CL_W-1:0]    idx,
  output logic               idx_last,
  output logic               emit_done,
  output logic [CL_W:0]      n_selected
);

  localparam int unsigned CHUNKS = (MAX_CL + N_WTU_W - 1) / N_WTU_W;
  localparam int unsigned CK_W   = (CHUNKS > 1) ? $clog2(CHUNKS) : 1;

  logic               m_valid [N_WTU_H];
  logic [CK_W-1:0]    m_chunk [N_WTU_H];
  logic [N_WTU_W-1:0] m_bits  [N_WTU_H];

  for (genvar h = 0; h < int'(N_WTU_H); h++) begin : g_core
    wtu_core #(
      .N_WTU_W(N_WTU_W), .SCORE_DEPTH(SCORE_DEPTH), .TC_DEPTH(TC_DEPTH),
      .MAX_CL(MAX_CL), .NUM_BUCKETS(NUM_BUCKETS)
    ) u_core (
      .clk, .rst_n,
      .sc_wr_en  (sc_wr_en[h]),
      .sc_wr_addr(sc_wr_addr[h]),
      .sc_wr_data(sc_wr_data[h]),
      .tc_wr_en  (tc_wr_en[h]),
      .tc_wr_addr(tc_wr_addr[h]),
      .tc_wr_data(tc_wr_data[h]),
      .start     (start[h]),
      .n_cl      (n_cl[h]),
      .row_base  (row_base[h]),
      .ratio     (ratio),
      .busy      (core_busy[h]),
      .done      (core_done[h]),
      .mask_valid(m_valid[h]),
      .mask_chunk(m_chunk[h]),
      .mask_bits (m_bits[h]),
      .wsum      (),
      .th_wics   (),
      .acc       (),
      .s_min     (),
      .s_max     (),
      .n_buckets (core_buckets[h]),
      .early_exit(core_early_exit[h])
    );
  end

  wtu_aggregator #(.N_WTU_H(N_WTU_H), .N_WTU_W(N_WTU_W), .MAX_CL(MAX_CL)) u_agg (
    .clk, .rst_n,
    .clear     (agg_clear),
    .mask_valid(m_valid),
    .mask_chunk(m_chunk),
    .mask_bits (m_bits),
    .emit      (agg_emit),
    .idx_valid, .idx_ready, .idx, .idx_last, .emit_done, .n_selected
  );

endmodule
