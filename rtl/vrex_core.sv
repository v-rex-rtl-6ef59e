// vrex_core: one V-Rex core, the LLM execution engine (LXE) together with the
// dynamic KV cache retrieval engine (DRE).
//
// Retrieval flow for one layer and head, as wired here:
//  (1) the LXE computes Key x hyperplanes on the DPE and binarises the result
//      on the VPE (post_op = VPE_SIGN); the low N_HP bits of each result are
//      written, one token per result, into the HCU's current hash-bit MEM;
//  (2) the HCU clusters the frame's tokens against the clusters preloaded from
//      the HC table (hc_ld_* port) and sends one record per token both out
//      to the HC table (hc_upd_*) and to the KVMU, which reorders the frame's
//      KV entries by cluster, writes them to the recent ring and offloads the
//      oldest ones when the ring is full;
//  (3) the LXE computes Query x Key_cluster^T and converts the scores to the
//      WTU format (post_op = VPE_QUANT); each 64-score result is written as
//      four 16-score rows into the score MEM of the WTU core chosen by
//      wtu_core_sel, starting at row 0 after score_ptr_clear;
//  (4) the WTU cores threshold the rows (wtu_start etc.) and the aggregator
//      ORs their selections; agg_emit sends the selected cluster indices
//  (5) to the KVMU, which issues one prefetch burst per selected cluster that
//      has offloaded entries;
//  (6) the retrieved entries are read by the LXE through the operand ports.
// Off-chip DRAM, the PCIe link and storage are outside: the core exposes the
// HC table ports and the transfer command port (dma_*). Sequencing of the LXE
// (its instruction controller and 384 KB on-chip memory are not described) is
// left to whoever drives the operand ports.
//
// Timing rule: a VPE_QUANT result occupies the score write port for
// N_VPE_W / N_WTU_W cycles (score_busy); the next VPE_QUANT result must not
// arrive before then (checked by an assertion).
module vrex_core
  import vrex_fp_pkg::*;
  import vrex_pkg::*;
#(
  parameter int unsigned N_DPE_H       = 64,
  parameter int unsigned N_DPE_W       = 64,
  parameter int unsigned N_VPE_W       = 64,
  parameter int unsigned N_HCU_H       = 1,
  parameter int unsigned N_HCU_W       = 16,
  parameter int unsigned N_WTU_H       = 1,
  parameter int unsigned N_WTU_W       = 16,
  parameter int unsigned SCORE_DEPTH   = 4096,
  parameter int unsigned TC_DEPTH      = 4096,
  parameter int unsigned NUM_BUCKETS   = 16,
  parameter int unsigned RECENT_CAP    = 4096,
  parameter int unsigned RETR_CAP      = 4096,
  parameter int unsigned CLUSTER_SLOTS = 128,
  localparam int unsigned SRA_W        = $clog2(SCORE_DEPTH / N_WTU_W),
  localparam int unsigned TRA_W        = $clog2(TC_DEPTH / N_WTU_W),
  localparam int unsigned NCL_W        = $clog2(MAX_CLUSTERS + 1),
  localparam int unsigned CS_W         = (N_WTU_H > 1) ? $clog2(N_WTU_H) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // ---- LXE operand ports ----
  input  logic               dpe_in_valid,
  input  logic               dpe_in_last,
  input  vpe_op_e            post_op,
  input  bf16_t              dpe_vec_a [N_DPE_W],
  input  bf16_t              dpe_mat_b [N_DPE_H][N_DPE_W],
  input  logic               vpe_in_valid,
  input  vpe_op_e            vpe_op,
  input  bf16_t              vpe_a [N_VPE_W],
  input  bf16_t              vpe_b [N_VPE_W],
  output logic               vpe_in_ready,
  output logic               lxe_out_valid,
  output vpe_op_e            lxe_out_op,
  output bf16_t              lxe_out_vec [N_VPE_W],
  // ---- HCU control and HC table ----
  input  logic               hc_ld_en,
  input  logic [CL_W-1:0]    hc_ld_addr,
  input  logic [N_HP-1:0]    hc_ld_hash,
  input  logic [CNT_W-1:0]   hc_ld_count,
  input  logic               hcu_start,
  input  logic [CL_W:0]      hcu_n_prev,
  input  logic [$clog2(CUR_TOKENS):0] hcu_n_cur,
  input  logic [TOK_W-1:0]   hcu_tok_base,
  input  logic [5:0]         th_hd,
  input  logic [CNT_W-1:0]   cluster_cap,
  output logic               hcu_busy,
  output logic               hcu_done,
  output logic [CL_W:0]      hcu_n_clusters,
  output logic               hcu_overflow,
  output logic               hc_upd_valid,   // record written to the HC table
  output hc_update_t         hc_upd,
  // ---- WTU control ----
  input  logic               score_ptr_clear,
  input  logic [CS_W-1:0]    wtu_core_sel,
  output logic               score_busy,
  input  logic               tc_wr_en   [N_WTU_H],
  input  logic [TRA_W-1:0]   tc_wr_addr [N_WTU_H],
  input  logic [CNT_W-1:0]   tc_wr_data [N_WTU_H][N_WTU_W],
  input  logic               wtu_start  [N_WTU_H],
  input  logic [NCL_W-1:0]   wtu_n_cl   [N_WTU_H],
  input  logic [SRA_W-1:0]   wtu_row_base [N_WTU_H],
  input  logic [15:0]        th_r_wics,
  output logic               wtu_busy   [N_WTU_H],
  output logic               wtu_done   [N_WTU_H],
  output logic [7:0]         wtu_buckets [N_WTU_H],
  output logic               wtu_early_exit [N_WTU_H],
  input  logic               agg_clear,
  input  logic               agg_emit,
  output logic               agg_emit_done,
  output logic [CL_W:0]      agg_n_selected,
  // ---- KVMU ----
  output logic               kvmu_frame_done,
  output logic               dma_valid,
  input  logic               dma_ready,
  output dma_cmd_t           dma_cmd,
  output logic [$clog2(RECENT_CAP):0] recent_occ,
  output logic [31:0]        n_offload,
  output logic [31:0]        n_prefetch,
  output logic [31:0]        n_prefetch_skip
);

  localparam int unsigned BEATS = N_VPE_W / N_WTU_W;

  // ---------------- LXE ----------------
  logic [N_VPE_W-1:0] lxe_bits;
  logic [15:0]        lxe_fix [N_VPE_W];

  lxe #(.N_DPE_H(N_DPE_H), .N_DPE_W(N_DPE_W), .N_VPE_W(N_VPE_W)) u_lxe (
    .clk, .rst_n,
    .dpe_in_valid, .dpe_in_last, .post_op, .dpe_vec_a, .dpe_mat_b,
    .vpe_in_valid, .vpe_op, .vpe_a, .vpe_b, .vpe_in_ready,
    .out_valid(lxe_out_valid),
    .out_op   (lxe_out_op),
    .out_vec  (lxe_out_vec),
    .out_bits (lxe_bits),
    .out_fix  (lxe_fix)
  );

  // ---------------- (1) hash-bits into the HCU ----------------
  localparam int unsigned CA_W = $clog2(CUR_TOKENS);
  logic [CA_W-1:0] cur_ptr;
  logic            cur_we;
  assign cur_we = lxe_out_valid && (lxe_out_op == VPE_SIGN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        cur_ptr <= '0;
    else if (hcu_done) cur_ptr <= '0;
    else if (cur_we)   cur_ptr <= cur_ptr + 1'b1;
  end

  // ---------------- (2) HCU ----------------
  logic       upd_valid, upd_ready;
  hc_update_t upd;

  hcu #(.N_HCU_H(N_HCU_H), .N_HCU_W(N_HCU_W)) u_hcu (
    .clk, .rst_n,
    .cur_wr_en  (cur_we),
    .cur_wr_addr(cur_ptr),
    .cur_wr_data(lxe_bits[N_HP-1:0]),
    .kc_wr_en   (hc_ld_en),
    .kc_wr_addr (hc_ld_addr),
    .kc_wr_hash (hc_ld_hash),
    .kc_wr_count(hc_ld_count),
    .start      (hcu_start),
    .n_prev     (hcu_n_prev),
    .n_cur      (hcu_n_cur),
    .tok_base   (hcu_tok_base),
    .th_hd      (th_hd),
    .cluster_cap(cluster_cap),
    .busy       (hcu_busy),
    .done       (hcu_done),
    .n_clusters (hcu_n_clusters),
    .overflow   (hcu_overflow),
    .upd_valid  (upd_valid),
    .upd_ready  (upd_ready),
    .upd        (upd)
  );

  assign hc_upd_valid = upd_valid && upd_ready;
  assign hc_upd       = upd;

  // ---------------- (3) scores into the WTU ----------------
  logic [15:0]       sc_hold [N_VPE_W];
  logic [$clog2(BEATS+1)-1:0] sc_beat;
  logic [SRA_W-1:0]  sc_ptr;
  logic [CS_W-1:0]   sc_core;
  logic              sc_we;
  logic              sc_wr_en   [N_WTU_H];
  logic [SRA_W-1:0]  sc_wr_addr [N_WTU_H];
  logic [SCORE_W-1:0] sc_wr_data [N_WTU_H][N_WTU_W];

  assign score_busy = (sc_beat != '0);
  assign sc_we      = score_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sc_beat <= '0;
      sc_ptr  <= '0;
      sc_core <= '0;
    end else begin
      if (score_ptr_clear) sc_ptr <= '0;
      else if (sc_we)      sc_ptr <= sc_ptr + 1'b1;
      if (lxe_out_valid && lxe_out_op == VPE_QUANT) begin
        sc_beat <= ($clog2(BEATS+1))'(BEATS);
        sc_core <= wtu_core_sel;
      end else if (score_busy) begin
        sc_beat <= sc_beat - 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (lxe_out_valid && lxe_out_op == VPE_QUANT) sc_hold <= lxe_fix;
  end

  always_comb begin
    for (int h = 0; h < int'(N_WTU_H); h++) begin
      sc_wr_en[h]   = sc_we && (sc_core == CS_W'(h));
      sc_wr_addr[h] = sc_ptr;
      for (int i = 0; i < int'(N_WTU_W); i++)
        sc_wr_data[h][i] = sc_hold[(int'(BEATS) - int'(sc_beat)) * int'(N_WTU_W) + i];
    end
  end

  a_score_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    score_busy && sc_beat != 1 |-> !(lxe_out_valid && lxe_out_op == VPE_QUANT));

  // ---------------- (4) WTU ----------------
  logic            idx_valid, idx_ready, idx_last;
  logic [CL_W-1:0] idx;

  wtu #(
    .N_WTU_H(N_WTU_H), .N_WTU_W(N_WTU_W), .SCORE_DEPTH(SCORE_DEPTH),
    .TC_DEPTH(TC_DEPTH), .MAX_CL(MAX_CLUSTERS), .NUM_BUCKETS(NUM_BUCKETS)
  ) u_wtu (
    .clk, .rst_n,
    .sc_wr_en, .sc_wr_addr, .sc_wr_data,
    .tc_wr_en, .tc_wr_addr, .tc_wr_data,
    .start          (wtu_start),
    .n_cl           (wtu_n_cl),
    .row_base       (wtu_row_base),
    .ratio          (th_r_wics),
    .core_busy      (wtu_busy),
    .core_done      (wtu_done),
    .core_buckets   (wtu_buckets),
    .core_early_exit(wtu_early_exit),
    .agg_clear, .agg_emit,
    .idx_valid, .idx_ready, .idx, .idx_last,
    .emit_done (agg_emit_done),
    .n_selected(agg_n_selected)
  );

  // ---------------- (5) KVMU ----------------
  kvmu #(
    .MAX_FRAME_TOKENS(CUR_TOKENS), .RECENT_CAP(RECENT_CAP), .RETR_CAP(RETR_CAP),
    .CLUSTER_SLOTS(CLUSTER_SLOTS), .MAX_CL(MAX_CLUSTERS)
  ) u_kvmu (
    .clk, .rst_n,
    .upd_valid, .upd_ready, .upd,
    .frame_end (hcu_done),
    .frame_done(kvmu_frame_done),
    .sel_valid (idx_valid),
    .sel_ready (idx_ready),
    .sel_idx   (idx),
    .cmd_valid (dma_valid),
    .cmd_ready (dma_ready),
    .cmd       (dma_cmd),
    .recent_occ, .n_offload, .n_prefetch, .n_prefetch_skip
  );

endmodule
