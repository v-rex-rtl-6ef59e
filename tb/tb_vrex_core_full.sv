// tb_vrex_core_full: full-size testbench of the V-Rex core
//
// Full-size testbench of one V-Rex core: every parameter at its default
// (64 x 64 DPE, 64-lane VPE, one 16-lane WTU core, 4096-entry recent ring).
// Two frames of 32 tokens are hashed, clustered and written to the recent
// ring, then two rounds of retrieval run over all clusters. At this size
// the ring never fills, so offload and prefetch bursts are not reached;
// the reduced-size end-to-end testbench covers them.
// The testbench drives the core the way a layer loop would, and keeps its
// own reference of every step so that each output is compared with a value
// worked out independently of the RTL:
//  * key hash-bits: keys (copies of a few centre keys with one or two signs
//    flipped) times a fixed set of 32 hyperplanes in {-1, 0, +1} on the DPE,
//    binarised on the VPE; the reference is the sign of the exact integer
//    dot product;
//  * clustering: every HC table record is compared with a nearest-cluster
//    Hamming model (threshold, capacity, full table);
//  * KV movement: every transfer command (recent write, offload, prefetch)
//    is compared with a ring / per-cluster-region model, with random
//    back-pressure on the command port;
//  * retrieval: queries times cluster keys give exact integer scores; the
//    aggregated selection is compared with a bucketed WiCSum model, and the
//    prefetch commands that follow with the region model.
// Each mechanism is counted and a mechanism that never occurs is a failure.
module tb_vrex_core_full;
  import vrex_fp_pkg::*;
  import vrex_pkg::*;

  localparam int DH = 64, DW = 64, VW = 64, WH = 1, WW = 16;
  localparam int SD = 4096, TD = 4096, NB = 16;
  localparam int RC = 4096, RR = 4096, SL = 128;
  localparam int NFRAMES = 2, NTOK = 32, NCEN = 12, NQ = 2;
  localparam bit FULL = 1;
  localparam int BEATS = VW / WW;
  localparam int SRA_W = $clog2(SD / WW), TRA_W = $clog2(TD / WW);
  localparam int NCL_W = $clog2(MAX_CLUSTERS + 1);
  localparam int CS_W = (WH > 1) ? $clog2(WH) : 1;
  localparam int MAXC = MAX_CLUSTERS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---------------- DUT signals ----------------
  logic dpe_in_valid = 0, dpe_in_last = 0;
  vpe_op_e post_op = VPE_SIGN;
  bf16_t dpe_vec_a [DW];
  bf16_t dpe_mat_b [DH][DW];
  logic vpe_in_valid = 0;
  vpe_op_e vpe_op = VPE_ADD;
  bf16_t vpe_a [VW];
  bf16_t vpe_b [VW];
  logic vpe_in_ready, lxe_out_valid;
  vpe_op_e lxe_out_op;
  bf16_t lxe_out_vec [VW];
  logic hc_ld_en = 0;
  logic [CL_W-1:0] hc_ld_addr = '0;
  logic [N_HP-1:0] hc_ld_hash = '0;
  logic [CNT_W-1:0] hc_ld_count = '0;
  logic hcu_start = 0;
  logic [CL_W:0] hcu_n_prev = '0;
  logic [$clog2(CUR_TOKENS):0] hcu_n_cur = 1;
  logic [TOK_W-1:0] hcu_tok_base = '0;
  logic [5:0] th_hd = 6'(TH_HD_DEF);
  logic [CNT_W-1:0] cluster_cap = CNT_W'(SL);
  logic hcu_busy, hcu_done, hcu_overflow, hc_upd_valid;
  logic [CL_W:0] hcu_n_clusters;
  hc_update_t hc_upd;
  logic score_ptr_clear = 0;
  logic [CS_W-1:0] wtu_core_sel = '0;
  logic score_busy;
  logic tc_wr_en [WH];
  logic [TRA_W-1:0] tc_wr_addr [WH];
  logic [CNT_W-1:0] tc_wr_data [WH][WW];
  logic wtu_start [WH];
  logic [NCL_W-1:0] wtu_n_cl [WH];
  logic [SRA_W-1:0] wtu_row_base [WH];
  logic [15:0] th_r_wics = 16'd19661;  // 0.3
  logic wtu_busy [WH], wtu_done [WH], wtu_early_exit [WH];
  logic [7:0] wtu_buckets [WH];
  logic agg_clear = 0, agg_emit = 0, agg_emit_done;
  logic [CL_W:0] agg_n_selected;
  logic kvmu_frame_done, dma_valid, dma_ready = 1;
  dma_cmd_t dma_cmd;
  logic [$clog2(RC):0] recent_occ;
  logic [31:0] n_offload, n_prefetch, n_prefetch_skip;

  vrex_core  dut (.*);

  // ---------------- bookkeeping ----------------
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int n_dpe_priority = 0, n_new = 0, n_join = 0, n_ovf_frames = 0, n_hcu_stall = 0;
  int n_dma_stall = 0, n_wr_recent = 0, n_off = 0, n_pref = 0, n_skip = 0;
  int n_score_busy = 0, n_early = 0, n_full_scan = 0, n_frames_done = 0;

  hc_update_t upd_q [$];
  dma_cmd_t   got_q [$], exp_q [$];
  int         idx_q [$];

  always @(posedge clk) if (rst_n) begin
    if (hc_upd_valid) upd_q.push_back(hc_upd);
    if (dut.upd_valid && !dut.upd_ready) n_hcu_stall++;
    if (dma_valid && !dma_ready) n_dma_stall++;
    if (dma_valid && dma_ready) begin
      got_q.push_back(dma_cmd);
      unique case (dma_cmd.op)
        DMA_WRITE_RECENT: n_wr_recent++;
        DMA_OFFLOAD:      n_off++;
        default:          n_pref++;
      endcase
    end
    if (dut.idx_valid && dut.idx_ready) idx_q.push_back(int'(dut.idx));
    if (!vpe_in_ready) n_dpe_priority++;
    if (score_busy) n_score_busy++;
    if (kvmu_frame_done) n_frames_done++;
    for (int h = 0; h < WH; h++) if (wtu_done[h]) begin
      if (wtu_early_exit[h]) n_early++; else n_full_scan++;
    end
    dma_ready <= ($urandom % 4) != 0;
  end

  // ---------------- reference state ----------------
  int hp [N_HP][DW];                 // hyperplanes
  int cen [NCEN][DW];                // centre keys
  logic [N_HP-1:0] m_kc [MAXC];      // cluster hash-bits
  int m_cnt [MAXC];                  // tokens per cluster
  int m_ncl = 0, m_tok = 0;
  // KV movement model
  int m_mcl [RC], m_msl [RC];
  int m_wr = 0, m_rd = 0, m_occ = 0, m_rp = 0;
  int m_off [MAXC];

  function automatic bf16_t i2b(input int v);
    int m, e;
    if (v == 0) return 16'h0000;
    m = (v < 0) ? -v : v;
    e = 0;
    while ((m >> e) > 1) e++;
    return {1'(v < 0), 8'(127 + e), 7'((m << 7 >> e) & 8'h7f)};
  endfunction

  function automatic dma_cmd_t mk(input dma_op_e op, input int s, input int d, input int l);
    dma_cmd_t c;
    c.op = op; c.src = ADDR_W'(s); c.dst = ADDR_W'(d); c.len = LEN_W'(l);
    return c;
  endfunction

  // clustering model for one frame; returns the expected HC records
  task automatic model_hcu(input logic [N_HP-1:0] cur [CUR_TOKENS], input int ncur, input int thr,
                           output hc_update_t exp_r [CUR_TOKENS], output bit ovf);
    ovf = 0;
    for (int t = 0; t < ncur; t++) begin
      automatic int best = -1, bd = 99, anyc = -1, ad = 99;
      hc_update_t r;
      for (int c = 0; c < m_ncl; c++) begin
        automatic int d = $countones(cur[t] ^ m_kc[c]);
        if (anyc < 0 || d < ad) begin ad = d; anyc = c; end
        if (m_cnt[c] < SL && (best < 0 || d < bd)) begin bd = d; best = c; end
      end
      r.token = TOK_W'(m_tok + t);
      if (best >= 0 && bd < thr) begin
        m_cnt[best]++; r.new_cluster = 0; r.cluster = CL_W'(best); r.count = CNT_W'(m_cnt[best]); r.hash = m_kc[best];
      end else if (m_ncl < MAXC) begin
        m_kc[m_ncl] = cur[t]; m_cnt[m_ncl] = 1;
        r.new_cluster = 1; r.cluster = CL_W'(m_ncl); r.count = 1; r.hash = cur[t]; m_ncl++;
      end else begin
        ovf = 1; m_cnt[anyc]++;
        r.new_cluster = 0; r.cluster = CL_W'(anyc); r.count = CNT_W'(m_cnt[anyc]); r.hash = m_kc[anyc];
      end
      exp_r[t] = r;
    end
  endtask

  // KV movement model for one frame: stable order by cluster
  task automatic model_kvmu(input hc_update_t r [CUR_TOKENS], input int n);
    bit used [CUR_TOKENS];
    for (int i = 0; i < n; i++) used[i] = 0;
    for (int k = 0; k < n; k++) begin
      automatic int p = -1;
      for (int i = 0; i < n; i++) if (!used[i] && (p < 0 || r[i].cluster < r[p].cluster)) p = i;
      used[p] = 1;
      if (m_occ == RC) begin
        exp_q.push_back(mk(DMA_OFFLOAD, m_rd, m_mcl[m_rd] * SL + m_msl[m_rd], 1));
        m_off[m_mcl[m_rd]]++;
        m_rd = (m_rd + 1) % RC; m_occ--;
      end
      exp_q.push_back(mk(DMA_WRITE_RECENT, int'(r[p].token), m_wr, 1));
      m_mcl[m_wr] = int'(r[p].cluster); m_msl[m_wr] = (int'(r[p].count) - 1) % SL;
      m_wr = (m_wr + 1) % RC; m_occ++;
    end
  endtask

  task automatic compare_dma(input string phase);
    automatic int guard = 0;
    while (got_q.size() < exp_q.size() && guard < 200000) begin @(posedge clk); guard++; end
    repeat (4) @(posedge clk);
    check(got_q.size() == exp_q.size(), $sformatf("%s: %0d transfer commands, expected %0d", phase, got_q.size(), exp_q.size()));
    for (int i = 0; i < got_q.size() && i < exp_q.size(); i++)
      check(got_q[i] == exp_q[i], $sformatf("%s: command %0d op %0d src %0d dst %0d len %0d, expected op %0d src %0d dst %0d len %0d",
            phase, i, got_q[i].op, got_q[i].src, got_q[i].dst, got_q[i].len,
            exp_q[i].op, exp_q[i].src, exp_q[i].dst, exp_q[i].len));
    got_q.delete(); exp_q.delete();
  endtask

  // ---------------- one frame: hash-bits, clustering, KV writes ----------------
  task automatic run_frame(input int ntok, input int thr, input bit wait_kvmu);
    logic [N_HP-1:0] cur [CUR_TOKENS];
    hc_update_t exp_r [CUR_TOKENS];
    bit ovf;
    automatic int guard = 0;
    automatic int nprev = m_ncl;
    for (int t = 0; t < CUR_TOKENS; t++) cur[t] = '0;
    // (1) keys x hyperplanes on the DPE, binarised on the VPE
    for (int h = 0; h < DH; h++)
      for (int w = 0; w < DW; w++) dpe_mat_b[h][w] = (h < N_HP) ? i2b(hp[h][w]) : 16'h0;
    for (int t = 0; t < ntok; t++) begin : g_tok
      automatic int c, nflip, fw;
      automatic int key [DW];
      c = $urandom % NCEN;
      nflip = $urandom % 3;
      for (int w = 0; w < DW; w++) key[w] = cen[c][w];
      for (int k = 0; k < nflip; k++) begin
        fw = $urandom % DW;
        key[fw] = -key[fw];
      end
      for (int h = 0; h < N_HP; h++) begin
        automatic int d = 0;
        for (int w = 0; w < DW; w++) d += key[w] * hp[h][w];
        cur[t][h] = (d > 0);
      end
      @(negedge clk);
      dpe_in_valid = 1; dpe_in_last = 1; post_op = VPE_SIGN;
      for (int w = 0; w < DW; w++) dpe_vec_a[w] = i2b(key[w]);
    end
    @(negedge clk);
    dpe_in_valid = 0; dpe_in_last = 0;
    repeat (4) @(negedge clk);
    check(dut.cur_ptr == ($clog2(CUR_TOKENS))'(ntok), "one hash-bit word written per token");
    // (2) clustering
    model_hcu(cur, ntok, thr, exp_r, ovf);
    upd_q.delete();
    hcu_n_prev = (CL_W+1)'(nprev); hcu_n_cur = ($clog2(CUR_TOKENS)+1)'(ntok);
    hcu_tok_base = TOK_W'(m_tok); th_hd = 6'(thr);
    hcu_start = 1;
    @(negedge clk) hcu_start = 0;
    while (!hcu_done && guard < 400000) begin @(negedge clk); guard++; end
    check(hcu_done, "clustering finished");
    @(negedge clk);
    check(upd_q.size() == ntok, $sformatf("%0d HC records, expected %0d", upd_q.size(), ntok));
    for (int t = 0; t < ntok && t < upd_q.size(); t++) begin
      check(upd_q[t] == exp_r[t], $sformatf("token %0d: cluster %0d new %0d count %0d, expected cluster %0d new %0d count %0d",
            t, upd_q[t].cluster, upd_q[t].new_cluster, upd_q[t].count, exp_r[t].cluster, exp_r[t].new_cluster, exp_r[t].count));
      if (exp_r[t].new_cluster) n_new++; else n_join++;
    end
    check(hcu_n_clusters == (CL_W+1)'(m_ncl), "cluster count");
    check(hcu_overflow == ovf, "table-full flag");
    if (ovf) n_ovf_frames++;
    model_kvmu(exp_r, ntok);
    m_tok += ntok;
    if (wait_kvmu) compare_dma("frame");
  endtask

  // ---------------- retrieval: scores, WiCSum, aggregation, prefetch ----------------
  int ck [MAXC][DW];
  int qv [NQ][DW];
  int sc [NQ][MAXC];
  bit exp_u [MAXC];

  task automatic model_row(input int q, input int n, input int rat);
    longint sum = 0, th, a = 0, lo, hi, wd, mn = 65535, mx = 0;
    for (int j = 0; j < n; j++) begin
      sum += longint'(sc[q][j]) * m_cnt[j];
      if (sc[q][j] < mn) mn = sc[q][j];
      if (sc[q][j] > mx) mx = sc[q][j];
    end
    th = (sum * rat) >>> 16;
    wd = ((mx - mn) >>> $clog2(NB)) + 1;
    hi = mx; lo = (mx - mn < wd) ? mn : mx - wd + 1;
    forever begin
      for (int j = 0; j < n; j++) if (sc[q][j] >= lo && sc[q][j] <= hi) begin
        exp_u[j] = 1; a += longint'(sc[q][j]) * m_cnt[j];
      end
      if (a > th || lo == mn) break;
      hi = lo - 1; lo = (lo - mn <= wd) ? mn : lo - wd;
    end
  endtask

  task automatic retrieve(input int rat);
    automatic int ncl = m_ncl;
    automatic int nres = (ncl + VW - 1) / VW;
    automatic int rows_q = nres * BEATS;
    automatic int guard = 0;
    automatic int nsel = 0;
    for (int c = 0; c < ncl; c++) exp_u[c] = 0;
    for (int c = 0; c < ncl; c++) for (int w = 0; w < DW; w++) ck[c][w] = $urandom % 2;
    for (int q = 0; q < NQ; q++) for (int w = 0; w < DW; w++) qv[q][w] = $urandom % 3;
    for (int q = 0; q < NQ; q++) for (int c = 0; c < ncl; c++) begin
      automatic int d = 0;
      for (int w = 0; w < DW; w++) d += qv[q][w] * ck[c][w];
      sc[q][c] = d * 256;
    end
    // token counts into every WTU core
    for (int k = 0; k < (ncl + WW - 1) / WW; k++) begin
      @(negedge clk);
      for (int h = 0; h < WH; h++) begin
        tc_wr_en[h] = 1; tc_wr_addr[h] = TRA_W'(k);
        for (int i = 0; i < WW; i++) tc_wr_data[h][i] = (k * WW + i < ncl) ? CNT_W'(m_cnt[k * WW + i]) : '0;
      end
    end
    @(negedge clk);
    for (int h = 0; h < WH; h++) tc_wr_en[h] = 0;
    // (3) Query x Key_cluster^T, one query at a time, into the score MEM
    score_ptr_clear = 1;
    @(negedge clk) score_ptr_clear = 0;
    for (int q = 0; q < NQ; q++) begin
      wtu_core_sel = CS_W'(q % WH);
      for (int r = 0; r < nres; r++) begin
        @(negedge clk);
        dpe_in_valid = 1; dpe_in_last = 1; post_op = VPE_QUANT;
        for (int w = 0; w < DW; w++) dpe_vec_a[w] = i2b(qv[q][w]);
        for (int h = 0; h < DH; h++)
          for (int w = 0; w < DW; w++) dpe_mat_b[h][w] = (h < VW && r * VW + h < ncl) ? i2b(ck[r * VW + h][w]) : 16'h0;
        @(negedge clk);
        dpe_in_valid = 0; dpe_in_last = 0;
        repeat (BEATS - 1) @(negedge clk);
      end
      repeat (BEATS + 6) @(negedge clk);
    end
    // (4) thresholding, every core row in parallel
    agg_clear = 1;
    @(negedge clk) agg_clear = 0;
    for (int q0 = 0; q0 < NQ; q0 += WH) begin
      for (int h = 0; h < WH; h++) if (q0 + h < NQ) begin
        wtu_start[h] = 1; wtu_n_cl[h] = NCL_W'(ncl); wtu_row_base[h] = SRA_W'((q0 + h) * rows_q);
      end
      @(negedge clk);
      for (int h = 0; h < WH; h++) wtu_start[h] = 0;
      guard = 0;
      while (guard < 100000) begin
        automatic bit any = 0;
        for (int h = 0; h < WH; h++) any |= wtu_busy[h];
        if (!any) break;
        @(negedge clk); guard++;
      end
    end
    for (int q = 0; q < NQ; q++) model_row(q, ncl, rat);
    // (5) selected clusters to the KV manager
    idx_q.delete();
    agg_emit = 1;
    @(negedge clk) agg_emit = 0;
    guard = 0;
    while (!agg_emit_done && guard < 100000) begin @(negedge clk); guard++; end
    check(agg_emit_done, "selection emitted");
    for (int c = 0; c < ncl; c++) if (exp_u[c]) begin
      nsel++;
      if (m_off[c] == 0) n_skip++;
      else begin
        automatic int d = (m_rp + m_off[c] > RR) ? 0 : m_rp;
        exp_q.push_back(mk(DMA_PREFETCH, c * SL, RC + d, m_off[c]));
        m_rp = d + m_off[c];
      end
    end
    check(idx_q.size() == nsel, $sformatf("%0d clusters selected, expected %0d", idx_q.size(), nsel));
    check(agg_n_selected == (CL_W+1)'(nsel), "selected count");
    for (int i = 0; i < idx_q.size(); i++) check(exp_u[idx_q[i]], $sformatf("cluster %0d selected", idx_q[i]));
    compare_dma("retrieval");
  endtask

  // ---------------- main sequence ----------------
  initial begin
    for (int w = 0; w < DW; w++) dpe_vec_a[w] = 16'h0;
    for (int h = 0; h < DH; h++) for (int w = 0; w < DW; w++) dpe_mat_b[h][w] = 16'h0;
    for (int w = 0; w < VW; w++) begin vpe_a[w] = 16'h0; vpe_b[w] = 16'h0; end
    for (int h = 0; h < WH; h++) begin
      tc_wr_en[h] = 0; tc_wr_addr[h] = '0; wtu_start[h] = 0; wtu_n_cl[h] = '0; wtu_row_base[h] = '0;
      for (int i = 0; i < WW; i++) tc_wr_data[h][i] = '0;
    end
    for (int c = 0; c < MAXC; c++) begin m_cnt[c] = 0; m_off[c] = 0; end
    for (int h = 0; h < N_HP; h++) for (int w = 0; w < DW; w++) hp[h][w] = int'($urandom % 3) - 1;
    for (int c = 0; c < NCEN; c++) for (int w = 0; w < DW; w++) cen[c][w] = ($urandom % 2) ? 1 : -1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // the KV manager clears its per-cluster counters after reset
    repeat (MAXC + 4) @(negedge clk);
    // frames; all but the last start while the KV manager is still busy
    for (int f = 0; f < NFRAMES; f++) run_frame(NTOK, TH_HD_DEF, f == NFRAMES - 1);
    th_r_wics = 16'd19661;  // Th_r-wics = 0.3
    retrieve(19661);
    th_r_wics = 16'd62259;  // 0.95: nearly every cluster
    retrieve(62259);
    if (!FULL) begin
      // fill the cluster table through the HC table port, then a frame
      // that can only join: the table-full case
      for (int c = m_ncl; c < MAXC; c++) begin
        @(negedge clk);
        m_kc[c] = N_HP'($urandom); m_cnt[c] = 1;
        hc_ld_en = 1; hc_ld_addr = CL_W'(c); hc_ld_hash = m_kc[c]; hc_ld_count = 1;
      end
      @(negedge clk) hc_ld_en = 0;
      m_ncl = MAXC;
      run_frame(4, 0, 1);
    end
    // mechanisms
    check(n_new > 0, "new cluster opened");
    check(n_join > 0, "token joined a cluster");
    check(n_dpe_priority > 0, "DPE result took the VPE");
    check(n_wr_recent > 0, "recent-KV write");
    check(n_score_busy > 0, "score write port busy");
    check(n_early + n_full_scan > 0, "WiCSum rows finished");
    check(n_skip + n_pref > 0, "selected cluster handled");
    if (!FULL) begin
      check(n_ovf_frames > 0, "cluster table full");
      check(n_hcu_stall > 0, "clustering stalled by the KV manager");
      check(n_dma_stall > 0, "transfer command back-pressure");
      check(n_off > 0, "offload of the oldest recent entry");
      check(n_pref > 0, "prefetch burst");
      check(n_skip > 0, "selected cluster with nothing offloaded");
      check(n_early > 0, "WiCSum early exit");
      check(recent_occ == ($clog2(RC)+1)'(RC), "recent ring full");
    end
    $display("mechanisms: new %0d join %0d table-full %0d hcu-stall %0d dpe-priority %0d dma-stall %0d recent %0d offload %0d prefetch %0d skip %0d score-busy %0d early-exit %0d full-scan %0d",
             n_new, n_join, n_ovf_frames, n_hcu_stall, n_dpe_priority, n_dma_stall, n_wr_recent, n_off, n_pref, n_skip, n_score_busy, n_early, n_full_scan);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
