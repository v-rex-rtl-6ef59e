// tb_hcu: self-checking testbench of the hash-bit cluster unit.
// Preloads clusters, writes a frame of current hash-bits (near copies of
// existing clusters, near copies of tokens earlier in the frame, and random
// words), runs the clustering and compares every update record with a
// behavioural model of nearest-cluster Hamming clustering (threshold,
// per-cluster capacity, table-full overflow). With upd_ready held high the
// cycle count must be sum over tokens of (ceil(clusters/N_HCU_H)*N_HP/N_HCU_W + 2) + 1.
module tb_hcu;
  import vrex_pkg::*;
  localparam int H = 1, W = 16, NHP = 32, CT = 32, MAXC = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cur_wr_en = 0, kc_wr_en = 0, start = 0, upd_ready = 1;
  logic [$clog2(CT)-1:0] cur_wr_addr = '0;
  logic [NHP-1:0] cur_wr_data = '0, kc_wr_hash = '0;
  logic [CL_W-1:0] kc_wr_addr = '0;
  logic [CNT_W-1:0] kc_wr_count = '0, cluster_cap = 16'd128;
  logic [CL_W:0] n_prev = '0, n_clusters;
  logic [$clog2(CT):0] n_cur = 1;
  logic [TOK_W-1:0] tok_base = '0;
  logic [$clog2(NHP+1)-1:0] th_hd = 7;
  logic busy, done, overflow, upd_valid;
  hc_update_t upd;

  hcu #(.N_HCU_H(H), .N_HCU_W(W)) dut (
    .clk, .rst_n, .cur_wr_en, .cur_wr_addr, .cur_wr_data, .kc_wr_en, .kc_wr_addr,
    .kc_wr_hash, .kc_wr_count, .start, .n_prev, .n_cur, .tok_base, .th_hd, .cluster_cap,
    .busy, .done, .n_clusters, .overflow, .upd_valid, .upd_ready, .upd);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // model state
  logic [NHP-1:0] m_kc [MAXC];
  int m_cnt [MAXC];
  int m_ncl;
  logic [NHP-1:0] cur [CT];
  hc_update_t got [$];

  always @(posedge clk) if (upd_valid && upd_ready) got.push_back(upd);

  function automatic int hd(input logic [NHP-1:0] a, input logic [NHP-1:0] b);
    return $countones(a ^ b);
  endfunction

  function automatic logic [NHP-1:0] flip(input logic [NHP-1:0] v, input int nbits);
    for (int i = 0; i < nbits; i++) v[$urandom % NHP] ^= 1'b1;
    return v;
  endfunction

  task automatic run_frame(input int nprev, input int ncur, input int tb0, input int thr,
                           input int cap, input bit stall);
    int exp_cyc, cyc;
    bit exp_ovf;
    hc_update_t exp_q [$];
    // preload
    for (int c = 0; c < nprev; c++) begin
      @(negedge clk);
      kc_wr_en = 1; kc_wr_addr = CL_W'(c); kc_wr_hash = m_kc[c]; kc_wr_count = CNT_W'(m_cnt[c]);
    end
    for (int t = 0; t < ncur; t++) begin
      @(negedge clk);
      kc_wr_en = 0; cur_wr_en = 1; cur_wr_addr = 5'(t); cur_wr_data = cur[t];
    end
    @(negedge clk); kc_wr_en = 0; cur_wr_en = 0;
    // model
    m_ncl = nprev; exp_cyc = 1; exp_ovf = 0;
    for (int t = 0; t < ncur; t++) begin
      int best = -1, bd = 99, anyc = -1, ad = 99;
      hc_update_t r;
      exp_cyc += ((m_ncl + H - 1) / H) * (NHP / W) + 2;
      for (int c = 0; c < m_ncl; c++) begin
        int d = hd(cur[t], m_kc[c]);
        if (anyc < 0 || d < ad) begin ad = d; anyc = c; end
        if (m_cnt[c] < cap && (best < 0 || d < bd)) begin bd = d; best = c; end
      end
      r.token = TOK_W'(tb0 + t);
      if (best >= 0 && bd < thr) begin
        m_cnt[best]++; r.new_cluster = 0; r.cluster = CL_W'(best); r.count = CNT_W'(m_cnt[best]); r.hash = m_kc[best];
      end else if (m_ncl < MAXC) begin
        m_kc[m_ncl] = cur[t]; m_cnt[m_ncl] = 1;
        r.new_cluster = 1; r.cluster = CL_W'(m_ncl); r.count = 1; r.hash = cur[t]; m_ncl++;
      end else begin
        exp_ovf = 1; m_cnt[anyc]++;
        r.new_cluster = 0; r.cluster = CL_W'(anyc); r.count = CNT_W'(m_cnt[anyc]); r.hash = m_kc[anyc];
      end
      exp_q.push_back(r);
    end
    // run
    got.delete();
    n_prev = (CL_W+1)'(nprev); n_cur = 6'(ncur); tok_base = TOK_W'(tb0);
    th_hd = 6'(thr); cluster_cap = CNT_W'(cap);
    start = 1; @(posedge clk); #1 start = 0;
    cyc = 0;
    while (!done) begin
      @(posedge clk); #1 cyc++;
      if (stall) upd_ready = ($urandom % 3) != 0;
    end
    upd_ready = 1;
    check(got.size() == ncur, $sformatf("record count %0d exp %0d", got.size(), ncur));
    for (int i = 0; i < ncur && i < got.size(); i++)
      check(got[i] == exp_q[i], $sformatf("token %0d: got cl %0d new %0d cnt %0d exp cl %0d new %0d cnt %0d",
            i, got[i].cluster, got[i].new_cluster, got[i].count, exp_q[i].cluster, exp_q[i].new_cluster, exp_q[i].count));
    check(n_clusters == (CL_W+1)'(m_ncl), "cluster count");
    check(overflow == exp_ovf, "overflow flag");
    if (!stall) check(cyc == exp_cyc, $sformatf("cycles %0d exp %0d", cyc, exp_cyc));
  endtask

  initial begin
    int joins = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // frame 0: empty table, 32 tokens forming a few clusters
    for (int t = 0; t < CT; t++) cur[t] = (t < 4) ? $urandom : flip(cur[t % 4], $urandom % 4);
    run_frame(0, CT, 0, 7, 128, 0);
    // frame 1: previous clusters from the model, near copies and new tokens, with stalls
    for (int t = 0; t < CT; t++) cur[t] = (t % 3 == 0) ? $urandom : flip(m_kc[$urandom % m_ncl], $urandom % 8);
    run_frame(m_ncl, CT, 32, 7, 128, 1);
    // frame 2: small capacity forces new clusters for near copies
    for (int t = 0; t < CT; t++) cur[t] = flip(m_kc[0], $urandom % 3);
    run_frame(m_ncl, CT, 64, 7, 6, 0);
    // frame 3: threshold 0 never joins; threshold 33 always joins
    for (int t = 0; t < 8; t++) cur[t] = m_kc[t];
    run_frame(m_ncl, 8, 96, 0, 128, 0);
    run_frame(m_ncl, 8, 104, 33, 1000, 0);
    // frame 4: nearly full table overflows
    for (int c = 0; c < MAXC; c++) begin m_kc[c] = $urandom; m_cnt[c] = 1; end
    for (int t = 0; t < CT; t++) cur[t] = $urandom;
    run_frame(MAXC - 3, CT, 200, 1, 1000, 0);
    foreach (got[i]) if (!got[i].new_cluster) joins++;
    check(joins > 0 && overflow, "table-full overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
