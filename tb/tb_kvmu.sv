// tb_kvmu: self-checking testbench of the KV cache management unit.
// Uses a small recent ring (16 entries) and small cluster regions (8 slots) so
// that offloading starts after two frames. Frames of clustering records with
// random clusters are streamed in, selected clusters are sent afterwards, and
// every transfer command (with random cmd_ready stalls) is compared with a
// behavioural model: stable reorder by cluster, ring write, oldest-entry
// offload to cluster*SLOTS+slot, one prefetch burst per cluster covering
// exactly its offloaded entries, skip when nothing was offloaded.
module tb_kvmu;
  import vrex_pkg::*;
  localparam int FT = 32, CAP = 16, RETR = 64, SL = 8, MAXC = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic upd_valid = 0, upd_ready, frame_end = 0, frame_done;
  hc_update_t upd = '0;
  logic sel_valid = 0, sel_ready;
  logic [CL_W-1:0] sel_idx = '0;
  logic cmd_valid, cmd_ready = 1;
  dma_cmd_t cmd;
  logic [$clog2(CAP):0] recent_occ;
  logic [31:0] n_offload, n_prefetch, n_prefetch_skip;

  kvmu #(.MAX_FRAME_TOKENS(FT), .RECENT_CAP(CAP), .RETR_CAP(RETR), .CLUSTER_SLOTS(SL), .MAX_CL(MAXC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // model
  dma_cmd_t exp_q [$];
  dma_cmd_t got_q [$];
  int m_cnt [MAXC];     // tokens per cluster so far
  int m_off [MAXC];
  int m_mcl [CAP], m_msl [CAP];
  int m_wr = 0, m_rd = 0, m_occ = 0, m_rp = 0, m_tok = 0;
  int exp_skip = 0;
  bit off_seen [MAXC][SL];

  always @(posedge clk) begin
    if (cmd_valid && cmd_ready) begin
      got_q.push_back(cmd);
      if (cmd.op == DMA_OFFLOAD) off_seen[cmd.dst / SL][cmd.dst % SL] = 1;
    end
    cmd_ready <= ($urandom % 4) != 0;
  end

  function automatic dma_cmd_t mk(input dma_op_e op, input int s, input int d, input int l);
    dma_cmd_t c;
    c.op = op; c.src = ADDR_W'(s); c.dst = ADDR_W'(d); c.len = LEN_W'(l);
    return c;
  endfunction

  task automatic frame(input int n, input int ncl);
    int cl [FT], sl [FT], tk [FT];
    bit used [FT];
    for (int i = 0; i < n; i++) begin
      do cl[i] = $urandom % ncl; while (m_cnt[cl[i]] >= SL);  // the cluster unit keeps counts within capacity
      m_cnt[cl[i]]++;
      sl[i] = m_cnt[cl[i]] - 1;
      tk[i] = m_tok++;
      used[i] = 0;
    end
    // model: stable order by cluster
    for (int k = 0; k < n; k++) begin
      int p = -1;
      for (int i = 0; i < n; i++) if (!used[i] && (p < 0 || cl[i] < cl[p])) p = i;
      used[p] = 1;
      if (m_occ == CAP) begin
        exp_q.push_back(mk(DMA_OFFLOAD, m_rd, m_mcl[m_rd] * SL + m_msl[m_rd], 1));
        m_off[m_mcl[m_rd]]++;
        m_rd = (m_rd + 1) % CAP; m_occ--;
      end
      exp_q.push_back(mk(DMA_WRITE_RECENT, tk[p], m_wr, 1));
      m_mcl[m_wr] = cl[p]; m_msl[m_wr] = sl[p];
      m_wr = (m_wr + 1) % CAP; m_occ++;
    end
    // drive
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      upd_valid = 1;
      upd.cluster = CL_W'(cl[i]); upd.count = CNT_W'(sl[i] + 1); upd.token = TOK_W'(tk[i]);
      upd.new_cluster = (sl[i] == 0); upd.hash = $urandom;
      @(posedge clk); while (!upd_ready) @(posedge clk);
    end
    @(negedge clk); upd_valid = 0; frame_end = 1;
    @(negedge clk); frame_end = 0;
    while (!frame_done) @(posedge clk);
  endtask

  task automatic select(input int c);
    if (m_off[c] == 0) exp_skip++;
    else begin
      int d = (m_rp + m_off[c] > RETR) ? 0 : m_rp;
      exp_q.push_back(mk(DMA_PREFETCH, c * SL, CAP + d, m_off[c]));
      // the burst must cover exactly the offloaded entries of the cluster
      for (int s = 0; s < SL; s++) check(off_seen[c][s] == (s < m_off[c]), "cluster region contiguous");
      m_rp = d + m_off[c];
    end
    @(negedge clk); sel_valid = 1; sel_idx = CL_W'(c);
    @(posedge clk); while (!sel_ready) @(posedge clk);
    @(negedge clk); sel_valid = 0;
  endtask

  initial begin
    for (int c = 0; c < MAXC; c++) begin m_cnt[c] = 0; m_off[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (MAXC + 2) @(posedge clk);
    frame(10, 4);
    frame(10, 4);
    check(n_offload == 4 && recent_occ == CAP, "ring full after 20 entries, 4 offloaded");
    for (int c = 0; c < 4; c++) select(c);
    frame(FT, 12);
    frame(7, 12);
    for (int c = 0; c < 14; c++) select(c);
    repeat (10) @(posedge clk);
    check(got_q.size() == exp_q.size(), $sformatf("commands %0d exp %0d", got_q.size(), exp_q.size()));
    for (int i = 0; i < exp_q.size() && i < got_q.size(); i++)
      check(got_q[i] == exp_q[i], $sformatf("cmd %0d: got op %0d src %0d dst %0d len %0d exp op %0d src %0d dst %0d len %0d",
            i, got_q[i].op, got_q[i].src, got_q[i].dst, got_q[i].len, exp_q[i].op, exp_q[i].src, exp_q[i].dst, exp_q[i].len));
    check(n_prefetch_skip == 32'(exp_skip), "skipped prefetches");
    check(n_prefetch > 0 && exp_skip > 0, "prefetch and skip both exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
