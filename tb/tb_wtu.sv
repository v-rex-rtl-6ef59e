// tb_wtu: self-checking testbench of the WiCSum threshold unit with two cores
// and the aggregator. Several rows of one head are thresholded, two at a time
// on the two cores; the aggregator's index stream must list, in increasing
// order and once each, exactly the union of the clusters a behavioural
// WiCSum bucket model selects per row. Random idx_ready stalls are applied.
module tb_wtu;
  import vrex_pkg::*;
  localparam int HC = 2, W = 16, SD = 1024, TD = 1024, MAXC = 256, NB = 16;
  localparam int SRA_W = $clog2(SD / W), TRA_W = $clog2(TD / W), NCL_W = $clog2(MAXC + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               sc_wr_en   [HC];
  logic [SRA_W-1:0]   sc_wr_addr [HC];
  logic [15:0]        sc_wr_data [HC][W];
  logic               tc_wr_en   [HC];
  logic [TRA_W-1:0]   tc_wr_addr [HC];
  logic [15:0]        tc_wr_data [HC][W];
  logic               start      [HC];
  logic [NCL_W-1:0]   n_cl       [HC];
  logic [SRA_W-1:0]   row_base   [HC];
  logic [15:0]        ratio;
  logic               core_busy  [HC];
  logic               core_done  [HC];
  logic [7:0]         core_buckets [HC];
  logic               core_early_exit [HC];
  logic agg_clear = 0, agg_emit = 0, idx_valid, idx_ready = 1, idx_last, emit_done;
  logic [CL_W-1:0] idx;
  logic [CL_W:0] n_selected;

  wtu #(.N_WTU_H(HC), .N_WTU_W(W), .SCORE_DEPTH(SD), .TC_DEPTH(TD), .MAX_CL(MAXC), .NUM_BUCKETS(NB)) dut (.*);

  int checks = 0, failures = 0, n_early = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int sc [8][MAXC];
  int tc [MAXC];
  bit exp_u [MAXC];

  // behavioural WiCSum with buckets for one row
  task automatic model_row(input int r, input int n, input int rat);
    longint sum = 0, th, a = 0, lo, hi, wd, mn = 65535, mx = 0;
    for (int j = 0; j < n; j++) begin
      sum += longint'(sc[r][j]) * tc[j];
      if (sc[r][j] < mn) mn = sc[r][j];
      if (sc[r][j] > mx) mx = sc[r][j];
    end
    th = (sum * rat) >>> 16;
    wd = ((mx - mn) >>> $clog2(NB)) + 1;
    hi = mx; lo = (mx - mn < wd) ? mn : mx - wd + 1;
    forever begin
      for (int j = 0; j < n; j++) if (sc[r][j] >= lo && sc[r][j] <= hi) begin
        exp_u[j] = 1; a += longint'(sc[r][j]) * tc[j];
      end
      if (a > th || lo == mn) break;
      hi = lo - 1; lo = (lo - mn <= wd) ? mn : lo - wd;
    end
  endtask

  initial begin
    int n, rat, prev;
    int got [$];
    for (int h = 0; h < HC; h++) begin
      sc_wr_en[h] = 0; tc_wr_en[h] = 0; start[h] = 0; n_cl[h] = 1; row_base[h] = '0;
      sc_wr_addr[h] = '0; tc_wr_addr[h] = '0;
    end
    ratio = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int head = 0; head < 3; head++) begin
      n = 20 + $urandom % (MAXC - 20);
      rat = (head == 2) ? 16384 : 45000;
      for (int j = 0; j < MAXC; j++) begin tc[j] = 1 + $urandom % 40; exp_u[j] = 0; end
      for (int r = 0; r < 8; r++) for (int j = 0; j < MAXC; j++) sc[r][j] = $urandom % 1000;
      // load token counts into both cores, rows r on core r % 2 at row base (r / 2) * 16
      for (int c = 0; c < (n + W - 1) / W; c++) begin
        @(negedge clk);
        for (int h = 0; h < HC; h++) begin
          tc_wr_en[h] = 1; tc_wr_addr[h] = TRA_W'(c);
          for (int i = 0; i < W; i++) tc_wr_data[h][i] = 16'(tc[c*W+i]);
        end
      end
      for (int r = 0; r < 8; r++) for (int c = 0; c < (n + W - 1) / W; c++) begin
        @(negedge clk);
        for (int h = 0; h < HC; h++) begin tc_wr_en[h] = 0; sc_wr_en[h] = (h == r % 2); end
        sc_wr_addr[r % 2] = SRA_W'((r / 2) * 16 + c);
        for (int i = 0; i < W; i++) sc_wr_data[r % 2][i] = 16'(sc[r][c*W+i]);
      end
      @(negedge clk);
      for (int h = 0; h < HC; h++) sc_wr_en[h] = 0;
      agg_clear = 1; @(negedge clk); agg_clear = 0;
      ratio = 16'(rat);
      for (int r = 0; r < 8; r += 2) begin
        model_row(r, n, rat); model_row(r + 1, n, rat);
        for (int h = 0; h < HC; h++) begin start[h] = 1; n_cl[h] = NCL_W'(n); row_base[h] = SRA_W'((r / 2) * 16); end
        @(negedge clk);
        for (int h = 0; h < HC; h++) start[h] = 0;
        while (core_busy[0] || core_busy[1]) @(negedge clk);
        for (int h = 0; h < HC; h++) if (core_early_exit[h]) n_early++;
      end
      // emit
      got.delete();
      agg_emit = 1; @(negedge clk); agg_emit = 0;
      while (!emit_done) begin
        @(posedge clk);
        if (idx_valid && idx_ready) got.push_back(int'(idx));
        #1 idx_ready = ($urandom % 3) != 0;
      end
      idx_ready = 1;
      begin
        automatic int ne = 0;
        automatic bit ok = 1;
        for (int j = 0; j < MAXC; j++) ne += exp_u[j];
        check(got.size() == ne, $sformatf("head %0d: %0d indices exp %0d", head, got.size(), ne));
        check(n_selected == (CL_W+1)'(ne), "n_selected");
        prev = -1;
        foreach (got[i]) begin
          if (got[i] <= prev || !exp_u[got[i]]) ok = 0;
          prev = got[i];
        end
        check(ok, "indices increasing and all expected");
      end
    end
    check(n_early > 0, "early exit exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
