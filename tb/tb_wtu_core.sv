// tb_wtu_core: self-checking testbench of the WiCSum threshold core.
// First replays the worked example of the WiCSum figure (scores 9,8,7,2,1,1,1,1
// with counts 4,3,3,2,3,2,2,3 and an 80% ratio: Sum 95, threshold 76, the
// three highest clusters selected with 81 accumulated), then random rows.
// A behavioural model computes Sum, min/max, threshold, the bucket walk, the
// selected set and the cycle count (nch + 3 + buckets * (nch + 2)).
module tb_wtu_core;
  import vrex_pkg::*;
  localparam int W = 16, SD = 4096, TD = 4096, MAXC = 1024, NB = 16;
  localparam int SRA_W = $clog2(SD / W), TRA_W = $clog2(TD / W), NCL_W = $clog2(MAXC + 1);
  localparam int CK_W = $clog2(MAXC / W);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sc_wr_en = 0, tc_wr_en = 0, start = 0;
  logic [SRA_W-1:0] sc_wr_addr = '0, row_base = '0;
  logic [TRA_W-1:0] tc_wr_addr = '0;
  logic [15:0] sc_wr_data [W];
  logic [15:0] tc_wr_data [W];
  logic [NCL_W-1:0] n_cl = 1;
  logic [15:0] ratio = '0;
  logic busy, done, mask_valid, early_exit;
  logic [CK_W-1:0] mask_chunk;
  logic [W-1:0] mask_bits;
  logic [47:0] wsum, th_wics, acc;
  logic [15:0] s_min, s_max;
  logic [7:0] n_buckets;

  wtu_core #(.N_WTU_W(W), .SCORE_DEPTH(SD), .TC_DEPTH(TD), .MAX_CL(MAXC), .NUM_BUCKETS(NB)) dut (.*);

  int checks = 0, failures = 0;
  int sc [MAXC], tc [MAXC];
  bit got [MAXC];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (mask_valid)
    for (int i = 0; i < W; i++) if (mask_bits[i]) got[mask_chunk * W + i] = 1;

  task automatic run_row(input int n, input int rb, input int rat);
    longint sum, th, a, lo, hi, wd, mn, mx;
    int nb, nch, cyc;
    bit exp_sel [MAXC];
    bit ee;
    // load memories (scores at row base rb, counts at row 0)
    for (int r = 0; r < (n + W - 1) / W; r++) begin
      @(negedge clk);
      sc_wr_en = 1; tc_wr_en = 1; sc_wr_addr = SRA_W'(rb + r); tc_wr_addr = TRA_W'(r);
      for (int i = 0; i < W; i++) begin
        sc_wr_data[i] = (r*W+i < n) ? 16'(sc[r*W+i]) : 16'hbeef;
        tc_wr_data[i] = (r*W+i < n) ? 16'(tc[r*W+i]) : 16'h1234;
      end
    end
    @(negedge clk); sc_wr_en = 0; tc_wr_en = 0;
    // reference
    sum = 0; mn = 65535; mx = 0;
    for (int j = 0; j < n; j++) begin
      sum += longint'(sc[j]) * tc[j];
      if (sc[j] < mn) mn = sc[j];
      if (sc[j] > mx) mx = sc[j];
    end
    th = (sum * rat) >>> 16;
    wd = ((mx - mn) >>> $clog2(NB)) + 1;
    hi = mx; lo = (mx - mn < wd) ? mn : mx - wd + 1;
    a = 0; nb = 0; ee = 0;
    for (int j = 0; j < MAXC; j++) exp_sel[j] = 0;
    forever begin
      for (int j = 0; j < n; j++) if (sc[j] >= lo && sc[j] <= hi) begin
        exp_sel[j] = 1; a += longint'(sc[j]) * tc[j];
      end
      nb++;
      if (a > th) begin ee = (lo != mn); break; end
      if (lo == mn) break;
      hi = lo - 1; lo = (lo - mn <= wd) ? mn : lo - wd;
    end
    nch = (n + W - 1) / W;
    // run
    for (int j = 0; j < MAXC; j++) got[j] = 0;
    n_cl = NCL_W'(n); row_base = SRA_W'(rb); ratio = 16'(rat);
    start = 1; @(posedge clk); #1 start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); #1 cyc++; end
    check(wsum == 48'(sum), $sformatf("wsum %0d exp %0d", wsum, sum));
    check(th_wics == 48'(th), $sformatf("th %0d exp %0d", th_wics, th));
    check(s_min == 16'(mn) && s_max == 16'(mx), "min/max");
    check(acc == 48'(a), $sformatf("acc %0d exp %0d", acc, a));
    check(n_buckets == 8'(nb), $sformatf("buckets %0d exp %0d", n_buckets, nb));
    check(early_exit == ee, "early exit flag");
    begin
      bit same = 1;
      for (int j = 0; j < MAXC; j++) if (got[j] != exp_sel[j]) same = 0;
      check(same, "selected cluster set");
    end
    check(cyc == nch + 3 + nb * (nch + 2), $sformatf("cycles %0d exp %0d", cyc, nch + 3 + nb * (nch + 2)));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // worked example of the WiCSum figure
    begin
      int s8 [8] = '{9, 8, 7, 2, 1, 1, 1, 1};
      int t8 [8] = '{4, 3, 3, 2, 3, 2, 2, 3};
      for (int j = 0; j < 8; j++) begin sc[j] = s8[j]; tc[j] = t8[j]; end
      run_row(8, 0, 52429);
      check(wsum == 95 && th_wics == 76 && acc == 81, "figure example 95/76/81");
      check(got[0] && got[1] && got[2] && !got[3], "figure example selects 9,8,7");
    end
    // random rows
    for (int it = 0; it < 12; it++) begin
      int n = (it == 0) ? MAXC : 1 + ($urandom % 300);
      for (int j = 0; j < n; j++) begin
        sc[j] = (it % 3 == 0) ? $urandom % 65536 : $urandom % 200;
        tc[j] = 1 + $urandom % 64;
      end
      run_row(n, (it % 2) ? 128 : 0, (it == 5) ? 65535 : 1 + $urandom % 65535);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
