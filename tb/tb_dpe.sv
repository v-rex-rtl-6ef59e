// tb_dpe: self-checking testbench of the dot product engine at its full size
// (64 MAC trees x 64 inputs). Random BF16 vectors are streamed as dot products
// of 1 to 3 beats, back to back; each result is compared with a double
// precision reference (FP32 output within 1e-5 of the sum of |products|, BF16
// output within one BF16 step of it), and out_valid must rise exactly two
// cycles after the closing beat.
module tb_dpe;
  import vrex_fp_pkg::*;
  localparam int H = 64, W = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_last = 0, out_valid;
  bf16_t vec_a [W];
  bf16_t mat_b [H][W];
  fp32_t out_fp32 [H];
  bf16_t out_bf16 [H];

  dpe #(.N_DPE_H(H), .N_DPE_W(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bf16_t rnd_bf16();
    return {1'($urandom), 8'(120 + $urandom % 14), 7'($urandom)};
  endfunction
  // IEEE single value of a 32-bit pattern (zero/subnormal read as 0)
  function automatic real f32_r(input logic [31:0] v);
    real m;
    int  e;
    if (v[30:23] == 8'h00) return 0.0;
    m = 1.0 + real'(v[22:0]) / 8388608.0;
    e = int'(v[30:23]) - 127;
    for (int i = 0; i < e; i++) m = m * 2.0;
    for (int i = 0; i < -e; i++) m = m / 2.0;
    return v[31] ? -m : m;
  endfunction
  function automatic real to_r(input bf16_t x);
    return f32_r({x, 16'h0});
  endfunction
  function automatic real absr(input real x);
    return (x < 0) ? -x : x;
  endfunction

  // reference ring (16 entries) of results still in flight
  real ref_sum [16][H];
  real ref_abs [16][H];
  int  last_cycle [16];
  int  q_head = 0, q_tail = 0;
  int  cycle = 0;
  real pend_sum [H], pend_abs [H];

  // one process checks results and records closing beats, so the queue is
  // always updated in the same order within a cycle
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && out_valid) begin
      if (q_head == q_tail) check(0, "unexpected out_valid");
      else begin
        real rs [H], ra [H];
        int lc;
        rs = ref_sum[q_head % 16];
        ra = ref_abs[q_head % 16];
        lc = last_cycle[q_head % 16];
        q_head++;
        check(cycle == lc + 2, $sformatf("latency %0d at %0d", cycle - lc, cycle));
        for (int h = 0; h < H; h++) begin
          real f, b;
          f = f32_r(out_fp32[h]);
          b = to_r(out_bf16[h]);
          check(absr(f - rs[h]) <= 1e-5 * ra[h] + 1e-30, $sformatf("fp32 tree %0d: %f exp %f", h, f, rs[h]));
          check(absr(b - rs[h]) <= absr(rs[h]) / 128.0 + 1e-5 * ra[h] + 1e-30, $sformatf("bf16 tree %0d", h));
        end
      end
    end
    if (rst_n && in_valid && in_last) begin
      ref_sum[q_tail % 16] = pend_sum; ref_abs[q_tail % 16] = pend_abs;
      last_cycle[q_tail % 16] = cycle; q_tail++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 12; n++) begin
      automatic int beats = 1 + $urandom % 3;
      automatic real rs [H], ra [H];
      for (int h = 0; h < H; h++) begin rs[h] = 0; ra[h] = 0; end
      for (int bt = 0; bt < beats; bt++) begin
        @(negedge clk);
        in_valid = 1; in_last = (bt == beats - 1);
        for (int w = 0; w < W; w++) vec_a[w] = rnd_bf16();
        for (int h = 0; h < H; h++) for (int w = 0; w < W; w++) begin
          real p;
          mat_b[h][w] = (n == 0 && w == 5) ? 16'h0000 : rnd_bf16();
          p = to_r(vec_a[w]) * to_r(mat_b[h][w]);
          rs[h] += p; ra[h] += absr(p);
        end
        pend_sum = rs; pend_abs = ra;
      end
      if (n % 4 == 3) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    check(q_head == q_tail && q_tail == 12, "all results seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
