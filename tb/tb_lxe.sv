// tb_lxe: self-checking testbench of the LLM execution engine at full size
// (64 x 64 DPE, 64-lane VPE).
// Dot products of 1 to 3 beats with operands in {-1, 0, +1} are exact in
// BF16, so every post operation has an exact expected value: hash-bit
// (dot > 0), fixed-point score (dot * 2^8, negative -> 0), dot + b and
// dot * b. The result must appear exactly three cycles after the last beat.
// Direct VPE operations are checked in the idle gaps, and vpe_in_ready must
// drop in the cycle a DPE result takes the VPE.
module tb_lxe;
  import vrex_fp_pkg::*;
  import vrex_pkg::*;
  localparam int H = 64, W = 64, VW = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    dpe_in_valid = 0, dpe_in_last = 0;
  vpe_op_e post_op = VPE_ADD;
  bf16_t   dpe_vec_a [W];
  bf16_t   dpe_mat_b [H][W];
  logic    vpe_in_valid = 0;
  vpe_op_e vpe_op = VPE_ADD;
  bf16_t   vpe_a [VW];
  bf16_t   vpe_b [VW];
  logic    vpe_in_ready;
  logic    out_valid;
  vpe_op_e out_op;
  bf16_t   out_vec [VW];
  logic [VW-1:0] out_bits;
  logic [15:0]   out_fix [VW];

  lxe #(.N_DPE_H(H), .N_DPE_W(W), .N_VPE_W(VW)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_post [4] = '{0, 0, 0, 0};
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // small integers as BF16
  function automatic bf16_t i2b(input int v);
    int m, e;
    if (v == 0) return 16'h0000;
    m = (v < 0) ? -v : v;
    e = 0;
    while ((m >> e) > 1) e++;
    return {1'(v < 0), 8'(127 + e), 7'((m << 7 >> e) & 8'h7f)};
  endfunction
  function automatic int b2i(input bf16_t b);
    int m, e;
    if (b[14:7] == 0) return 0;
    e = int'(b[14:7]) - 127;
    m = {1'b1, b[6:0]};
    m = (e >= 7) ? (m << (e - 7)) : (m >> (7 - e));
    return b[15] ? -m : m;
  endfunction

  initial begin
    for (int w = 0; w < W; w++) dpe_vec_a[w] = 16'h0;
    for (int h = 0; h < H; h++) for (int w = 0; w < W; w++) dpe_mat_b[h][w] = 16'h0;
    for (int w = 0; w < VW; w++) begin vpe_a[w] = 16'h0; vpe_b[w] = 16'h0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int it = 0; it < 16; it++) begin
      automatic int nb = 1 + it % 3;
      automatic int dot [H];
      automatic int bv [VW];
      automatic int t_last;
      automatic vpe_op_e po = vpe_op_e'(it % 4);
      for (int h = 0; h < H; h++) dot[h] = 0;
      for (int w = 0; w < VW; w++) begin bv[w] = int'($urandom % 3) - 1; vpe_b[w] = i2b(bv[w]); end
      for (int k = 0; k < nb; k++) begin
        @(negedge clk);
        dpe_in_valid = 1; dpe_in_last = (k == nb - 1);
        post_op = (k == 0) ? po : vpe_op_e'((it + 1) % 4);  // only the first beat counts
        for (int w = 0; w < W; w++) begin
          automatic int a = int'($urandom % 3) - 1;
          dpe_vec_a[w] = i2b(a);
          for (int h = 0; h < H; h++) begin
            automatic int b = int'($urandom % 3) - 1;
            dpe_mat_b[h][w] = i2b(b);
            dot[h] += a * b;
          end
        end
        t_last = cyc;
      end
      @(negedge clk);
      dpe_in_valid = 0; dpe_in_last = 0;
      // wait for the result
      while (!out_valid && cyc < t_last + 10) begin
        check(!out_valid, "no early result");
        if (dut.dpe_out_valid) check(!vpe_in_ready, "vpe_in_ready low while DPE result enters the VPE");
        @(negedge clk);
      end
      check(out_valid, $sformatf("result %0d produced", it));
      check(cyc - t_last == 3, $sformatf("latency %0d cycles after last beat (exp 3)", cyc - t_last));
      check(out_op == po, $sformatf("post op %0d got %0d", po, out_op));
      n_post[int'(po)]++;
      for (int h = 0; h < H; h++) begin
        unique case (po)
          VPE_ADD:  check(b2i(out_vec[h]) == dot[h] + bv[h], $sformatf("add row %0d got %0d exp %0d", h, b2i(out_vec[h]), dot[h] + bv[h]));
          VPE_MUL:  check(b2i(out_vec[h]) == dot[h] * bv[h], $sformatf("mul row %0d", h));
          VPE_SIGN: check(out_bits[h] == (dot[h] > 0), $sformatf("hash-bit row %0d dot %0d", h, dot[h]));
          VPE_QUANT: check(out_fix[h] == 16'((dot[h] > 0) ? dot[h] * 256 : 0), $sformatf("score row %0d got %0d dot %0d", h, out_fix[h], dot[h]));
        endcase
      end
      // a direct VPE operation in the gap
      @(negedge clk);
      check(vpe_in_ready, "vpe_in_ready when idle");
      vpe_in_valid = 1; vpe_op = VPE_MUL;
      for (int w = 0; w < VW; w++) begin vpe_a[w] = i2b(it - 8); end
      @(negedge clk);
      vpe_in_valid = 0;
      check(out_valid && out_op == VPE_MUL, "direct VPE result after one cycle");
      for (int w = 0; w < VW; w++) check(b2i(out_vec[w]) == (it - 8) * bv[w], $sformatf("direct mul lane %0d", w));
    end
    for (int i = 0; i < 4; i++) check(n_post[i] > 0, $sformatf("post op %0d exercised", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
