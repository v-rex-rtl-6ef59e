// tb_vpe: self-checking testbench of the vector processing engine (64 lanes).
// Random BF16 operands go through every operation; results are compared one
// cycle later with double precision references: add/multiply within half a
// BF16 step, hash-bit = (a > 0), fixed-point score = floor(a * 2^8) clamped
// to [0, 65535].
module tb_vpe;
  import vrex_fp_pkg::*;
  import vrex_pkg::*;
  localparam int H = 1, W = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, out_valid;
  vpe_op_e op = VPE_ADD, out_op;
  bf16_t a [H][W];
  bf16_t b [H][W];
  bf16_t out_vec [H][W];
  logic [W-1:0] out_bits [H];
  logic [15:0] out_fix [H][W];

  vpe #(.N_VPE_H(H), .N_VPE_W(W)) dut (.*);

  int checks = 0, failures = 0;
  int n_ops [4] = '{0, 0, 0, 0};
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
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
  function automatic bf16_t rnd_bf16(input int emin, input int espan);
    return {1'($urandom), 8'(emin + $urandom % espan), 7'($urandom)};
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      vpe_op_e o;
      bf16_t sa [W], sb [W];
      o = vpe_op_e'(it % 4);
      @(negedge clk);
      in_valid = 1; op = o;
      for (int w = 0; w < W; w++) begin
        a[0][w] = (w == 0) ? 16'h0000 : (w == 1) ? 16'h8000 : rnd_bf16(115, 25);
        b[0][w] = rnd_bf16(115, 25);
        sa[w] = a[0][w]; sb[w] = b[0][w];
      end
      @(negedge clk);
      in_valid = 0;
      check(out_valid && out_op == o, "valid and op one cycle later");
      n_ops[int'(o)]++;
      for (int w = 0; w < W; w++) begin
        automatic real ra, rb, r;
        ra = to_r(sa[w]); rb = to_r(sb[w]);
        unique case (o)
          VPE_ADD: begin r = ra + rb; check(absr(to_r(out_vec[0][w]) - r) <= absr(r) / 256.0 + 1e-30, $sformatf("add lane %0d", w)); end
          VPE_MUL: begin r = ra * rb; check(absr(to_r(out_vec[0][w]) - r) <= absr(r) / 256.0 + 1e-30, $sformatf("mul lane %0d", w)); end
          VPE_SIGN: begin automatic bit pos = (to_r(sa[w]) > 0.0); check(out_bits[0][w] == pos, $sformatf("sign lane %0d got %0d exp %0d a=%h", w, out_bits[0][w], pos, sa[w])); end
          VPE_QUANT: begin
            real q;
            int e;
            q = ra * 256.0;
            e = (q <= 0.0) ? 0 : (q >= 65535.0) ? 65535 : int'($floor(q));
            check(out_fix[0][w] == 16'(e), $sformatf("quant lane %0d: %0d exp %0d (a=%f)", w, out_fix[0][w], e, ra));
          end
        endcase
      end
    end
    @(negedge clk);
    check(!out_valid, "valid drops");
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
