// dpe: dot product engine of the LLM execution engine (LXE).
//
// N_DPE_H MAC trees work in parallel. Each tree multiplies the broadcast BF16
// input vector vec_a (N_DPE_W elements) element-wise with its own BF16 weight
// row mat_b[h], reduces the N_DPE_W products in an FP32 adder tree and adds
// the tree result into an FP32 accumulator. A dot product longer than N_DPE_W
// is streamed as several beats; the beat flagged in_last closes it.
//
// Timing: stage 1 registers the products, stage 2 registers the accumulator.
// out_valid pulses two cycles after the beat carrying in_last, with out_fp32
// holding the accumulated sums and out_bf16 the same values rounded to BF16.
// Beats may be issued every cycle.
//
// The tree count and width follow the paper's core (64 x 64, BF16). The FP32
// reduction and accumulation, the two-stage pipeline and the beat protocol are
// this design's own choices; the paper takes the engine from a prior
// accelerator and does not detail its insides.
module dpe
  import vrex_fp_pkg::*;
#(
  parameter int unsigned N_DPE_H = 64,
  parameter int unsigned N_DPE_W = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_last,
  input  bf16_t vec_a    [N_DPE_W],
  input  bf16_t mat_b    [N_DPE_H][N_DPE_W],
  output logic  out_valid,
  output fp32_t out_fp32 [N_DPE_H],
  output bf16_t out_bf16 [N_DPE_H]
);

  localparam int unsigned TREE_N = 2 ** $clog2(N_DPE_W);

  function automatic fp32_t tree_sum(input fp32_t v [N_DPE_W]);
    fp32_t t [TREE_N];
    for (int i = 0; i < int'(TREE_N); i++) t[i] = (i < int'(N_DPE_W)) ? v[i] : 32'h0;
    for (int s = int'(TREE_N) / 2; s >= 1; s = s / 2)
      for (int i = 0; i < s; i++) t[i] = fp32_add(t[2*i], t[2*i+1]);
    return t[0];
  endfunction

  // Stage 1: products
  fp32_t prod_q [N_DPE_H][N_DPE_W];
  logic  s1_valid, s1_last;

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int h = 0; h < int'(N_DPE_H); h++)
        for (int w = 0; w < int'(N_DPE_W); w++)
          prod_q[h][w] <= fp32_mul(bf16_to_fp32(vec_a[w]), bf16_to_fp32(mat_b[h][w]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_last  <= 1'b0;
    end else begin
      s1_valid <= in_valid;
      s1_last  <= in_valid & in_last;
    end
  end

  // Stage 2: adder trees and accumulators
  fp32_t acc_q [N_DPE_H];
  logic  acc_fresh;  // next beat starts a new dot product

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_fresh <= 1'b1;
      out_valid <= 1'b0;
      for (int h = 0; h < int'(N_DPE_H); h++) acc_q[h] <= 32'h0;
    end else begin
      out_valid <= s1_valid & s1_last;
      if (s1_valid) begin
        for (int h = 0; h < int'(N_DPE_H); h++)
          acc_q[h] <= acc_fresh ? tree_sum(prod_q[h]) : fp32_add(acc_q[h], tree_sum(prod_q[h]));
        acc_fresh <= s1_last;
      end
    end
  end

  always_comb begin
    for (int h = 0; h < int'(N_DPE_H); h++) begin
      out_fp32[h] = acc_q[h];
      out_bf16[h] = fp32_to_bf16(acc_q[h]);
    end
  end

endmodule
