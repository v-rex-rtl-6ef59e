// vpe: vector processing engine of the LLM execution engine (LXE).
//
// N_VPE_H vector units, each with N_VPE_W BF16 lanes, apply one element-wise
// operation per cycle to operand vectors a and b:
//   VPE_ADD / VPE_MUL  BF16 add or multiply (running sums and scaling, e.g.
//                      the mean of a cluster's keys = sum * (1/count)),
//   VPE_SIGN           hash-bit generation: bit = 0 where a <= 0, 1 where
//                      a > 0, applied to Key x hyperplane products,
//   VPE_QUANT          converts a BF16 score to the WTU's unsigned fixed-point
//                      score (SCORE_FRAC fraction bits, negatives to 0,
//                      saturating).
// Results are registered: out_valid follows in_valid by one cycle.
//
// The lane counts and the binarisation rule are the paper's. The operation
// set, its encoding and the score conversion are this design's choices; the
// paper says only that the VPE performs vector operations in BF16.
module vpe
  import vrex_fp_pkg::*;
  import vrex_pkg::*;
#(
  parameter int unsigned N_VPE_H = 1,
  parameter int unsigned N_VPE_W = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  vpe_op_e     op,
  input  bf16_t       a        [N_VPE_H][N_VPE_W],
  input  bf16_t       b        [N_VPE_H][N_VPE_W],
  output logic        out_valid,
  output vpe_op_e     out_op,
  output bf16_t       out_vec  [N_VPE_H][N_VPE_W],
  output logic [N_VPE_W-1:0] out_bits [N_VPE_H],
  output logic [15:0] out_fix  [N_VPE_H][N_VPE_W]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_op    <= VPE_ADD;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_op <= op;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int h = 0; h < int'(N_VPE_H); h++) begin
        for (int w = 0; w < int'(N_VPE_W); w++) begin
          unique case (op)
            VPE_ADD:   out_vec[h][w] <= bf16_add(a[h][w], b[h][w]);
            VPE_MUL:   out_vec[h][w] <= bf16_mul(a[h][w], b[h][w]);
            default:   out_vec[h][w] <= a[h][w];
          endcase
          // sign bit clear and magnitude non-zero means a > 0 (BF16 zero and
          // flushed subnormals count as 0)
          out_bits[h][w] <= !a[h][w][15] && (a[h][w][14:7] != 8'h00);
          out_fix[h][w]  <= bf16_to_ufix16(a[h][w], SCORE_FRAC);
        end
      end
    end
  end

endmodule
