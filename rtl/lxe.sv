// lxe: LLM execution engine, the dot product engine followed by the vector
// processing engine.
//
// In the V-Rex flow the LXE runs the LLM layers and two steps of the KV
// retrieval algorithm: (1) key hash-bit generation, Key x hyperplanes on the
// DPE followed by binarisation on the VPE, and (3) Query x Key_cluster^T on the
// DPE, whose scores go to the WiCSum threshold unit. When a DPE result is
// complete (dpe_out_valid) it is passed, rounded to BF16, as operand a to the
// VPE together with the operation post_op chosen with the DPE's first beat;
// otherwise the VPE takes operands from the vpe_* ports.
// A DPE result therefore leaves the VPE three cycles after its last beat.
//
// The DPE-to-VPE chaining and the operand ports stand in for the LXE's own
// controller and on-chip memory, which the paper does not describe.
module lxe
  import vrex_fp_pkg::*;
  import vrex_pkg::*;
#(
  parameter int unsigned N_DPE_H = 64,
  parameter int unsigned N_DPE_W = 64,
  parameter int unsigned N_VPE_W = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // DPE operand stream
  input  logic        dpe_in_valid,
  input  logic        dpe_in_last,
  input  vpe_op_e     post_op,
  input  bf16_t       dpe_vec_a [N_DPE_W],
  input  bf16_t       dpe_mat_b [N_DPE_H][N_DPE_W],
  // direct VPE operands (used when no DPE result is ready)
  input  logic        vpe_in_valid,
  input  vpe_op_e     vpe_op,
  input  bf16_t       vpe_a [N_VPE_W],
  input  bf16_t       vpe_b [N_VPE_W],
  output logic        vpe_in_ready,
  // results
  output logic        out_valid,
  output vpe_op_e     out_op,
  output bf16_t       out_vec  [N_VPE_W],
  output logic [N_VPE_W-1:0] out_bits,
  output logic [15:0] out_fix  [N_VPE_W]
);

  logic    dpe_out_valid;
  fp32_t   dpe_out_fp32 [N_DPE_H];
  bf16_t   dpe_out_bf16 [N_DPE_H];
  vpe_op_e post_op_q, post_op_hold;
  logic    dpe_first;

  dpe #(.N_DPE_H(N_DPE_H), .N_DPE_W(N_DPE_W)) u_dpe (
    .clk, .rst_n,
    .in_valid (dpe_in_valid),
    .in_last  (dpe_in_last),
    .vec_a    (dpe_vec_a),
    .mat_b    (dpe_mat_b),
    .out_valid(dpe_out_valid),
    .out_fp32 (dpe_out_fp32),
    .out_bf16 (dpe_out_bf16)
  );

  // the post operation travels with its dot product through the DPE
  logic post_s1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dpe_first    <= 1'b1;
      post_op_hold <= VPE_ADD;
      post_op_q    <= VPE_ADD;
      post_s1      <= 1'b0;
    end else begin
      if (dpe_in_valid) begin
        dpe_first <= dpe_in_last;
        if (dpe_first) post_op_hold <= post_op;
      end
      post_s1 <= dpe_in_valid & dpe_in_last;
      if (post_s1) post_op_q <= post_op_hold;
    end
  end

  logic    v_in_valid;
  vpe_op_e v_op;
  bf16_t   v_a [1][N_VPE_W];
  bf16_t   v_b [1][N_VPE_W];
  bf16_t   v_vec [1][N_VPE_W];
  logic [N_VPE_W-1:0] v_bits [1];
  logic [15:0] v_fix [1][N_VPE_W];

  assign vpe_in_ready = !dpe_out_valid;

  always_comb begin
    v_in_valid = dpe_out_valid | vpe_in_valid;
    v_op       = dpe_out_valid ? post_op_q : vpe_op;
    for (int w = 0; w < int'(N_VPE_W); w++) begin
      v_a[0][w] = dpe_out_valid ? ((w < int'(N_DPE_H)) ? dpe_out_bf16[w] : 16'h0) : vpe_a[w];
      v_b[0][w] = vpe_b[w];
    end
  end

  vpe #(.N_VPE_H(1), .N_VPE_W(N_VPE_W)) u_vpe (
    .clk, .rst_n,
    .in_valid (v_in_valid),
    .op       (v_op),
    .a        (v_a),
    .b        (v_b),
    .out_valid(out_valid),
    .out_op   (out_op),
    .out_vec  (v_vec),
    .out_bits (v_bits),
    .out_fix  (v_fix)
  );

  assign out_vec  = v_vec[0];
  assign out_bits = v_bits[0];
  assign out_fix  = v_fix[0];

endmodule
