// wtu_aggregator: merges the selected-cluster bitmasks of all rows of a head
// and turns the merged mask into a stream of selected cluster indices.
//
// While collecting, every mask chunk from any WTU core is ORed into a
// MAX_CL-bit vector (a cluster is fetched if any query row selected it).
// clear empties the vector. After emit is pulsed, the lowest set bit is sent
// on idx_* each cycle idx_ready is high and then cleared; idx_last marks the
// final index and emit_done pulses when the vector is empty (also when it was
// empty from the start). Chunks arriving while emitting are ignored.
//
// The paper names the aggregator and its inputs (bitmasks) and outputs
// (selected indices); the OR merge and the lowest-index-first order are this
// design's choices.
module wtu_aggregator
  import vrex_pkg::*;
#(
  parameter int unsigned N_WTU_H = 1,
  parameter int unsigned N_WTU_W = 16,
  parameter int unsigned MAX_CL  = MAX_CLUSTERS,
  localparam int unsigned CHUNKS = (MAX_CL + N_WTU_W - 1) / N_WTU_W,
  localparam int unsigned CK_W   = (CHUNKS > 1) ? $clog2(CHUNKS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               mask_valid [N_WTU_H],
  input  logic [CK_W-1:0]    mask_chunk [N_WTU_H],
  input  logic [N_WTU_W-1:0] mask_bits  [N_WTU_H],
  input  logic               emit,
  output logic               idx_valid,
  input  logic               idx_ready,
  output logic [CL_W-1:0]    idx,
  output logic               idx_last,
  output logic               emit_done,
  output logic [CL_W:0]      n_selected
);

  localparam int unsigned VW = CHUNKS * N_WTU_W;

  logic [VW-1:0] vec;
  logic          emitting;

  // lowest set bit and whether another one follows
  logic [CL_W-1:0] low;
  logic            any, more;
  always_comb begin
    low  = '0;
    any  = 1'b0;
    more = 1'b0;
    for (int i = VW - 1; i >= 0; i--) begin
      if (vec[i]) begin
        more = any;
        any  = 1'b1;
        low  = CL_W'(i);
      end
    end
  end

  // all cores' chunks of this cycle merged (two cores may hit one chunk)
  logic [VW-1:0] vec_merged;
  always_comb begin
    vec_merged = vec;
    for (int h = 0; h < int'(N_WTU_H); h++)
      if (mask_valid[h])
        vec_merged[mask_chunk[h]*N_WTU_W +: N_WTU_W] = vec_merged[mask_chunk[h]*N_WTU_W +: N_WTU_W] | mask_bits[h];
  end

  assign idx_valid = emitting && any;
  assign idx       = low;
  assign idx_last  = emitting && any && !more;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec        <= '0;
      emitting   <= 1'b0;
      emit_done  <= 1'b0;
      n_selected <= '0;
    end else begin
      emit_done <= 1'b0;
      if (clear) begin
        vec        <= '0;
        emitting   <= 1'b0;
        n_selected <= '0;
      end else if (emitting) begin
        if (!any) begin
          emitting  <= 1'b0;
          emit_done <= 1'b1;
        end else if (idx_ready) begin
          vec[low]   <= 1'b0;
          n_selected <= n_selected + 1'b1;
        end
      end else begin
        if (emit) emitting <= 1'b1;
        vec <= vec_merged;
      end
    end
  end

endmodule
