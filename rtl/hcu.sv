// hcu: hash-bit cluster unit of the KV cache prediction unit (KVPU).
//
// Clusters the key tokens of the current frame against the clusters already
// known for this layer/head, using Hamming distances between N_HP-bit key
// hash-bits. It holds
//   * the current hash-bit MEM (CUR_TOKENS words, filled by the LXE),
//   * the key-cache hash-bit MEM (MAX_CLUSTERS cluster hash-bits, preloaded
//     from the hash cluster (HC) table, plus a token count per cluster),
//   * N_HCU_H XOR accumulators, each consuming N_HCU_W bit pairs per cycle,
//   * the threshold compare and the HC table updater.
//
// Operation: after start, each current token t is compared with every
// cluster (previous ones and those opened earlier in this frame). A distance
// takes N_HP/N_HCU_W cycles; N_HCU_H clusters are compared at once. The token
// joins the nearest cluster whose distance is below th_hd and whose count is
// below cluster_cap (first one on ties). Otherwise it opens a new cluster whose
// hash-bit is the token's own. If the table is full, the token joins the
// nearest cluster regardless (overflow is flagged). One hc_update_t record per
// token leaves on the upd_* valid/ready port; done pulses after the last.
//
// Cycles per token: ceil(n_clusters / N_HCU_H) * N_HP / N_HCU_W + 2, plus any
// upd_ready stall.
//
// Following the paper: the memories, XOR accumulators, "distance below the
// threshold" rule and the HC table contents. This design's own choices: the
// nearest-cluster rule, keeping the founding token's hash-bit as the cluster's
// hash-bit, the per-cluster capacity (it lets the KV cache management unit
// give each cluster a fixed contiguous region) and the port protocols.
module hcu
  import vrex_pkg::*;
#(
  parameter int unsigned N_HCU_H      = 1,
  parameter int unsigned N_HCU_W      = 16,
  parameter int unsigned N_HPB        = N_HP,
  parameter int unsigned CUR_TOK      = CUR_TOKENS,
  parameter int unsigned MAX_CL       = MAX_CLUSTERS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // current hash-bit MEM write port (from the LXE)
  input  logic                        cur_wr_en,
  input  logic [$clog2(CUR_TOK)-1:0]  cur_wr_addr,
  input  logic [N_HPB-1:0]            cur_wr_data,
  // key-cache hash-bit MEM preload port (from the HC table), idle only
  input  logic                        kc_wr_en,
  input  logic [CL_W-1:0]             kc_wr_addr,
  input  logic [N_HPB-1:0]            kc_wr_hash,
  input  logic [CNT_W-1:0]            kc_wr_count,
  // control
  input  logic                        start,
  input  logic [CL_W:0]               n_prev,      // clusters preloaded
  input  logic [$clog2(CUR_TOK):0]    n_cur,       // tokens in this frame, >= 1
  input  logic [TOK_W-1:0]            tok_base,    // global index of token 0
  input  logic [$clog2(N_HPB+1)-1:0]  th_hd,
  input  logic [CNT_W-1:0]            cluster_cap,
  output logic                        busy,
  output logic                        done,
  output logic [CL_W:0]               n_clusters,
  output logic                        overflow,
  // HC table updates
  output logic                        upd_valid,
  input  logic                        upd_ready,
  output hc_update_t                  upd
);

  localparam int unsigned PARTS = N_HPB / N_HCU_W;
  localparam int unsigned DW    = $clog2(N_HPB + 1);
  localparam int unsigned PW    = (PARTS > 1) ? $clog2(PARTS) : 1;

  typedef enum logic [2:0] {S_IDLE, S_CMP, S_DECIDE, S_EMIT, S_DONE} state_e;
  state_e state;

  logic [N_HPB-1:0] cur_mem [CUR_TOK];
  logic [N_HPB-1:0] kc_mem  [MAX_CL];
  logic [CNT_W-1:0] cnt_mem [MAX_CL];

  logic [$clog2(CUR_TOK):0] t;
  logic [CL_W:0]            c;       // first cluster of the group in flight
  logic [PW-1:0]            part;
  logic [DW-1:0]            acc [N_HCU_H];
  logic [DW-1:0]            best_d, any_d;
  logic [CL_W-1:0]          best_c, any_c;
  logic                     best_ok, any_ok;

  function automatic logic [DW-1:0] popcnt(input logic [N_HCU_W-1:0] v);
    logic [DW-1:0] n = '0;
    for (int i = 0; i < int'(N_HCU_W); i++) n = n + DW'(v[i]);
    return n;
  endfunction

  // XOR accumulators: distance of cluster c+i after this part
  logic [N_HPB-1:0] cur_word;
  logic [DW-1:0]    dist_now [N_HCU_H];
  logic             cl_live  [N_HCU_H];
  always_comb begin
    cur_word = cur_mem[t[$clog2(CUR_TOK)-1:0]];
    for (int i = 0; i < int'(N_HCU_H); i++) begin
      logic [CL_W:0] ci;
      ci = c + (CL_W+1)'(i);
      cl_live[i]  = ci < n_clusters;
      dist_now[i] = acc[i] + popcnt(cur_word[part*N_HCU_W +: N_HCU_W] ^
                                    kc_mem[ci[CL_W-1:0]][part*N_HCU_W +: N_HCU_W]);
    end
  end

  logic join_ok, open_ok;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      t          <= '0;
      c          <= '0;
      part       <= '0;
      best_d     <= '1;
      any_d      <= '1;
      best_c     <= '0;
      any_c      <= '0;
      best_ok    <= 1'b0;
      any_ok     <= 1'b0;
      n_clusters <= '0;
      overflow   <= 1'b0;
      done       <= 1'b0;
      upd_valid  <= 1'b0;
      upd        <= '0;
      for (int i = 0; i < int'(N_HCU_H); i++) acc[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            t          <= '0;
            c          <= '0;
            part       <= '0;
            best_ok    <= 1'b0;
            any_ok     <= 1'b0;
            best_d     <= '1;
            any_d      <= '1;
            n_clusters <= n_prev;
            overflow   <= 1'b0;
            state      <= (n_prev == 0) ? S_DECIDE : S_CMP;
          end
        end
        S_CMP: begin
          if (part == PW'(PARTS - 1)) begin
            for (int i = 0; i < int'(N_HCU_H); i++) acc[i] <= '0;
            begin
              logic [DW-1:0]   bd, ad;
              logic [CL_W-1:0] bc, ac;
              logic            bo, ao;
              bd = best_d; bc = best_c; bo = best_ok;
              ad = any_d;  ac = any_c;  ao = any_ok;
              for (int i = 0; i < int'(N_HCU_H); i++) begin
                if (cl_live[i]) begin
                  if (!ao || dist_now[i] < ad) begin
                    ao = 1'b1; ad = dist_now[i]; ac = CL_W'(c + (CL_W+1)'(i));
                  end
                  if (cnt_mem[CL_W'(c + (CL_W+1)'(i))] < cluster_cap &&
                      (!bo || dist_now[i] < bd)) begin
                    bo = 1'b1; bd = dist_now[i]; bc = CL_W'(c + (CL_W+1)'(i));
                  end
                end
              end
              best_d <= bd; best_c <= bc; best_ok <= bo;
              any_d  <= ad; any_c  <= ac; any_ok  <= ao;
            end
            part <= '0;
            c    <= c + (CL_W+1)'(N_HCU_H);
            if (c + (CL_W+1)'(N_HCU_H) >= n_clusters) state <= S_DECIDE;
          end else begin
            for (int i = 0; i < int'(N_HCU_H); i++) acc[i] <= dist_now[i];
            part <= part + 1'b1;
          end
        end
        S_DECIDE: begin
          if (join_ok) begin
            upd <= '{new_cluster: 1'b0, cluster: best_c, token: tok_base + TOK_W'(t),
                     count: cnt_mem[best_c] + 1'b1, hash: kc_mem[best_c]};
          end else if (open_ok) begin
            n_clusters <= n_clusters + 1'b1;
            upd <= '{new_cluster: 1'b1, cluster: n_clusters[CL_W-1:0],
                     token: tok_base + TOK_W'(t), count: CNT_W'(1), hash: cur_word};
          end else begin
            overflow <= 1'b1;
            upd <= '{new_cluster: 1'b0, cluster: any_c, token: tok_base + TOK_W'(t),
                     count: cnt_mem[any_c] + 1'b1, hash: kc_mem[any_c]};
          end
          upd_valid <= 1'b1;
          state     <= S_EMIT;
        end
        S_EMIT: begin
          if (upd_ready) begin
            upd_valid <= 1'b0;
            c         <= '0;
            part      <= '0;
            best_ok   <= 1'b0;
            any_ok    <= 1'b0;
            best_d    <= '1;
            any_d     <= '1;
            t         <= t + 1'b1;
            if (t + 1'b1 >= n_cur) state <= S_DONE;
            else                   state <= S_CMP;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // decision of S_DECIDE
  assign join_ok = best_ok && (best_d < DW'(th_hd));
  assign open_ok = n_clusters < (CL_W+1)'(MAX_CL);

  // memory write ports: preload while idle, HC table updater in S_DECIDE
  logic             kc_we, cnt_we;
  logic [CL_W-1:0]  kc_wa, cnt_wa;
  logic [N_HPB-1:0] kc_wd;
  logic [CNT_W-1:0] cnt_wd;
  always_comb begin
    kc_we  = 1'b0;            kc_wa  = kc_wr_addr;   kc_wd  = kc_wr_hash;
    cnt_we = 1'b0;            cnt_wa = kc_wr_addr;   cnt_wd = kc_wr_count;
    if (state == S_IDLE) begin
      kc_we  = kc_wr_en;
      cnt_we = kc_wr_en;
    end else if (state == S_DECIDE) begin
      cnt_we = 1'b1;
      if (join_ok) begin
        cnt_wa = best_c;  cnt_wd = cnt_mem[best_c] + 1'b1;
      end else if (open_ok) begin
        kc_we  = 1'b1;    kc_wa  = n_clusters[CL_W-1:0];  kc_wd = cur_word;
        cnt_wa = n_clusters[CL_W-1:0];  cnt_wd = CNT_W'(1);
      end else begin
        cnt_wa = any_c;   cnt_wd = cnt_mem[any_c] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (cur_wr_en && state == S_IDLE) cur_mem[cur_wr_addr] <= cur_wr_data;
    if (kc_we)  kc_mem[kc_wa]   <= kc_wd;
    if (cnt_we) cnt_mem[cnt_wa] <= cnt_wd;
  end

  // a pending update record must stay stable until accepted
  a_upd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    upd_valid && !upd_ready |=> upd_valid && $stable(upd));

  if (N_HPB % N_HCU_W != 0) begin : g_bad_width
    $error("N_HPB must be a multiple of N_HCU_W");
  end

endmodule
