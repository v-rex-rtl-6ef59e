// kvmu: KV cache management unit.
//
// Two jobs: hierarchical KV storage and cluster-wise memory mapping.
//   * Recent KV entries live in a ring of RECENT_CAP entries in V-Rex memory
//     (DRAM). When the ring is full, the oldest entry is offloaded to the full
//     KV cache in CPU memory / storage before a new one is written.
//   * In the full KV cache every cluster owns a contiguous region of
//     CLUSTER_SLOTS entries: the entry that was the s-th token to join cluster
//     c lives at c * CLUSTER_SLOTS + s. A cluster selected for retrieval is
//     then one contiguous burst of all its offloaded entries.
//   * Each frame's entries are reordered by cluster before they are written to
//     the recent ring, so entries of one cluster also sit together there.
// The unit moves no KV data itself: it issues dma_cmd_t transfer commands
// (addresses and lengths in KV entries) to the memory system outside.
//
// Interfaces (all valid/ready):
//   upd_*   clustering records of the current frame from the hash cluster
//           unit (cluster, token, count); frame_end (pulse) closes the frame,
//   sel_*   selected cluster indices from the WiCSum threshold unit,
//   cmd_*   transfer commands.
// Per frame entry: one WRITE_RECENT command, preceded by one OFFLOAD command
// when the ring is full; per selected cluster: one PREFETCH command of length
// "offloaded entries of that cluster", or none when all its entries are still
// in the recent ring. Each command takes one cycle plus cmd_ready stalls.
// The retrieved-KV region (RETR_CAP entries after the ring) is filled
// round-robin; a burst that would cross its end starts again at its base.
//
// From the paper: recent KV in V-Rex memory, offload of the oldest entries
// past a maximum capacity, prefetch of selected entries, per-frame reordering
// by cluster and contiguous storage per cluster. This design's choices: the
// fixed region per cluster, the ring, the capacities and the command format.
module kvmu
  import vrex_pkg::*;
#(
  parameter int unsigned MAX_FRAME_TOKENS = CUR_TOKENS,
  parameter int unsigned RECENT_CAP       = 4096,
  parameter int unsigned RETR_CAP         = 4096,
  parameter int unsigned CLUSTER_SLOTS    = 128,
  parameter int unsigned MAX_CL           = MAX_CLUSTERS,
  localparam int unsigned FB_W            = $clog2(MAX_FRAME_TOKENS + 1),
  localparam int unsigned RP_W            = $clog2(RECENT_CAP),
  localparam int unsigned SL_W            = $clog2(CLUSTER_SLOTS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // clustering records of the current frame
  input  logic            upd_valid,
  output logic            upd_ready,
  input  hc_update_t      upd,
  input  logic            frame_end,
  output logic            frame_done,
  // selected clusters
  input  logic            sel_valid,
  output logic            sel_ready,
  input  logic [CL_W-1:0] sel_idx,
  // transfer commands
  output logic            cmd_valid,
  input  logic            cmd_ready,
  output dma_cmd_t        cmd,
  // status
  output logic [RP_W:0]   recent_occ,
  output logic [31:0]     n_offload,
  output logic [31:0]     n_prefetch,
  output logic [31:0]     n_prefetch_skip
);

  localparam logic [ADDR_W-1:0] RECENT_BASE = '0;
  localparam logic [ADDR_W-1:0] RETR_BASE   = ADDR_W'(RECENT_CAP);

  typedef enum logic [2:0] {S_COLLECT, S_PICK, S_OFFLOAD, S_WRITE, S_PREF} state_e;
  state_e state;

  // frame buffer
  logic [CL_W-1:0]  fb_cl   [MAX_FRAME_TOKENS];
  logic [SL_W-1:0]  fb_slot [MAX_FRAME_TOKENS];
  logic [TOK_W-1:0] fb_tok  [MAX_FRAME_TOKENS];
  logic [MAX_FRAME_TOKENS-1:0] fb_used;
  logic [FB_W-1:0]  fb_n;
  logic             frame_pend;

  // recent ring metadata and per-cluster offload counts
  logic [CL_W-1:0]  rm_cl   [RECENT_CAP];
  logic [SL_W-1:0]  rm_slot [RECENT_CAP];
  logic [SL_W:0]    off_cnt [MAX_CL];
  logic [RP_W-1:0]  wr_ptr, rd_ptr;
  logic [ADDR_W-1:0] retr_ptr;

  // entry of the frame with the smallest cluster index (lowest position on ties)
  logic [FB_W-1:0] pick;
  always_comb begin
    logic [CL_W-1:0] best;
    logic            found;
    pick  = '0;
    best  = '1;
    found = 1'b0;
    for (int i = 0; i < int'(MAX_FRAME_TOKENS); i++) begin
      if (FB_W'(i) < fb_n && !fb_used[i] && (!found || fb_cl[i] < best)) begin
        found = 1'b1;
        best  = fb_cl[i];
        pick  = FB_W'(i);
      end
    end
  end

  logic [FB_W-1:0] pick_q;
  logic [CL_W-1:0] sel_q;

  logic [ADDR_W-1:0] retr_dst;
  assign retr_dst = (retr_ptr + ADDR_W'(off_cnt[sel_q]) > ADDR_W'(RETR_CAP)) ? '0 : retr_ptr;


  assign upd_ready = (state == S_COLLECT) && !frame_pend && (fb_n < FB_W'(MAX_FRAME_TOKENS));

  always_comb begin
    cmd_valid = 1'b0;
    cmd       = '0;
    unique case (state)
      S_OFFLOAD: begin
        cmd_valid = 1'b1;
        cmd.op    = DMA_OFFLOAD;
        cmd.src   = RECENT_BASE + ADDR_W'(rd_ptr);
        cmd.dst   = ADDR_W'(rm_cl[rd_ptr]) * ADDR_W'(CLUSTER_SLOTS) + ADDR_W'(rm_slot[rd_ptr]);
        cmd.len   = LEN_W'(1);
      end
      S_WRITE: begin
        cmd_valid = 1'b1;
        cmd.op    = DMA_WRITE_RECENT;
        cmd.src   = ADDR_W'(fb_tok[pick_q]);
        cmd.dst   = RECENT_BASE + ADDR_W'(wr_ptr);
        cmd.len   = LEN_W'(1);
      end
      S_PREF: begin
        cmd_valid = (off_cnt[sel_q] != '0);
        cmd.op    = DMA_PREFETCH;
        cmd.src   = ADDR_W'(sel_q) * ADDR_W'(CLUSTER_SLOTS);
        cmd.dst   = RETR_BASE + retr_dst;
        cmd.len   = LEN_W'(off_cnt[sel_q]);
      end
      default: ;
    endcase
  end

  assign sel_ready = (state == S_PREF) && (cmd_ready || off_cnt[sel_q] == '0);

  // metadata and count memories
  logic            off_we;
  logic [CL_W-1:0] off_wa;
  always_comb begin
    off_we = (state == S_OFFLOAD) && cmd_ready;
    off_wa = rm_cl[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (upd_valid && upd_ready) begin
      fb_cl[fb_n]   <= upd.cluster;
      fb_slot[fb_n] <= SL_W'(upd.count - 1'b1);
      fb_tok[fb_n]  <= upd.token;
    end
    if (state == S_WRITE && cmd_ready) begin
      rm_cl[wr_ptr]   <= fb_cl[pick_q];
      rm_slot[wr_ptr] <= fb_slot[pick_q];
    end
  end

  // offload counters need a reset: cleared by a sweep after reset
  logic [CL_W:0] clr_ptr;
  logic          clearing;
  always_ff @(posedge clk) begin
    if (clearing)    off_cnt[clr_ptr[CL_W-1:0]] <= '0;
    else if (off_we) off_cnt[off_wa] <= off_cnt[off_wa] + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_ptr  <= '0;
      clearing <= 1'b1;
    end else if (clearing) begin
      clr_ptr <= clr_ptr + 1'b1;
      if (clr_ptr == (CL_W+1)'(MAX_CL - 1)) clearing <= 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_COLLECT;
      fb_used         <= '0;
      fb_n            <= '0;
      frame_pend      <= 1'b0;
      frame_done      <= 1'b0;
      wr_ptr          <= '0;
      rd_ptr          <= '0;
      recent_occ      <= '0;
      retr_ptr        <= '0;
      pick_q          <= '0;
      sel_q           <= '0;
      n_offload       <= '0;
      n_prefetch      <= '0;
      n_prefetch_skip <= '0;
    end else begin
      frame_done <= 1'b0;
      if (frame_end) frame_pend <= 1'b1;
      unique case (state)
        S_COLLECT: begin
          if (upd_valid && upd_ready) fb_n <= fb_n + 1'b1;
          if (clearing) begin
            // wait for the offload counters to be cleared
          end else if (frame_pend && !(upd_valid && upd_ready)) begin
            if (fb_n == '0) begin
              frame_pend <= 1'b0;
              frame_done <= 1'b1;
            end else begin
              state <= S_PICK;
            end
          end else if (!frame_pend && !frame_end && !upd_valid && sel_valid) begin
            sel_q <= sel_idx;
            state <= S_PREF;
          end
        end
        S_PICK: begin
          pick_q <= pick;
          state  <= (recent_occ == (RP_W+1)'(RECENT_CAP)) ? S_OFFLOAD : S_WRITE;
        end
        S_OFFLOAD: begin
          if (cmd_ready) begin
            rd_ptr     <= rd_ptr + 1'b1;
            recent_occ <= recent_occ - 1'b1;
            n_offload  <= n_offload + 1'b1;
            state      <= S_WRITE;
          end
        end
        S_WRITE: begin
          if (cmd_ready) begin
            logic [MAX_FRAME_TOKENS-1:0] used;
            used = fb_used;
            used[pick_q] = 1'b1;
            wr_ptr     <= wr_ptr + 1'b1;
            recent_occ <= recent_occ + 1'b1;
            if (used == {MAX_FRAME_TOKENS{1'b1}} >> (MAX_FRAME_TOKENS - fb_n)) begin
              fb_used    <= '0;
              fb_n       <= '0;
              frame_pend <= 1'b0;
              frame_done <= 1'b1;
              state      <= S_COLLECT;
            end else begin
              fb_used <= used;
              state   <= S_PICK;
            end
          end
        end
        S_PREF: begin
          if (off_cnt[sel_q] == '0) begin
            n_prefetch_skip <= n_prefetch_skip + 1'b1;
            state           <= S_COLLECT;
          end else if (cmd_ready) begin
            retr_ptr   <= retr_dst + ADDR_W'(off_cnt[sel_q]);
            n_prefetch <= n_prefetch + 1'b1;
            state      <= S_COLLECT;
          end
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

  // a pending command must stay stable until accepted
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd));

endmodule
