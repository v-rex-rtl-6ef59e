// vrex_pkg: configuration constants and shared record types of one V-Rex core.
//
// The default sizes are those of the single core evaluated in the paper:
// N_DPE-h = N_DPE-w = 64, N_VPE-h = 1, N_VPE-w = 64, N_HCU-h = 1, N_HCU-w = 16,
// N_WTU-h = 1, N_WTU-w = 16, N_hp = 32 hash bits and a clustering threshold of
// 7. Memory depths are derived from the printed capacities of the DRE
// memories (128 B current hash-bit MEM, 4 KB key-cache hash-bit MEM, 8 KB score
// MEM, 8 KB token-count MEM). Field widths of the records below (token index,
// count, addresses) are this design's own choice.
package vrex_pkg;

  localparam int N_HP          = 32;    // hash bits per key token
  localparam int TH_HD_DEF     = 7;     // Hamming-distance clustering threshold
  localparam int MAX_CLUSTERS  = 1024;  // 4 KB / 32 bit
  localparam int CUR_TOKENS    = 32;    // 128 B / 32 bit
  localparam int CL_W          = 10;    // cluster index width
  localparam int TOK_W         = 20;    // global token index width
  localparam int CNT_W         = 16;    // token count width (token-count MEM word)
  localparam int SCORE_W       = 16;    // score MEM word (8 KB / 4096)
  localparam int ADDR_W        = 32;    // KV-entry address width (in KV entries)
  localparam int LEN_W         = 16;

  // One record written by the hash cluster table updater per clustered token.
  typedef struct packed {
    logic              new_cluster;  // token opened a new cluster
    logic [CL_W-1:0]   cluster;      // cluster index
    logic [TOK_W-1:0]  token;        // global token index
    logic [CNT_W-1:0]  count;        // cluster token count after this token
    logic [N_HP-1:0]   hash;         // cluster hash-bit (representative)
  } hc_update_t;

  typedef enum logic [1:0] {
    DMA_WRITE_RECENT = 2'd0,  // new KV entry -> recent KV region (V-Rex memory)
    DMA_OFFLOAD      = 2'd1,  // recent KV region -> full KV cache (CPU memory / storage)
    DMA_PREFETCH     = 2'd2   // full KV cache -> retrieved KV region (V-Rex memory)
  } dma_op_e;

  // Transfer command issued by the KV cache management unit. For
  // DMA_WRITE_RECENT, src is the global token index of the new entry.
  typedef struct packed {
    dma_op_e           op;
    logic [ADDR_W-1:0] src;
    logic [ADDR_W-1:0] dst;
    logic [LEN_W-1:0]  len;  // number of KV entries, contiguous
  } dma_cmd_t;

  // Vector processing engine operations.
  typedef enum logic [1:0] {
    VPE_ADD   = 2'd0,  // out = a + b           (BF16)
    VPE_MUL   = 2'd1,  // out = a * b           (BF16)
    VPE_SIGN  = 2'd2,  // out_bits = (a > 0)    key hash-bit binarisation
    VPE_QUANT = 2'd3   // out_fix = a as unsigned fixed point, for the WTU
  } vpe_op_e;

  localparam int SCORE_FRAC = 8;  // fraction bits of the WTU score format

endpackage
