// Shared types and constants of the Slice-and-Forge GCN accelerator.
//
// All memory traffic (DRAM, global cache) moves whole 64-byte lines. A
// feature slice is exactly one line: 16 words of 32-bit fixed point, which
// is also the width of the 16-way SIMD core. Addresses on the memory
// interfaces are line addresses (byte address / 64). Every request receives
// exactly one response, writes included, so a requester can count
// completions. Fixed point numbers are signed Q16.16 (the paper says only
// "32bit fixed point"; the split of integer and fraction bits is this
// design's choice).
package snf_pkg;
  localparam int unsigned WORD_W     = 32;
  localparam int unsigned LANES      = 16;      // words per 64 B line / SIMD ways
  localparam int unsigned LINE_W     = WORD_W * LANES;
  localparam int unsigned ADDR_W     = 40;      // byte address width
  localparam int unsigned LADDR_W    = ADDR_W - 6;
  localparam int unsigned FRAC_W     = 16;      // Q16.16
  localparam int unsigned NUNIT      = 64;      // unit-tile columns of the adjacency matrix
  localparam int unsigned TW_W       = 8;       // width of one tile_width_arr entry (holds 1..64)
  localparam int unsigned VID_W      = 32;      // vertex / edge index width

  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [VID_W-1:0]   vid_t;
  typedef logic [TW_W-1:0]    tw_t;

  typedef struct packed {
    laddr_t addr;
    logic   we;
    line_t  wdata;
  } mem_req_t;

  typedef struct packed {
    logic   hit;     // global cache only: the request hit
    line_t  rdata;
  } mem_rsp_t;

  typedef enum logic { COARSE = 1'b0, FINE = 1'b1 } phase_e;
  typedef enum logic { HALVING = 1'b0, MERGING = 1'b1 } dir_e;

  // Work item flowing from the vertex prefetch to the SIMD core.
  typedef struct packed {
    vid_t        u;          // destination vertex (row of A)
    vid_t        v;          // source vertex (column of A), valid when is_edge
    word_t       w;          // edge weight A[u][v], Q16.16
    logic        is_edge;    // 1: edge, 0: end of the row's edges in this strip
    logic        strip_first;
    logic        strip_last;
    logic        round_last; // last row of the last strip of the round
  } agg_tok_t;

  // Q16.16 multiply, truncating.
  function automatic word_t fxmul(word_t a, word_t b);
    logic signed [2*WORD_W-1:0] p;
    p = $signed(a) * $signed(b);
    return p[FRAC_W +: WORD_W];
  endfunction

  function automatic word_t line_word(line_t l, int unsigned i);
    return l[i*WORD_W +: WORD_W];
  endfunction
endpackage
