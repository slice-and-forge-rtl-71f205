// Slice-and-Forge GCN accelerator, multi-engine configuration (top).
//
// One GCN layer, O = ReLU(A * (X * W)), runs in three phases:
//   1. combination: N_COMB combination engines (32x32 systolic arrays)
//      compute Y = X * W, each for its own rows, reading X from DRAM and W
//      through the global cache and writing Y into the global cache;
//   2. aggregation: N_AGG aggregation engines (16-way SIMD) compute
//      O = ReLU(A * Y) with feature slicing: B_F = f_out/16 rounds, one per
//      64-byte feature slice, each tiled into vertical strips of the
//      adjacency matrix chosen at run time by the engine's configuration
//      controller (Automatic Tile Morphing);
//   3. flush: the global cache writes its dirty lines back to DRAM, so O
//      (and Y) can be read from DRAM.
// All engines share one global cache (16 MB, 16 ways, LRU) through a
// round-robin arbiter; the cache, the property buffers and the topology
// prefetchers share the single DRAM port through a second one.
// Row ranges of the engines are set by the host (the paper splits the
// graph so that each aggregation engine gets the same number of edges).
// The DRAM (HBM2 in the paper) is outside this module: its port is a
// line-wide request/response interface; every request, writes included,
// gets one response, in order.
// start is accepted once the cache has finished its initialisation
// (ready high); done pulses when the flush has finished.
// Notes on tools: lint reports rst_n as used both asynchronously (the
// flip-flop resets) and synchronously; the synchronous uses are only the
// immediate assertions, which are disabled while reset is low, so this is
// intended. At the default size the global cache holds 16 MB of line data
// as a plain array; generic synthesis maps it to flip-flops and needs more
// memory than a workstation has, where a real implementation would use
// SRAM macros. Lint and elaboration run at the full size.
module snf_top
  import snf_pkg::*;
#(
  parameter int unsigned     N_COMB     = 8,           // Table 2: 8 combination engines
  parameter int unsigned     N_AGG      = 8,           // Table 2: 8 aggregation engines
  parameter int unsigned     SA_N       = 32,          // Table 2: 32x32 systolic array
  parameter int unsigned     K_MAX      = 1024,        // longest input feature width
  parameter longint unsigned CACHE_B    = 64'd16777216,// Table 2: 16 MB global cache
  parameter int unsigned     CACHE_WAYS = 16,          // Table 2: 16 ways
  parameter int unsigned     DEFAULT_BV = 2            // ATM starts from 2x2 tiles (Fig. 5)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        ready,
  output logic        done,
  // layer description
  input  logic [15:0] f_in,
  input  logic [15:0] f_out,
  input  vid_t        unit_rows,
  input  laddr_t      x_base,
  input  laddr_t      w_base,
  input  laddr_t      y_base,
  input  laddr_t      rp_base,
  input  laddr_t      edge_base,
  input  laddr_t      out_base,
  input  logic        relu_en,
  input  vid_t        comb_row_lo [N_COMB],
  input  vid_t        comb_row_hi [N_COMB],
  input  vid_t        agg_row_lo  [N_AGG],
  input  vid_t        agg_row_hi  [N_AGG],
  // DRAM port
  output logic        m_valid,
  output mem_req_t    m_req,
  input  logic        m_ready,
  input  logic        m_rsp_valid,
  input  mem_rsp_t    m_rsp,
  // observation
  output logic [1:0]  phase_now,         // 0 idle, 1 combination, 2 aggregation, 3 flush
  output phase_e      atm_phase    [N_AGG],
  output logic        atm_settled  [N_AGG],
  output logic [6:0]  atm_n_tiles  [N_AGG]
);
  localparam int unsigned NC = N_COMB + N_AGG;   // global cache requesters
  localparam int unsigned ND = 1 + NC;           // DRAM requesters

  // ---------------- layer sequencer ----------------
  typedef enum logic [2:0] {T_IDLE, T_COMB, T_AGG_GO, T_AGG, T_FLUSH} top_e;
  top_e state;
  logic comb_start, agg_start, flush_req, flush_done, init_done;
  logic [N_COMB-1:0] comb_done, comb_fin;
  logic [N_AGG-1:0]  agg_done, agg_fin, agg_empty;
  wire  [7:0]        n_slices = 8'(f_out >> 4);

  always_comb for (int a = 0; a < N_AGG; a++) agg_empty[a] = (agg_row_lo[a] == agg_row_hi[a]);

  assign ready      = init_done && (state == T_IDLE);
  assign comb_start = (state == T_IDLE) && start && init_done;
  assign agg_start  = (state == T_AGG_GO);
  assign flush_req  = (state == T_FLUSH);
  assign phase_now  = (state == T_IDLE) ? 2'd0 : (state == T_COMB) ? 2'd1 :
                      (state == T_FLUSH) ? 2'd3 : 2'd2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; comb_fin <= '0; agg_fin <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        T_IDLE: if (comb_start) begin
          comb_fin <= '0;
          state <= T_COMB;
        end
        T_COMB: begin
          comb_fin <= comb_fin | comb_done;
          if ((comb_fin | comb_done) == '1) state <= T_AGG_GO;
        end
        T_AGG_GO: begin
          agg_fin <= agg_empty;
          state <= T_AGG;
        end
        T_AGG: begin
          agg_fin <= agg_fin | agg_done;
          if ((agg_fin | agg_done) == '1) state <= T_FLUSH;
        end
        T_FLUSH: if (flush_done) begin
          done  <= 1'b1;
          state <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  // ---------------- engines ----------------
  logic [NC-1:0] c_valid, c_ready, c_rsp_valid;
  mem_req_t      c_req [NC];
  mem_rsp_t      c_rsp;
  logic [ND-1:0] d_valid, d_ready, d_rsp_valid;
  mem_req_t      d_req [ND];
  mem_rsp_t      d_rsp;

  for (genvar e = 0; e < N_COMB; e++) begin : g_comb
    logic busy, overlap;
    combination_engine #(.N(SA_N), .K_MAX(K_MAX)) u_comb (
      .clk, .rst_n, .start(comb_start), .done(comb_done[e]), .busy,
      .x_base, .w_base, .y_base, .f_in, .f_out,
      .row_lo(comb_row_lo[e]), .row_hi(comb_row_hi[e]),
      .d_valid(d_valid[1+e]), .d_req(d_req[1+e]), .d_ready(d_ready[1+e]),
      .d_rsp_valid(d_rsp_valid[1+e]), .d_rsp,
      .c_valid(c_valid[e]), .c_req(c_req[e]), .c_ready(c_ready[e]),
      .c_rsp_valid(c_rsp_valid[e]), .c_rsp,
      .overlap);
  end

  for (genvar a = 0; a < N_AGG; a++) begin : g_agg
    logic busy, decided, stat_valid, stat_miss, rmw_read;
    dir_e dir;
    logic [2:0] op;
    aggregation_engine #(.DEFAULT_BV(DEFAULT_BV)) u_agg (
      .clk, .rst_n, .start(agg_start && !agg_empty[a]), .done(agg_done[a]), .busy,
      .n_slices, .row_lo(agg_row_lo[a]), .row_hi(agg_row_hi[a]), .unit_rows,
      .rp_base, .edge_base, .feat_base(y_base), .out_base, .relu_en,
      .d_valid(d_valid[1+N_COMB+a]), .d_req(d_req[1+N_COMB+a]), .d_ready(d_ready[1+N_COMB+a]),
      .d_rsp_valid(d_rsp_valid[1+N_COMB+a]), .d_rsp,
      .c_valid(c_valid[N_COMB+a]), .c_req(c_req[N_COMB+a]), .c_ready(c_ready[N_COMB+a]),
      .c_rsp_valid(c_rsp_valid[N_COMB+a]), .c_rsp,
      .atm_phase(atm_phase[a]), .atm_direction(dir), .atm_settled(atm_settled[a]),
      .atm_decided(decided), .atm_op(op), .n_tiles(atm_n_tiles[a]),
      .stat_valid, .stat_miss, .rmw_read);
  end

  // ---------------- global cache and its arbiter ----------------
  logic     gc_valid, gc_ready, gc_rsp_valid;
  mem_req_t gc_req;
  mem_rsp_t gc_rsp;

  mem_arbiter #(.N(NC)) u_cache_arb (
    .clk, .rst_n, .s_valid(c_valid), .s_req(c_req), .s_ready(c_ready),
    .s_rsp_valid(c_rsp_valid), .s_rsp(c_rsp),
    .m_valid(gc_valid), .m_req(gc_req), .m_ready(gc_ready),
    .m_rsp_valid(gc_rsp_valid), .m_rsp(gc_rsp));

  global_cache #(.CAPACITY(CACHE_B), .WAYS(CACHE_WAYS)) u_cache (
    .clk, .rst_n,
    .s_valid(gc_valid), .s_req(gc_req), .s_ready(gc_ready),
    .s_rsp_valid(gc_rsp_valid), .s_rsp(gc_rsp),
    .m_valid(d_valid[0]), .m_req(d_req[0]), .m_ready(d_ready[0]),
    .m_rsp_valid(d_rsp_valid[0]), .m_rsp(d_rsp),
    .flush_req, .flush_done, .init_done);

  // ---------------- DRAM arbiter ----------------
  mem_arbiter #(.N(ND)) u_dram_arb (
    .clk, .rst_n, .s_valid(d_valid), .s_req(d_req), .s_ready(d_ready),
    .s_rsp_valid(d_rsp_valid), .s_rsp(d_rsp),
    .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp);
endmodule
