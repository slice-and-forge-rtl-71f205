// Aggregation engine: O = sigma(A * Y) for a range of rows, with feature
// slicing and Automatic Tile Morphing (Fig. 2, right, and Fig. 6).
//
// Pipeline, decoupled by FIFOs:
//   vertex prefetch -> edge prefetch -> feature reader -> SIMD core
// The vertex prefetch runs one round per feature slice (B_F = n_slices
// rounds). In each round it walks the vertical strips given by the
// configuration controller, and inside each strip the engine's rows.
// The feature reader reports every feature access and whether it missed;
// the SIMD core reports the end of the round. From these the
// configuration controller picks the tiling of the next round.
// The two prefetch units share the engine's DRAM port, and the feature
// reader and SIMD core share its global-cache port, each through a
// two-way round-robin arbiter.
// start begins a layer: the controller is reset to the default tiling
// (ATM starts over), and done pulses after the last round's last write.
module aggregation_engine
  import snf_pkg::*;
#(
  parameter int unsigned DEFAULT_BV = 2,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        done,
  output logic        busy,
  input  logic [7:0]  n_slices,
  input  vid_t        row_lo,
  input  vid_t        row_hi,
  input  vid_t        unit_rows,
  input  laddr_t      rp_base,
  input  laddr_t      edge_base,
  input  laddr_t      feat_base,
  input  laddr_t      out_base,
  input  logic        relu_en,
  // DRAM port (topology)
  output logic        d_valid,
  output mem_req_t    d_req,
  input  logic        d_ready,
  input  logic        d_rsp_valid,
  input  mem_rsp_t    d_rsp,
  // global cache port (features and outputs)
  output logic        c_valid,
  output mem_req_t    c_req,
  input  logic        c_ready,
  input  logic        c_rsp_valid,
  input  mem_rsp_t    c_rsp,
  // observation
  output phase_e      atm_phase,
  output dir_e        atm_direction,
  output logic        atm_settled,
  output logic        atm_decided,
  output logic [2:0]  atm_op,
  output logic [6:0]  n_tiles,
  output logic        stat_valid,
  output logic        stat_miss,
  output logic        rmw_read
);
  // ---------------- configuration controller ----------------
  logic       cfg_valid, round_start, round_end;
  tw_t        tw_arr [NUNIT];
  logic [5:0] stat_unit;
  logic [5:0] tile_updated_idx;
  logic [31:0] opt_cycles;

  config_controller #(.DEFAULT_BV(DEFAULT_BV)) u_cfg (
    .clk, .rst_n, .init(start),
    .stat_valid, .stat_unit, .stat_miss,
    .round_start, .round_end,
    .cfg_valid, .tile_width_arr(tw_arr), .n_tiles,
    .phase(atm_phase), .direction(atm_direction), .settled(atm_settled),
    .tile_updated_idx, .opt_cycles, .decided(atm_decided), .decided_op(atm_op));

  // ---------------- vertex prefetch ----------------
  logic [7:0] slice;
  logic       vp_issuing;
  logic       vp_m_valid, vp_m_ready, vp_rsp_valid;
  mem_req_t   vp_m_req;
  logic       vp_valid, vp_ready;
  vid_t       vp_u, vp_lo, vp_hi;
  logic       vp_sf, vp_sl, vp_rl;
  mem_rsp_t   d_rsp_s;

  vertex_prefetch u_vp (
    .clk, .rst_n, .start, .n_slices, .row_lo, .row_hi, .rp_base,
    .slice, .issuing(vp_issuing),
    .cfg_valid, .tile_width_arr(tw_arr), .n_tiles, .round_start,
    .m_valid(vp_m_valid), .m_req(vp_m_req), .m_ready(vp_m_ready),
    .m_rsp_valid(vp_rsp_valid), .m_rsp(d_rsp_s),
    .out_valid(vp_valid), .out_ready(vp_ready), .out_u(vp_u), .out_e_lo(vp_lo),
    .out_e_hi(vp_hi), .out_strip_first(vp_sf), .out_strip_last(vp_sl), .out_round_last(vp_rl));

  typedef struct packed {
    vid_t u; vid_t lo; vid_t hi; logic sf; logic sl; logic rl;
  } desc_t;
  desc_t d_in, d_out;
  logic  q1_valid, q1_ready;
  assign d_in = '{u: vp_u, lo: vp_lo, hi: vp_hi, sf: vp_sf, sl: vp_sl, rl: vp_rl};

  sync_fifo #(.T(desc_t), .DEPTH(FIFO_DEPTH)) u_q_desc (
    .clk, .rst_n, .in_valid(vp_valid), .in_ready(vp_ready), .in_data(d_in),
    .out_valid(q1_valid), .out_ready(q1_ready), .out_data(d_out));

  // ---------------- edge prefetch ----------------
  logic     ep_m_valid, ep_m_ready, ep_rsp_valid;
  mem_req_t ep_m_req;
  logic     ep_valid, ep_ready;
  agg_tok_t ep_tok;

  edge_prefetch u_ep (
    .clk, .rst_n, .start, .edge_base,
    .in_valid(q1_valid), .in_ready(q1_ready), .in_u(d_out.u), .in_e_lo(d_out.lo),
    .in_e_hi(d_out.hi), .in_strip_first(d_out.sf), .in_strip_last(d_out.sl),
    .in_round_last(d_out.rl),
    .m_valid(ep_m_valid), .m_req(ep_m_req), .m_ready(ep_m_ready),
    .m_rsp_valid(ep_rsp_valid), .m_rsp(d_rsp_s),
    .out_valid(ep_valid), .out_ready(ep_ready), .out_tok(ep_tok));

  logic     q2_valid, q2_ready;
  agg_tok_t q2_tok;
  sync_fifo #(.T(agg_tok_t), .DEPTH(FIFO_DEPTH)) u_q_edge (
    .clk, .rst_n, .in_valid(ep_valid), .in_ready(ep_ready), .in_data(ep_tok),
    .out_valid(q2_valid), .out_ready(q2_ready), .out_data(q2_tok));

  // ---------------- feature reader ----------------
  logic     fr_c_valid, fr_c_ready, fr_rsp_valid;
  mem_req_t fr_c_req;
  mem_rsp_t c_rsp_s;
  logic     fr_valid, fr_ready;
  agg_tok_t fr_tok;
  line_t    fr_line;

  feature_reader u_fr (
    .clk, .rst_n, .feat_base, .n_slices, .slice, .unit_rows,
    .in_valid(q2_valid), .in_ready(q2_ready), .in_tok(q2_tok),
    .c_valid(fr_c_valid), .c_req(fr_c_req), .c_ready(fr_c_ready),
    .c_rsp_valid(fr_rsp_valid), .c_rsp(c_rsp_s),
    .stat_valid, .stat_unit, .stat_miss,
    .out_valid(fr_valid), .out_ready(fr_ready), .out_tok(fr_tok), .out_line(fr_line));

  typedef struct packed { agg_tok_t tok; line_t line; } fline_t;
  fline_t   f_in, f_out;
  logic     q3_valid, q3_ready;
  assign f_in = '{tok: fr_tok, line: fr_line};
  sync_fifo #(.T(fline_t), .DEPTH(FIFO_DEPTH)) u_q_feat (
    .clk, .rst_n, .in_valid(fr_valid), .in_ready(fr_ready), .in_data(f_in),
    .out_valid(q3_valid), .out_ready(q3_ready), .out_data(f_out));

  // ---------------- SIMD core ----------------
  logic     sc_c_valid, sc_c_ready, sc_rsp_valid;
  mem_req_t sc_c_req;

  simd_core u_simd (
    .clk, .rst_n, .out_base, .n_slices, .slice, .relu_en,
    .in_valid(q3_valid), .in_ready(q3_ready), .in_tok(f_out.tok), .in_line(f_out.line),
    .c_valid(sc_c_valid), .c_req(sc_c_req), .c_ready(sc_c_ready),
    .c_rsp_valid(sc_rsp_valid), .c_rsp(c_rsp_s),
    .round_done(round_end), .rmw_read);

  // ---------------- port arbitration ----------------
  logic [1:0] dv, dr, drv, cv, cr, crv;
  mem_req_t   dreq [2];
  mem_req_t   creq [2];
  assign dv = {ep_m_valid, vp_m_valid};
  assign dreq[0] = vp_m_req;
  assign dreq[1] = ep_m_req;
  assign vp_m_ready = dr[0];
  assign ep_m_ready = dr[1];
  assign vp_rsp_valid = drv[0];
  assign ep_rsp_valid = drv[1];

  mem_arbiter #(.N(2)) u_dram_arb (
    .clk, .rst_n, .s_valid(dv), .s_req(dreq), .s_ready(dr), .s_rsp_valid(drv), .s_rsp(d_rsp_s),
    .m_valid(d_valid), .m_req(d_req), .m_ready(d_ready), .m_rsp_valid(d_rsp_valid), .m_rsp(d_rsp));

  assign cv = {sc_c_valid, fr_c_valid};
  assign creq[0] = fr_c_req;
  assign creq[1] = sc_c_req;
  assign fr_c_ready = cr[0];
  assign sc_c_ready = cr[1];
  assign fr_rsp_valid = crv[0];
  assign sc_rsp_valid = crv[1];

  mem_arbiter #(.N(2)) u_cache_arb (
    .clk, .rst_n, .s_valid(cv), .s_req(creq), .s_ready(cr), .s_rsp_valid(crv), .s_rsp(c_rsp_s),
    .m_valid(c_valid), .m_req(c_req), .m_ready(c_ready), .m_rsp_valid(c_rsp_valid), .m_rsp(c_rsp));

  // ---------------- completion ----------------
  logic [7:0] rounds_done;
  logic       running;
  assign busy = running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rounds_done <= '0; running <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rounds_done <= '0; running <= 1'b1;
      end else if (running && round_end) begin
        rounds_done <= rounds_done + 1'b1;
        if (rounds_done + 8'd1 == n_slices) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end
endmodule
