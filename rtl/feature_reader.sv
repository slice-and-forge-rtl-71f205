// Feature reader of an aggregation engine.
//
// For each edge token it reads, through the global cache, the feature
// slice of the source vertex v for the current slice: one 64-byte line at
// line address feat_base + v*n_slices + slice (features are stored row
// major, padded to a multiple of 16 words, so slice s of a row is line s
// of that row). The line is passed on with the token to the SIMD core.
// End-of-row tokens pass through without a read.
//
// For every feature access it reports to the configuration controller the
// unit column of v (v / unit_rows, found with NUNIT-1 comparators against
// c*unit_rows) and whether the cache missed. The paper's feature reader
// keeps several reads in flight; here the global cache is blocking, so
// one read is outstanding at a time and the prefetch FIFOs keep the
// reader supplied.
// Its memory port only reads: the write enable and write data of its
// requests are constant zero, which synthesis reports as idle outputs.
module feature_reader
  import snf_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  laddr_t     feat_base,
  input  logic [7:0] n_slices,
  input  logic [7:0] slice,
  input  vid_t       unit_rows,        // rows per unit column, ceil(|V|/64)
  // tokens from the edge prefetch
  input  logic       in_valid,
  output logic       in_ready,
  input  agg_tok_t   in_tok,
  // global cache port
  output logic       c_valid,
  output mem_req_t   c_req,
  input  logic       c_ready,
  input  logic       c_rsp_valid,
  input  mem_rsp_t   c_rsp,
  // statistics to the configuration controller
  output logic       stat_valid,
  output logic [5:0] stat_unit,
  output logic       stat_miss,
  // tokens with feature lines to the SIMD core
  output logic       out_valid,
  input  logic       out_ready,
  output agg_tok_t   out_tok,
  output line_t      out_line
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_OUT} state_e;
  state_e state;
  agg_tok_t tok;

  assign in_ready  = (state == S_IDLE);
  assign c_valid   = (state == S_REQ);
  assign c_req     = '{addr: feat_base + laddr_t'(tok.v) * laddr_t'(n_slices) + laddr_t'(slice),
                       we: 1'b0, wdata: '0};
  assign out_valid = (state == S_OUT);
  assign out_tok   = tok;

  always_comb begin
    stat_unit = '0;
    for (int c = 1; c < NUNIT; c++)
      if (ADDR_W'(tok.v) >= ADDR_W'(c) * ADDR_W'(unit_rows)) stat_unit = 6'(c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; tok <= '0; out_line <= '0; stat_valid <= 1'b0; stat_miss <= 1'b0;
    end else begin
      stat_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          tok <= in_tok;
          out_line <= '0;
          state <= in_tok.is_edge ? S_REQ : S_OUT;
        end
        S_REQ:  if (c_ready) state <= S_WAIT;
        S_WAIT: if (c_rsp_valid) begin
          out_line   <= c_rsp.rdata;
          stat_valid <= 1'b1;
          stat_miss  <= !c_rsp.hit;
          state      <= S_OUT;
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
