// SIMD core of an aggregation engine (16 ways).
//
// Each edge token multiplies the edge weight with the 16 words of the
// source vertex's feature slice and adds the products into a 16-lane
// accumulator (one token per cycle, Q16.16 fixed point). At the
// end-of-row token the partial row is combined with the output:
//   * first strip of the round: the accumulator is written as is;
//   * later strips: the partial output is read back from the global cache
//     and added (this is the repeated output access that vertex tiling
//     costs);
//   * last strip: ReLU is applied when relu_en is set (sigma of the GCN
//     layer), then the line is written.
// The output slice of row u is line out_base + u*n_slices + slice. After
// the write of the round's last row, round_done pulses for one cycle.
// The SIMD width (16) and 32-bit fixed point follow the paper; the
// read-modify-write of partial outputs through the cache is this
// design's choice of where the partial sums live.
module simd_core
  import snf_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  laddr_t     out_base,
  input  logic [7:0] n_slices,
  input  logic [7:0] slice,
  input  logic       relu_en,
  // tokens with feature lines
  input  logic       in_valid,
  output logic       in_ready,
  input  agg_tok_t   in_tok,
  input  line_t      in_line,
  // global cache port
  output logic       c_valid,
  output mem_req_t   c_req,
  input  logic       c_ready,
  input  logic       c_rsp_valid,
  input  mem_rsp_t   c_rsp,
  output logic       round_done,
  output logic       rmw_read              // pulses on each partial-output read-back
);
  typedef enum logic [2:0] {S_ACC, S_RD, S_RD_WAIT, S_WR, S_WR_WAIT} state_e;
  state_e state;

  word_t    acc [LANES];
  line_t    res;
  agg_tok_t tok;

  wire laddr_t oaddr = out_base + laddr_t'(tok.u) * laddr_t'(n_slices) + laddr_t'(slice);

  line_t wline;
  always_comb
    for (int l = 0; l < LANES; l++) begin
      wline[l*WORD_W +: WORD_W] = res[l*WORD_W +: WORD_W];
      if (tok.strip_last && relu_en && res[l*WORD_W + WORD_W - 1])
        wline[l*WORD_W +: WORD_W] = '0;
    end

  assign in_ready = (state == S_ACC);
  assign c_valid  = (state == S_RD) || (state == S_WR);
  assign c_req    = '{addr: oaddr, we: (state == S_WR), wdata: wline};
  assign rmw_read = (state == S_RD) && c_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_ACC; tok <= '0; res <= '0; round_done <= 1'b0;
      for (int l = 0; l < LANES; l++) acc[l] <= '0;
    end else begin
      round_done <= 1'b0;
      unique case (state)
        S_ACC: if (in_valid) begin
          if (in_tok.is_edge) begin
            for (int l = 0; l < LANES; l++)
              acc[l] <= acc[l] + fxmul(in_tok.w, line_word(in_line, l));
          end else begin
            tok <= in_tok;
            for (int l = 0; l < LANES; l++) res[l*WORD_W +: WORD_W] <= acc[l];
            state <= in_tok.strip_first ? S_WR : S_RD;
          end
        end
        S_RD:      if (c_ready) state <= S_RD_WAIT;
        S_RD_WAIT: if (c_rsp_valid) begin
          for (int l = 0; l < LANES; l++)
            res[l*WORD_W +: WORD_W] <= res[l*WORD_W +: WORD_W] + line_word(c_rsp.rdata, l);
          state <= S_WR;
        end
        S_WR:      if (c_ready) state <= S_WR_WAIT;
        S_WR_WAIT: if (c_rsp_valid) begin
          for (int l = 0; l < LANES; l++) acc[l] <= '0;
          round_done <= tok.round_last;
          state <= S_ACC;
        end
        default: state <= S_ACC;
      endcase
    end
  end
endmodule
