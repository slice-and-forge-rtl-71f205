// Edge prefetch unit of an aggregation engine.
//
// For each edge range [e_lo, e_hi) received from the vertex prefetch it
// reads the CSR edge entries and emits one token per edge (destination
// row u, source vertex v, weight A[u][v]) to the feature reader, followed
// by one end-of-row token that carries the strip/round flags. A row with
// no edges in the strip still produces its end-of-row token, because the
// SIMD core must still write that row's partial output.
//
// Edge format (this design's choice): 64-bit entries {weight[63:32],
// column[31:0]} at byte address 64*edge_base + 8*e, 8 per line. The last
// line read is kept, so consecutive edges cost one DRAM read per 8 edges.
// The buffer is cleared by start.
// Its memory port only reads: the write enable and write data of its
// requests are constant zero, which synthesis reports as idle outputs.
module edge_prefetch
  import snf_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  laddr_t   edge_base,
  // descriptors from the vertex prefetch
  input  logic     in_valid,
  output logic     in_ready,
  input  vid_t     in_u,
  input  vid_t     in_e_lo,
  input  vid_t     in_e_hi,
  input  logic     in_strip_first,
  input  logic     in_strip_last,
  input  logic     in_round_last,
  // DRAM port (reads only)
  output logic     m_valid,
  output mem_req_t m_req,
  input  logic     m_ready,
  input  logic     m_rsp_valid,
  input  mem_rsp_t m_rsp,
  // tokens to the feature reader
  output logic     out_valid,
  input  logic     out_ready,
  output agg_tok_t out_tok
);
  typedef enum logic [2:0] {S_IDLE, S_EDGE, S_REQ, S_WAIT, S_END} state_e;
  state_e state;

  vid_t   u, e, e_hi;
  logic   f_first, f_last, f_rlast;
  line_t  buf_line;
  laddr_t buf_addr;
  logic   buf_vld;

  wire laddr_t e_line = edge_base + (laddr_t'(e) >> 3);
  wire         buf_hit = buf_vld && (buf_addr == e_line);
  wire [63:0]  entry   = buf_line[e[2:0]*64 +: 64];

  assign in_ready  = (state == S_IDLE) && !start;
  assign m_valid   = (state == S_REQ);
  assign m_req     = '{addr: e_line, we: 1'b0, wdata: '0};
  assign out_valid = (state == S_EDGE && e != e_hi && buf_hit) || (state == S_END);
  always_comb begin
    out_tok = '{u: u, v: entry[31:0], w: entry[63:32], is_edge: (state == S_EDGE),
                strip_first: f_first, strip_last: f_last, round_last: f_rlast};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; u <= '0; e <= '0; e_hi <= '0;
      f_first <= 1'b0; f_last <= 1'b0; f_rlast <= 1'b0;
      buf_line <= '0; buf_addr <= '0; buf_vld <= 1'b0;
    end else begin
      if (start) buf_vld <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid && !start) begin
          u <= in_u; e <= in_e_lo; e_hi <= in_e_hi;
          f_first <= in_strip_first; f_last <= in_strip_last; f_rlast <= in_round_last;
          state <= S_EDGE;
        end
        S_EDGE: begin
          if (e == e_hi)      state <= S_END;
          else if (!buf_hit)  state <= S_REQ;
          else if (out_ready) e <= e + 1'b1;
        end
        S_REQ:  if (m_ready) state <= S_WAIT;
        S_WAIT: if (m_rsp_valid) begin
          buf_line <= m_rsp.rdata;
          buf_addr <= e_line;
          buf_vld  <= 1'b1;
          state    <= S_EDGE;
        end
        S_END: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
