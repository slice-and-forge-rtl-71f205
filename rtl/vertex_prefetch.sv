// Vertex prefetch unit of an aggregation engine.
//
// Runs the outer loops of the feature-slicing dataflow: for every feature
// slice (one ATM round) it waits for the configuration controller's tiling
// (cfg_valid), pulses round_start, and then walks the vertical strips of
// tile_width_arr from left to right and, inside each strip, the engine's
// rows row_lo .. row_hi-1. For each (row, strip) it reads two row pointers
// and hands the edge range [e_lo, e_hi) to the edge prefetch, with flags
// marking the first and last strip and the last row of the round.
//
// Topology format (this design's choice; the paper says only "CSR"): the
// row pointer table has NUNIT+1 entries per row, rp[u][c] = index of the
// first edge of row u whose column lies in unit column c or later, so a
// strip covering unit columns [c0, c1) of row u is the edge range
// rp[u][c0] .. rp[u][c1]. Entries are 32-bit words at byte address
// 64*rp_base + 4*(u*(NUNIT+1) + c). Each row pointer costs one DRAM line
// read; two are read per row and strip, so topology traffic grows with
// the number of strips as in the paper's cost model.
//
// The slice index advances at the start of the next round, so it stays
// valid for the downstream units until the round ends.
// Its memory port only reads: the write enable and write data of its
// requests are constant zero, which synthesis reports as idle outputs.
module vertex_prefetch
  import snf_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] n_slices,         // B_F
  input  vid_t       row_lo,           // engine's rows (row_lo < row_hi)
  input  vid_t       row_hi,
  input  laddr_t     rp_base,
  output logic [7:0] slice,            // current feature slice
  output logic       issuing,          // a round is being issued
  // configuration controller
  input  logic       cfg_valid,
  input  tw_t        tile_width_arr [NUNIT],
  input  logic [6:0] n_tiles,
  output logic       round_start,
  // DRAM port (reads only)
  output logic       m_valid,
  output mem_req_t   m_req,
  input  logic       m_ready,
  input  logic       m_rsp_valid,
  input  mem_rsp_t   m_rsp,
  // edge range descriptors
  output logic       out_valid,
  input  logic       out_ready,
  output vid_t       out_u,
  output vid_t       out_e_lo,
  output vid_t       out_e_hi,
  output logic       out_strip_first,
  output logic       out_strip_last,
  output logic       out_round_last
);
  typedef enum logic [2:0] {S_IDLE, S_WAITCFG, S_RD_LO, S_WAIT_LO, S_RD_HI, S_WAIT_HI, S_EMIT} state_e;
  state_e state;

  vid_t       u;
  logic [6:0] t;
  logic [6:0] c0;
  logic       first_round;

  wire [6:0] c1 = c0 + 7'(tile_width_arr[t[5:0]]);
  wire [6:0] cc = (state == S_RD_LO) ? c0 : c1;
  wire [ADDR_W-1:0] widx = ADDR_W'(u) * ADDR_W'(NUNIT + 1) + ADDR_W'(cc);
  logic [3:0] wsel;

  assign m_valid = (state == S_RD_LO) || (state == S_RD_HI);
  assign m_req   = '{addr: rp_base + laddr_t'(widx >> 4), we: 1'b0, wdata: '0};
  assign out_valid       = (state == S_EMIT);
  assign out_u           = u;
  assign out_strip_first = (t == 7'd0);
  assign out_strip_last  = (t + 7'd1 == n_tiles);
  assign out_round_last  = out_strip_last && (u + 1'b1 == row_hi);
  assign issuing         = (state != S_IDLE) && (state != S_WAITCFG);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; u <= '0; t <= '0; c0 <= '0; slice <= '0; wsel <= '0;
      out_e_lo <= '0; out_e_hi <= '0; round_start <= 1'b0; first_round <= 1'b0;
    end else begin
      round_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          first_round <= 1'b1;
          slice <= '0;
          state <= S_WAITCFG;
        end
        S_WAITCFG: if (cfg_valid) begin
          round_start <= 1'b1;
          first_round <= 1'b0;
          if (!first_round) slice <= slice + 1'b1;
          t <= '0; c0 <= '0; u <= row_lo;
          state <= S_RD_LO;
        end
        S_RD_LO: if (m_ready) begin wsel <= widx[3:0]; state <= S_WAIT_LO; end
        S_WAIT_LO: if (m_rsp_valid) begin
          out_e_lo <= line_word(m_rsp.rdata, 32'(wsel));
          state <= S_RD_HI;
        end
        S_RD_HI: if (m_ready) begin wsel <= widx[3:0]; state <= S_WAIT_HI; end
        S_WAIT_HI: if (m_rsp_valid) begin
          out_e_hi <= line_word(m_rsp.rdata, 32'(wsel));
          state <= S_EMIT;
        end
        S_EMIT: if (out_ready) begin
          if (u + 1'b1 != row_hi) begin
            u <= u + 1'b1;
            state <= S_RD_LO;
          end else if (t + 7'd1 != n_tiles) begin
            t  <= t + 7'd1;
            c0 <= c1;
            u  <= row_lo;
            state <= S_RD_LO;
          end else if (slice + 8'd1 != n_slices) begin
            state <= S_WAITCFG;
          end else begin
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (rst_n && state == S_EMIT) a_range: assert (out_e_lo <= out_e_hi) else $error("bad row pointer range");
endmodule
