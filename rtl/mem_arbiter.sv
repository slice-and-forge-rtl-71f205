// Round-robin arbiter for the line-based memory interface (snf_pkg).
//
// N requesters share one downstream port (the global cache or DRAM). A
// request is forwarded when the arbiter is idle; the grant is then held
// until the downstream response arrives, so exactly one request is
// outstanding and the response is returned to its owner. The round-robin
// pointer moves past the requester just served. The paper shows several
// units sharing the global cache and DRAM (Fig. 2) but gives no arbitration
// scheme: round robin with one outstanding request is this design's choice.
//
// Timing: request accepted in the cycle s_ready[i] is high; the response
// is forwarded combinationally in the cycle m_rsp_valid is high.
// The response data bus is shared by all requesters (only the valid is
// steered to the owner), so s_rsp is m_rsp itself.
module mem_arbiter
  import snf_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  // requesters
  input  logic [N-1:0]   s_valid,
  input  mem_req_t       s_req [N],
  output logic [N-1:0]   s_ready,
  output logic [N-1:0]   s_rsp_valid,
  output mem_rsp_t       s_rsp,
  // shared port
  output logic           m_valid,
  output mem_req_t       m_req,
  input  logic           m_ready,
  input  logic           m_rsp_valid,
  input  mem_rsp_t       m_rsp
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          busy;
  logic [IW-1:0] owner, ptr, grant;
  logic          any;

  always_comb begin
    grant = '0;
    any   = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned idx;
      idx = (int'(ptr) + k) % N;
      if (!any && s_valid[idx]) begin
        any   = 1'b1;
        grant = IW'(idx);
      end
    end
  end

  assign m_valid = !busy && any;
  assign m_req   = s_req[grant];
  assign s_rsp   = m_rsp;

  always_comb begin
    s_ready     = '0;
    s_rsp_valid = '0;
    if (!busy && any) s_ready[grant] = m_ready;
    if (busy)         s_rsp_valid[owner] = m_rsp_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; owner <= '0; ptr <= '0;
    end else if (!busy) begin
      if (any && m_ready) begin
        busy  <= 1'b1;
        owner <= grant;
        ptr   <= (grant == IW'(N-1)) ? '0 : grant + 1'b1;
      end
    end else if (m_rsp_valid) begin
      busy <= 1'b0;
    end
  end

  always_ff @(posedge clk)
    if (rst_n && m_rsp_valid) a_rsp_only_when_busy: assert (busy) else $error("response without request");
endmodule
