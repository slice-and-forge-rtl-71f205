// Behavioural model of the off-chip memory (HBM2 in the paper's main
// configuration) for simulation only; not synthesizable and not part of the
// design. It serves the line-wide request/response port of snf_pkg: one
// request at a time, each answered LAT cycles after acceptance (writes
// too). Storage is a sparse associative array of 64-byte lines; lines
// never written read as zero. Testbenches preload and inspect it through
// mem[] directly.
module dram_model
  import snf_pkg::*;
#(
  parameter int unsigned LAT = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     m_valid,
  input  mem_req_t m_req,
  output logic     m_ready,
  output logic     m_rsp_valid,
  output mem_rsp_t m_rsp
);
  line_t mem [laddr_t];
  int unsigned reads, writes;

  logic        busy;
  int unsigned cnt;
  mem_req_t    cur;

  assign m_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= 0; m_rsp_valid <= 1'b0; m_rsp <= '0; cur <= '0;
      reads <= 0; writes <= 0;
    end else begin
      m_rsp_valid <= 1'b0;
      if (!busy && m_valid) begin
        busy <= 1'b1;
        cur  <= m_req;
        cnt  <= LAT;
      end else if (busy) begin
        if (cnt <= 1) begin
          busy <= 1'b0;
          m_rsp_valid <= 1'b1;
          if (cur.we) begin
            mem[cur.addr] = cur.wdata;
            m_rsp <= '{hit: 1'b0, rdata: cur.wdata};
            writes <= writes + 1;
          end else begin
            m_rsp <= '{hit: 1'b0, rdata: mem.exists(cur.addr) ? mem[cur.addr] : '0};
            reads <= reads + 1;
          end
        end else cnt <= cnt - 1;
      end
    end
  end
endmodule
