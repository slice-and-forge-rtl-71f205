// Testbench of edge_prefetch. Edge entries {weight = 3e+1, column = 5e}
// sit in a DRAM model. Edge ranges (including an empty one and one that
// crosses lines) are fed in; the token stream must list every edge of each
// range in order, then one end-of-row token with the range's flags, and
// a run of edges in one line must cost a single DRAM read.
module edge_prefetch_tb;
  import snf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, in_valid, in_ready, in_sf, in_sl, in_rl, m_valid, m_ready, m_rsp_valid;
  logic out_valid, out_ready;
  vid_t in_u, in_lo, in_hi;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  agg_tok_t out_tok;
  localparam laddr_t EBASE = 40;

  edge_prefetch dut (.clk, .rst_n, .start, .edge_base(EBASE), .in_valid, .in_ready, .in_u,
    .in_e_lo(in_lo), .in_e_hi(in_hi), .in_strip_first(in_sf), .in_strip_last(in_sl),
    .in_round_last(in_rl), .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp,
    .out_valid, .out_ready, .out_tok);
  dram_model #(.LAT(3)) u_dram (.clk, .rst_n, .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp);

  int checks = 0, failures = 0;
  agg_tok_t exp_q [$];
  int ranges [6][2] = '{'{0, 5}, '{5, 5}, '{5, 8}, '{8, 19}, '{30, 31}, '{60, 72}};

  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    agg_tok_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected token"); end
    else begin
      e = exp_q.pop_front();
      if (out_tok.is_edge != e.is_edge || out_tok.u != e.u ||
          (e.is_edge && (out_tok.v != e.v || out_tok.w != e.w)) ||
          out_tok.strip_first != e.strip_first || out_tok.strip_last != e.strip_last ||
          out_tok.round_last != e.round_last) begin
        failures++;
        $display("FAIL token u=%0d v=%0d w=%0d edge=%0d, expected v=%0d", out_tok.u, out_tok.v,
                 out_tok.w, out_tok.is_edge, e.v);
      end
    end
  end

  initial begin
    start = 0; in_valid = 0; in_u = '0; in_lo = '0; in_hi = '0; in_sf = 0; in_sl = 0; in_rl = 0;
    for (int e = 0; e < 80; e++) begin
      automatic line_t l = u_dram.mem.exists(EBASE + laddr_t'(e / 8)) ? u_dram.mem[EBASE + laddr_t'(e / 8)] : '0;
      l[(e % 8) * 64 +: 64] = {32'(3 * e + 1), 32'(5 * e)};
      u_dram.mem[EBASE + laddr_t'(e / 8)] = l;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int r = 0; r < 6; r++) begin
      for (int e = ranges[r][0]; e < ranges[r][1]; e++)
        exp_q.push_back('{u: vid_t'(r + 10), v: vid_t'(5 * e), w: word_t'(3 * e + 1), is_edge: 1'b1,
                          strip_first: r[0], strip_last: r[1], round_last: (r == 5)});
      exp_q.push_back('{u: vid_t'(r + 10), v: '0, w: '0, is_edge: 1'b0,
                        strip_first: r[0], strip_last: r[1], round_last: (r == 5)});
      in_valid = 1; in_u = vid_t'(r + 10); in_lo = vid_t'(ranges[r][0]); in_hi = vid_t'(ranges[r][1]);
      in_sf = r[0]; in_sl = r[1]; in_rl = (r == 5);
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 0;
    end
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    // lines touched: 0 | 0 | 0,1 | 1,2 | 3 | 7,8 -> 6 line fetches with reuse
    checks++;
    if (u_dram.reads != 6) begin failures++; $display("FAIL dram reads %0d, expected 6", u_dram.reads); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
