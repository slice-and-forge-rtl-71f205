// Testbench of feature_reader. A scripted cache answers every read with
// a line derived from its address and a hit flag chosen per request. Edge
// tokens with random source vertices and end-of-row tokens are fed in; each
// output must carry the right feature line (slice s of row v), end-of-row
// tokens must pass without a read, and each access must be reported with
// unit column v / unit_rows and miss = not hit.
module feature_reader_tb;
  import snf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, c_valid, c_ready, c_rsp_valid, stat_valid, stat_miss, out_valid, out_ready;
  logic [5:0] stat_unit;
  agg_tok_t in_tok, out_tok;
  mem_req_t c_req;
  mem_rsp_t c_rsp;
  line_t out_line;
  localparam laddr_t FBASE = 1000;
  localparam vid_t UNIT = 7;

  feature_reader dut (.clk, .rst_n, .feat_base(FBASE), .n_slices(8'd4), .slice(8'd2), .unit_rows(UNIT),
    .in_valid, .in_ready, .in_tok, .c_valid, .c_req, .c_ready, .c_rsp_valid, .c_rsp,
    .stat_valid, .stat_unit, .stat_miss, .out_valid, .out_ready, .out_tok, .out_line);

  function automatic line_t fline(laddr_t a);
    return {16{32'(a) ^ 32'h5a5a0000}};
  endfunction

  // scripted cache: latency 2, hit on even line addresses
  int reads = 0;
  laddr_t pend;
  assign c_ready = 1'b1;
  always @(posedge clk) begin
    c_rsp_valid <= 1'b0;
    if (rst_n && c_valid) begin
      reads++;
      pend = c_req.addr;
      @(posedge clk);
      c_rsp_valid <= 1'b1;
      c_rsp <= '{hit: !pend[0], rdata: fline(pend)};
    end
  end

  int checks = 0, failures = 0, sent = 0, got = 0, stats = 0, edges = 0;
  agg_tok_t exp_q [$];
  int exp_unit [$];
  bit exp_miss [$];

  always @(negedge clk) out_ready = ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      automatic agg_tok_t e = exp_q.pop_front();
      automatic laddr_t a = FBASE + laddr_t'(e.v) * 4 + 2;
      got++;
      checks++;
      if (out_tok != e || (e.is_edge && out_line != fline(a))) begin
        failures++; $display("FAIL token v=%0d edge=%0d", out_tok.v, out_tok.is_edge);
      end
    end
    if (stat_valid) begin
      automatic int eu = exp_unit.pop_front();
      automatic bit em = exp_miss.pop_front();
      checks++;
      stats++;
      if (int'(stat_unit) != eu || stat_miss != em) begin
        failures++; $display("FAIL stat unit %0d miss %0d, expected %0d %0d", stat_unit, stat_miss, eu, em);
      end
    end
  end

  initial begin
    in_valid = 0; in_tok = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      agg_tok_t t;
      laddr_t a;
      t = '0;
      t.u = vid_t'(i);
      t.is_edge = ($urandom_range(0, 3) != 0);
      t.v = t.is_edge ? vid_t'($urandom_range(0, 64 * 7 + 20)) : '0;
      t.w = word_t'($urandom());
      t.round_last = (i == 199);
      exp_q.push_back(t);
      if (t.is_edge) begin
        a = FBASE + laddr_t'(t.v) * 4 + 2;
        exp_unit.push_back((t.v / 7 > 63) ? 63 : int'(t.v / 7));
        exp_miss.push_back(a[0]);
        edges++;
      end
      @(negedge clk);
      in_valid = 1; in_tok = t;
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 0;
    end
    wait (got == 200);
    repeat (5) @(posedge clk);
    checks += 2;
    if (reads != edges) begin failures++; $display("FAIL reads %0d edges %0d", reads, edges); end
    if (stats != edges) begin failures++; $display("FAIL stats %0d edges %0d", stats, edges); end
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
