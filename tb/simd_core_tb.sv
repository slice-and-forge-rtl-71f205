// Testbench of simd_core. Rows of random edge tokens (weights and feature
// lines in Q16.16) are sent for three strips of one round; the outputs are
// kept in a simple memory model behind the cache port. After the round the
// output lines must equal the reference: the sum over all strips of
// weight x feature per lane, with ReLU applied at the last strip. The
// read-back of partial outputs must happen once per row for each strip
// after the first, and round_done must pulse once.
module simd_core_tb;
  import snf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, c_valid, c_ready, c_rsp_valid, round_done, rmw_read;
  agg_tok_t in_tok;
  line_t in_line;
  mem_req_t c_req;
  mem_rsp_t c_rsp;
  localparam laddr_t OBASE = 500;
  localparam int ROWS = 6, STRIPS = 3, NS = 3, SL = 1;

  simd_core dut (.clk, .rst_n, .out_base(OBASE), .n_slices(8'(NS)), .slice(8'(SL)), .relu_en(1'b1),
    .in_valid, .in_ready, .in_tok, .in_line, .c_valid, .c_req, .c_ready, .c_rsp_valid, .c_rsp,
    .round_done, .rmw_read);
  dram_model #(.LAT(2)) u_mem (.clk, .rst_n, .m_valid(c_valid), .m_req(c_req), .m_ready(c_ready),
    .m_rsp_valid(c_rsp_valid), .m_rsp(c_rsp));

  int checks = 0, failures = 0, dones = 0, rmws = 0;
  word_t ref_o [ROWS][LANES];
  always @(posedge clk) if (rst_n) begin
    if (round_done) dones++;
    if (rmw_read) rmws++;
  end

  initial begin
    in_valid = 0; in_tok = '0; in_line = '0;
    foreach (ref_o[r, l]) ref_o[r][l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < STRIPS; s++)
      for (int r = 0; r < ROWS; r++) begin
        automatic int ne = $urandom_range(0, 4);
        for (int e = 0; e <= ne; e++) begin
          automatic agg_tok_t t = '0;
          automatic line_t x = '0;
          t.u = vid_t'(r + 20);
          t.strip_first = (s == 0); t.strip_last = (s == STRIPS - 1);
          t.round_last = (s == STRIPS - 1) && (r == ROWS - 1);
          t.is_edge = (e < ne);
          if (t.is_edge) begin
            t.w = word_t'($signed($urandom_range(0, 4 << 16)) - (2 << 16));
            for (int l = 0; l < LANES; l++) begin
              x[l*32 +: 32] = word_t'($signed($urandom_range(0, 6 << 16)) - (3 << 16));
              ref_o[r][l] += fxmul(t.w, x[l*32 +: 32]);
            end
          end
          @(negedge clk);
          in_valid = 1; in_tok = t; in_line = x;
          do @(posedge clk); while (!in_ready);
          @(negedge clk) in_valid = 0;
        end
      end
    wait (dones == 1);
    repeat (5) @(posedge clk);
    for (int r = 0; r < ROWS; r++) begin
      automatic line_t o = u_mem.mem[OBASE + laddr_t'(r + 20) * NS + SL];
      for (int l = 0; l < LANES; l++) begin
        automatic word_t e = ref_o[r][l][31] ? '0 : ref_o[r][l];
        checks++;
        if (o[l*32 +: 32] != e) begin
          failures++; $display("FAIL row %0d lane %0d: %h expected %h", r, l, o[l*32 +: 32], e);
        end
      end
    end
    checks += 2;
    if (rmws != ROWS * (STRIPS - 1)) begin failures++; $display("FAIL read-backs %0d", rmws); end
    if (dones != 1) begin failures++; $display("FAIL round_done %0d", dones); end
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
