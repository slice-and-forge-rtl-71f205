// Testbench of combination_engine (reduced K_MAX = 64, array N = 32).
// X rows live in a DRAM model, W and the results Y in a second memory
// model standing in for the global cache. Two jobs are run:
//   1. rows 3..42 (one full and one partial 32-row block), f_in 32, f_out 64;
//   2. rows 0..31, f_in 64, f_out 32.
// Every result word is compared with a reference Q16.16 matrix product,
// rows just outside the range must stay untouched, and the test fails if
// the loaders never fill a buffer while the array computes (overlap).
module combination_engine_tb;
  import snf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N = 32, KM = 64;
  localparam laddr_t XB = 100, WB = 4000, YB = 8000;
  logic start, done, busy, overlap;
  logic [15:0] f_in, f_out;
  vid_t row_lo, row_hi;
  logic d_valid, d_ready, d_rsp_valid, c_valid, c_ready, c_rsp_valid;
  mem_req_t d_req, c_req;
  mem_rsp_t d_rsp, c_rsp;

  combination_engine #(.N(N), .K_MAX(KM)) dut (.clk, .rst_n, .start, .done, .busy,
    .x_base(XB), .w_base(WB), .y_base(YB), .f_in, .f_out, .row_lo, .row_hi,
    .d_valid, .d_req, .d_ready, .d_rsp_valid, .d_rsp,
    .c_valid, .c_req, .c_ready, .c_rsp_valid, .c_rsp, .overlap);
  dram_model #(.LAT(6)) u_dram  (.clk, .rst_n, .m_valid(d_valid), .m_req(d_req), .m_ready(d_ready),
    .m_rsp_valid(d_rsp_valid), .m_rsp(d_rsp));
  dram_model #(.LAT(2)) u_cache (.clk, .rst_n, .m_valid(c_valid), .m_req(c_req), .m_ready(c_ready),
    .m_rsp_valid(c_rsp_valid), .m_rsp(c_rsp));

  int checks = 0, failures = 0, overlaps = 0;
  always @(posedge clk) if (rst_n && overlap) overlaps++;

  word_t X [64][KM];
  word_t W [KM][64];
  localparam line_t MARK = {16{32'hdeadbeef}};

  function automatic word_t rnd();
    return word_t'($signed($urandom_range(0, 4 << 16)) - (2 << 16));
  endfunction

  task automatic run(int lo, int hi, int fi, int fo);
    int xl = fi / 16, yl = fo / 16;
    // fill memories
    for (int r = 0; r < 64; r++)
      for (int k = 0; k < fi; k++) X[r][k] = rnd();
    for (int k = 0; k < fi; k++)
      for (int c = 0; c < fo; c++) W[k][c] = rnd();
    for (int r = 0; r < 64; r++)
      for (int l = 0; l < xl; l++) begin
        line_t ln;
        for (int i = 0; i < 16; i++) ln[i*32 +: 32] = X[r][l*16 + i];
        u_dram.mem[XB + laddr_t'(r * xl + l)] = ln;
      end
    for (int k = 0; k < fi; k++)
      for (int l = 0; l < yl; l++) begin
        line_t ln;
        for (int i = 0; i < 16; i++) ln[i*32 +: 32] = W[k][l*16 + i];
        u_cache.mem[WB + laddr_t'(k * yl + l)] = ln;
      end
    for (int r = 0; r < 64; r++)
      for (int l = 0; l < yl; l++) u_cache.mem[YB + laddr_t'(r * yl + l)] = MARK;
    @(negedge clk);
    f_in = 16'(fi); f_out = 16'(fo); row_lo = vid_t'(lo); row_hi = vid_t'(hi);
    start = 1;
    @(negedge clk) start = 0;
    @(posedge clk iff done);
    repeat (4) @(posedge clk);
    for (int r = 0; r < 64; r++)
      for (int c = 0; c < fo; c++) begin
        word_t got = u_cache.mem[YB + laddr_t'(r * yl + c / 16)][(c % 16) * 32 +: 32];
        word_t exp = 32'hdeadbeef;
        if (r >= lo && r < hi) begin
          exp = '0;
          for (int k = 0; k < fi; k++) exp += fxmul(X[r][k], W[k][c]);
        end
        if (r >= lo - 1 && r <= hi) begin
          checks++;
          if (got != exp) begin
            failures++;
            if (failures < 10) $display("FAIL Y[%0d][%0d] = %h expected %h", r, c, got, exp);
          end
        end
      end
  endtask

  initial begin
    start = 0; f_in = 16; f_out = 32; row_lo = 0; row_hi = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run(3, 43, 32, 64);
    run(0, 32, 64, 32);
    checks++;
    if (overlaps == 0) begin failures++; $display("FAIL no load/compute overlap seen"); end
    $display("overlap cycles %0d, DRAM reads %0d", overlaps, u_dram.reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
