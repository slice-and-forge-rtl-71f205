// Full-size testbench of snf_top: the top at its default parameters
// (8 combination and 8 aggregation engines, 32x32 arrays, K_MAX 1024,
// 16 MB 16-way global cache) runs one GCN layer O = ReLU(A * (X * W)) on a
// small random graph (V vertices, f_in 32, f_out 64) so that it ends in
// minutes. The checks are those of the reduced end-to-end test: every word
// of Y and O in DRAM against a Q16.16 reference, and a count of each
// mechanism. With a 16 MB cache the small graph never evicts a line, so
// evictions are reported but not required here; the reduced test covers
// them.
module snf_top_full_tb;
  import snf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NC = 8, NA = 8;
  localparam int V = 256, UNIT = 4, FI = 32, FO = 64, NS = FO / 16;
  localparam laddr_t XB = 0, WB = 1000, YB = 2000, RPB = 4000, EB = 6000, OB = 8000;

  logic start, ready, done, relu_en;
  logic [15:0] f_in, f_out;
  vid_t comb_lo [NC], comb_hi [NC], agg_lo [NA], agg_hi [NA];
  logic m_valid, m_ready, m_rsp_valid;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  logic [1:0] phase_now;
  phase_e atm_phase [NA];
  logic atm_settled [NA];
  logic [6:0] atm_n_tiles [NA];

  snf_top dut (
    .clk, .rst_n, .start, .ready, .done, .f_in, .f_out, .unit_rows(vid_t'(UNIT)),
    .x_base(XB), .w_base(WB), .y_base(YB), .rp_base(RPB), .edge_base(EB), .out_base(OB), .relu_en,
    .comb_row_lo(comb_lo), .comb_row_hi(comb_hi), .agg_row_lo(agg_lo), .agg_row_hi(agg_hi),
    .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp,
    .phase_now, .atm_phase, .atm_settled, .atm_n_tiles);
  dram_model #(.LAT(10)) u_dram (.clk, .rst_n, .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp);

  // ---------------- mechanism counters ----------------
  int checks = 0, failures = 0;
  int n_comb = 0, n_agg = 0, n_flush = 0, n_overlap = 0, n_hit = 0, n_miss = 0, n_evict = 0;
  int n_cache_cont = 0, n_dram_cont = 0, n_coarse = 0, n_fine = 0, n_settle = 0, n_rmw = 0;
  logic [1:0] last_phase;
  always @(posedge clk) if (rst_n) begin
    if (phase_now != last_phase && phase_now == 2'd1) n_comb++;
    if (phase_now != last_phase && phase_now == 2'd2) n_agg++;
    if (phase_now != last_phase && phase_now == 2'd3) n_flush++;
    last_phase <= phase_now;
    if (dut.gc_rsp_valid && dut.gc_rsp.hit) n_hit++;
    if (dut.gc_rsp_valid && !dut.gc_rsp.hit) n_miss++;
    if (phase_now != 2'd3 && dut.d_valid[0] && dut.d_ready[0] && dut.d_req[0].we) n_evict++;
    if ((dut.c_valid & (dut.c_valid - 1'b1)) != '0) n_cache_cont++;
    if ((dut.d_valid & (dut.d_valid - 1'b1)) != '0) n_dram_cont++;
  end
  for (genvar e = 0; e < NC; e++) begin : g_cc
    always @(posedge clk) if (rst_n && dut.g_comb[e].overlap) n_overlap++;
  end
  for (genvar a = 0; a < NA; a++) begin : g_ac
    logic last_settled;
    always @(posedge clk) if (rst_n) begin
      if (dut.g_agg[a].decided && atm_phase[a] == COARSE) n_coarse++;
      if (dut.g_agg[a].decided && atm_phase[a] == FINE) n_fine++;
      if (atm_settled[a] && !last_settled) n_settle++;
      if (dut.g_agg[a].rmw_read) n_rmw++;
      last_settled <= atm_settled[a];
    end
  end

  // ---------------- data and reference ----------------
  word_t X [V][FI];
  word_t W [FI][FO];
  word_t Y [V][FO];
  word_t O [V][FO];

  task automatic put32(longint unsigned a, word_t d);
    laddr_t la = laddr_t'(a / 64);
    line_t l = u_dram.mem.exists(la) ? u_dram.mem[la] : '0;
    l[(a % 64) * 8 +: 32] = d;
    u_dram.mem[la] = l;
  endtask

  function automatic word_t rnd(int lo_q, int hi_q);   // uniform in [lo, hi) in units of 1/4
    return word_t'(($signed($urandom_range(0, (hi_q - lo_q) << 14))) + (lo_q <<< 14));
  endfunction

  task automatic build();
    int ecount = 0;
    for (int r = 0; r < V; r++) for (int k = 0; k < FI; k++) begin
      X[r][k] = rnd(-4, 4);
      put32(64 * longint'(XB) + 4 * (r * FI + k), X[r][k]);
    end
    for (int k = 0; k < FI; k++) for (int c = 0; c < FO; c++) begin
      W[k][c] = rnd(-2, 2);
      put32(64 * longint'(WB) + 4 * (k * FO + c), W[k][c]);
    end
    for (int r = 0; r < V; r++) for (int c = 0; c < FO; c++) begin
      Y[r][c] = '0;
      for (int k = 0; k < FI; k++) Y[r][c] += fxmul(X[r][k], W[k][c]);
      O[r][c] = '0;
    end
    for (int u = 0; u < V; u++) begin
      automatic int deg = $urandom_range(0, 8);
      automatic int cols [$];
      for (int e = 0; e < deg; e++) cols.push_back($urandom_range(0, V - 1));
      cols.sort();
      for (int c = 0; c <= NUNIT; c++) begin
        automatic int first = ecount;
        foreach (cols[k]) if (cols[k] / UNIT < c) first = ecount + k + 1;
        put32(64 * longint'(RPB) + 4 * (u * (NUNIT + 1) + c), word_t'(first));
      end
      foreach (cols[k]) begin
        automatic word_t w = rnd(-2, 2);
        put32(64 * longint'(EB) + 8 * ecount, word_t'(cols[k]));
        put32(64 * longint'(EB) + 8 * ecount + 4, w);
        for (int c = 0; c < FO; c++) O[u][c] += fxmul(w, Y[cols[k]][c]);
        ecount++;
      end
    end
    for (int u = 0; u < V; u++) for (int c = 0; c < FO; c++) if (O[u][c][31]) O[u][c] = '0;
  endtask

  function automatic word_t rd32(longint unsigned a);
    laddr_t la = laddr_t'(a / 64);
    line_t l = u_dram.mem.exists(la) ? u_dram.mem[la] : '0;
    return l[(a % 64) * 8 +: 32];
  endfunction

  task automatic expect_cnt(string what, int n);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL %s never happened", what); end
  endtask

  int cycles = 0;
  always @(posedge clk) cycles++;

  initial begin
    int t0;
    start = 0; relu_en = 1; f_in = 16'(FI); f_out = 16'(FO); last_phase = '0;
    for (int e = 0; e < NC; e++) begin comb_lo[e] = vid_t'(e * V / NC); comb_hi[e] = vid_t'((e + 1) * V / NC); end
    for (int a = 0; a < NA; a++) begin agg_lo[a] = vid_t'(a * V / NA); agg_hi[a] = vid_t'((a + 1) * V / NA); end
    build();
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ready);
    t0 = cycles;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    @(posedge clk iff done);
    $display("layer done in %0d cycles, DRAM reads %0d writes %0d", cycles - t0, u_dram.reads, u_dram.writes);
    repeat (3) @(posedge clk);
    for (int r = 0; r < V; r++) for (int c = 0; c < FO; c++) begin
      automatic word_t gy = rd32(64 * longint'(YB) + 4 * (r * FO + c));
      automatic word_t go = rd32(64 * longint'(OB) + 4 * (r * FO + c));
      checks += 2;
      if (gy != Y[r][c]) begin failures++; if (failures < 10) $display("FAIL Y[%0d][%0d] %h expected %h", r, c, gy, Y[r][c]); end
      if (go != O[r][c]) begin failures++; if (failures < 10) $display("FAIL O[%0d][%0d] %h expected %h", r, c, go, O[r][c]); end
    end
    $display("mechanisms:");
    expect_cnt("combination phase", n_comb);
    expect_cnt("aggregation phase", n_agg);
    expect_cnt("flush phase", n_flush);
    expect_cnt("load/compute overlap cycles", n_overlap);
    expect_cnt("global cache hits", n_hit);
    expect_cnt("global cache misses", n_miss);
    $display("  %-34s %0d", "dirty evictions before flush", n_evict);
    expect_cnt("cache arbiter contention cycles", n_cache_cont);
    expect_cnt("DRAM arbiter contention cycles", n_dram_cont);
    expect_cnt("ATM coarse-phase decisions", n_coarse);
    expect_cnt("ATM fine-phase decisions", n_fine);
    expect_cnt("ATM settled", n_settle);
    expect_cnt("partial-output read-backs", n_rmw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
