// Workload testbench: one GCN layer for each feature width of the graphs
// in the reference evaluation (100: Products, 128: Citation, 256: Pokec,
// YouTube, LiveJournal and Orkut, 602: Reddit), run back to back on one
// snf_top. The graphs are scaled down to V vertices, since a simulation
// cannot hold millions. They are skewed the way crawled social graphs
// are: the first quarter of the vertices has most of the edges and
// attracts most sources. Widths are padded as the hardware requires
// (f_in to 16, f_out to 32), so the Reddit layer runs 38 feature slices.
// The top is reduced to 2+2 engines and a 32 KB 8-way cache, while K_MAX
// keeps its full 1024 so the widest layer fits. Each layer lives in its
// own address region, Y and O are compared word by word with a Q16.16
// reference, and the cycles, ATM decisions and final strip count of
// every layer are reported. Each layer must make at least one ATM
// decision per engine.
module snf_workload_tb;
  import snf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NC = 2, NA = 2, V = 64, UNIT = 1;

  logic start, ready, done, relu_en;
  logic [15:0] f_in, f_out;
  laddr_t xb, wb, yb, rpb, eb, ob;
  vid_t comb_lo [NC], comb_hi [NC], agg_lo [NA], agg_hi [NA];
  logic m_valid, m_ready, m_rsp_valid;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  logic [1:0] phase_now;
  phase_e atm_phase [NA];
  logic atm_settled [NA];
  logic [6:0] atm_n_tiles [NA];

  snf_top #(.N_COMB(NC), .N_AGG(NA), .SA_N(32), .K_MAX(1024), .CACHE_B(64'd32768), .CACHE_WAYS(8)) dut (
    .clk, .rst_n, .start, .ready, .done, .f_in, .f_out, .unit_rows(vid_t'(UNIT)),
    .x_base(xb), .w_base(wb), .y_base(yb), .rp_base(rpb), .edge_base(eb), .out_base(ob), .relu_en,
    .comb_row_lo(comb_lo), .comb_row_hi(comb_hi), .agg_row_lo(agg_lo), .agg_row_hi(agg_hi),
    .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp,
    .phase_now, .atm_phase, .atm_settled, .atm_n_tiles);
  dram_model #(.LAT(10)) u_dram (.clk, .rst_n, .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp);

  int checks = 0, failures = 0, cycles = 0, decisions = 0;
  always @(posedge clk) cycles++;
  for (genvar a = 0; a < NA; a++) begin : g_ac
    always @(posedge clk) if (rst_n && dut.g_agg[a].decided) decisions++;
  end

  task automatic put32(longint unsigned a, word_t d);
    laddr_t la = laddr_t'(a / 64);
    line_t l = u_dram.mem.exists(la) ? u_dram.mem[la] : '0;
    l[(a % 64) * 8 +: 32] = d;
    u_dram.mem[la] = l;
  endtask

  function automatic word_t rd32(longint unsigned a);
    laddr_t la = laddr_t'(a / 64);
    line_t l = u_dram.mem.exists(la) ? u_dram.mem[la] : '0;
    return l[(a % 64) * 8 +: 32];
  endfunction

  function automatic word_t rnd(int lo_q, int hi_q);   // uniform in [lo, hi) in units of 1/4
    return word_t'(($signed($urandom_range(0, (hi_q - lo_q) << 14))) + (lo_q <<< 14));
  endfunction

  task automatic run_layer(string name, int F, laddr_t region);
    int fi = (F + 15) / 16 * 16, fo = (F + 31) / 32 * 32;
    int ecount = 0, t0, d0, bad = 0;
    word_t X [][], W [][], Y [][], O [][];
    X = new[V]; Y = new[V]; O = new[V]; W = new[fi];
    foreach (X[r]) begin X[r] = new[fi]; Y[r] = new[fo]; O[r] = new[fo]; end
    foreach (W[k]) W[k] = new[fo];
    xb = region; wb = region + 10000; yb = region + 40000; rpb = region + 50000; eb = region + 51000; ob = region + 52000;
    for (int r = 0; r < V; r++) for (int k = 0; k < fi; k++) begin
      X[r][k] = (k < F) ? rnd(-4, 4) : '0;
      put32(64 * longint'(xb) + 4 * (r * fi + k), X[r][k]);
    end
    for (int k = 0; k < fi; k++) for (int c = 0; c < fo; c++) begin
      W[k][c] = (k < F && c < F) ? rnd(-2, 2) : '0;
      put32(64 * longint'(wb) + 4 * (k * fo + c), W[k][c]);
    end
    for (int r = 0; r < V; r++) for (int c = 0; c < fo; c++) begin
      Y[r][c] = '0;
      for (int k = 0; k < fi; k++) Y[r][c] += fxmul(X[r][k], W[k][c]);
      O[r][c] = '0;
    end
    for (int u = 0; u < V; u++) begin
      automatic int deg = (u < V / 4) ? $urandom_range(2, 12) : $urandom_range(0, 4);
      automatic int cols [$];
      for (int e = 0; e < deg; e++)
        cols.push_back(($urandom_range(0, 3) != 0) ? $urandom_range(0, V / 4 - 1) : $urandom_range(0, V - 1));
      cols.sort();
      for (int c = 0; c <= NUNIT; c++) begin
        automatic int first = ecount;
        foreach (cols[k]) if (cols[k] / UNIT < c) first = ecount + k + 1;
        put32(64 * longint'(rpb) + 4 * (u * (NUNIT + 1) + c), word_t'(first));
      end
      foreach (cols[k]) begin
        automatic word_t w = rnd(-2, 2);
        put32(64 * longint'(eb) + 8 * ecount, word_t'(cols[k]));
        put32(64 * longint'(eb) + 8 * ecount + 4, w);
        for (int c = 0; c < fo; c++) O[u][c] += fxmul(w, Y[cols[k]][c]);
        ecount++;
      end
    end
    for (int u = 0; u < V; u++) for (int c = 0; c < fo; c++) if (O[u][c][31]) O[u][c] = '0;
    @(negedge clk);
    f_in = 16'(fi); f_out = 16'(fo);
    wait (ready);
    t0 = cycles; d0 = decisions;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    @(posedge clk iff done);
    repeat (2) @(posedge clk);
    for (int r = 0; r < V; r++) for (int c = 0; c < fo; c++) begin
      automatic word_t gy = rd32(64 * longint'(yb) + 4 * (r * fo + c));
      automatic word_t go = rd32(64 * longint'(ob) + 4 * (r * fo + c));
      checks += 2;
      if (gy != Y[r][c]) begin bad++; if (bad < 5) $display("FAIL %s Y[%0d][%0d] %h expected %h", name, r, c, gy, Y[r][c]); end
      if (go != O[r][c]) begin bad++; if (bad < 5) $display("FAIL %s O[%0d][%0d] %h expected %h", name, r, c, go, O[r][c]); end
    end
    failures += bad;
    checks++;
    if (decisions - d0 < NA) begin failures++; $display("FAIL %s: too few ATM decisions", name); end
    $display("%-28s F=%0d (f_in %0d, f_out %0d, %0d slices), %0d edges: %0d cycles, %0d ATM decisions, strips %0d/%0d, %0d mismatches",
             name, F, fi, fo, fo / 16, ecount, cycles - t0, decisions - d0, atm_n_tiles[0], atm_n_tiles[1], bad);
  endtask

  initial begin
    start = 0; relu_en = 1; f_in = 16; f_out = 32;
    xb = '0; wb = '0; yb = '0; rpb = '0; eb = '0; ob = '0;
    for (int e = 0; e < NC; e++) begin comb_lo[e] = vid_t'(e * V / NC); comb_hi[e] = vid_t'((e + 1) * V / NC); end
    // the dense quarter is split off so both aggregation engines get similar edge counts
    agg_lo[0] = 0; agg_hi[0] = vid_t'(V / 8); agg_lo[1] = vid_t'(V / 8); agg_hi[1] = vid_t'(V);
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer("Products (PD)", 100, laddr_t'(0));
    run_layer("Citation (CT)", 128, laddr_t'(1 << 20));
    run_layer("PK / YT / LJ / OK", 256, laddr_t'(2 << 20));
    run_layer("Reddit (RD)", 602, laddr_t'(3 << 20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
