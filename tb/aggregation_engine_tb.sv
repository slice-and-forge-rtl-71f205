// Testbench of aggregation_engine with a reduced global cache (16 KB,
// 4 ways) in front of one DRAM model, and a second DRAM model holding the
// graph topology. A random graph of 128 vertices (0..9 edges per row,
// random Q16.16 weights) is stored as strip-indexed row pointers and
// packed edges; the features Y (64 words per row, so 4 slices) are random.
// The engine aggregates rows 5..99 over the 4 slices with ReLU; the cache
// is then flushed and every output line of rows 4..100 is compared with the
// reference relu(sum w * Y[v]). Rows 4 and 100 lie outside the range and
// must keep their marker. The test fails if ATM never decides, never
// changes the number of tiles, if no partial output is read back, or if
// the feature reads never hit or never miss.
module aggregation_engine_tb;
  import snf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int V = 128, UNIT = 2, NS = 4, LO = 5, HI = 100;
  localparam laddr_t RPB = 0, EB = 2000, FB = 10000, OB = 20000;
  localparam line_t MARK = {16{32'hdeadbeef}};

  logic start, done, busy;
  logic d_valid, d_ready, d_rsp_valid, c_valid, c_ready, c_rsp_valid;
  logic m_valid, m_ready, m_rsp_valid, flush_req, flush_done, init_done;
  mem_req_t d_req, c_req, m_req;
  mem_rsp_t d_rsp, c_rsp, m_rsp;
  phase_e atm_phase;
  dir_e atm_direction;
  logic atm_settled, atm_decided, stat_valid, stat_miss, rmw_read;
  logic [2:0] atm_op;
  logic [6:0] n_tiles;

  aggregation_engine dut (.clk, .rst_n, .start, .done, .busy, .n_slices(8'(NS)),
    .row_lo(vid_t'(LO)), .row_hi(vid_t'(HI)), .unit_rows(vid_t'(UNIT)),
    .rp_base(RPB), .edge_base(EB), .feat_base(FB), .out_base(OB), .relu_en(1'b1),
    .d_valid, .d_req, .d_ready, .d_rsp_valid, .d_rsp,
    .c_valid, .c_req, .c_ready, .c_rsp_valid, .c_rsp,
    .atm_phase, .atm_direction, .atm_settled, .atm_decided, .atm_op, .n_tiles,
    .stat_valid, .stat_miss, .rmw_read);
  global_cache #(.CAPACITY(64'd16384), .WAYS(4)) u_cache (.clk, .rst_n,
    .s_valid(c_valid), .s_req(c_req), .s_ready(c_ready), .s_rsp_valid(c_rsp_valid), .s_rsp(c_rsp),
    .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp, .flush_req, .flush_done, .init_done);
  dram_model #(.LAT(8)) u_fmem (.clk, .rst_n, .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp);
  dram_model #(.LAT(8)) u_tmem (.clk, .rst_n, .m_valid(d_valid), .m_req(d_req), .m_ready(d_ready),
    .m_rsp_valid(d_rsp_valid), .m_rsp(d_rsp));

  int checks = 0, failures = 0;
  int decisions = 0, tile_changes = 0, rmws = 0, hits = 0, misses = 0;
  logic [6:0] last_tiles;
  always @(posedge clk) if (rst_n) begin
    if (atm_decided) decisions++;
    if (rmw_read) rmws++;
    if (stat_valid && stat_miss) misses++;
    if (stat_valid && !stat_miss) hits++;
    if (n_tiles != last_tiles) tile_changes++;
    last_tiles <= n_tiles;
  end

  word_t Y [V][NS*16];
  word_t ref_o [V][NS*16];

  // writes one 32-bit word into the topology memory at byte address a
  task automatic put32(longint unsigned a, word_t d);
    laddr_t la = laddr_t'(a / 64);
    line_t l = u_tmem.mem.exists(la) ? u_tmem.mem[la] : '0;
    l[(a % 64) * 8 +: 32] = d;
    u_tmem.mem[la] = l;
  endtask

  initial begin
    int ecount;
    start = 0; flush_req = 0; last_tiles = '0;
    // features
    for (int v = 0; v < V; v++)
      for (int l = 0; l < NS; l++) begin
        line_t ln;
        for (int i = 0; i < 16; i++) begin
          Y[v][l*16 + i] = word_t'($signed($urandom_range(0, 4 << 16)) - (1 << 16));
          ln[i*32 +: 32] = Y[v][l*16 + i];
        end
        u_fmem.mem[FB + laddr_t'(v * NS + l)] = ln;
        u_fmem.mem[OB + laddr_t'(v * NS + l)] = MARK;
      end
    foreach (ref_o[u, i]) ref_o[u][i] = '0;
    // topology: edges of each row sorted by source column
    ecount = 0;
    for (int u = 0; u < V; u++) begin
      automatic int deg = $urandom_range(0, 9);
      automatic int cols [$];
      for (int e = 0; e < deg; e++) cols.push_back($urandom_range(0, V - 1));
      cols.sort();
      for (int c = 0; c <= NUNIT; c++) begin
        automatic int first = ecount;
        foreach (cols[k]) if (cols[k] / UNIT < c) first = ecount + k + 1;
        put32(64 * longint'(RPB) + 4 * (u * (NUNIT + 1) + c), word_t'(first));
      end
      foreach (cols[k]) begin
        automatic word_t w = word_t'($signed($urandom_range(0, 2 << 16)) - (1 << 16));
        put32(64 * longint'(EB) + 8 * ecount, word_t'(cols[k]));
        put32(64 * longint'(EB) + 8 * ecount + 4, w);
        for (int i = 0; i < NS * 16; i++) ref_o[u][i] += fxmul(w, Y[cols[k]][i]);
        ecount++;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    @(posedge clk iff done);
    @(negedge clk) flush_req = 1;
    @(posedge clk iff flush_done);
    @(negedge clk) flush_req = 0;
    repeat (3) @(posedge clk);
    for (int u = LO - 1; u <= HI; u++)
      for (int l = 0; l < NS; l++) begin
        automatic line_t o = u_fmem.mem[OB + laddr_t'(u * NS + l)];
        for (int i = 0; i < 16; i++) begin
          automatic word_t r = ref_o[u][l*16 + i];
          automatic word_t e = (u < LO || u >= HI) ? 32'hdeadbeef : (r[31] ? '0 : r);
          checks++;
          if (o[i*32 +: 32] != e) begin
            failures++;
            if (failures < 10) $display("FAIL O[%0d][%0d] = %h expected %h", u, l*16 + i, o[i*32 +: 32], e);
          end
        end
      end
    $display("ATM decisions %0d, tile-count changes %0d, read-backs %0d, feature hits %0d misses %0d, final tiles %0d",
             decisions, tile_changes, rmws, hits, misses, n_tiles);
    checks += 5;
    if (decisions == 0)    begin failures++; $display("FAIL ATM never decided"); end
    if (tile_changes == 0) begin failures++; $display("FAIL tiling never changed"); end
    if (rmws == 0)         begin failures++; $display("FAIL no partial output read back"); end
    if (hits == 0)         begin failures++; $display("FAIL no feature hit"); end
    if (misses == 0)       begin failures++; $display("FAIL no feature miss"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
