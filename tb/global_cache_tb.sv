// Testbench of global_cache at a reduced size (4 KB, 4 ways, 16 sets).
// Random full-line reads and writes over 96 lines (more than the cache
// holds) are checked against a flat reference memory (data) and against
// a reference true-LRU model of every set (hit/miss flag). A final flush
// must leave DRAM equal to the reference memory. Hit latency is checked.
module global_cache_tb;
  import snf_pkg::*;
  localparam int WAYS = 4, SETS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid, s_ready, s_rsp_valid, m_valid, m_ready, m_rsp_valid;
  logic flush_req, flush_done, init_done;
  mem_req_t s_req, m_req;
  mem_rsp_t s_rsp, m_rsp;

  global_cache #(.CAPACITY(64'd4096), .WAYS(WAYS)) dut (.*);
  dram_model #(.LAT(5)) u_dram (.clk, .rst_n, .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp);

  int checks = 0, failures = 0, hits = 0, misses = 0, min_hit_lat = 1000;
  line_t ref_mem [laddr_t];
  laddr_t lru [SETS][$];   // most recent first

  function automatic bit ref_access(laddr_t a);
    int s = int'(a % SETS);
    foreach (lru[s][i]) if (lru[s][i] == a) begin
      lru[s].delete(i);
      lru[s].push_front(a);
      return 1;
    end
    lru[s].push_front(a);
    if (lru[s].size() > WAYS) void'(lru[s].pop_back());
    return 0;
  endfunction

  task automatic access(laddr_t a, bit we, line_t d);
    line_t exp; bit exp_hit; int lat = 0;
    @(negedge clk);
    s_req = '{addr: a, we: we, wdata: d};
    s_valid = 1;
    do @(posedge clk); while (!s_ready);
    @(negedge clk) s_valid = 0;
    if (we) ref_mem[a] = d;
    exp = ref_mem.exists(a) ? ref_mem[a] : '0;
    exp_hit = ref_access(a);
    while (!s_rsp_valid) begin @(posedge clk); lat++; end
    checks += 2;
    if (s_rsp.rdata !== exp) begin failures++; $display("FAIL data addr %0d", a); end
    if (s_rsp.hit !== exp_hit) begin failures++; $display("FAIL hit flag addr %0d exp %0d", a, exp_hit); end
    if (exp_hit) begin hits++; if (lat < min_hit_lat) min_hit_lat = lat; end else misses++;
  endtask

  initial begin
    s_valid = 0; s_req = '0; flush_req = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    // DRAM holds initial data
    for (int a = 0; a < 96; a++) begin
      u_dram.mem[laddr_t'(a)] = {16{32'(a * 7 + 1)}};
      ref_mem[laddr_t'(a)]    = {16{32'(a * 7 + 1)}};
    end
    for (int i = 0; i < 1500; i++) begin
      // mostly a small hot set so hits happen, sometimes the whole range
      laddr_t a;
      a = ($urandom_range(0, 3) == 0) ? laddr_t'($urandom_range(0, 95))
                                      : laddr_t'($urandom_range(0, 23));
      access(a, $urandom_range(0, 2) == 0, {$urandom(), $urandom(), 448'(i)});
    end
    // flush and compare DRAM
    @(negedge clk) flush_req = 1;
    while (!flush_done) @(posedge clk);
    @(negedge clk) flush_req = 0;
    foreach (ref_mem[a]) begin
      checks++;
      if (!u_dram.mem.exists(a) || u_dram.mem[a] !== ref_mem[a]) begin
        failures++; $display("FAIL dram after flush addr %0d", a);
      end
    end
    checks++;
    if (hits < 100 || misses < 100) begin failures++; $display("FAIL hits %0d misses %0d", hits, misses); end
    checks++;
    if (min_hit_lat != 2) begin failures++; $display("FAIL hit latency %0d", min_hit_lat); end
    $display("hits=%0d misses=%0d dram reads=%0d writes=%0d", hits, misses, u_dram.reads, u_dram.writes);
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
