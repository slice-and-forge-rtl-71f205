// Testbench of config_controller (Automatic Tile Morphing).
//
// The testbench plays the rest of the engine: each round it takes the
// tiling offered on cfg_valid, pulses round_start, feeds per-unit-column
// access/miss statistics (unit column c: 8 accesses, 8 - c/8 misses, so
// left strips miss most) and ends the round after a scripted number of
// cycles. Two scenarios:
//   A: coarse halving beats merging and keeps helping twice, then fine morphing halves the
//      worst-miss strip, then merges best-miss strips, then settles;
//   B: the first halving is slower, so coarse morphing turns to merging;
//      when no merge is possible it enters fine morphing and settles;
//   C: both coarse trials (halving and merging the default) are slower,
//      so fine morphing starts from the default tiling.
// Coarse morphing always measures one halving and one merging trial from
// the default tiling before it picks a direction.
// Every tiling offered is compared with the expected sequence, and the
// miss ratios of the first round are compared with hand-computed values.
module config_controller_tb;
  import snf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init, stat_valid, stat_miss, round_start, round_end, cfg_valid, settled, decided;
  logic [5:0] stat_unit, tile_updated_idx;
  tw_t tile_width_arr [NUNIT];
  logic [6:0] n_tiles;
  phase_e phase;
  dir_e direction;
  logic [31:0] opt_cycles;
  logic [2:0] decided_op;

  config_controller #(.DEFAULT_BV(2)) dut (.*);

  int checks = 0, failures = 0;

  typedef int cfg_t [$];

  function automatic string cfg_str(cfg_t c);
    string s = "[";
    foreach (c[i]) s = {s, $sformatf("%0d ", c[i])};
    return {s, "]"};
  endfunction

  function automatic cfg_t rep(int w, int n);
    cfg_t c;
    repeat (n) c.push_back(w);
    return c;
  endfunction

  task automatic run_round(cfg_t exp, int cost, phase_e exp_phase);
    cfg_t got;
    int t0;
    @(negedge clk);
    while (!cfg_valid) @(negedge clk);
    for (int i = 0; i < int'(n_tiles); i++) got.push_back(int'(tile_width_arr[i]));
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL tiling %s expected %s", cfg_str(got), cfg_str(exp));
    end
    checks++;
    if (phase != exp_phase) begin failures++; $display("FAIL phase %0d expected %0d", phase, exp_phase); end
    round_start = 1;
    @(negedge clk) round_start = 0;
    t0 = 1;
    for (int c = 0; c < NUNIT; c++)
      for (int a = 0; a < 8; a++) begin
        stat_valid = 1; stat_unit = 6'(c); stat_miss = (a < 8 - c / 8);
        @(negedge clk); t0++;
      end
    stat_valid = 0;
    while (t0 < cost) begin @(negedge clk); t0++; end
    round_end = 1;
    @(negedge clk) round_end = 0;
  endtask

  cfg_t c_fine1, c_fine2, c_merge1, c_merge2;

  initial begin
    init = 0; stat_valid = 0; stat_miss = 0; stat_unit = '0; round_start = 0; round_end = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- scenario A ----------------
    @(negedge clk) init = 1;
    @(negedge clk) init = 0;
    c_fine1 = '{4, 4, 8, 8, 8, 8, 8, 8, 8};
    c_fine2 = '{2, 2, 4, 8, 8, 8, 8, 8, 8, 8};
    c_merge1 = '{4, 4, 8, 8, 8, 8, 8, 16};
    c_merge2 = '{4, 4, 8, 8, 8, 8, 24};
    run_round(rep(32, 2), 1000, COARSE);
    // first-round miss ratios (Q0.16): strip 0 = 208/256, strip 1 = 80/256
    wait (cfg_valid);
    checks += 2;
    if (dut.cur_mr[0] != 32'd53248) begin failures++; $display("FAIL miss ratio 0 = %0d", dut.cur_mr[0]); end
    if (dut.cur_mr[1] != 32'd20480) begin failures++; $display("FAIL miss ratio 1 = %0d", dut.cur_mr[1]); end
    run_round(rep(16, 4), 900, COARSE);   // halving trial: better
    run_round(rep(64, 1), 950, COARSE);   // merging trial: slower, so keep halving
    run_round(rep(8, 8), 800, COARSE);
    run_round(rep(4, 16), 850, COARSE);   // slower: roll back, fine halving
    run_round(c_fine1, 780, FINE);       // better: halve the worst strip again
    checks++;
    if (tile_updated_idx != 6'd0) begin failures++; $display("FAIL updated idx %0d", tile_updated_idx); end
    run_round(c_fine2, 790, FINE);       // slower: roll back, fine merging
    run_round(c_merge1, 770, FINE);      // better: merge again
    run_round(c_merge2, 775, FINE);      // slower: settle on the optimum
    checks++;
    wait (cfg_valid);
    if (!settled) begin failures++; $display("FAIL not settled"); end
    run_round(c_merge1, 700, FINE);
    run_round(c_merge1, 900, FINE);
    // ---------------- scenario B ----------------
    @(negedge clk);
    while (!cfg_valid) @(negedge clk);
    init = 1;
    @(negedge clk) init = 0;
    run_round(rep(32, 2), 1000, COARSE);
    run_round(rep(16, 4), 1100, COARSE);  // first halving slower: try merging
    run_round(rep(64, 1), 900, COARSE);   // better, but nothing left to merge
    run_round(rep(32, 2), 950, FINE);     // fine halving of the only strip is slower
    checks++;
    wait (cfg_valid);
    if (!settled) begin failures++; $display("FAIL B not settled"); end
    run_round(rep(64, 1), 950, FINE);
    // ---------------- scenario C ----------------
    @(negedge clk);
    while (!cfg_valid) @(negedge clk);
    init = 1;
    @(negedge clk) init = 0;
    run_round(rep(32, 2), 1000, COARSE);
    run_round(rep(16, 4), 1100, COARSE);  // halving trial slower
    run_round(rep(64, 1), 1050, COARSE);  // merging trial slower too: the default is kept
    c_fine1 = '{16, 16, 32};
    run_round(c_fine1, 1200, FINE);       // worst-miss strip (left) halved: slower
    run_round(rep(64, 1), 1300, FINE);    // best-miss strip (last) merged with its left: slower
    checks++;
    wait (cfg_valid);
    if (!settled) begin failures++; $display("FAIL C not settled"); end
    run_round(rep(32, 2), 900, FINE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
