// Testbench of vertex_prefetch. A row pointer table rp[u][c] = 100*u + c
// sits in a DRAM model; two rounds (feature slices) are run with different
// tilings ([32,32], then [16,16,32]) and random back-pressure. Every
// descriptor (row, edge range, strip/round flags) and the slice index are
// compared with the loop nest of the feature-slicing dataflow.
module vertex_prefetch_tb;
  import snf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, issuing, cfg_valid, round_start, m_valid, m_ready, m_rsp_valid;
  logic out_valid, out_ready, out_strip_first, out_strip_last, out_round_last;
  logic [7:0] slice;
  vid_t out_u, out_e_lo, out_e_hi;
  tw_t tile_width_arr [NUNIT];
  logic [6:0] n_tiles;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  localparam vid_t ROW_LO = 5, ROW_HI = 12;
  localparam laddr_t RP_BASE = 100;

  vertex_prefetch dut (.clk, .rst_n, .start, .n_slices(8'd2), .row_lo(ROW_LO), .row_hi(ROW_HI),
    .rp_base(RP_BASE), .slice, .issuing, .cfg_valid, .tile_width_arr, .n_tiles, .round_start,
    .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp,
    .out_valid, .out_ready, .out_u, .out_e_lo, .out_e_hi,
    .out_strip_first, .out_strip_last, .out_round_last);
  dram_model #(.LAT(2)) u_dram (.clk, .rst_n, .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp);

  int checks = 0, failures = 0, starts = 0;
  always @(posedge clk) if (rst_n && round_start) starts++;
  always @(negedge clk) out_ready = ($urandom_range(0, 2) != 0);

  task automatic set_cfg(int w[$]);
    foreach (tile_width_arr[i]) tile_width_arr[i] = (i < w.size()) ? tw_t'(w[i]) : '0;
    n_tiles = 7'(w.size());
  endtask

  task automatic expect_round(int w[$], int s);
    int c0 = 0;
    for (int t = 0; t < w.size(); t++) begin
      for (int u = ROW_LO; u < ROW_HI; u++) begin
        do @(posedge clk); while (!(out_valid && out_ready));
        checks++;
        if (out_u != vid_t'(u) || out_e_lo != vid_t'(100 * u + c0) || out_e_hi != vid_t'(100 * u + c0 + w[t]) ||
            out_strip_first != (t == 0) || out_strip_last != (t == w.size() - 1) ||
            out_round_last != (t == w.size() - 1 && u == ROW_HI - 1) || slice != 8'(s)) begin
          failures++;
          $display("FAIL round %0d strip %0d row %0d: got u=%0d lo=%0d hi=%0d sl=%0d", s, t, u,
                   out_u, out_e_lo, out_e_hi, slice);
        end
      end
      c0 += w[t];
    end
  endtask

  initial begin
    start = 0; cfg_valid = 0; set_cfg('{32, 32});
    // rp table: word index u*65 + c holds 100*u + c
    for (int u = 0; u < 16; u++)
      for (int c = 0; c <= 64; c++) begin
        automatic int idx = u * 65 + c;
        automatic line_t l = u_dram.mem.exists(RP_BASE + laddr_t'(idx / 16)) ? u_dram.mem[RP_BASE + laddr_t'(idx / 16)] : '0;
        l[(idx % 16) * 32 +: 32] = 32'(100 * u + c);
        u_dram.mem[RP_BASE + laddr_t'(idx / 16)] = l;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0; cfg_valid = 1;
    @(posedge round_start);
    @(negedge clk) cfg_valid = 0;
    expect_round('{32, 32}, 0);
    repeat (5) @(negedge clk);
    set_cfg('{16, 16, 32});
    cfg_valid = 1;
    @(posedge round_start);
    @(negedge clk) cfg_valid = 0;
    expect_round('{16, 16, 32}, 1);
    repeat (20) @(posedge clk);
    checks += 2;
    if (starts != 2) begin failures++; $display("FAIL round starts %0d", starts); end
    if (issuing) begin failures++; $display("FAIL still issuing"); end
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
