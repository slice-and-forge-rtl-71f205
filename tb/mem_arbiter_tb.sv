// Testbench of mem_arbiter: three requesters issue random reads/writes to a
// small memory behind the arbiter; every response must reach its owner
// with the right data, and when all three wait the grants must rotate.
module mem_arbiter_tb;
  import snf_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] s_valid, s_ready, s_rsp_valid;
  mem_req_t     s_req [N];
  mem_rsp_t     s_rsp;
  logic m_valid, m_ready, m_rsp_valid;
  mem_req_t m_req;
  mem_rsp_t m_rsp;

  mem_arbiter #(.N(N)) dut (.*);
  dram_model #(.LAT(3)) u_mem (.clk, .rst_n, .m_valid, .m_req, .m_ready, .m_rsp_valid, .m_rsp);

  int checks = 0, failures = 0;
  line_t ref_mem [laddr_t];
  int grant_log [$];

  // each requester: 20 operations on its own address range
  for (genvar r = 0; r < N; r++) begin : g_req
    initial begin
      line_t exp;
      s_valid[r] = 0; s_req[r] = '0;
      wait (rst_n);
      for (int op = 0; op < 20; op++) begin
        @(negedge clk);
        s_req[r].addr  = laddr_t'(r * 16 + $urandom_range(0, 3));
        s_req[r].we    = $urandom_range(0, 1);
        s_req[r].wdata = {$urandom(), $urandom(), line_t'(r)};
        s_valid[r] = 1;
        do @(posedge clk); while (!s_ready[r]);
        grant_log.push_back(r);
        if (s_req[r].we) ref_mem[s_req[r].addr] = s_req[r].wdata;
        exp = ref_mem.exists(s_req[r].addr) ? ref_mem[s_req[r].addr] : '0;
        @(negedge clk) s_valid[r] = 0;
        while (!s_rsp_valid[r]) @(posedge clk);
        checks++;
        if (s_rsp.rdata !== exp) begin
          failures++;
          $display("FAIL req %0d op %0d data mismatch", r, op);
        end
      end
    end
  end

  // responses go to exactly one requester
  always @(posedge clk) if (rst_n && s_rsp_valid != 0) begin
    checks++;
    if ((s_rsp_valid & (s_rsp_valid - 1)) != 0) begin failures++; $display("FAIL two responses"); end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (grant_log.size() == 3 * 20);
    repeat (10) @(posedge clk);
    // fairness: all requesters always pending, so grants rotate 0,1,2,...
    for (int i = 1; i < 30; i++) begin
      checks++;
      if (grant_log[i] != (grant_log[i-1] + 1) % N) begin
        failures++;
        $display("FAIL grant order %0d after %0d", grant_log[i], grant_log[i-1]);
      end
    end
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
