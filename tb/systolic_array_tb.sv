// Testbench of systolic_array at its full 32x32 size. Several random
// blocks with different K (Q16.16 operands) are streamed back to back;
// each result block is compared with a reference product computed in the
// testbench with the same truncating fixed-point multiply. done must come
// 2N-1 cycles after in_last.
module systolic_array_tb;
  import snf_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_last, done;
  word_t a_in [N], b_in [N];
  word_t acc_out [N][N];

  systolic_array #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  word_t A [N][64], B [64][N], C [N][N];

  initial begin
    int K, lat;
    in_valid = 0; in_first = 0; in_last = 0;
    foreach (a_in[i]) begin a_in[i] = '0; b_in[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 4; blk++) begin
      K = (blk == 0) ? 1 : 16 * blk + 3;
      for (int i = 0; i < N; i++)
        for (int k = 0; k < K; k++) begin
          A[i][k] = word_t'($signed($urandom_range(0, 8 << 16)) - (4 << 16));
          B[k][i] = word_t'($signed($urandom_range(0, 8 << 16)) - (4 << 16));
        end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          C[i][j] = '0;
          for (int k = 0; k < K; k++) C[i][j] += fxmul(A[i][k], B[k][j]);
        end
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        in_valid = 1; in_first = (k == 0); in_last = (k == K - 1);
        for (int i = 0; i < N; i++) begin a_in[i] = A[i][k]; b_in[i] = B[k][i]; end
      end
      @(negedge clk);
      in_valid = 0; in_first = 0; in_last = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 2 * N - 1) begin failures++; $display("FAIL latency %0d", lat); end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          checks++;
          if (acc_out[i][j] !== C[i][j]) begin
            failures++;
            if (failures < 10) $display("FAIL blk %0d C[%0d][%0d] %h exp %h", blk, i, j, acc_out[i][j], C[i][j]);
          end
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
