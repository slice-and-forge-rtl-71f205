// Testbench of pingpong_buffer in both write shapes. A producer fills
// blocks of random words while a consumer drains them; every word read must
// be the one written to that bank, lane and address, and the producer must
// be able to fill one bank while the consumer still holds the other.
module pingpong_buffer_tb;
  import snf_pkg::*;
  localparam int NL = 32, DEPTH = 64, BLOCKS = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, overlap = 0;

  for (genvar m = 0; m < 2; m++) begin : g_mode
    localparam bit ALONG_K = (m == 0);
    logic p_ready, p_we, p_commit, c_valid, c_release;
    logic [$clog2(NL)-1:0] p_lane;
    logic [$clog2(DEPTH)-1:0] p_k, c_k;
    line_t p_data;
    word_t c_data [NL];
    word_t ref_blk [BLOCKS][DEPTH][NL];
    int filled = 0;

    pingpong_buffer #(.NL(NL), .DEPTH(DEPTH), .ALONG_K(ALONG_K)) dut (
      .clk, .rst_n, .clear(1'b0), .p_ready, .p_we, .p_lane, .p_k, .p_data, .p_commit,
      .c_valid, .c_k, .c_data, .c_release);

    // producer
    initial begin
      p_we = 0; p_commit = 0; p_lane = '0; p_k = '0; p_data = '0;
      foreach (ref_blk[b, k, l]) ref_blk[b][k][l] = $urandom();
      wait (rst_n);
      for (int b = 0; b < BLOCKS; b++) begin
        @(negedge clk);
        while (!p_ready) @(negedge clk);
        if (c_valid) overlap++;
        if (ALONG_K) begin
          for (int l = 0; l < NL; l++)
            for (int k0 = 0; k0 < DEPTH; k0 += 16) begin
              p_we = 1; p_lane = l[$clog2(NL)-1:0]; p_k = k0[$clog2(DEPTH)-1:0];
              for (int i = 0; i < 16; i++) p_data[i*32 +: 32] = ref_blk[b][k0+i][l];
              @(negedge clk);
            end
        end else begin
          for (int k = 0; k < DEPTH; k++)
            for (int l0 = 0; l0 < NL; l0 += 16) begin
              p_we = 1; p_lane = l0[$clog2(NL)-1:0]; p_k = k[$clog2(DEPTH)-1:0];
              for (int i = 0; i < 16; i++) p_data[i*32 +: 32] = ref_blk[b][k][l0+i];
              @(negedge clk);
            end
        end
        p_we = 0; p_commit = 1;
        @(negedge clk) p_commit = 0;
        filled++;
      end
    end

    // consumer: slow, so the producer runs ahead into the other bank
    initial begin
      c_k = '0; c_release = 0;
      wait (rst_n);
      for (int b = 0; b < BLOCKS; b++) begin
        @(negedge clk);
        while (!c_valid) @(negedge clk);
        for (int k = 0; k < DEPTH; k++) begin
          c_k = k[$clog2(DEPTH)-1:0];
          @(negedge clk);   // registered read
          for (int l = 0; l < NL; l++) begin
            checks++;
            if (c_data[l] !== ref_blk[b][k][l]) begin
              failures++;
              if (failures < 10) $display("FAIL mode %0d blk %0d k %0d lane %0d", m, b, k, l);
            end
          end
          repeat (3) @(negedge clk);
        end
        c_release = 1;
        @(negedge clk) c_release = 0;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (g_mode[0].filled == BLOCKS && g_mode[1].filled == BLOCKS);
    repeat (2000) @(posedge clk);
    checks++;
    if (overlap < 2) begin failures++; $display("FAIL no fill during consumption"); end
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
