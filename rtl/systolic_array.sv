// N x N output-stationary systolic array (N = 32 in the paper, Table 2).
//
// Computes C = A * B for an N x K block A (rows of X) and a K x N block B
// (columns of W). Each cycle with in_valid the caller presents column k of
// A (a_in[i] = A[i][k]) and row k of B (b_in[j] = B[k][j]), k = 0..K-1,
// with in_first on k = 0 and in_last on k = K-1. Input skew registers
// delay row i by i cycles and column j by j cycles, so PE(i,j) sees
// A[i][k] and B[k][j] together and keeps C[i][j]. The paper gives only the
// array size and that it is a systolic array; the output-stationary
// dataflow is this design's choice. done pulses when PE(N-1,N-1) has taken
// its last operand, 2N-1 cycles after in_last; acc_out then holds C until
// the next block's first operands reach each PE.
module systolic_array
  import snf_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  logic  in_last,
  input  word_t a_in [N],
  input  word_t b_in [N],
  output logic  done,
  output word_t acc_out [N][N]
);
  // skewed inputs
  word_t a_sk [N];
  word_t b_sk [N];
  logic  v_sk [N], f_sk [N], l_sk [N];

  for (genvar i = 0; i < N; i++) begin : g_skew
    if (i == 0) begin : g_d0
      assign a_sk[i] = a_in[i];
      assign b_sk[i] = b_in[i];
      assign v_sk[i] = in_valid;
      assign f_sk[i] = in_first;
      assign l_sk[i] = in_last;
    end else begin : g_dn
      word_t a_d [i];
      word_t b_d [i];
      logic  v_d [i], f_d [i], l_d [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < i; s++) begin
            a_d[s] <= '0; b_d[s] <= '0; v_d[s] <= 1'b0; f_d[s] <= 1'b0; l_d[s] <= 1'b0;
          end
        end else begin
          a_d[0] <= a_in[i]; b_d[0] <= b_in[i];
          v_d[0] <= in_valid; f_d[0] <= in_first; l_d[0] <= in_last;
          for (int s = 1; s < i; s++) begin
            a_d[s] <= a_d[s-1]; b_d[s] <= b_d[s-1];
            v_d[s] <= v_d[s-1]; f_d[s] <= f_d[s-1]; l_d[s] <= l_d[s-1];
          end
        end
      end
      assign a_sk[i] = a_d[i-1];
      assign b_sk[i] = b_d[i-1];
      assign v_sk[i] = v_d[i-1];
      assign f_sk[i] = f_d[i-1];
      assign l_sk[i] = l_d[i-1];
    end
  end

  // PE grid: a, valid, first, last move right; b moves down (the flags
  // reach PE(i,j) on the row path at the same cycle as b on the column path)
  word_t a_h [N][N+1];
  logic  v_h [N][N+1], f_h [N][N+1], l_h [N][N+1];
  word_t b_v [N+1][N];

  for (genvar i = 0; i < N; i++) begin : g_row
    assign a_h[i][0] = a_sk[i];
    assign v_h[i][0] = v_sk[i];
    assign f_h[i][0] = f_sk[i];
    assign l_h[i][0] = l_sk[i];
    assign b_v[0][i] = b_sk[i];
    for (genvar j = 0; j < N; j++) begin : g_col
      systolic_pe u_pe (
        .clk, .rst_n,
        .in_valid (v_h[i][j]), .in_first (f_h[i][j]), .in_last (l_h[i][j]),
        .a_in     (a_h[i][j]), .b_in     (b_v[i][j]),
        .out_valid(v_h[i][j+1]), .out_first(f_h[i][j+1]), .out_last(l_h[i][j+1]),
        .a_out    (a_h[i][j+1]), .b_out    (b_v[i+1][j]),
        .acc      (acc_out[i][j])
      );
    end
  end

  assign done = v_h[N-1][N] && l_h[N-1][N];
endmodule
