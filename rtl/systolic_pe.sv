// Processing element of the output-stationary systolic array.
// Multiplies the operand arriving from the left (a, a row element of X)
// with the one arriving from the top (b, a column element of W) in Q16.16
// and accumulates into its own output register; first restarts the sum.
// Operands and their flags are passed right and down one cycle later.
module systolic_pe
  import snf_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  logic  in_last,
  input  word_t a_in,
  input  word_t b_in,
  output logic  out_valid,
  output logic  out_first,
  output logic  out_last,
  output word_t a_out,
  output word_t b_out,
  output word_t acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_first <= 1'b0; out_last <= 1'b0;
      a_out <= '0; b_out <= '0; acc <= '0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
      out_last  <= in_last;
      a_out     <= a_in;
      b_out     <= b_in;
      if (in_valid) acc <= (in_first ? '0 : acc) + fxmul(a_in, b_in);
    end
  end
endmodule
