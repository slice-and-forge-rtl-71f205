// Synchronous FIFO with valid/ready on both sides, used to decouple the
// prefetch stages of the aggregation engine. DEPTH entries of type T,
// registered storage, one push and one pop per cycle. out_valid is high
// whenever the FIFO is not empty; in_ready whenever it is not full.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;

  assign in_ready  = (cnt != AW'(0) + (AW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (push) begin
        mem[wp] <= in_data;
        wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // Overflow/underflow cannot happen through the handshake.
  always_ff @(posedge clk)
    if (rst_n) a_no_overflow: assert (cnt <= (AW+1)'(DEPTH)) else $error("fifo overflow");
endmodule
