// Double-buffered local memory of a combination engine.
//
// Two banks, each DEPTH addresses deep and NL lanes (32-bit words) wide.
// A producer fills one bank while the consumer reads the other; the banks
// swap by handshake, so loading the next operand block overlaps with the
// systolic array working on the current one ("two local memories in a
// double buffering manner"). Used twice per engine:
//   * property buffer (ALONG_K = 1): a 64-byte line of a row of X is written
//     to lane p_lane at addresses p_k .. p_k+15;
//   * weight buffer (ALONG_K = 0): a line of a row of W is written to lanes
//     p_lane .. p_lane+15 at address p_k.
// Producer: p_ready is high while the fill bank is empty; p_we writes one
// line; p_commit marks the bank full and moves to the other bank.
// Consumer: c_valid is high while the read bank is full; c_k selects an
// address and c_data holds all NL lanes one cycle later (registered read);
// c_release empties the bank and moves to the other bank.
module pingpong_buffer
  import snf_pkg::*;
#(
  parameter int unsigned NL      = 32,     // lanes = systolic array edge
  parameter int unsigned DEPTH   = 1024,   // longest K (feature width) held
  parameter bit          ALONG_K = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  // producer
  output logic                     p_ready,
  input  logic                     p_we,
  input  logic [$clog2(NL)-1:0]    p_lane,
  input  logic [$clog2(DEPTH)-1:0] p_k,
  input  line_t                    p_data,
  input  logic                     p_commit,
  // consumer
  output logic                     c_valid,
  input  logic [$clog2(DEPTH)-1:0] c_k,
  output word_t                    c_data [NL],
  input  logic                     c_release
);
  localparam int unsigned KW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(NL);

  word_t mem [2][DEPTH][NL];
  logic  full [2];
  logic  wbank, rbank;

  assign p_ready = !full[wbank];
  assign c_valid = full[rbank];

  always_ff @(posedge clk) begin
    if (p_we)
      for (int i = 0; i < LANES; i++) begin
        if (ALONG_K) mem[wbank][p_k + KW'(i)][p_lane] <= line_word(p_data, i);
        else         mem[wbank][p_k][p_lane + LW'(i)] <= line_word(p_data, i);
      end
    for (int l = 0; l < NL; l++) c_data[l] <= mem[rbank][c_k][l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full[0] <= 1'b0; full[1] <= 1'b0; wbank <= 1'b0; rbank <= 1'b0;
    end else if (clear) begin
      full[0] <= 1'b0; full[1] <= 1'b0; wbank <= 1'b0; rbank <= 1'b0;
    end else begin
      if (p_commit) begin
        full[wbank] <= 1'b1;
        wbank <= !wbank;
      end
      if (c_release) begin
        full[rbank] <= 1'b0;
        rbank <= !rbank;
      end
    end
  end

  always_ff @(posedge clk)
    if (rst_n) begin
      a_write_free: assert (!(p_we || p_commit) || !full[wbank]) else $error("write into a full bank");
      a_read_full:  assert (!c_release || full[rbank]) else $error("release of an empty bank");
    end
endmodule
