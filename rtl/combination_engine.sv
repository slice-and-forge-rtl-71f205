// Combination engine: Y = X * W for a range of rows (Fig. 2, left).
//
// The engine works on 32-row blocks of X. Three processes run at once:
//   * the property-buffer loader reads a block of X (32 rows x f_in words,
//     row major at x_base) from DRAM into the property buffer;
//   * the weight reader reads a 32-column block of W (f_in x 32 words, W row
//     major at w_base, f_out words per row) through the global cache into
//     the weight buffer, once per (row block, column block);
//   * the compute process streams k = 0..f_in-1 from both buffers into the
//     32x32 systolic array and, when the array is done, writes the 32x32
//     result block to the global cache at y_base (row major, f_out words per
//     row), where the aggregation engines read it as their features.
// Both buffers are double-buffered, so the next blocks load while the
// array computes and the results are written. Rows past row_hi in the
// last block are computed on stale data and not written.
// Requirements: f_in a multiple of 16 and at most K_MAX, f_out a multiple
// of 32 (feature widths are padded); the paper does not say how widths
// that are not multiples of the array size are handled.
// The weight reader and the result writer share the engine's cache port
// through a two-way arbiter.
module combination_engine
  import snf_pkg::*;
#(
  parameter int unsigned N     = 32,    // Table 2: 32x32 systolic array
  parameter int unsigned K_MAX = 1024   // longest input feature width held
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        done,
  output logic        busy,
  input  laddr_t      x_base,
  input  laddr_t      w_base,
  input  laddr_t      y_base,
  input  logic [15:0] f_in,
  input  logic [15:0] f_out,
  input  vid_t        row_lo,
  input  vid_t        row_hi,
  // DRAM port (property buffer loads)
  output logic        d_valid,
  output mem_req_t    d_req,
  input  logic        d_ready,
  input  logic        d_rsp_valid,
  input  mem_rsp_t    d_rsp,
  // global cache port (weights in, results out)
  output logic        c_valid,
  output mem_req_t    c_req,
  input  logic        c_ready,
  input  logic        c_rsp_valid,
  input  mem_rsp_t    c_rsp,
  // observation
  output logic        overlap        // a buffer is being filled while the array computes
);
  localparam int unsigned KW = $clog2(K_MAX);
  localparam int unsigned LW = $clog2(N);
  localparam int unsigned LPB_I = N / 16;
  localparam laddr_t      LPB = laddr_t'(LPB_I);   // lines per N-word block row

  wire vid_t       n_rows  = row_hi - row_lo;
  wire vid_t       n_rb    = (n_rows + vid_t'(N - 1)) / vid_t'(N);
  wire [15:0]      n_cb    = f_out / 16'(N);
  wire [15:0]      xl_row_l = f_in >> 4;     // lines per row of X
  wire [15:0]      wl_row  = f_out >> 4;     // lines per row of W and Y

  // ---------------- property buffer and its loader (DRAM) ----------------
  logic          pb_ready, pb_we, pb_commit, pb_valid, pb_release;
  logic [LW-1:0] pb_lane;
  logic [KW-1:0] pb_k, cmp_k;
  line_t         pb_data;
  word_t         pb_out [N];

  pingpong_buffer #(.NL(N), .DEPTH(K_MAX), .ALONG_K(1'b1)) u_prop_buf (
    .clk, .rst_n, .clear(start),
    .p_ready(pb_ready), .p_we(pb_we), .p_lane(pb_lane), .p_k(pb_k), .p_data(pb_data),
    .p_commit(pb_commit), .c_valid(pb_valid), .c_k(cmp_k), .c_data(pb_out),
    .c_release(pb_release));

  typedef enum logic [2:0] {L_IDLE, L_WAITBUF, L_REQ, L_WAIT, L_NEXT, L_COMMIT} ld_e;
  ld_e    xl_st;
  vid_t   xl_rb;
  logic [LW-1:0] xl_r;
  logic [15:0]   xl_l;
  wire vid_t     xl_row = row_lo + xl_rb * vid_t'(N) + vid_t'(xl_r);

  assign d_valid = (xl_st == L_REQ);
  assign d_req   = '{addr: x_base + laddr_t'(xl_row) * laddr_t'(xl_row_l) + laddr_t'(xl_l),
                     we: 1'b0, wdata: '0};
  assign pb_lane   = xl_r;
  assign pb_k      = KW'({xl_l, 4'b0});
  assign pb_data   = d_rsp.rdata;
  assign pb_we     = (xl_st == L_WAIT) && d_rsp_valid;
  assign pb_commit = (xl_st == L_COMMIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xl_st <= L_IDLE; xl_rb <= '0; xl_r <= '0; xl_l <= '0;
    end else if (start) begin
      xl_st <= L_WAITBUF; xl_rb <= '0; xl_r <= '0; xl_l <= '0;
    end else begin
      unique case (xl_st)
        L_IDLE: ;
        L_WAITBUF: if (xl_rb == n_rb) xl_st <= L_IDLE;
                   else if (pb_ready) begin
                     xl_r <= '0; xl_l <= '0;
                     xl_st <= L_REQ;
                   end
        L_REQ:  if (d_ready) xl_st <= L_WAIT;
        L_WAIT: if (d_rsp_valid) xl_st <= L_NEXT;
        L_NEXT: begin
          if (xl_l + 16'd1 != xl_row_l) begin
            xl_l <= xl_l + 16'd1;
            xl_st <= L_REQ;
          end else begin
            xl_l <= '0;
            if (xl_r == LW'(N - 1) || xl_row + 1'b1 >= row_hi) xl_st <= L_COMMIT;
            else begin
              xl_r <= xl_r + 1'b1;
              xl_st <= L_REQ;
            end
          end
        end
        L_COMMIT: begin
          xl_rb <= xl_rb + 1'b1;
          xl_st <= L_WAITBUF;
        end
        default: xl_st <= L_IDLE;
      endcase
    end
  end

  // ---------------- weight buffer and weight reader (cache) ----------------
  logic          wb_ready, wb_we, wb_commit, wb_valid, wb_release;
  logic [LW-1:0] wb_lane;
  logic [KW-1:0] wb_k;
  word_t         wb_out [N];

  ld_e           wl_st;
  vid_t          wl_rb;
  logic [15:0]   wl_cb;
  logic [15:0]   wl_k;
  logic          wl_h;

  logic     wr_valid, wr_ready, wr_rsp_valid;   // weight reader on the cache arbiter
  logic     ow_valid, ow_ready, ow_rsp_valid;   // result writer on the cache arbiter
  mem_req_t wr_req, ow_req;
  mem_rsp_t arb_rsp;

  pingpong_buffer #(.NL(N), .DEPTH(K_MAX), .ALONG_K(1'b0)) u_weight_buf (
    .clk, .rst_n, .clear(start),
    .p_ready(wb_ready), .p_we(wb_we), .p_lane(wb_lane), .p_k(wb_k), .p_data(arb_rsp.rdata),
    .p_commit(wb_commit), .c_valid(wb_valid), .c_k(cmp_k), .c_data(wb_out),
    .c_release(wb_release));

  assign wr_valid  = (wl_st == L_REQ);
  assign wr_req    = '{addr: w_base + laddr_t'(wl_k) * laddr_t'(wl_row)
                             + laddr_t'(wl_cb) * LPB + laddr_t'(wl_h),
                       we: 1'b0, wdata: '0};
  assign wb_lane   = LW'({wl_h, 4'b0});
  assign wb_k      = KW'(wl_k);
  assign wb_we     = (wl_st == L_WAIT) && wr_rsp_valid;
  assign wb_commit = (wl_st == L_COMMIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wl_st <= L_IDLE; wl_rb <= '0; wl_cb <= '0; wl_k <= '0; wl_h <= 1'b0;
    end else if (start) begin
      wl_st <= L_WAITBUF; wl_rb <= '0; wl_cb <= '0; wl_k <= '0; wl_h <= 1'b0;
    end else begin
      unique case (wl_st)
        L_IDLE: ;
        L_WAITBUF: if (wl_rb == n_rb) wl_st <= L_IDLE;
                   else if (wb_ready) begin
                     wl_k <= '0; wl_h <= 1'b0;
                     wl_st <= L_REQ;
                   end
        L_REQ:  if (wr_ready) wl_st <= L_WAIT;
        L_WAIT: if (wr_rsp_valid) wl_st <= L_NEXT;
        L_NEXT: begin
          if (!wl_h) begin
            wl_h <= 1'b1;
            wl_st <= L_REQ;
          end else if (wl_k + 16'd1 != f_in) begin
            wl_h <= 1'b0;
            wl_k <= wl_k + 16'd1;
            wl_st <= L_REQ;
          end else wl_st <= L_COMMIT;
        end
        L_COMMIT: begin
          if (wl_cb + 16'd1 == n_cb) begin
            wl_cb <= '0;
            wl_rb <= wl_rb + 1'b1;
          end else wl_cb <= wl_cb + 16'd1;
          wl_st <= L_WAITBUF;
        end
        default: wl_st <= L_IDLE;
      endcase
    end
  end

  // ---------------- systolic array and result writer ----------------
  typedef enum logic [2:0] {C_IDLE, C_WAIT, C_STREAM, C_DRAIN, C_WRITE, C_WR_WAIT, C_NEXT} cmp_e;
  cmp_e          c_st;
  vid_t          c_rb;
  logic [15:0]   c_cb;
  logic [15:0]   c_k;
  logic          s_valid, s_first, s_last;
  logic          arr_done;
  word_t         acc [N][N];
  logic [LW-1:0] o_r;
  logic          o_h;
  wire vid_t     o_row = row_lo + c_rb * vid_t'(N) + vid_t'(o_r);

  systolic_array #(.N(N)) u_array (
    .clk, .rst_n,
    .in_valid(s_valid), .in_first(s_first), .in_last(s_last),
    .a_in(pb_out), .b_in(wb_out), .done(arr_done), .acc_out(acc));

  assign cmp_k = KW'(c_k);

  line_t o_line;
  always_comb
    for (int l = 0; l < 16; l++) o_line[l*WORD_W +: WORD_W] = acc[o_r][{o_h, 4'b0} + LW'(l)];

  assign ow_valid = (c_st == C_WRITE);
  assign ow_req   = '{addr: y_base + laddr_t'(o_row) * laddr_t'(wl_row)
                            + laddr_t'(c_cb) * LPB + laddr_t'(o_h),
                      we: 1'b1, wdata: o_line};

  assign wb_release = (c_st == C_NEXT);
  assign pb_release = (c_st == C_NEXT) && (c_cb + 16'd1 == n_cb);
  assign busy       = (c_st != C_IDLE);
  assign overlap    = (c_st == C_STREAM || c_st == C_DRAIN) && (pb_we || wb_we);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_st <= C_IDLE; c_rb <= '0; c_cb <= '0; c_k <= '0;
      s_valid <= 1'b0; s_first <= 1'b0; s_last <= 1'b0;
      o_r <= '0; o_h <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      // buffer reads are registered: operands reach the array one cycle after c_k
      s_valid <= (c_st == C_STREAM);
      s_first <= (c_st == C_STREAM) && (c_k == 16'd0);
      s_last  <= (c_st == C_STREAM) && (c_k + 16'd1 == f_in);
      if (start) begin
        c_st <= C_WAIT; c_rb <= '0; c_cb <= '0;
      end else begin
        unique case (c_st)
          C_IDLE: ;
          C_WAIT: if (c_rb == n_rb) begin
                    c_st <= C_IDLE;
                    done <= 1'b1;
                  end else if (pb_valid && wb_valid) begin
                    c_k <= '0;
                    c_st <= C_STREAM;
                  end
          C_STREAM: if (c_k + 16'd1 == f_in) c_st <= C_DRAIN;
                    else c_k <= c_k + 16'd1;
          C_DRAIN: if (arr_done) begin
                     o_r <= '0; o_h <= 1'b0;
                     c_st <= C_WRITE;
                   end
          C_WRITE: if (ow_ready) c_st <= C_WR_WAIT;
          C_WR_WAIT: if (ow_rsp_valid) begin
            if (!o_h) begin
              o_h <= 1'b1;
              c_st <= C_WRITE;
            end else if (o_r != LW'(N - 1) && o_row + 1'b1 < row_hi) begin
              o_h <= 1'b0;
              o_r <= o_r + 1'b1;
              c_st <= C_WRITE;
            end else c_st <= C_NEXT;
          end
          C_NEXT: begin
            if (c_cb + 16'd1 == n_cb) begin
              c_cb <= '0;
              c_rb <= c_rb + 1'b1;
            end else c_cb <= c_cb + 16'd1;
            c_st <= C_WAIT;
          end
          default: c_st <= C_IDLE;
        endcase
      end
    end
  end

  // ---------------- cache port arbitration ----------------
  logic [1:0]  arb_valid, arb_ready, arb_rsp_v;
  mem_req_t    arb_req [2];
  assign arb_valid  = {ow_valid, wr_valid};
  assign arb_req[0] = wr_req;
  assign arb_req[1] = ow_req;
  assign wr_ready   = arb_ready[0];
  assign ow_ready   = arb_ready[1];
  assign wr_rsp_valid = arb_rsp_v[0];
  assign ow_rsp_valid = arb_rsp_v[1];

  mem_arbiter #(.N(2)) u_cache_arb (
    .clk, .rst_n,
    .s_valid(arb_valid), .s_req(arb_req), .s_ready(arb_ready),
    .s_rsp_valid(arb_rsp_v), .s_rsp(arb_rsp),
    .m_valid(c_valid), .m_req(c_req), .m_ready(c_ready),
    .m_rsp_valid(c_rsp_valid), .m_rsp(c_rsp));

  always_ff @(posedge clk)
    if (rst_n && start) begin
      a_fin:  assert (f_in[3:0] == '0 && f_in != '0 && f_in <= 16'(K_MAX)) else $error("f_in must be a multiple of 16 up to K_MAX");
      a_fout: assert (f_out % 16'(N) == '0 && f_out != '0) else $error("f_out must be a multiple of N");
    end
endmodule
