// Global cache shared by all combination and aggregation engines.
//
// Set-associative, write-back, write-allocate cache of 64-byte lines with
// true LRU replacement. The paper fixes capacity (16 MB), associativity
// (16 ways) and replacement (LRU) in its system table, and says that 64 B
// is the cache line size; the organisation below is this design's own:
//   * one request at a time (blocking); hit latency is 3 cycles from
//     acceptance to response (LOOKUP, then RESP);
//   * a miss writes back a dirty victim, then fills from DRAM; a full-line
//     write miss allocates without fetching (every request is a full line);
//   * LRU is kept as a per-way age (0 = most recent, WAYS-1 = least);
//   * after reset an INIT walk clears the tags, one set per cycle
//     (SETS cycles), before the first request is accepted;
//   * flush_req writes every dirty line back to DRAM and pulses flush_done.
// The response carries a hit flag that the feature reader forwards to the
// configuration controller's miss counters.
module global_cache
  import snf_pkg::*;
#(
  parameter longint unsigned CAPACITY = 64'd16777216,  // bytes (Table 2: 16MB)
  parameter int unsigned     WAYS     = 16             // Table 2: 16 ways
) (
  input  logic     clk,
  input  logic     rst_n,
  // engine side (from the cache arbiter)
  input  logic     s_valid,
  input  mem_req_t s_req,
  output logic     s_ready,
  output logic     s_rsp_valid,
  output mem_rsp_t s_rsp,
  // DRAM side
  output logic     m_valid,
  output mem_req_t m_req,
  input  logic     m_ready,
  input  logic     m_rsp_valid,
  input  mem_rsp_t m_rsp,
  // maintenance
  input  logic     flush_req,
  output logic     flush_done,
  output logic     init_done
);
  localparam int unsigned LINES = int'(CAPACITY / 64);
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned SW    = $clog2(SETS);
  localparam int unsigned WW    = $clog2(WAYS);
  localparam int unsigned TW    = LADDR_W - SW;

  typedef logic [TW-1:0] tag_t;
  typedef logic [WW-1:0] age_t;

  // storage
  line_t                 data_mem  [LINES];
  logic [WAYS-1:0][TW-1:0] tag_mem [SETS];
  logic [WAYS-1:0][WW-1:0] age_mem [SETS];
  logic [WAYS-1:0]       vld_mem   [SETS];
  logic [WAYS-1:0]       dty_mem   [SETS];

  typedef enum logic [3:0] {S_INIT, S_IDLE, S_LOOKUP, S_WB, S_WB_WAIT, S_FILL, S_FILL_WAIT,
                            S_RESP, S_FL_SCAN, S_FL_WAIT, S_FL_DONE} state_e;
  state_e state;

  mem_req_t        req_q;
  logic [SW-1:0]   init_set;
  logic [WW-1:0]   way_q;
  logic            hit_q;
  line_t           rdata_q;
  logic [SW+WW:0]  fl_idx;

  wire [SW-1:0] req_set = req_q.addr[SW-1:0];
  wire [TW-1:0] req_tag = req_q.addr[LADDR_W-1:SW];

  // lookup of the latched request
  logic [WAYS-1:0]         set_vld, set_dty;
  logic [WAYS-1:0][TW-1:0] set_tag;
  logic [WAYS-1:0][WW-1:0] set_age;
  logic                    lk_hit;
  logic [WAYS-1:0]         hit_vec;
  logic [WW-1:0]           lk_way, victim;
  logic                    have_inv;

  always_comb begin
    set_vld = vld_mem[req_set];
    set_dty = dty_mem[req_set];
    set_tag = tag_mem[req_set];
    set_age = age_mem[req_set];
    lk_hit  = 1'b0;
    lk_way  = '0;
    for (int w = 0; w < WAYS; w++) hit_vec[w] = set_vld[w] && set_tag[w] == req_tag;
    for (int w = 0; w < WAYS; w++)
      if (hit_vec[w]) begin
        lk_hit = 1'b1;
        lk_way = WW'(w);
      end
    victim   = '0;
    have_inv = 1'b0;
    for (int w = 0; w < WAYS; w++)
      if (!set_vld[w] && !have_inv) begin
        have_inv = 1'b1;
        victim   = WW'(w);
      end
    if (!have_inv)
      for (int w = 0; w < WAYS; w++)
        if (set_age[w] == age_t'(WAYS-1)) victim = WW'(w);
  end

  // new ages after touching way tw
  function automatic logic [WAYS-1:0][WW-1:0] touch(logic [WAYS-1:0][WW-1:0] a, logic [WW-1:0] tw);
    logic [WAYS-1:0][WW-1:0] n;
    for (int w = 0; w < WAYS; w++)
      n[w] = (WW'(w) == tw) ? '0 : ((a[w] < a[tw]) ? a[w] + 1'b1 : a[w]);
    return n;
  endfunction

  wire [SW-1:0] fl_set = fl_idx[SW+WW-1:WW];
  wire [WW-1:0] fl_way = fl_idx[WW-1:0];

  assign s_ready     = (state == S_IDLE) && !flush_req;
  assign s_rsp_valid = (state == S_RESP);
  assign s_rsp       = '{hit: hit_q, rdata: rdata_q};
  assign flush_done  = (state == S_FL_DONE);
  assign init_done   = (state != S_INIT);

  always_comb begin
    m_valid = 1'b0;
    m_req   = '{addr: req_q.addr, we: 1'b0, wdata: '0};
    unique case (state)
      S_WB: begin
        m_valid = 1'b1;
        m_req   = '{addr: {set_tag[way_q], req_set}, we: 1'b1,
                    wdata: data_mem[{req_set, way_q}]};
      end
      S_FILL: m_valid = 1'b1;
      S_FL_SCAN: begin
        m_valid = vld_mem[fl_set][fl_way] && dty_mem[fl_set][fl_way];
        m_req   = '{addr: {tag_mem[fl_set][fl_way], fl_set}, we: 1'b1,
                    wdata: data_mem[{fl_set, fl_way}]};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_INIT;
      init_set <= '0;
      fl_idx   <= '0;
      req_q    <= '0;
      way_q    <= '0;
      hit_q    <= 1'b0;
      rdata_q  <= '0;
    end else begin
      unique case (state)
        S_INIT: begin
          vld_mem[init_set] <= '0;
          dty_mem[init_set] <= '0;
          for (int w = 0; w < WAYS; w++) age_mem[init_set][w] <= WW'(w);
          init_set <= init_set + 1'b1;
          if (init_set == SW'(SETS-1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (flush_req) begin
            fl_idx <= '0;
            state  <= S_FL_SCAN;
          end else if (s_valid) begin
            req_q <= s_req;
            state <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          hit_q <= lk_hit;
          if (lk_hit) begin
            age_mem[req_set] <= touch(set_age, lk_way);
            if (req_q.we) begin
              data_mem[{req_set, lk_way}] <= req_q.wdata;
              dty_mem[req_set][lk_way]    <= 1'b1;
              rdata_q <= req_q.wdata;
            end else begin
              rdata_q <= data_mem[{req_set, lk_way}];
            end
            state <= S_RESP;
          end else begin
            way_q <= victim;
            if (set_vld[victim] && set_dty[victim]) state <= S_WB;
            else if (req_q.we) begin
              // allocate a full-line write without fetching
              data_mem[{req_set, victim}] <= req_q.wdata;
              tag_mem[req_set][victim]    <= req_tag;
              vld_mem[req_set][victim]    <= 1'b1;
              dty_mem[req_set][victim]    <= 1'b1;
              age_mem[req_set]            <= touch(set_age, victim);
              rdata_q <= req_q.wdata;
              state   <= S_RESP;
            end else state <= S_FILL;
          end
        end
        S_WB:      if (m_ready) state <= S_WB_WAIT;
        S_WB_WAIT: if (m_rsp_valid) begin
          dty_mem[req_set][way_q] <= 1'b0;
          if (req_q.we) begin
            data_mem[{req_set, way_q}] <= req_q.wdata;
            tag_mem[req_set][way_q]    <= req_tag;
            vld_mem[req_set][way_q]    <= 1'b1;
            dty_mem[req_set][way_q]    <= 1'b1;
            age_mem[req_set]           <= touch(set_age, way_q);
            rdata_q <= req_q.wdata;
            state   <= S_RESP;
          end else state <= S_FILL;
        end
        S_FILL:      if (m_ready) state <= S_FILL_WAIT;
        S_FILL_WAIT: if (m_rsp_valid) begin
          data_mem[{req_set, way_q}] <= m_rsp.rdata;
          tag_mem[req_set][way_q]    <= req_tag;
          vld_mem[req_set][way_q]    <= 1'b1;
          dty_mem[req_set][way_q]    <= 1'b0;
          age_mem[req_set]           <= touch(set_age, way_q);
          rdata_q <= m_rsp.rdata;
          state   <= S_RESP;
        end
        S_RESP: state <= S_IDLE;
        S_FL_SCAN: begin
          if (m_valid) begin
            if (m_ready) state <= S_FL_WAIT;
          end else if (fl_idx == (SW+WW+1)'(LINES-1)) state <= S_FL_DONE;
          else fl_idx <= fl_idx + 1'b1;
        end
        S_FL_WAIT: if (m_rsp_valid) begin
          dty_mem[fl_set][fl_way] <= 1'b0;
          if (fl_idx == (SW+WW+1)'(LINES-1)) state <= S_FL_DONE;
          else begin
            fl_idx <= fl_idx + 1'b1;
            state  <= S_FL_SCAN;
          end
        end
        S_FL_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // a line is never present in two ways of a set
  always_ff @(posedge clk)
    if (rst_n && state == S_LOOKUP) a_one_hot_hit: assert ((hit_vec & (hit_vec - 1'b1)) == '0) else $error("multi-way hit");
endmodule
