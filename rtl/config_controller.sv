// Configuration controller: Automatic Tile Morphing (ATM).
//
// The adjacency matrix is cut into NUNIT (64) unit columns; a tiling is the
// array tile_width_arr, the width of each vertical strip of square tiles in
// unit columns (e.g. 32 entries of 2 = 32x32 tiles). Feature slicing makes
// every round (one feature slice) traverse the graph in the same pattern,
// so the controller measures each round and picks the next round's tiling.
//
// Per round it
//   * counts feature accesses and misses per unit column (Feature Access
//     Cnt / Miss Cnt registers, fed by the feature reader) and the round's
//     cycles (Cycle Counter);
//   * at round_end sums the counts of each strip and divides (Adder &
//     Divider, a 48-step restoring divider) to get each strip's miss ratio
//     in Q0.16, written to the round_cur row of the ATM status table;
//   * runs Algorithm 1: if round_cur.cycles < round_opt.cycles the current
//     round becomes round_opt. COARSE morphing halves (HALVING) or merges
//     (MERGING) every strip; FINE morphing halves the strip with the worst
//     miss ratio or merges the strip with the best one into its neighbour;
//   * writes the result into the Next Tile Width registers, read by the
//     vertex prefetch, and raises cfg_valid.
// Search order (the paper's text; Algorithm 1 omits it): from the default
// tiling, one round is measured with every strip halved and one with the
// default strips merged; coarse morphing then continues in the direction
// that beat the others (or goes straight to FINE if the default was best).
// When a direction stops helping, roll back to round_opt and enter
// FINE, halving worst-miss strips first and then merging best-miss strips;
// when merging also stops helping, round_opt is kept for all further
// rounds ("settled"). Algorithm 1 alone would stop at the first slower FINE
// round; the text's halve-then-merge sequence is followed here. A step that
// cannot be applied (a strip of width 1 to halve, a single strip to merge)
// counts as a slower round. Fine merges pair the chosen strip with its right
// neighbour, or with its left one if it is the last strip (the paper says
// only "adjacent").
//
// Timing: the decision takes about NUNIT + 49 * (strips) + 2*NUNIT cycles
// after round_end; the next round must wait for cfg_valid. The paper
// instead decides from counts up to the penultimate strip to hide this.
module config_controller
  import snf_pkg::*;
#(
  parameter int unsigned DEFAULT_BV = 2    // Fig. 5 example starts at 2x2 tiles
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,                // load the default tiling, restart ATM
  // statistics from the feature reader
  input  logic        stat_valid,
  input  logic [5:0]  stat_unit,
  input  logic        stat_miss,
  // round boundaries
  input  logic        round_start,
  input  logic        round_end,
  // to the vertex prefetch
  output logic        cfg_valid,
  output tw_t         tile_width_arr [NUNIT],
  output logic [6:0]  n_tiles,
  // observation
  output phase_e      phase,
  output dir_e        direction,
  output logic        settled,
  output logic [5:0]  tile_updated_idx,
  output logic [31:0] opt_cycles,
  output logic        decided,            // one-cycle pulse when a new tiling is ready
  output logic [2:0]  decided_op
);
  typedef enum logic [2:0] {OP_COPY, OP_HALVE_ALL, OP_MERGE_ALL, OP_HALVE_ONE, OP_MERGE_ONE,
                            OP_PROBE_MERGE} op_e;
  typedef enum logic [3:0] {S_IDLE, S_READY, S_RUN, S_RATIO, S_DIV, S_DECIDE, S_CHECK,
                            S_SEL, S_GEN} state_e;
  state_e state;

  // statistics registers
  logic [31:0] acc_cnt  [NUNIT];
  logic [31:0] miss_cnt [NUNIT];
  logic [31:0] cycle_cnt;

  // ATM status table
  tw_t         opt_tw [NUNIT];
  logic [31:0] opt_mr [NUNIT];
  logic [6:0]  opt_n;
  tw_t         cur_tw [NUNIT];
  logic [31:0] cur_mr [NUNIT];
  logic [6:0]  cur_n;
  logic [31:0] cur_cycles;
  logic [31:0] opt_cycles_q;

  // next tile width registers
  tw_t         nxt_tw [NUNIT];
  logic [6:0]  nxt_n;

  logic        first_round, force_worse;
  logic [1:0]  trial;       // coarse probing: 1 halving trial, 2 merging trial, 3 done
  logic        halve_won;   // the halving trial beat the default tiling
  op_e         op;
  logic [5:0]  sel_k;

  // ratio / divider state
  logic [6:0]  t_idx;
  logic [6:0]  c_idx;
  tw_t         rem_w;
  logic [31:0] sum_a, sum_m;
  logic [47:0] div_num, div_q;
  logic [32:0] div_rem;
  logic [31:0] div_den;
  logic [5:0]  div_step;

  // selection / generation state
  logic [6:0]  i_idx, j_idx;
  logic [31:0] sel_val;
  logic        sel_found;

  assign cfg_valid = (state == S_READY);
  assign n_tiles   = nxt_n;
  assign opt_cycles = opt_cycles_q;
  always_comb for (int i = 0; i < NUNIT; i++) tile_width_arr[i] = nxt_tw[i];

  wire [31:0] sum_a_n = sum_a + acc_cnt[c_idx[5:0]];
  wire [31:0] sum_m_n = sum_m + miss_cnt[c_idx[5:0]];
  wire [32:0] div_try = {div_rem[31:0], div_num[47]};

  // feasibility of the chosen step on round_opt
  logic all_ge2, any_ge2;
  always_comb begin
    all_ge2 = 1'b1;
    any_ge2 = 1'b0;
    for (int i = 0; i < NUNIT; i++)
      if (7'(i) < opt_n) begin
        if (opt_tw[i] < tw_t'(2)) all_ge2 = 1'b0;
        else any_ge2 = 1'b1;
      end
  end

  wire is_better = (cur_cycles < opt_cycles_q) && !force_worse;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      phase <= COARSE; direction <= HALVING; settled <= 1'b0;
      trial <= '0; halve_won <= 1'b0; first_round <= 1'b1; force_worse <= 1'b0;
      op <= OP_COPY; sel_k <= '0; tile_updated_idx <= '0;
      opt_cycles_q <= '1; cur_cycles <= '0; cycle_cnt <= '0;
      opt_n <= '0; cur_n <= '0; nxt_n <= '0;
      t_idx <= '0; c_idx <= '0; rem_w <= '0; sum_a <= '0; sum_m <= '0;
      div_num <= '0; div_q <= '0; div_rem <= '0; div_den <= '0; div_step <= '0;
      i_idx <= '0; j_idx <= '0; sel_val <= '0; sel_found <= 1'b0;
      decided <= 1'b0; decided_op <= '0;
      for (int i = 0; i < NUNIT; i++) begin
        acc_cnt[i] <= '0; miss_cnt[i] <= '0;
        opt_tw[i] <= '0; opt_mr[i] <= '0; cur_tw[i] <= '0; cur_mr[i] <= '0; nxt_tw[i] <= '0;
      end
    end else begin
      decided <= 1'b0;
      if (init) begin
        for (int i = 0; i < NUNIT; i++)
          nxt_tw[i] <= (i < DEFAULT_BV) ? tw_t'(NUNIT / DEFAULT_BV) : '0;
        nxt_n <= 7'(DEFAULT_BV);
        phase <= COARSE; direction <= HALVING; settled <= 1'b0;
        trial <= '0; halve_won <= 1'b0; first_round <= 1'b1; force_worse <= 1'b0;
        opt_cycles_q <= '1;
        state <= S_READY;
      end else begin
        unique case (state)
          S_IDLE: ;
          S_READY: if (round_start) begin
            for (int i = 0; i < NUNIT; i++) begin
              cur_tw[i] <= nxt_tw[i]; cur_mr[i] <= '0;
              acc_cnt[i] <= '0; miss_cnt[i] <= '0;
            end
            cur_n     <= nxt_n;
            cycle_cnt <= '0;
            state     <= S_RUN;
          end
          S_RUN: begin
            cycle_cnt <= cycle_cnt + 1'b1;
            if (stat_valid) begin
              acc_cnt[stat_unit] <= acc_cnt[stat_unit] + 1'b1;
              if (stat_miss) miss_cnt[stat_unit] <= miss_cnt[stat_unit] + 1'b1;
            end
            if (round_end) begin
              cur_cycles <= cycle_cnt + 1'b1;
              t_idx <= '0; c_idx <= '0; rem_w <= cur_tw[0];
              sum_a <= '0; sum_m <= '0;
              state <= S_RATIO;
            end
          end
          // Adder: sum the unit columns of strip t_idx
          S_RATIO: begin
            c_idx <= c_idx + 1'b1;
            if (rem_w == tw_t'(1)) begin
              div_num  <= {sum_m_n, 16'd0};
              div_den  <= sum_a_n;
              div_rem  <= '0;
              div_q    <= '0;
              div_step <= '0;
              state    <= S_DIV;
            end else begin
              sum_a <= sum_a_n; sum_m <= sum_m_n;
              rem_w <= rem_w - 1'b1;
            end
          end
          // Divider: miss / access in Q0.16, 48 restoring steps
          S_DIV: begin
            if (div_den == '0) begin
              div_step <= 6'd48;
            end else begin
              div_num <= {div_num[46:0], 1'b0};
              if (div_try >= {1'b0, div_den}) begin
                div_rem <= div_try - {1'b0, div_den};
                div_q   <= {div_q[46:0], 1'b1};
              end else begin
                div_rem <= div_try;
                div_q   <= {div_q[46:0], 1'b0};
              end
              div_step <= div_step + 1'b1;
            end
            if (div_step == 6'd48) begin
              cur_mr[t_idx[5:0]] <= (div_den == '0) ? '0 : div_q[31:0];
              if (t_idx + 1'b1 == cur_n) begin
                state <= S_DECIDE;
              end else begin
                t_idx <= t_idx + 1'b1;
                rem_w <= cur_tw[t_idx[5:0] + 1'b1];
                sum_a <= '0; sum_m <= '0;
                state <= S_RATIO;
              end
            end
          end
          // Algorithm 1, lines 1-7, and the choice of the next step
          S_DECIDE: begin
            force_worse <= 1'b0;
            first_round <= 1'b0;
            if (settled) begin
              op <= OP_COPY;
            end else begin
              if (is_better) begin
                for (int i = 0; i < NUNIT; i++) begin
                  opt_tw[i] <= cur_tw[i]; opt_mr[i] <= cur_mr[i];
                end
                opt_n        <= cur_n;
                opt_cycles_q <= cur_cycles;
              end
              if (phase == COARSE && trial == 2'd1) begin
                // halving trial measured; now measure merging of the default
                halve_won <= is_better;
                trial     <= 2'd2;
                op        <= OP_PROBE_MERGE;
              end else if (phase == COARSE && trial == 2'd2) begin
                // both trials measured: continue in the better direction
                trial <= 2'd3;
                if (is_better) begin
                  direction <= MERGING; op <= OP_MERGE_ALL;
                end else if (halve_won) begin
                  direction <= HALVING; op <= OP_HALVE_ALL;
                end else begin
                  phase <= FINE; direction <= HALVING; op <= OP_HALVE_ONE;
                end
              end else if (is_better) begin
                if (first_round) trial <= 2'd1;
                unique case ({phase, direction})
                  {COARSE, HALVING}: op <= OP_HALVE_ALL;
                  {COARSE, MERGING}: op <= OP_MERGE_ALL;
                  {FINE,   HALVING}: op <= OP_HALVE_ONE;
                  default:           op <= OP_MERGE_ONE;
                endcase
              end else if (phase == COARSE) begin
                // slower: roll back to round_opt and start fine morphing
                phase <= FINE; direction <= HALVING;
                op <= OP_HALVE_ONE;
              end else if (direction == HALVING) begin
                direction <= MERGING;
                op <= OP_MERGE_ONE;
              end else begin
                settled <= 1'b1;
                op <= OP_COPY;
              end
            end
            state <= S_CHECK;
          end
          S_CHECK: begin
            i_idx <= '0; j_idx <= '0; sel_found <= 1'b0; sel_k <= '0; sel_val <= '0;
            unique case (op)
              OP_HALVE_ALL: if (all_ge2 && opt_n <= 7'(NUNIT/2)) state <= S_GEN;
                            else begin force_worse <= 1'b1; state <= S_DECIDE; end
              OP_MERGE_ALL: if (opt_n >= 7'd2) state <= S_GEN;
                            else begin force_worse <= 1'b1; state <= S_DECIDE; end
              OP_HALVE_ONE: if (any_ge2) state <= S_SEL;
                            else begin force_worse <= 1'b1; state <= S_DECIDE; end
              OP_MERGE_ONE: if (opt_n >= 7'd2) state <= S_SEL;
                            else begin force_worse <= 1'b1; state <= S_DECIDE; end
              // the merging trial starts from the default tiling, not round_opt
              OP_PROBE_MERGE: if (DEFAULT_BV >= 2) begin
                              for (int i = 0; i < NUNIT; i++)
                                nxt_tw[i] <= (i < DEFAULT_BV / 2) ? tw_t'(2 * NUNIT / DEFAULT_BV) : '0;
                              nxt_n      <= 7'(DEFAULT_BV / 2);
                              decided    <= 1'b1;
                              decided_op <= OP_MERGE_ALL;
                              state      <= S_READY;
                            end else begin force_worse <= 1'b1; state <= S_DECIDE; end
              default: state <= S_GEN;
            endcase
          end
          // find the worst (halving) or best (merging) miss-ratio strip
          S_SEL: begin
            if (i_idx == opt_n) begin
              i_idx <= '0;
              if (op == OP_MERGE_ONE && sel_k == 6'(opt_n - 7'd1)) sel_k <= sel_k - 1'b1;
              state <= S_GEN;
            end else begin
              i_idx <= i_idx + 1'b1;
              if (op == OP_HALVE_ONE) begin
                if (opt_tw[i_idx[5:0]] >= tw_t'(2) &&
                    (!sel_found || opt_mr[i_idx[5:0]] > sel_val)) begin
                  sel_found <= 1'b1; sel_val <= opt_mr[i_idx[5:0]]; sel_k <= i_idx[5:0];
                end
              end else if (!sel_found || opt_mr[i_idx[5:0]] < sel_val) begin
                sel_found <= 1'b1; sel_val <= opt_mr[i_idx[5:0]]; sel_k <= i_idx[5:0];
              end
            end
          end
          // build new_tile_width_arr from round_opt, one source strip per cycle
          S_GEN: begin
            if (i_idx >= opt_n) begin
              for (int i = 0; i < NUNIT; i++) if (7'(i) >= j_idx) nxt_tw[i] <= '0;
              nxt_n <= j_idx;
              if (op == OP_HALVE_ONE || op == OP_MERGE_ONE) tile_updated_idx <= sel_k;
              decided    <= 1'b1;
              decided_op <= op;
              state <= S_READY;
            end else begin
              automatic tw_t w0 = opt_tw[i_idx[5:0]];
              automatic tw_t w1 = (i_idx + 1'b1 < opt_n) ? opt_tw[i_idx[5:0] + 1'b1] : '0;
              automatic logic halve = (op == OP_HALVE_ALL) ||
                                      (op == OP_HALVE_ONE && i_idx[5:0] == sel_k);
              automatic logic merge = (w1 != '0) && ((op == OP_MERGE_ALL) ||
                                      (op == OP_MERGE_ONE && i_idx[5:0] == sel_k));
              if (halve) begin
                nxt_tw[j_idx[5:0]]        <= w0 >> 1;
                nxt_tw[j_idx[5:0] + 1'b1] <= w0 - (w0 >> 1);
                j_idx <= j_idx + 7'd2;
                i_idx <= i_idx + 7'd1;
              end else if (merge) begin
                nxt_tw[j_idx[5:0]] <= w0 + w1;
                j_idx <= j_idx + 7'd1;
                i_idx <= i_idx + 7'd2;
              end else begin
                nxt_tw[j_idx[5:0]] <= w0;
                j_idx <= j_idx + 7'd1;
                i_idx <= i_idx + 7'd1;
              end
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  // the strips always cover the 64 unit columns exactly
  logic [7:0] cov;
  always_comb begin
    cov = '0;
    for (int i = 0; i < NUNIT; i++) if (7'(i) < nxt_n) cov = cov + 8'(nxt_tw[i]);
  end
  always_ff @(posedge clk)
    if (rst_n && cfg_valid) a_cover: assert (cov == 8'(NUNIT)) else $error("tiling does not cover the matrix");
endmodule
