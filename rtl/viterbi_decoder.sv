// viterbi_decoder -- quantized sliding-window Viterbi decoder for capsule
// localization.
//
// The capsule's path through the GI tract is modelled as a hidden Markov model
// whose four hidden states are the organs (0 esophagus, 1 stomach, 2 small
// intestine, 3 colon) and whose observations are the CNN's per-frame class
// labels. Single CNN labels are noisy (bubbles, debris); the decoder finds the
// most likely organ sequence over the last win_size labels. It reports the
// organ at the newest frame of that sequence (out_state, the quickest
// estimate) and at the oldest frame (first_state). The frame sequencer
// decides on first_state: the small intestine counts as reached once the
// whole decoded window lies in it. That decision lags the true transition by
// about one window, and a run of misleading labels shorter than the window
// cannot trigger it.
//
// Arithmetic: all probabilities are held as unsigned fixed-point costs,
// cost = round(-log(p) * scale), COST_W bits each, so the Viterbi recursion
// needs only additions and comparisons:
//   d_0(s) = init(s) + emit(s, o_0)
//   d_t(s) = min_p [ d_{t-1}(p) + trans(p, s) ] + emit(s, o_t),  bp_t(s) = argmin
// followed by a traceback from argmin_s d_{n-1}(s). Ties go to the lower state.
// Metrics are MW bits wide, enough for 2*WIN_MAX maximal costs, so no
// normalisation is needed: every decode restarts from the initial costs.
//
// Interface: the 36 model costs are written through tbl_we/tbl_sel/tbl_idx
// (sel 0: init[idx[1:0]], 1: trans[from=idx[3:2]][to=idx[1:0]], 2:
// emit[state=idx[3:2]][obs=idx[1:0]]); they reset to zero. obs is accepted
// when obs_valid and obs_ready are high; the label enters a WIN_MAX-deep ring
// buffer and a decode of the newest n = min(labels so far, win_size) labels
// starts. win_size is clamped to 1..WIN_MAX. clear empties the buffer.
// The decoded path (index 0 = oldest frame) can be read through path_idx.
//
// out_state and first_state are valid from out_valid until the next decode.
//
// Timing: one state per cycle. out_valid pulses 3 + 4*(n-1) + n cycles after
// the cycle in which the label was accepted; obs_ready is low meanwhile.
//
// What follows the paper: the four-organ HMM, decoding with log-likelihood
// additions only, fixed-point quantization, a decode window (default 20,
// largest evaluated 50), and a detection delay that grows with the window
// (about one window of frames at every frame rate). The paper runs this on the
// core in software and does not name the decision frame; the hardware form,
// the oldest-frame decision, the cost encoding, the window start-up and tie
// rules are this design's own choices.
module viterbi_decoder
  import vce_pkg::*;
#(
  parameter int unsigned COST_W  = 8,
  parameter int unsigned WIN_MAX = 50
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           clear,
  input  logic [$clog2(WIN_MAX+1)-1:0]   win_size,
  // model tables
  input  logic                           tbl_we,
  input  logic [1:0]                     tbl_sel,
  input  logic [3:0]                     tbl_idx,
  input  logic [COST_W-1:0]              tbl_wdata,
  // observations
  input  logic                           obs_valid,
  input  organ_e                         obs,
  output logic                           obs_ready,
  // result
  output logic                           out_valid,
  output organ_e                         out_state,
  output organ_e                         first_state,
  input  logic [$clog2(WIN_MAX)-1:0]     path_idx,
  output organ_e                         path_state,
  output logic [$clog2(WIN_MAX+1)-1:0]   path_len
);

  localparam int unsigned NS = NUM_ORGANS;
  localparam int unsigned WW = $clog2(WIN_MAX + 1);
  localparam int unsigned IW = $clog2(WIN_MAX);
  localparam int unsigned MW = COST_W + $clog2(2 * WIN_MAX + 1) + 1;

  typedef enum logic [2:0] {S_IDLE, S_SETUP, S_FIRST, S_FWD, S_FINAL, S_TRACE} state_e;

  logic [COST_W-1:0] init_c  [NS];
  logic [COST_W-1:0] trans_c [NS][NS];
  logic [COST_W-1:0] emit_c  [NS][NS];

  organ_e         obs_buf [WIN_MAX];
  logic [IW-1:0]  wr_ptr_q;
  logic [WW-1:0]  count_q;

  state_e         state_q;
  logic [WW-1:0]  n_q;
  logic [IW-1:0]  rd_ptr_q;
  logic [WW-1:0]  t_q;
  logic [1:0]     s_q;
  logic [MW-1:0]  delta_q [NS];
  logic [MW-1:0]  delta_n [NS];
  logic [1:0]     bp_q    [WIN_MAX][NS];
  organ_e         path_q  [WIN_MAX];
  organ_e         cur_q;
  organ_e         last_q;
  organ_e         first_q;

  // Effective window length.
  logic [WW-1:0] ws;
  always_comb begin
    if (win_size == '0)                 ws = WW'(1);
    else if (win_size > WW'(WIN_MAX))   ws = WW'(WIN_MAX);
    else                                ws = win_size;
  end

  // Add-compare-select for state s_q at the current time step.
  organ_e         o_cur;
  logic [MW-1:0]  acs_best;
  logic [1:0]     acs_arg;
  always_comb begin
    o_cur    = obs_buf[rd_ptr_q];
    acs_best = delta_q[0] + MW'(trans_c[0][s_q]);
    acs_arg  = 2'd0;
    for (int p = 1; p < NS; p++) begin
      if (delta_q[p] + MW'(trans_c[p][s_q]) < acs_best) begin
        acs_best = delta_q[p] + MW'(trans_c[p][s_q]);
        acs_arg  = 2'(p);
      end
    end
  end

  // Final minimum over the last metrics.
  logic [1:0] fin_arg;
  always_comb begin
    fin_arg = 2'd0;
    for (int s = 1; s < NS; s++)
      if (delta_q[s] < delta_q[fin_arg]) fin_arg = 2'(s);
  end

  logic [IW-1:0] rd_next;
  assign rd_next = (rd_ptr_q == IW'(WIN_MAX - 1)) ? '0 : rd_ptr_q + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NS; i++) begin
        init_c[i] <= '0;
        for (int j = 0; j < NS; j++) begin
          trans_c[i][j] <= '0;
          emit_c[i][j]  <= '0;
        end
      end
    end else if (tbl_we) begin
      unique case (tbl_sel)
        2'd0:    init_c[tbl_idx[1:0]] <= tbl_wdata;
        2'd1:    trans_c[tbl_idx[3:2]][tbl_idx[1:0]] <= tbl_wdata;
        2'd2:    emit_c[tbl_idx[3:2]][tbl_idx[1:0]] <= tbl_wdata;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      wr_ptr_q  <= '0;
      count_q   <= '0;
      n_q       <= '0;
      rd_ptr_q  <= '0;
      t_q       <= '0;
      s_q       <= '0;
      cur_q     <= ORG_ESOPHAGUS;
      last_q    <= ORG_ESOPHAGUS;
      first_q   <= ORG_ESOPHAGUS;
      out_valid <= 1'b0;
      for (int s = 0; s < NS; s++) begin
        delta_q[s] <= '0;
        delta_n[s] <= '0;
      end
      for (int i = 0; i < WIN_MAX; i++) begin
        obs_buf[i] <= ORG_ESOPHAGUS;
        path_q[i]  <= ORG_ESOPHAGUS;
        for (int s = 0; s < NS; s++) bp_q[i][s] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (clear) begin
            wr_ptr_q <= '0;
            count_q  <= '0;
          end else if (obs_valid) begin
            obs_buf[wr_ptr_q] <= obs;
            wr_ptr_q <= (wr_ptr_q == IW'(WIN_MAX - 1)) ? '0 : wr_ptr_q + 1'b1;
            if (count_q != WW'(WIN_MAX)) count_q <= count_q + 1'b1;
            state_q <= S_SETUP;
          end
        end
        S_SETUP: begin
          // window = newest n labels, oldest first
          logic [WW-1:0] n;
          n = (count_q < ws) ? count_q : ws;
          n_q <= n;
          rd_ptr_q <= (32'(wr_ptr_q) >= 32'(n)) ? IW'(32'(wr_ptr_q) - 32'(n))
                                                : IW'(32'(wr_ptr_q) + WIN_MAX - 32'(n));
          state_q <= S_FIRST;
        end
        S_FIRST: begin
          for (int s = 0; s < NS; s++)
            delta_q[s] <= MW'(init_c[s]) + MW'(emit_c[s][o_cur]);
          rd_ptr_q <= rd_next;
          t_q      <= WW'(1);
          s_q      <= '0;
          state_q  <= (n_q == WW'(1)) ? S_FINAL : S_FWD;
        end
        S_FWD: begin
          delta_n[s_q]     <= acs_best + MW'(emit_c[s_q][o_cur]);
          bp_q[t_q][s_q]   <= acs_arg;
          s_q              <= s_q + 1'b1;
          if (s_q == 2'(NS - 1)) begin
            for (int s = 0; s < NS - 1; s++) delta_q[s] <= delta_n[s];
            delta_q[NS-1] <= acs_best + MW'(emit_c[s_q][o_cur]);
            rd_ptr_q <= rd_next;
            t_q      <= t_q + 1'b1;
            if (t_q + 1'b1 == n_q) state_q <= S_FINAL;
          end
        end
        S_FINAL: begin
          cur_q   <= organ_e'(fin_arg);
          last_q  <= organ_e'(fin_arg);
          t_q     <= n_q - 1'b1;
          state_q <= S_TRACE;
        end
        S_TRACE: begin
          path_q[t_q] <= cur_q;
          if (t_q == '0) begin
            first_q   <= cur_q;
            out_valid <= 1'b1;
            state_q   <= S_IDLE;
          end else begin
            cur_q <= organ_e'(bp_q[t_q][cur_q]);
            t_q   <= t_q - 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign obs_ready  = (state_q == S_IDLE) && !clear;
  assign out_state   = last_q;
  assign first_state = first_q;
  assign path_state = path_q[path_idx];
  assign path_len   = n_q;

  // A decode always covers at least one and at most WIN_MAX labels.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state_q == S_FIRST) |-> (n_q >= WW'(1) && n_q <= WW'(WIN_MAX)))
    else $error("viterbi_decoder: window length out of range");

endmodule
