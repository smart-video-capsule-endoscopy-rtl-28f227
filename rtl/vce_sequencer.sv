// vce_sequencer -- frame pipeline and localization policy of the capsule.
//
// Energy in a video capsule is spent mostly on taking pictures (sensor, LEDs)
// and on radioing them out; classifying a frame costs little. The capsule
// therefore runs in two modes:
//   * searching: one frame every period_low cycles (e.g. 0.25 fps). Each frame
//     is captured, classified by the accelerator and the label is passed to
//     the HMM/Viterbi decoder; nothing is transmitted;
//   * screening: once the decoder reports the small intestine (vit_state; in
//     the SoC this is the organ of the oldest frame of the decoded window), the sequencer
//     switches (for good) to one frame every period_high cycles (e.g. 2 fps)
//     and hands each captured frame to the transmitter instead.
//
// Per frame in search mode: cam_start -> wait cam_done -> acc_start -> wait
// acc_done -> read the word at result_addr from L2 (four signed 8-bit class
// scores, class c in byte c) -> class = arg-max (ties to the lower class) ->
// push it into the decoder -> wait for its result. In screening mode:
// cam_start -> wait cam_done -> tx_start -> wait tx_done.
//
// Frame timer: a down-counter, reloaded with the period of the current mode
// at each tick; the first tick comes right after enable rises. On detection
// the counter restarts with period_high. A tick that arrives while the
// previous frame is still in flight is dropped and counted in 'skipped'.
// acc_clk_en is high exactly while an inference is running (from the cycle
// acc_start is driven until the cycle acc_done is seen), so the accelerator
// and its SRAM get no clock otherwise.
//
// The two-mode policy, detection by the HMM and the frame rates come from the
// paper, where firmware on the core runs them; the hardware form, the score
// format, skipping of late ticks and the one-way switch are this design's own
// choices.
module vce_sequencer
  import vce_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic [31:0] period_low,
  input  logic [31:0] period_high,
  input  logic [31:0] result_addr,
  // camera controller
  output logic        cam_start,
  input  logic        cam_done,
  // accelerator
  output logic        acc_start,
  input  logic        acc_done,
  output logic        acc_clk_en,
  // TCDM master (score read)
  output tcdm_req_t   mreq,
  input  tcdm_rsp_t   mrsp,
  // Viterbi decoder
  output logic        obs_valid,
  output organ_e      obs,
  input  logic        obs_ready,
  input  logic        vit_valid,
  input  organ_e      vit_state,
  // transmitter
  output logic        tx_start,
  input  logic        tx_done,
  // status
  output logic        si_reached,
  output organ_e      organ,
  output logic [31:0] frames,
  output logic [31:0] skipped
);

  typedef enum logic [2:0] {
    S_IDLE, S_CAPTURE, S_INFER, S_READ, S_READ_WAIT, S_DECODE, S_DECODE_WAIT, S_TX
  } state_e;

  state_e      state_q;
  logic [31:0] cnt_q;
  logic        si_q;
  organ_e      organ_q;
  organ_e      obs_q;
  logic [31:0] frames_q;
  logic [31:0] skipped_q;

  logic [31:0] period_cur;
  assign period_cur = si_q ? period_high : period_low;

  logic tick;
  assign tick = enable && (cnt_q == '0);

  // arg-max of four signed bytes
  organ_e       best;
  logic signed [7:0] best_v;
  always_comb begin
    best   = ORG_ESOPHAGUS;
    best_v = $signed(mrsp.rdata[7:0]);
    for (int c = 1; c < NUM_ORGANS; c++) begin
      if ($signed(mrsp.rdata[c*8 +: 8]) > best_v) begin
        best_v = $signed(mrsp.rdata[c*8 +: 8]);
        best   = organ_e'(c);
      end
    end
  end

  logic detect;
  assign detect = (state_q == S_DECODE_WAIT) && vit_valid && (vit_state == ORG_SMALL_INTESTINE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      cnt_q     <= '0;
      si_q      <= 1'b0;
      organ_q   <= ORG_ESOPHAGUS;
      obs_q     <= ORG_ESOPHAGUS;
      frames_q  <= '0;
      skipped_q <= '0;
      cam_start <= 1'b0;
      acc_start <= 1'b0;
      tx_start  <= 1'b0;
    end else begin
      cam_start <= 1'b0;
      acc_start <= 1'b0;
      tx_start  <= 1'b0;

      // frame timer
      if (detect)
        cnt_q <= (period_high == '0) ? '0 : period_high - 32'd1;
      else if (!enable)
        cnt_q <= '0;
      else if (tick)
        cnt_q <= (period_cur == '0) ? '0 : period_cur - 32'd1;
      else
        cnt_q <= cnt_q - 32'd1;

      if (tick && state_q != S_IDLE) skipped_q <= skipped_q + 32'd1;

      unique case (state_q)
        S_IDLE: begin
          if (tick) begin
            cam_start <= 1'b1;
            frames_q  <= frames_q + 32'd1;
            state_q   <= S_CAPTURE;
          end
        end
        S_CAPTURE: begin
          if (cam_done) begin
            if (si_q) begin
              tx_start <= 1'b1;
              state_q  <= S_TX;
            end else begin
              acc_start <= 1'b1;
              state_q   <= S_INFER;
            end
          end
        end
        S_INFER:       if (acc_done) state_q <= S_READ;
        S_READ:        if (mrsp.gnt) state_q <= S_READ_WAIT;
        S_READ_WAIT: begin
          if (mrsp.rvalid) begin
            obs_q   <= best;
            state_q <= S_DECODE;
          end
        end
        S_DECODE:      if (obs_ready) state_q <= S_DECODE_WAIT;
        S_DECODE_WAIT: begin
          if (vit_valid) begin
            organ_q <= vit_state;
            if (vit_state == ORG_SMALL_INTESTINE) si_q <= 1'b1;
            state_q <= S_IDLE;
          end
        end
        S_TX:          if (tx_done) state_q <= S_IDLE;
        default:       state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    mreq.req   = (state_q == S_READ);
    mreq.addr  = result_addr;
    mreq.we    = 1'b0;
    mreq.be    = 4'hF;
    mreq.wdata = '0;
  end

  assign acc_clk_en = (state_q == S_INFER);
  assign obs_valid  = (state_q == S_DECODE);
  assign obs        = obs_q;
  assign si_reached = si_q;
  assign organ      = organ_q;
  assign frames     = frames_q;
  assign skipped    = skipped_q;

  // Once in screening mode, no frame is classified any more.
  assert property (@(posedge clk) disable iff (!rst_n) si_q |-> !acc_start)
    else $error("vce_sequencer: inference started after detection");

endmodule
