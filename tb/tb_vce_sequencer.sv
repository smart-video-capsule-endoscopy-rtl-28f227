// tb_vce_sequencer -- self-checking test of the frame sequencer with simple
// stand-ins for the camera controller, accelerator, memory, decoder and
// transmitter. Checks the frame period in both modes, the arg-max of the
// class scores handed to the decoder, the switch to screening on a
// small-intestine result, that no inference runs after it, the accelerator
// clock enable window, and the counting of skipped frame ticks.
module tb_vce_sequencer;
  import vce_pkg::*;
  localparam int CAM_LAT = 60, ACC_LAT = 25, TX_LAT = 50;
  localparam int P_LOW = 400, P_HIGH = 150;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        enable = 0;
  logic [31:0] period_low = P_LOW, period_high = P_HIGH, result_addr = 32'h4000;
  logic        cam_start, cam_done = 0, acc_start, acc_done = 0, acc_clk_en;
  tcdm_req_t   mreq;
  tcdm_rsp_t   mrsp;
  logic        obs_valid, obs_ready, vit_valid = 0;
  organ_e      obs, vit_state = ORG_ESOPHAGUS;
  logic        tx_start, tx_done = 0, si_reached;
  organ_e      organ;
  logic [31:0] frames, skipped;

  vce_sequencer dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // camera, accelerator and transmitter stand-ins
  int cam_cnt = -1, acc_cnt = -1, tx_cnt = -1;
  int acc_starts = 0, tx_starts = 0, cam_starts = 0, en_cycles = 0, en_expected = 0;
  bit in_acc = 0;
  always @(posedge clk) if (rst_n) begin
    cam_done <= 0; acc_done <= 0; tx_done <= 0;
    if (acc_clk_en) en_cycles++;
    if (in_acc) en_expected++;
    if (cam_start) begin cam_cnt = CAM_LAT; cam_starts++; end
    else if (cam_cnt > 0) begin cam_cnt--; if (cam_cnt == 0) cam_done <= 1; end
    if (acc_start) begin acc_cnt = ACC_LAT; acc_starts++; in_acc = 1; end
    else if (acc_cnt > 0) begin acc_cnt--; if (acc_cnt == 0) acc_done <= 1; end
    if (acc_done) in_acc = 0;
    if (tx_start) begin tx_cnt = TX_LAT; tx_starts++; end
    else if (tx_cnt > 0) begin tx_cnt--; if (tx_cnt == 0) tx_done <= 1; end
  end

  // memory stand-in returning random scores
  logic [31:0] scores = 0;
  organ_e      exp_cls = ORG_ESOPHAGUS;
  logic        gnt_r = 0, rvalid_r = 0;
  always @(negedge clk) gnt_r = $urandom_range(0, 1) == 1;
  assign mrsp.gnt    = mreq.req && gnt_r;
  assign mrsp.rvalid = rvalid_r;
  assign mrsp.rdata  = scores;
  always @(posedge clk) begin
    rvalid_r <= mrsp.gnt;
    if (rst_n && mrsp.gnt) begin
      int bv, bi;
      checks++;
      if (mreq.we || mreq.addr != result_addr) begin failures++; $display("bad score read"); end
      scores <= $urandom;
      if ($urandom_range(0, 3) == 0) scores[15:8] <= scores[7:0];  // ties now and then
    end
  end
  always_comb begin
    int bv;
    exp_cls = ORG_ESOPHAGUS; bv = int'($signed(scores[7:0]));
    for (int c = 1; c < 4; c++) if (int'($signed(scores[c*8 +: 8])) > bv) begin bv = int'($signed(scores[c*8 +: 8])); exp_cls = organ_e'(c); end
  end

  // decoder stand-in: reports the small intestine at the 6th label
  int labels = 0;
  always @(negedge clk) obs_ready = $urandom_range(0, 2) != 0;
  always @(posedge clk) if (rst_n) begin
    vit_valid <= 0;
    if (obs_valid && obs_ready) begin
      labels++;
      checks++;
      if (obs != exp_cls) begin failures++; $display("label %0d: got %0d expected %0d (scores %h)", labels, obs, exp_cls, scores); end
      vit_valid <= 1;
      vit_state <= (labels >= 6) ? ORG_SMALL_INTESTINE : ORG_STOMACH;
    end
  end

  // frame start intervals
  longint last_start = -1;
  int intervals [$];
  always @(posedge clk) if (rst_n && cam_start) begin
    if (last_start >= 0) intervals.push_back(int'(cyc - last_start));
    last_start = cyc;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); enable = 1;
    wait (si_reached);
    checks++;
    if (labels != 6 || acc_starts != 6) begin failures++; $display("%0d labels, %0d inferences before detection", labels, acc_starts); end
    for (int i = 0; i < intervals.size(); i++) begin
      checks++;
      if (intervals[i] != P_LOW) begin failures++; $display("search interval %0d = %0d", i, intervals[i]); end
    end
    wait (cam_start); repeat (2) @(posedge clk);
    intervals.delete();
    repeat (5 * P_HIGH + 10) @(posedge clk);
    checks++;
    if (intervals.size() < 3) begin failures++; $display("too few screening frames"); end
    for (int i = 0; i < intervals.size(); i++) begin
      checks++;
      if (intervals[i] != P_HIGH) begin failures++; $display("screening interval %0d = %0d", i, intervals[i]); end
    end
    checks++;
    if (acc_starts != 6 || tx_starts < 4 || skipped != 0) begin
      failures++; $display("acc %0d tx %0d skipped %0d", acc_starts, tx_starts, skipped);
    end
    checks++;
    if (en_cycles != en_expected + acc_starts || en_cycles == 0) begin
      failures++; $display("accelerator clock enabled %0d cycles, expected %0d", en_cycles, en_expected + acc_starts);
    end
    // faster than the pipeline: every other tick is skipped
    period_high = 80;
    repeat (20) @(posedge clk);
    wait (cam_start); repeat (2) @(posedge clk);
    wait (cam_start); repeat (2) @(posedge clk);
    intervals.delete();
    repeat (8 * 80) @(posedge clk);
    checks++;
    if (skipped < 3) begin failures++; $display("skipped = %0d", skipped); end
    for (int i = 0; i < intervals.size(); i++) begin
      checks++;
      if (intervals[i] != 160) begin failures++; $display("overrun interval %0d = %0d", i, intervals[i]); end
    end
    checks++;
    if (frames != 32'(cam_starts) || organ != ORG_SMALL_INTESTINE) begin failures++; $display("frames %0d vs %0d", frames, cam_starts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
