// vce_soc_bench -- end-to-end bench of the capsule SoC, shared by the
// reduced-size test (FULL=0: 16x16 frames) and the full-size test (FULL=1:
// the top at its default parameters, 320x320 frames).
//
// A capsule passage is scripted as a sequence of scenes (esophagus, stomach,
// one misleading small-intestine frame, stomach, then small intestine). The
// HMM window is 4 frames, so the passage stays short; the decision is the
// organ of the oldest frame of the decoded window. The
// sensor model tags each frame with its scene, the camera controller stores
// it in L2, the accelerator model (on the gated clock) reads it back and
// writes class scores, the sequencer feeds the arg-max to the HMM decoder,
// and after the decoder reports the small intestine the SoC switches to the
// fast frame rate and transmits. Meanwhile the core port keeps reading and
// writing a scratch area of L2, competing for banks.
//
// Checked: stored frame bytes; the frame at which the small intestine is
// detected (the lone misleading frame must not trigger it; with the GI-tract
// costs below, a 4-frame window switches once it holds 3 small-intestine
// frames, since 39 * 1 < 60 <= 39 * 2, i.e. at frame 10); no inference afterwards; transmissions; skipped
// ticks at the fast rate; the accelerator clock running only during
// inference; each L2 bank clocked only when accessed; core-port data. Each mechanism is counted and must occur.
module vce_soc_bench
  import vce_pkg::*;
#(
  parameter bit FULL = 1'b0
) ();
  localparam int unsigned IMG_W = FULL ? 320 : 16;
  localparam int unsigned IMG_H = FULL ? 320 : 16;
  localparam int unsigned NPIX = IMG_W * IMG_H;
  localparam int unsigned FRAME_CYC = (16 + NPIX * 10) * 4;
  localparam int unsigned P_LOW  = FRAME_CYC + 2000;
  localparam int unsigned P_HIGH = FRAME_CYC * 3 / 4;
  localparam int unsigned TX_LAT = 500;
  localparam int unsigned WIN_MAX = 50, COST_W = 8, ACC_SRAM_WORDS = 34816;
  localparam logic [31:0] IMG_BASE = 32'h0, RESULT_ADDR = 32'h3_0000, SCRATCH = 32'h4_0000;
  localparam int N_SCENES = 10;
  localparam organ_e SCENES [N_SCENES] = '{ORG_ESOPHAGUS, ORG_STOMACH, ORG_STOMACH,
      ORG_SMALL_INTESTINE, ORG_STOMACH, ORG_STOMACH, ORG_STOMACH,
      ORG_SMALL_INTESTINE, ORG_SMALL_INTESTINE, ORG_SMALL_INTESTINE};
  localparam int DETECT_FRAME = 10;  // frames captured when the decision flips
  localparam int TX_FRAMES = 3;

  logic clk = 0, rst_n = 0, test_en = 0;
  always #5 clk = ~clk;

  tcdm_req_t host_req;
  tcdm_rsp_t host_rsp;
  logic acc_clk, acc_start, acc_done;
  tcdm_req_t acc_req;
  tcdm_rsp_t acc_rsp;
  logic acc_sram_req, acc_sram_we;
  logic [$clog2(ACC_SRAM_WORDS)-1:0] acc_sram_addr;
  logic [3:0] acc_sram_be;
  logic [31:0] acc_sram_wdata, acc_sram_rdata;
  logic spi_sclk, spi_cs_n, spi_mosi, spi_miso;
  logic cam_cfg_we = 0, cam_cfg_start = 0, cam_cfg_done, cam_busy, cam_overflow;
  logic [2:0] cam_cfg_idx = 0;
  logic [15:0] cam_cfg_wdata = 0;
  logic [31:0] img_base = IMG_BASE;
  logic vit_tbl_we = 0, vit_clear = 0;
  logic [1:0] vit_tbl_sel = 0;
  logic [3:0] vit_tbl_idx = 0;
  logic [COST_W-1:0] vit_tbl_wdata = 0;
  logic [$clog2(WIN_MAX+1)-1:0] vit_win_size = 4;
  logic [$clog2(WIN_MAX)-1:0] vit_path_idx = 0;
  organ_e vit_path_state, vit_newest, organ;
  logic [$clog2(WIN_MAX+1)-1:0] vit_path_len;
  logic enable = 0;
  logic [31:0] period_low = P_LOW, period_high = P_HIGH, result_addr = RESULT_ADDR;
  logic tx_start, tx_done = 0, si_reached;
  logic [31:0] frames, skipped;

  if (FULL) begin : g_full
    vce_soc_top u_dut (.*);
  end else begin : g_small
    vce_soc_top #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_dut (.*);
  end

  // scene shown to the sensor: organ in the two MSBs of the tag byte
  int scene_idx = 0;
  logic [7:0] scene;
  assign scene = {SCENES[(scene_idx < N_SCENES) ? scene_idx : N_SCENES - 1], 6'b10_1101};

  naneyec_model #(.IMG_W(IMG_W), .IMG_H(IMG_H), .PIX_BITS(10), .CFG_WORDS(8)) u_cam (
    .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso), .scene(scene));

  acc_model #(.SRAM_AW($clog2(ACC_SRAM_WORDS))) u_acc (
    .clk(acc_clk), .rst_n, .start(acc_start), .done(acc_done),
    .img_base, .result_addr, .mreq(acc_req), .mrsp(acc_rsp),
    .sram_req(acc_sram_req), .sram_we(acc_sram_we), .sram_addr(acc_sram_addr),
    .sram_be(acc_sram_be), .sram_wdata(acc_sram_wdata), .sram_rdata(acc_sram_rdata));

  int checks = 0, failures = 0;
  // mechanism counters
  int n_capture = 0, n_infer = 0, n_decode = 0, n_outlier = 0, n_switch = 0;
  int n_tx = 0, n_host_stall = 0, acc_edges_busy = 0, acc_edges_idle = 0;

  initial begin : watchdog
    repeat (FRAME_CYC * 20 + 100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // transmitter stand-in
  int tx_cnt = 0;
  always @(posedge clk) if (rst_n) begin
    tx_done <= 0;
    if (tx_start) begin tx_cnt = TX_LAT; n_tx++; end
    else if (tx_cnt > 0) begin tx_cnt--; if (tx_cnt == 0) tx_done <= 1; end
  end

  // accelerator clock activity
  bit inferring = 0;
  always @(posedge clk) if (rst_n) begin
    if (acc_start) begin inferring = 1; n_infer++; end
    if (acc_done) inferring = 0;
  end
  always @(posedge acc_clk) if (rst_n) begin
    if (inferring || acc_start || acc_done) acc_edges_busy++; else acc_edges_idle++;
  end

  // L2 bank 0 clock: one pulse per cycle in which the bank is accessed
  int bank0_edges = 0, bank0_accesses = 0, all_cycles = 0;
  always @(posedge bank0_clk) if (rst_n) bank0_edges++;
  always @(posedge clk) if (rst_n) begin
    all_cycles++;
    if (bank0_req) bank0_accesses++;
  end

  // scene advances with every capture; count decoder results
  always @(posedge clk) if (rst_n) begin
    if (u_cam.frames_read > n_capture) begin
      n_capture = u_cam.frames_read;
      scene_idx = n_capture;
    end
  end

  // core port: one process, image checks on request, scratch traffic otherwise
  logic [31:0] scratch_shadow [64];
  bit          check_req = 0;
  int          check_frame = 0;
  logic [7:0]  check_scene = 0;

  task automatic host_access(input logic we, input logic [31:0] addr, input logic [31:0] wdata,
                             output logic [31:0] rdata);
    @(negedge clk);
    host_req = '{req: 1'b1, addr: addr, we: we, be: 4'hF, wdata: wdata};
    @(posedge clk);
    while (!host_rsp.gnt) begin n_host_stall++; @(posedge clk); end
    @(negedge clk);
    host_req.req = 1'b0;
    rdata = host_rsp.rdata;   // r_valid is high in this cycle
  endtask

  initial begin : core
    logic [31:0] d;
    host_req = '0;
    wait (rst_n);
    for (int i = 0; i < 64; i++) begin
      scratch_shadow[i] = $urandom;
      host_access(1, SCRATCH + 32'(i * 4), scratch_shadow[i], d);
    end
    forever begin
      if (check_req) begin
        int nw, w;
        logic [31:0] e;
        logic [9:0] v;
        nw = FULL ? 256 : NPIX / 4;
        for (int k = 0; k < nw; k++) begin
          w = FULL ? ((k * 397) % (NPIX / 4)) : k;
          for (int b = 0; b < 4; b++) begin
            v = u_cam.pix_val(check_frame, w * 4 + b, check_scene);
            e[b*8 +: 8] = v[9:2];
          end
          host_access(0, IMG_BASE + 32'(w * 4), 0, d);
          checks++;
          if (d !== e) begin failures++; $display("frame %0d word %0d: %h expected %h", check_frame, w, d, e); end
        end
        check_req = 0;
      end else begin
        int i;
        i = $urandom_range(0, 63);
        if ($urandom_range(0, 1) == 1) begin
          scratch_shadow[i] = $urandom;
          host_access(1, SCRATCH + 32'(i * 4), scratch_shadow[i], d);
        end else begin
          host_access(0, SCRATCH + 32'(i * 4), 0, d);
          checks++;
          if (d !== scratch_shadow[i]) begin failures++; $display("scratch %0d: %h vs %h", i, d, scratch_shadow[i]); end
        end
      end
    end
  end

  task automatic vit_wr(input int sel, input int idx, input int val);
    @(negedge clk);
    vit_tbl_we = 1; vit_tbl_sel = 2'(sel); vit_tbl_idx = 4'(idx); vit_tbl_wdata = COST_W'(val);
    @(negedge clk);
    vit_tbl_we = 0;
  endtask

  initial begin : main
    int det_frames;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // HMM: staying is free, moving on one organ costs 60, anything else 255;
    // a matching label costs 1, a wrong one 40.
    for (int s = 0; s < 4; s++) vit_wr(0, s, (s == 0) ? 0 : 30);
    for (int p = 0; p < 4; p++) for (int s = 0; s < 4; s++) begin
      vit_wr(1, p*4+s, (s == p) ? 0 : (s == p + 1) ? 60 : 255);
      vit_wr(2, p*4+s, (s == p) ? 1 : 40);
    end
    // sensor configuration
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); cam_cfg_we = 1; cam_cfg_idx = 3'(i); cam_cfg_wdata = 16'(16'h1000 + i);
    end
    @(negedge clk); cam_cfg_we = 0; cam_cfg_start = 1; @(negedge clk); cam_cfg_start = 0;
    wait (cam_cfg_done);
    checks++;
    if (u_cam.cfg_rx[7] != 16'h1007 || u_cam.cfg_transfers != 1) begin failures++; $display("sensor configuration wrong"); end
    @(negedge clk); enable = 1;

    // search phase: check each stored frame, watch decoder results
    det_frames = -1;
    while (!si_reached) begin
      @(posedge clk);
      if (u_dut_frame_done()) begin
        check_frame = u_cam.frames_read - 1;
        check_scene = u_cam.scene_q;
        check_req = 1;
      end
      if (u_dut_vit_valid()) begin
        n_decode++;
        if (SCENES[n_capture - 1] == ORG_SMALL_INTESTINE && u_dut_vit_state() != ORG_SMALL_INTESTINE) n_outlier++;
        if (u_dut_vit_state() == ORG_SMALL_INTESTINE) det_frames = int'(frames);
      end
    end
    n_switch++;
    checks++;
    if (det_frames != DETECT_FRAME || organ != ORG_SMALL_INTESTINE) begin
      failures++; $display("small intestine detected at frame %0d, expected %0d", det_frames, DETECT_FRAME);
    end
    wait (!check_req);
    // screening phase
    wait (n_tx == TX_FRAMES && tx_done);
    repeat (10) @(posedge clk);
    checks++;
    if (n_infer != DETECT_FRAME) begin failures++; $display("%0d inferences, expected %0d", n_infer, DETECT_FRAME); end
    checks++;
    if (u_acc.sram_errors != 0 || u_acc.runs != DETECT_FRAME) begin failures++; $display("accelerator SRAM errors %0d", u_acc.sram_errors); end
    checks++;
    if (frames != 32'(DETECT_FRAME + TX_FRAMES) && frames != 32'(DETECT_FRAME + TX_FRAMES + 1)) begin
      failures++; $display("frames %0d", frames);
    end
    checks++;
    if (acc_edges_idle != 0) begin failures++; $display("accelerator clocked %0d times while idle", acc_edges_idle); end
    checks++;
    if (bank0_edges != bank0_accesses || bank0_edges >= all_cycles) begin
      failures++; $display("bank 0 clocked %0d times for %0d accesses in %0d cycles", bank0_edges, bank0_accesses, all_cycles);
    end
    checks++;
    if (cam_overflow) begin failures++; $display("camera overflow"); end
    // every mechanism must have happened
    begin
      int mech [10];
      string names [10];
      names = '{"capture", "inference", "decode", "outlier suppressed", "mode switch",
                "transmission", "skipped tick", "core port stall", "gated acc clock", "gated L2 bank clock"};
      mech = '{n_capture, n_infer, n_decode, n_outlier, n_switch, n_tx, int'(skipped), n_host_stall, acc_edges_busy, bank0_edges};
      for (int i = 0; i < 10; i++) begin
        checks++;
        if (mech[i] == 0) begin failures++; $display("mechanism '%s' never happened", names[i]); end
        $display("mechanism %-20s %0d", names[i], mech[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // probes into the design (generate-branch independent)
  function automatic logic u_dut_frame_done();
    return FULL ? g_full_probe_done : g_small_probe_done;
  endfunction
  function automatic logic u_dut_vit_valid();
    return FULL ? g_full_probe_vv : g_small_probe_vv;
  endfunction
  function automatic organ_e u_dut_vit_state();
    return FULL ? g_full_probe_vs : g_small_probe_vs;
  endfunction
  logic g_full_probe_done, g_small_probe_done, g_full_probe_vv, g_small_probe_vv;
  logic bank0_clk, bank0_req;
  organ_e g_full_probe_vs, g_small_probe_vs;
  if (FULL) begin : g_pf
    assign g_full_probe_done = g_full.u_dut.cam_frame_done;
    assign g_full_probe_vv   = g_full.u_dut.vit_valid;
    assign g_full_probe_vs   = g_full.u_dut.vit_state;
    assign bank0_clk = g_full.u_dut.bank_clk[0];
    assign bank0_req = g_full.u_dut.bank_req[0];
    assign g_small_probe_done = 0; assign g_small_probe_vv = 0; assign g_small_probe_vs = ORG_ESOPHAGUS;
  end else begin : g_ps
    assign g_small_probe_done = g_small.u_dut.cam_frame_done;
    assign g_small_probe_vv   = g_small.u_dut.vit_valid;
    assign g_small_probe_vs   = g_small.u_dut.vit_state;
    assign bank0_clk = g_small.u_dut.bank_clk[0];
    assign bank0_req = g_small.u_dut.bank_req[0];
    assign g_full_probe_done = 0; assign g_full_probe_vv = 0; assign g_full_probe_vs = ORG_ESOPHAGUS;
  end
endmodule
