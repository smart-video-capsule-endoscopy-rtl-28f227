// tb_naneyec_ctrl -- self-checking test of the camera controller with the
// sensor model and a TCDM memory responder that grants at random.
// Checks: configuration words arrive at the sensor; every stored byte equals
// the 8 MSBs of the sensor's pixel; the frame and configuration transfer
// times; the overflow flag when the memory stops granting.
module tb_naneyec_ctrl;
  import vce_pkg::*;
  localparam int unsigned IMG_W = 8, IMG_H = 6, PIX_BITS = 10, CFG_WORDS = 8, CLK_DIV = 2;
  localparam int unsigned NPIX = IMG_W * IMG_H;
  localparam int unsigned BASE = 32'h100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cfg_we = 0, cfg_start = 0, cap_start = 0;
  logic [2:0]  cfg_idx = 0;
  logic [15:0] cfg_wdata = 0;
  logic [31:0] base_addr = BASE;
  logic        busy, cfg_done, frame_done, overflow;
  logic        spi_sclk, spi_cs_n, spi_mosi, spi_miso;
  tcdm_req_t   mreq;
  tcdm_rsp_t   mrsp;
  logic [7:0]  scene = 8'hA5;

  naneyec_ctrl #(.IMG_W(IMG_W), .IMG_H(IMG_H), .PIX_BITS(PIX_BITS), .CFG_WORDS(CFG_WORDS), .CLK_DIV(CLK_DIV)) dut (.*);
  naneyec_model #(.IMG_W(IMG_W), .IMG_H(IMG_H), .PIX_BITS(PIX_BITS), .CFG_WORDS(CFG_WORDS)) cam (
    .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso), .scene(scene));

  int checks = 0, failures = 0;
  logic [7:0] mem [int];
  int gnt_prob = 50;   // percent
  bit gnt_block = 0;
  int writes = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory responder
  always_comb begin
    mrsp.rdata = '0;
  end
  logic gnt_r = 0, rvalid_r = 0;
  always @(negedge clk) gnt_r = !gnt_block && ($urandom_range(0, 99) < gnt_prob);
  assign mrsp.gnt = mreq.req && gnt_r;
  assign mrsp.rvalid = rvalid_r;
  always @(posedge clk) begin
    rvalid_r <= mrsp.gnt;
    if (mreq.req && mrsp.gnt) begin
      writes++;
      for (int b = 0; b < 4; b++) if (mreq.be[b]) mem[int'(mreq.addr) + b] = mreq.wdata[b*8 +: 8];
    end
  end

  function automatic logic [7:0] expect_byte(input int frame, input int i, input logic [7:0] sc);
    logic [PIX_BITS-1:0] v;
    v = cam.pix_val(frame, i, sc);
    return v[PIX_BITS-1 -: 8];
  endfunction

  task automatic capture(input int frame, output int cycles);
    @(negedge clk); cap_start = 1; @(negedge clk); cap_start = 0;
    cycles = 1;
    while (!frame_done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc, exp_cyc;
    logic [15:0] cw [CFG_WORDS];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // configuration
    for (int i = 0; i < CFG_WORDS; i++) begin
      cw[i] = 16'($urandom);
      @(negedge clk); cfg_we = 1; cfg_idx = 3'(i); cfg_wdata = cw[i];
    end
    @(negedge clk); cfg_we = 0; cfg_start = 1; @(negedge clk); cfg_start = 0;
    cyc = 1;
    while (!cfg_done) begin @(negedge clk); cyc++; end
    exp_cyc = (16 + CFG_WORDS * 16) * 2 * CLK_DIV;
    checks++;
    if (cyc < exp_cyc || cyc > exp_cyc + 3) begin failures++; $display("config took %0d cycles, expected ~%0d", cyc, exp_cyc); end
    checks++;
    if (cam.cfg_transfers != 1) begin failures++; $display("sensor saw %0d config transfers", cam.cfg_transfers); end
    for (int i = 0; i < CFG_WORDS; i++) begin
      checks++;
      if (cam.cfg_rx[i] !== cw[i]) begin failures++; $display("cfg word %0d: %h vs %h", i, cam.cfg_rx[i], cw[i]); end
    end
    // three frames with different scenes and memory grant rates
    for (int f = 0; f < 3; f++) begin
      scene = 8'(8'h30 + f * 8'h41);
      gnt_prob = (f == 0) ? 100 : (f == 1) ? 50 : 10;
      writes = 0;
      capture(f, cyc);
      exp_cyc = (16 + NPIX * PIX_BITS) * 2 * CLK_DIV;
      checks++;
      if (cyc < exp_cyc || cyc > exp_cyc + 40) begin failures++; $display("frame took %0d cycles, expected ~%0d", cyc, exp_cyc); end
      checks++;
      if (writes != NPIX / 4 || overflow) begin failures++; $display("frame %0d: %0d writes, overflow %0d", f, writes, overflow); end
      for (int i = 0; i < NPIX; i++) begin
        checks++;
        if (!mem.exists(BASE + i) || mem[BASE + i] !== expect_byte(f, i, scene)) begin
          failures++;
          $display("frame %0d byte %0d: %h expected %h", f, i, mem.exists(BASE + i) ? mem[BASE + i] : 8'hxx, expect_byte(f, i, scene));
        end
      end
    end
    // memory stops granting: words are lost and overflow is flagged
    gnt_block = 1;
    @(negedge clk); cap_start = 1; @(negedge clk); cap_start = 0;
    repeat ((16 + 12 * PIX_BITS) * 2 * CLK_DIV) @(negedge clk);
    checks++;
    if (!overflow) begin failures++; $display("overflow not flagged"); end
    gnt_block = 0;
    while (!frame_done) @(negedge clk);
    checks++;
    if (!overflow) begin failures++; $display("overflow flag lost"); end
    // the next start clears it
    capture(4, cyc);
    checks++;
    if (overflow) begin failures++; $display("overflow not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
