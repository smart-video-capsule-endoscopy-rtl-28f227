// vce_soc_top -- localization datapath of the smart capsule SoC.
//
// A capsule that knows where it is can stay dark and silent until it reaches
// the small intestine. This top level puts together what that takes on chip:
//   * naneyec_ctrl   reads raw RGGB frames from the image sensor over SPI and
//                    stores them in L2 as packed bytes (TCDM master 1);
//   * tcdm_xbar      connects four masters to the four word-interleaved L2
//                    banks (4 x sram_sp, 384 KiB in all); each bank sits
//                    behind its own clk_gate and is clocked only in cycles
//                    in which it is accessed;
//   * the CNN accelerator is outside this module: it receives a gated clock,
//                    start/done, a TCDM master port into L2 (master 2) and
//                    the port of its own 136 KiB interim SRAM (sram_sp behind
//                    clk_gate, clocked only while it runs);
//   * vce_sequencer  times the frames, runs capture -> inference -> score
//                    read (TCDM master 3) -> HMM decode, and switches to the
//                    high frame rate plus transmission once the small
//                    intestine is detected;
//   * viterbi_decoder the quantized sliding-window HMM decoder. The sequencer
//                    decides on the organ of the oldest frame of the decoded
//                    window; the organ of the newest frame is a status output
//                    (vit_newest), the quickest but least stable estimate.
// The RISC-V core is outside as well; its data port is TCDM master 0 and the
// settings it would write into registers are plain inputs here.
//
// Address map (byte addresses as seen by every master): L2 starts at 0 and
// spans 384 KiB; word w of the memory lives in bank w mod 4. The frame is
// stored at img_base, the accelerator leaves its four class scores at
// result_addr.
//
// The blocks and their connections follow the capsule SoC's structure
// (sensor -> memory <-> accelerator, memory <-> core running the Viterbi
// decoder, decoder -> transmitter start). The address map, port list and
// bank count are this design's own.
module vce_soc_top
  import vce_pkg::*;
#(
  parameter int unsigned IMG_W          = IMG_W_DEFAULT,
  parameter int unsigned IMG_H          = IMG_H_DEFAULT,
  parameter int unsigned PIX_BITS       = 10,
  parameter int unsigned CAM_CFG_WORDS  = 8,
  parameter int unsigned SPI_CLK_DIV    = 2,
  parameter int unsigned L2_BANK_WORDS  = L2_BANK_WORDS_DEF,
  parameter int unsigned ACC_SRAM_WORDS = ACC_SRAM_WORDS_DEF,
  parameter int unsigned COST_W         = 8,
  parameter int unsigned WIN_MAX        = 50
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              test_en,
  // core data port (TCDM master 0)
  input  tcdm_req_t                         host_req,
  output tcdm_rsp_t                         host_rsp,
  // CNN accelerator
  output logic                              acc_clk,
  output logic                              acc_start,
  input  logic                              acc_done,
  input  tcdm_req_t                         acc_req,
  output tcdm_rsp_t                         acc_rsp,
  input  logic                              acc_sram_req,
  input  logic                              acc_sram_we,
  input  logic [$clog2(ACC_SRAM_WORDS)-1:0] acc_sram_addr,
  input  logic [3:0]                        acc_sram_be,
  input  logic [31:0]                       acc_sram_wdata,
  output logic [31:0]                       acc_sram_rdata,
  // image sensor
  output logic                              spi_sclk,
  output logic                              spi_cs_n,
  output logic                              spi_mosi,
  input  logic                              spi_miso,
  // camera controller settings
  input  logic                              cam_cfg_we,
  input  logic [$clog2(CAM_CFG_WORDS)-1:0]  cam_cfg_idx,
  input  logic [15:0]                       cam_cfg_wdata,
  input  logic                              cam_cfg_start,
  output logic                              cam_cfg_done,
  output logic                              cam_busy,
  output logic                              cam_overflow,
  input  logic [31:0]                       img_base,
  // HMM settings and decoded path
  input  logic                              vit_tbl_we,
  input  logic [1:0]                        vit_tbl_sel,
  input  logic [3:0]                        vit_tbl_idx,
  input  logic [COST_W-1:0]                 vit_tbl_wdata,
  input  logic [$clog2(WIN_MAX+1)-1:0]      vit_win_size,
  input  logic                              vit_clear,
  input  logic [$clog2(WIN_MAX)-1:0]        vit_path_idx,
  output organ_e                            vit_path_state,
  output logic [$clog2(WIN_MAX+1)-1:0]      vit_path_len,
  output organ_e                            vit_newest,
  // frame sequencer settings
  input  logic                              enable,
  input  logic [31:0]                       period_low,
  input  logic [31:0]                       period_high,
  input  logic [31:0]                       result_addr,
  // transmitter
  output logic                              tx_start,
  input  logic                              tx_done,
  // status
  output logic                              si_reached,
  output organ_e                            organ,
  output logic [31:0]                       frames,
  output logic [31:0]                       skipped
);

  localparam int unsigned NM = 4;
  localparam int unsigned NB = L2_BANKS;
  localparam int unsigned AW = $clog2(L2_BANK_WORDS);

  tcdm_req_t mreq [NM];
  tcdm_rsp_t mrsp [NM];

  logic          bank_req   [NB];
  logic          bank_we    [NB];
  logic [AW-1:0] bank_addr  [NB];
  logic [3:0]    bank_be    [NB];
  logic [31:0]   bank_wdata [NB];
  logic [31:0]   bank_rdata [NB];

  // sequencer <-> camera / decoder
  logic   cam_start, cam_frame_done;
  logic   acc_clk_en;
  logic   obs_valid, obs_ready, vit_valid;
  organ_e obs, vit_state;

  assign mreq[0]  = host_req;
  assign host_rsp = mrsp[0];
  assign mreq[2]  = acc_req;
  assign acc_rsp  = mrsp[2];

  naneyec_ctrl #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .PIX_BITS(PIX_BITS),
    .CFG_WORDS(CAM_CFG_WORDS), .CLK_DIV(SPI_CLK_DIV)
  ) u_cam (
    .clk, .rst_n,
    .cfg_we(cam_cfg_we), .cfg_idx(cam_cfg_idx), .cfg_wdata(cam_cfg_wdata),
    .cfg_start(cam_cfg_start), .cap_start(cam_start), .base_addr(img_base),
    .busy(cam_busy), .cfg_done(cam_cfg_done), .frame_done(cam_frame_done),
    .overflow(cam_overflow),
    .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .mreq(mreq[1]), .mrsp(mrsp[1])
  );

  tcdm_xbar #(.NM(NM), .NB(NB), .BANK_WORDS(L2_BANK_WORDS)) u_xbar (
    .clk, .rst_n, .mreq, .mrsp,
    .bank_req, .bank_we, .bank_addr, .bank_be, .bank_wdata, .bank_rdata
  );

  // Each L2 bank is clocked only in cycles in which it is accessed.
  logic bank_clk [NB];

  for (genvar b = 0; b < NB; b++) begin : g_l2
    clk_gate u_bank_cg (.clk_i(clk), .en_i(bank_req[b]), .test_en_i(test_en), .clk_o(bank_clk[b]));

    sram_sp #(.WORDS(L2_BANK_WORDS), .DW(32)) u_bank (
      .clk(bank_clk[b]), .req(bank_req[b]), .we(bank_we[b]), .addr(bank_addr[b]),
      .be(bank_be[b]), .wdata(bank_wdata[b]), .rdata(bank_rdata[b])
    );
  end

  clk_gate u_acc_cg (.clk_i(clk), .en_i(acc_clk_en), .test_en_i(test_en), .clk_o(acc_clk));

  sram_sp #(.WORDS(ACC_SRAM_WORDS), .DW(32)) u_acc_sram (
    .clk(acc_clk), .req(acc_sram_req), .we(acc_sram_we), .addr(acc_sram_addr),
    .be(acc_sram_be), .wdata(acc_sram_wdata), .rdata(acc_sram_rdata)
  );

  viterbi_decoder #(.COST_W(COST_W), .WIN_MAX(WIN_MAX)) u_vit (
    .clk, .rst_n, .clear(vit_clear), .win_size(vit_win_size),
    .tbl_we(vit_tbl_we), .tbl_sel(vit_tbl_sel), .tbl_idx(vit_tbl_idx), .tbl_wdata(vit_tbl_wdata),
    .obs_valid, .obs, .obs_ready,
    .out_valid(vit_valid), .out_state(vit_newest), .first_state(vit_state),
    .path_idx(vit_path_idx), .path_state(vit_path_state), .path_len(vit_path_len)
  );

  vce_sequencer u_seq (
    .clk, .rst_n, .enable, .period_low, .period_high, .result_addr,
    .cam_start, .cam_done(cam_frame_done),
    .acc_start, .acc_done, .acc_clk_en,
    .mreq(mreq[3]), .mrsp(mrsp[3]),
    .obs_valid, .obs, .obs_ready, .vit_valid, .vit_state,
    .tx_start, .tx_done,
    .si_reached, .organ, .frames, .skipped
  );

endmodule
