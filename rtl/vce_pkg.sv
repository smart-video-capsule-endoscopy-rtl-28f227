// vce_pkg -- types and constants shared by the capsule localization SoC.
//
// The four organ classes and their numbering (0 esophagus, 1 stomach,
// 2 small intestine, 3 colon) follow the class labels used for the CNN and
// the HMM. The TCDM request/response structs describe the memory port that
// every master (core, camera controller, accelerator, sequencer) uses: a
// request is held until it is granted in the same cycle; the response data
// (and an r_valid for writes too) follows one cycle after the grant.
// The bus widths are this design's choice.
package vce_pkg;

  typedef enum logic [1:0] {
    ORG_ESOPHAGUS       = 2'd0,
    ORG_STOMACH         = 2'd1,
    ORG_SMALL_INTESTINE = 2'd2,
    ORG_COLON           = 2'd3
  } organ_e;

  localparam int unsigned NUM_ORGANS = 4;

  // Image geometry of the sensor (320 x 320, RGGB mosaic, one byte per pixel
  // once stored).
  localparam int unsigned IMG_W_DEFAULT = 320;
  localparam int unsigned IMG_H_DEFAULT = 320;

  // Memories: 384 KiB of L2 in four word-interleaved banks, 136 KiB interim
  // SRAM for the accelerator. Sizes in 32-bit words.
  localparam int unsigned L2_BANKS          = 4;
  localparam int unsigned L2_BANK_WORDS_DEF  = 384 * 1024 / 4 / L2_BANKS;  // 24576
  localparam int unsigned ACC_SRAM_WORDS_DEF = 136 * 1024 / 4;             // 34816

  typedef struct packed {
    logic        req;
    logic [31:0] addr;   // byte address
    logic        we;
    logic [3:0]  be;
    logic [31:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } tcdm_rsp_t;

endpackage
