// naneyec_model -- behavioural model of the image sensor's SPI side, for
// simulation only (not synthesizable, not part of the design).
//
// Speaks the framing used by naneyec_ctrl: a 16-bit header on MOSI, bit 15 = 1
// for a configuration write (the following 16-bit words are recorded in
// cfg_rx), bit 15 = 0 for a frame read (the model then shifts IMG_W*IMG_H
// pixels of PIX_BITS bits on MISO, MSB first, changing MISO on falling SCLK).
// Pixel values come from pix_val(): the first four pixels of a frame carry
// the 'scene' byte sampled when cs_n falls (so that a downstream model can
// tell which organ the frame shows); the others are a fixed pseudo-random
// mosaic that also depends on the frame number.
module naneyec_model #(
  parameter int unsigned IMG_W     = 320,
  parameter int unsigned IMG_H     = 320,
  parameter int unsigned PIX_BITS  = 10,
  parameter int unsigned CFG_WORDS = 8
) (
  input  logic       sclk,
  input  logic       cs_n,
  input  logic       mosi,
  output logic       miso,
  input  logic [7:0] scene
);
  localparam int unsigned NPIX = IMG_W * IMG_H;

  int          bitn = 0;
  logic [15:0] hdr = '0;
  logic [15:0] cfg_rx [CFG_WORDS];
  int          cfg_transfers = 0;
  int          frames_read = 0;
  logic [7:0]  scene_q = '0;

  function automatic logic [PIX_BITS-1:0] pix_val(input int frame, input int i, input logic [7:0] sc);
    if (i < 4) return PIX_BITS'({sc, 2'b01} << (PIX_BITS - 10 + 0)) | PIX_BITS'(i);
    return PIX_BITS'(((i * 37) ^ (i >> 3) * 11) + frame * 101);
  endfunction

  initial miso = 1'b0;

  always @(negedge cs_n) begin
    bitn = 0; hdr = '0; miso = 1'b0; scene_q = scene;
  end

  always @(posedge sclk) begin
    if (!cs_n) begin
      if (bitn < 16) hdr = {hdr[14:0], mosi};
      else if (hdr[15] && (bitn - 16) / 16 < int'(CFG_WORDS))
        cfg_rx[(bitn - 16) / 16] = {cfg_rx[(bitn - 16) / 16][14:0], mosi};
      bitn++;
    end
  end

  always @(negedge sclk) begin
    if (!cs_n && bitn >= 16 && !hdr[15]) begin
      int k, p;
      logic [PIX_BITS-1:0] v;
      k = bitn - 16;
      p = k / PIX_BITS;
      v = (p < int'(NPIX)) ? pix_val(frames_read, p, scene_q) : '0;
      miso = v[PIX_BITS - 1 - (k % PIX_BITS)];
    end
  end

  always @(posedge cs_n) begin
    if (hdr[15]) cfg_transfers++;
    else if (bitn == 16 + int'(NPIX * PIX_BITS)) frames_read++;
  end
endmodule
