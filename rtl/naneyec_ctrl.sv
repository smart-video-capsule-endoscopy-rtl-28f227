// naneyec_ctrl -- autonomous controller for the NanEyeC image sensor.
//
// Lets the SoC take a picture without the core: it configures the sensor,
// clocks a whole raw RGGB frame out of it over SPI, turns every pixel into an
// unsigned byte, packs four bytes into a 32-bit word and writes the words
// into L2 memory through its own TCDM master port. The stored frame is the
// Bayer mosaic itself (IMG_W*IMG_H bytes, pixel i at byte base_addr+i,
// little-endian within a word); no conversion to RGB takes place, since the
// CNN classifies the mosaic directly.
//
// SPI (mode 0, SCLK = clk / (2*CLK_DIV), MSB first, cs_n low for the whole
// transfer). Every transfer starts with a 16-bit header on MOSI:
//   * configuration (cfg_start): header bit 15 = 1, followed by the
//     CFG_WORDS 16-bit words of the shadow registers written via cfg_we;
//   * frame read (cap_start): header bit 15 = 0, then the sensor shifts
//     IMG_W*IMG_H pixels of PIX_BITS bits on MISO, sampled at rising SCLK.
// A pixel keeps its 8 most significant bits; the lower PIX_BITS-8 bits are
// dropped.
//
// Timing: a frame read takes (16 + IMG_W*IMG_H*PIX_BITS) * 2*CLK_DIV cycles
// plus the last memory write; frame_done pulses once that write was granted.
// One packed word may wait for its grant; if the next word is complete before
// that, it is dropped and the sticky 'overflow' flag is set (cleared by the
// next start).
//
// What follows the paper: an on-chip controller that configures the sensor
// and stores the frame as packed uint8 by itself; the 320x320 geometry. The
// SPI framing, the 10-bit pixel depth and the overflow policy are this
// design's own choices.
module naneyec_ctrl
  import vce_pkg::*;
#(
  parameter int unsigned IMG_W     = 320,
  parameter int unsigned IMG_H     = 320,
  parameter int unsigned PIX_BITS  = 10,
  parameter int unsigned CFG_WORDS = 8,
  parameter int unsigned CLK_DIV   = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // configuration shadow registers and commands
  input  logic                         cfg_we,
  input  logic [$clog2(CFG_WORDS)-1:0] cfg_idx,
  input  logic [15:0]                  cfg_wdata,
  input  logic                         cfg_start,
  input  logic                         cap_start,
  input  logic [31:0]                  base_addr,
  output logic                         busy,
  output logic                         cfg_done,
  output logic                         frame_done,
  output logic                         overflow,
  // SPI to the sensor
  output logic                         spi_sclk,
  output logic                         spi_cs_n,
  output logic                         spi_mosi,
  input  logic                         spi_miso,
  // TCDM master
  output tcdm_req_t                    mreq,
  input  tcdm_rsp_t                    mrsp
);

  localparam int unsigned NPIX      = IMG_W * IMG_H;
  localparam int unsigned HDR_BITS  = 16;
  localparam int unsigned CFG_BITS  = HDR_BITS + CFG_WORDS * 16;
  localparam int unsigned CAP_BITS  = HDR_BITS + NPIX * PIX_BITS;
  localparam int unsigned DIVW      = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;
  localparam int unsigned PBW       = $clog2(PIX_BITS + 1);

  typedef enum logic [1:0] {S_IDLE, S_XFER, S_FLUSH} state_e;

  state_e          state_q;
  logic            is_cfg_q;
  logic [15:0]     cfg_regs [CFG_WORDS];
  logic [31:0]     bit_cnt_q;       // bits completed in this transfer
  logic [DIVW-1:0] div_q;
  logic            sclk_q;
  logic [PIX_BITS-1:0] pix_sr_q;
  logic [PBW-1:0]  pix_bits_q;
  logic [1:0]      lane_q;
  logic [23:0]     word_buf_q;
  logic [31:0]     waddr_q;         // address of the next complete word
  logic            pend_q;
  logic [31:0]     pend_addr_q;
  logic [31:0]     pend_data_q;
  logic            overflow_q;

  logic [31:0] total_bits;
  assign total_bits = is_cfg_q ? 32'(CFG_BITS) : 32'(CAP_BITS);

  // MOSI: the bit with index bit_cnt_q of the outgoing stream.
  logic [31:0] pay_idx;
  always_comb begin
    spi_mosi = 1'b0;
    pay_idx  = bit_cnt_q - 32'(HDR_BITS);
    if (state_q == S_XFER) begin
      if (bit_cnt_q < 32'(HDR_BITS))
        spi_mosi = (bit_cnt_q == 32'd0) ? is_cfg_q : 1'b0;  // header: {cfg, 15'b0}
      else if (is_cfg_q)
        spi_mosi = cfg_regs[pay_idx[4 +: $clog2(CFG_WORDS)]][4'd15 - pay_idx[3:0]];
    end
  end

  logic tick;   // half SCLK period elapsed
  assign tick = (state_q == S_XFER) && (div_q == DIVW'(CLK_DIV - 1));

  logic [PIX_BITS-1:0] pix_next;
  assign pix_next = {pix_sr_q[PIX_BITS-2:0], spi_miso};

  always_ff @(posedge clk) begin
    if (cfg_we) cfg_regs[cfg_idx] <= cfg_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      is_cfg_q    <= 1'b0;
      bit_cnt_q   <= '0;
      div_q       <= '0;
      sclk_q      <= 1'b0;
      pix_sr_q    <= '0;
      pix_bits_q  <= '0;
      lane_q      <= '0;
      word_buf_q  <= '0;
      waddr_q     <= '0;
      pend_q      <= 1'b0;
      pend_addr_q <= '0;
      pend_data_q <= '0;
      overflow_q  <= 1'b0;
      cfg_done    <= 1'b0;
      frame_done  <= 1'b0;
    end else begin
      cfg_done   <= 1'b0;
      frame_done <= 1'b0;
      if (pend_q && mrsp.gnt) pend_q <= 1'b0;

      unique case (state_q)
        S_IDLE: begin
          if (cfg_start || cap_start) begin
            state_q    <= S_XFER;
            is_cfg_q   <= cfg_start;
            bit_cnt_q  <= '0;
            div_q      <= '0;
            sclk_q     <= 1'b0;
            pix_bits_q <= '0;
            lane_q     <= '0;
            waddr_q    <= base_addr;
            overflow_q <= 1'b0;
          end
        end
        S_XFER: begin
          div_q <= tick ? '0 : div_q + 1'b1;
          if (tick) begin
            sclk_q <= ~sclk_q;
            if (!sclk_q) begin
              // rising SCLK: sample a pixel bit
              if (!is_cfg_q && bit_cnt_q >= 32'(HDR_BITS)) begin
                if (pix_bits_q == PBW'(PIX_BITS - 1)) begin
                  pix_bits_q <= '0;
                  lane_q     <= lane_q + 1'b1;
                  if (lane_q == 2'd3) begin
                    waddr_q <= waddr_q + 32'd4;
                    if (pend_q && !mrsp.gnt) begin
                      overflow_q <= 1'b1;
                    end else begin
                      pend_q      <= 1'b1;
                      pend_addr_q <= waddr_q;
                      pend_data_q <= {pix_next[PIX_BITS-1 -: 8], word_buf_q};
                    end
                  end else begin
                    word_buf_q[lane_q*8 +: 8] <= pix_next[PIX_BITS-1 -: 8];
                  end
                end else begin
                  pix_bits_q <= pix_bits_q + 1'b1;
                end
                pix_sr_q <= pix_next;
              end
            end else begin
              // falling SCLK: bit complete
              bit_cnt_q <= bit_cnt_q + 32'd1;
              if (bit_cnt_q + 32'd1 == total_bits) state_q <= S_FLUSH;
            end
          end
        end
        S_FLUSH: begin
          if (!pend_q || mrsp.gnt) begin
            state_q <= S_IDLE;
            if (is_cfg_q) cfg_done <= 1'b1;
            else          frame_done <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state_q != S_IDLE);
  assign spi_cs_n = (state_q != S_XFER);
  assign spi_sclk = sclk_q;
  assign overflow = overflow_q;

  always_comb begin
    mreq.req   = pend_q;
    mreq.addr  = pend_addr_q;
    mreq.we    = 1'b1;
    mreq.be    = 4'hF;
    mreq.wdata = pend_data_q;
  end

  // The request must stay stable until it is granted.
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      (mreq.req && !mrsp.gnt) |=> (mreq.req && $stable(mreq.addr) && $stable(mreq.wdata));
  endproperty
  assert property (p_req_stable) else $error("naneyec_ctrl: TCDM request changed before grant");

endmodule
