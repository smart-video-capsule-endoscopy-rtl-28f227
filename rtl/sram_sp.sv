// sram_sp -- single-port SRAM bank with byte enables.
//
// Stands for one SRAM macro of the SoC. Four of them (24576 x 32 bit each)
// make the 384 KiB L2 memory; one of 34816 x 32 bit is the accelerator's
// 136 KiB interim-result memory. The sizes are the chip's; word width, byte
// enables and the one-cycle read latency are this design's choices, matching
// the usual TCDM bank.
//
// Interface/timing: when req is high at a rising edge, a write (we=1) stores
// the enabled bytes of wdata at addr; a read (we=0) returns mem[addr] on rdata
// after that edge. rdata holds its value until the next read. Contents are
// not reset.
module sram_sp #(
  parameter int unsigned WORDS = 24576,
  parameter int unsigned DW    = 32
) (
  input  logic                     clk,
  input  logic                     req,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [DW/8-1:0]          be,
  input  logic [DW-1:0]            wdata,
  output logic [DW-1:0]            rdata
);

  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (req) begin
      if (we) begin
        for (int b = 0; b < DW/8; b++)
          if (be[b]) mem[addr][b*8 +: 8] <= wdata[b*8 +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
