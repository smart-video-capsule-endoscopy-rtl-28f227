// acc_model -- behavioural stand-in for the CNN accelerator, for simulation
// only (not synthesizable, not part of the design).
//
// Runs on the gated accelerator clock, so it only advances while the SoC has
// its clock enabled. On 'start' it reads the first word of the stored frame
// over its TCDM port, round-trips that word through its interim SRAM, derives
// the organ from the two MSBs of the first pixel byte (the sensor model puts a
// scene tag there), writes four signed 8-bit class scores (the organ's score
// highest) to result_addr and pulses 'done'. The real accelerator would run the
// 63k-parameter CNN instead; its timing is not modelled.
module acc_model
  import vce_pkg::*;
#(
  parameter int unsigned SRAM_AW = 16
) (
  input  logic               clk,        // gated accelerator clock
  input  logic               rst_n,
  input  logic               start,
  output logic               done,
  input  logic [31:0]        img_base,
  input  logic [31:0]        result_addr,
  output tcdm_req_t          mreq,
  input  tcdm_rsp_t          mrsp,
  output logic               sram_req,
  output logic               sram_we,
  output logic [SRAM_AW-1:0] sram_addr,
  output logic [3:0]         sram_be,
  output logic [31:0]        sram_wdata,
  input  logic [31:0]        sram_rdata
);
  typedef enum int {IDLE, RD_REQ, RD_WAIT, SR_WR, SR_RD, SR_CHK, WR_REQ, WR_WAIT, FIN} st_e;
  st_e st = IDLE;
  logic [31:0] word = 0;
  int sram_errors = 0;
  int runs = 0;

  initial begin
    done = 0; mreq = '0; sram_req = 0; sram_we = 0; sram_addr = '0; sram_be = 4'hF; sram_wdata = 0;
  end

  always @(posedge clk) begin
    done <= 0;
    if (!rst_n) st <= IDLE;
    else case (st)
      IDLE:    if (start) begin
                 mreq <= '{req: 1'b1, addr: img_base, we: 1'b0, be: 4'hF, wdata: '0};
                 st <= RD_REQ;
               end
      RD_REQ:  if (mrsp.gnt) begin mreq.req <= 0; st <= RD_WAIT; end
      RD_WAIT: if (mrsp.rvalid) begin
                 word <= mrsp.rdata;
                 sram_req <= 1; sram_we <= 1; sram_addr <= SRAM_AW'(runs * 3 + 5); sram_wdata <= mrsp.rdata;
                 st <= SR_WR;
               end
      SR_WR:   begin sram_we <= 0; st <= SR_RD; end
      SR_RD:   begin sram_req <= 0; st <= SR_CHK; end
      SR_CHK:  begin
                 logic [1:0] org;
                 logic [31:0] sc;
                 if (sram_rdata != word) sram_errors++;
                 org = word[7:6];
                 for (int c = 0; c < 4; c++) sc[c*8 +: 8] = (c == int'(org)) ? 8'sd100 : 8'(-20 - c);
                 mreq <= '{req: 1'b1, addr: result_addr, we: 1'b1, be: 4'hF, wdata: sc};
                 st <= WR_REQ;
               end
      WR_REQ:  if (mrsp.gnt) begin mreq.req <= 0; st <= WR_WAIT; end
      WR_WAIT: if (mrsp.rvalid) st <= FIN;
      FIN:     begin done <= 1; runs++; st <= IDLE; end
      default: st <= IDLE;
    endcase
  end
endmodule
