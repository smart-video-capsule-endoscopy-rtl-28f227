// tb_tcdm_xbar -- self-checking test of the TCDM crossbar with four banks.
// Four masters issue random reads and writes (held until granted) into a
// small interleaved memory; every read is compared with a shadow copy updated
// in grant order. A phase in which all masters hammer one bank checks the
// round-robin fairness: no request may wait NM cycles or more.
module tb_tcdm_xbar;
  import vce_pkg::*;
  localparam int unsigned NM = 4, NB = 4, BANK_WORDS = 64;
  localparam int unsigned WORDS = NB * BANK_WORDS;
  localparam int unsigned AW = $clog2(BANK_WORDS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tcdm_req_t mreq [NM];
  tcdm_rsp_t mrsp [NM];
  logic          bank_req [NB], bank_we [NB];
  logic [AW-1:0] bank_addr [NB];
  logic [3:0]    bank_be [NB];
  logic [31:0]   bank_wdata [NB], bank_rdata [NB];

  tcdm_xbar #(.NM(NM), .NB(NB), .BANK_WORDS(BANK_WORDS)) dut (.*);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    sram_sp #(.WORDS(BANK_WORDS)) u_bank (
      .clk, .req(bank_req[b]), .we(bank_we[b]), .addr(bank_addr[b]),
      .be(bank_be[b]), .wdata(bank_wdata[b]), .rdata(bank_rdata[b]));
  end

  int checks = 0, failures = 0;
  logic [31:0] shadow [WORDS];
  logic [31:0] exp_q [NM];
  logic        exp_vld [NM];
  int          wait_cnt [NM];
  int          max_wait = 0;
  int          grants [NM];
  bit          hammer = 0;
  bit          running = 0;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic tcdm_req_t new_req();
    tcdm_req_t r;
    r.req   = ($urandom_range(0, 3) != 0);
    r.we    = $urandom_range(0, 1) == 1;
    r.addr  = hammer ? 32'(($urandom_range(0, BANK_WORDS - 1) * NB + 1) * 4)
                     : 32'($urandom_range(0, WORDS - 1) * 4);
    r.be    = r.we ? 4'($urandom) : 4'hF;
    r.wdata = $urandom;
    if (hammer) r.req = 1'b1;
    return r;
  endfunction

  // scoreboard and stimulus, all at the rising edge
  always @(posedge clk) begin
    if (rst_n && running) begin
      // responses of last cycle's grants
      for (int m = 0; m < NM; m++) begin
        if (exp_vld[m]) begin
          checks++;
          if (!mrsp[m].rvalid) begin failures++; $display("m%0d: missing rvalid", m); end
          else if (exp_q[m] != 32'hDEAD_BEEF && mrsp[m].rdata !== exp_q[m]) begin
            failures++;
            $display("m%0d: read %h expected %h", m, mrsp[m].rdata, exp_q[m]);
          end
        end else if (mrsp[m].rvalid) begin
          failures++; $display("m%0d: spurious rvalid", m);
        end
      end
      // reads first (they see the memory before this cycle's writes)
      for (int m = 0; m < NM; m++) begin
        exp_vld[m] = mreq[m].req && mrsp[m].gnt;
        exp_q[m]   = 32'hDEAD_BEEF;
        if (exp_vld[m] && !mreq[m].we) exp_q[m] = shadow[mreq[m].addr[31:2] % WORDS];
      end
      for (int m = 0; m < NM; m++) begin
        if (mreq[m].req && mrsp[m].gnt && mreq[m].we)
          for (int b = 0; b < 4; b++)
            if (mreq[m].be[b]) shadow[mreq[m].addr[31:2] % WORDS][b*8 +: 8] = mreq[m].wdata[b*8 +: 8];
      end
      // fairness bookkeeping and new requests
      for (int m = 0; m < NM; m++) begin
        if (mreq[m].req && !mrsp[m].gnt) begin
          wait_cnt[m]++;
          if (wait_cnt[m] > max_wait) max_wait = wait_cnt[m];
        end else begin
          if (mreq[m].req) grants[m]++;
          wait_cnt[m] = 0;
          mreq[m] <= new_req();
        end
      end
    end
  end

  initial begin
    for (int m = 0; m < NM; m++) begin
      mreq[m] = '0; exp_vld[m] = 0; wait_cnt[m] = 0; grants[m] = 0; exp_q[m] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // initialise the memory through master 0 only
    for (int w = 0; w < WORDS; w++) begin
      @(negedge clk);
      mreq[0] = '{req: 1'b1, addr: 32'(w * 4), we: 1'b1, be: 4'hF, wdata: 32'(w * 32'h01010101 ^ 32'h5A5A0000)};
      shadow[w] = mreq[0].wdata;
      @(posedge clk); #1;
      if (!mrsp[0].gnt) begin failures++; $display("init write not granted"); end
    end
    @(negedge clk);
    mreq[0] = '0;
    repeat (3) @(posedge clk);
    running = 1;
    repeat (4000) @(posedge clk);
    hammer = 1;
    for (int m = 0; m < NM; m++) grants[m] = 0;
    repeat (2000) @(posedge clk);
    checks++;
    if (max_wait >= NM) begin failures++; $display("a request waited %0d cycles", max_wait); end
    for (int m = 0; m < NM; m++) begin
      checks++;
      if (grants[m] < 2000 / NM - 5) begin failures++; $display("m%0d got only %0d grants", m, grants[m]); end
    end
    $display("max wait %0d cycles; grants in hammer phase %0d %0d %0d %0d", max_wait,
             grants[0], grants[1], grants[2], grants[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
