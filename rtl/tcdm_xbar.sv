// tcdm_xbar -- crossbar between the SoC's memory masters and the L2 banks.
//
// The core, the camera controller, the accelerator and the frame sequencer
// all reach the shared L2 memory through this interconnect, so the
// accelerator reads features and weights and writes its results without a
// copy through the core. The L2 is word-interleaved: byte address bits [3:2]
// (for four banks) select the bank, the bits above select the word in it, so
// consecutive words of an image fall into different banks. Address bits above
// the memory size are ignored.
//
// Each bank has a round-robin arbiter: among the masters requesting it, the
// first one after the last winner gets the grant. A master's request and
// grant happen in the same cycle (combinational), the bank is accessed at the
// following edge, and r_valid with the read data comes back one cycle after
// the grant, for writes as well. A master keeps req, addr, we, be and wdata
// stable until it sees gnt.
//
// The handshake follows the PULP TCDM convention; bank count, interleaving and
// arbitration policy are this design's choices.
module tcdm_xbar
  import vce_pkg::*;
#(
  parameter int unsigned NM         = 4,
  parameter int unsigned NB         = 4,
  parameter int unsigned BANK_WORDS = 24576
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  tcdm_req_t                     mreq [NM],
  output tcdm_rsp_t                     mrsp [NM],
  output logic                          bank_req   [NB],
  output logic                          bank_we    [NB],
  output logic [$clog2(BANK_WORDS)-1:0] bank_addr  [NB],
  output logic [3:0]                    bank_be    [NB],
  output logic [31:0]                   bank_wdata [NB],
  input  logic [31:0]                   bank_rdata [NB]
);

  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned AW = $clog2(BANK_WORDS);

  // Bank addressed by each master.
  logic [BW-1:0] m_bank [NM];
  always_comb begin
    for (int m = 0; m < NM; m++)
      m_bank[m] = (NB > 1) ? BW'(mreq[m].addr[2 +: BW]) : '0;
  end

  // Per-bank round-robin arbitration.
  logic [MW-1:0] last_q   [NB];
  logic          win_vld  [NB];
  logic [MW-1:0] win_m    [NB];

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      win_vld[b] = 1'b0;
      win_m[b]   = '0;
      for (int k = 1; k <= NM; k++) begin
        int unsigned cand;
        cand = (int'(last_q[b]) + k) % NM;
        if (!win_vld[b] && mreq[cand].req && (int'(m_bank[cand]) == b)) begin
          win_vld[b] = 1'b1;
          win_m[b]   = MW'(cand);
        end
      end
    end
  end

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      bank_req[b]   = win_vld[b];
      bank_we[b]    = mreq[win_m[b]].we;
      bank_addr[b]  = AW'(mreq[win_m[b]].addr[2 + ((NB > 1) ? BW : 0) +: AW]);
      bank_be[b]    = mreq[win_m[b]].be;
      bank_wdata[b] = mreq[win_m[b]].wdata;
    end
  end

  // Grants and the one-cycle-late response routing.
  logic          gnt     [NM];
  logic          rvld_q  [NM];
  logic [BW-1:0] rbank_q [NM];

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      gnt[m] = 1'b0;
      for (int b = 0; b < NB; b++)
        if (win_vld[b] && (int'(win_m[b]) == m)) gnt[m] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) last_q[b] <= MW'(NM - 1);
      for (int m = 0; m < NM; m++) begin
        rvld_q[m]  <= 1'b0;
        rbank_q[m] <= '0;
      end
    end else begin
      for (int b = 0; b < NB; b++)
        if (win_vld[b]) last_q[b] <= win_m[b];
      for (int m = 0; m < NM; m++) begin
        rvld_q[m]  <= gnt[m];
        if (gnt[m]) rbank_q[m] <= m_bank[m];
      end
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      mrsp[m].gnt    = gnt[m];
      mrsp[m].rvalid = rvld_q[m];
      mrsp[m].rdata  = bank_rdata[rbank_q[m]];
    end
  end

  // A bank never grants two masters in one cycle.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int m = 0; m < NM; m++)
        for (int n = m + 1; n < NM; n++)
          assert (!(gnt[m] && gnt[n] && m_bank[m] == m_bank[n]))
            else $error("tcdm_xbar: bank %0d granted to masters %0d and %0d", m_bank[m], m, n);
    end
  end

endmodule
