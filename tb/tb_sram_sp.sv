// tb_sram_sp -- self-checking test of the single-port SRAM bank.
// Random reads and byte-masked writes against a shadow copy; checks the
// one-cycle read latency and that rdata holds between reads.
module tb_sram_sp;
  localparam int unsigned WORDS = 64;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        req, we;
  logic [5:0]  addr;
  logic [3:0]  be;
  logic [31:0] wdata, rdata;
  logic [31:0] shadow [WORDS];
  int checks = 0, failures = 0;

  sram_sp #(.WORDS(WORDS), .DW(32)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; addr = 0; be = 0; wdata = 0;
    // fill every word with full writes
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 6'(i); be = 4'hF; wdata = $urandom; shadow[i] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      req = ($urandom_range(0, 3) != 0); we = $urandom_range(0, 1) == 1;
      addr = 6'($urandom_range(0, WORDS - 1)); be = 4'($urandom); wdata = $urandom;
      if (req && we)
        for (int b = 0; b < 4; b++) if (be[b]) shadow[addr][b*8 +: 8] = wdata[b*8 +: 8];
      if (req && !we) begin
        logic [31:0] exp_v;
        exp_v = shadow[addr];
        @(posedge clk); #1;
        checks++;
        if (rdata !== exp_v) begin
          failures++;
          $display("read mismatch addr %0d: %h vs %h", addr, rdata, exp_v);
        end
        // rdata holds while no read is issued
        req = 1; we = 1; addr = 6'((addr + 1) % WORDS); be = 4'h0; wdata = '1;
        @(posedge clk); #1;
        checks++;
        if (rdata !== exp_v) begin failures++; $display("rdata not held"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
