// tb_viterbi_decoder -- self-checking test of the sliding-window HMM decoder.
// Loads random cost tables (and one hand-made GI-tract model), streams
// random and structured label sequences at several window sizes, and
// compares the final organ and the whole decoded path with a reference
// Viterbi written directly from the recursion (full lattice, then
// traceback). Also checks the decode latency 3 + 4*(n-1) + n cycles, and
// on the GI-tract model that the oldest-frame decision ignores a short run of
// misleading labels and turns only when the window is almost all small
// intestine (worked out by hand below).
module tb_viterbi_decoder;
  import vce_pkg::*;
  localparam int unsigned COST_W = 8, WIN_MAX = 50;
  localparam int unsigned WW = $clog2(WIN_MAX + 1), IW = $clog2(WIN_MAX);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              clear = 0;
  logic [WW-1:0]     win_size;
  logic              tbl_we = 0;
  logic [1:0]        tbl_sel = 0;
  logic [3:0]        tbl_idx = 0;
  logic [COST_W-1:0] tbl_wdata = 0;
  logic              obs_valid = 0;
  organ_e            obs;
  logic              obs_ready, out_valid;
  organ_e            out_state, first_state, path_state;
  logic [IW-1:0]     path_idx = 0;
  logic [WW-1:0]     path_len;

  viterbi_decoder #(.COST_W(COST_W), .WIN_MAX(WIN_MAX)) dut (.*);

  int checks = 0, failures = 0;
  int ic [4];
  int tc [4][4];
  int ec [4][4];
  int hist [$];

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int sel, input int idx, input int val);
    @(negedge clk);
    tbl_we = 1; tbl_sel = 2'(sel); tbl_idx = 4'(idx); tbl_wdata = COST_W'(val);
    @(negedge clk);
    tbl_we = 0;
  endtask

  task automatic load_random();
    for (int s = 0; s < 4; s++) begin ic[s] = $urandom_range(0, 255); wr(0, s, ic[s]); end
    for (int p = 0; p < 4; p++) for (int s = 0; s < 4; s++) begin
      tc[p][s] = $urandom_range(0, 255); wr(1, p*4+s, tc[p][s]);
      ec[p][s] = $urandom_range(0, 255); wr(2, p*4+s, ec[p][s]);
    end
  endtask

  // GI-tract model: stay is free, next organ costs 60, anything else 255;
  // a matching label costs 1, a wrong one 40.
  task automatic load_tract();
    for (int s = 0; s < 4; s++) begin ic[s] = (s == 0) ? 0 : 30; wr(0, s, ic[s]); end
    for (int p = 0; p < 4; p++) for (int s = 0; s < 4; s++) begin
      tc[p][s] = (s == p) ? 0 : (s == p + 1) ? 60 : 255; wr(1, p*4+s, tc[p][s]);
      ec[p][s] = (s == p) ? 1 : 40;                       wr(2, p*4+s, ec[p][s]);
    end
  endtask

  // Reference decoder over the newest n labels of hist.
  task automatic reference(input int n, output int path [WIN_MAX]);
    int d [WIN_MAX][4];
    int bp [WIN_MAX][4];
    int o [WIN_MAX];
    int base = hist.size() - n;
    for (int t = 0; t < n; t++) o[t] = hist[base + t];
    for (int s = 0; s < 4; s++) d[0][s] = ic[s] + ec[s][o[0]];
    for (int t = 1; t < n; t++)
      for (int s = 0; s < 4; s++) begin
        int best = -1, arg = 0;
        for (int p = 0; p < 4; p++)
          if (best < 0 || d[t-1][p] + tc[p][s] < best) begin best = d[t-1][p] + tc[p][s]; arg = p; end
        d[t][s] = best + ec[s][o[t]];
        bp[t][s] = arg;
      end
    path[n-1] = 0;
    for (int s = 1; s < 4; s++) if (d[n-1][s] < d[n-1][path[n-1]]) path[n-1] = s;
    for (int t = n - 1; t > 0; t--) path[t-1] = bp[t][path[t]];
  endtask

  task automatic push(input organ_e o);
    int n, lat, path [WIN_MAX];
    int ws;
    while (!obs_ready) @(negedge clk);
    obs = o; obs_valid = 1;
    @(posedge clk);
    hist.push_back(int'(o));
    #1 obs_valid = 0;
    lat = 0;
    while (!out_valid) begin @(posedge clk); #1; lat++; end
    ws = (win_size == 0) ? 1 : (int'(win_size) > WIN_MAX) ? WIN_MAX : int'(win_size);
    n = (hist.size() < ws) ? hist.size() : ws;
    reference(n, path);
    checks++;
    if (lat != 3 + 4 * (n - 1) + n) begin failures++; $display("latency %0d for n=%0d", lat, n); end
    checks++;
    if (int'(out_state) != path[n-1] || int'(path_len) != n) begin
      failures++; $display("final state %0d expected %0d (n=%0d)", out_state, path[n-1], n);
    end
    checks++;
    if (int'(first_state) != path[0]) begin
      failures++; $display("first state %0d expected %0d (n=%0d)", first_state, path[0], n);
    end
    for (int t = 0; t < n; t++) begin
      path_idx = IW'(t); #1;
      checks++;
      if (int'(path_state) != path[t]) begin failures++; $display("path[%0d]=%0d expected %0d", t, path_state, path[t]); end
    end
    @(negedge clk);
  endtask

  task automatic do_clear();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    hist.delete();
  endtask

  initial begin
    int detect_at;
    win_size = 20;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random models at several window sizes
    for (int round = 0; round < 6; round++) begin
      int sizes [6] = '{20, 10, 50, 1, 3, 63};
      load_random();
      do_clear();
      win_size = WW'(sizes[round]);
      for (int k = 0; k < 70; k++) push(organ_e'($urandom_range(0, 3)));
    end
    // structured GI tract with an outlier: the lone small-intestine label
    // must not move the decision, two in a row must.
    load_tract();
    do_clear();
    win_size = 20;
    for (int k = 0; k < 5; k++) push(ORG_ESOPHAGUS);
    for (int k = 0; k < 10; k++) push(ORG_STOMACH);
    push(ORG_SMALL_INTESTINE);
    checks++;
    if (out_state != ORG_STOMACH) begin failures++; $display("outlier not suppressed"); end
    for (int k = 0; k < 5; k++) push(ORG_STOMACH);
    detect_at = -1;
    for (int k = 0; k < 5; k++) begin
      push(ORG_SMALL_INTESTINE);
      if (detect_at < 0 && out_state == ORG_SMALL_INTESTINE) detect_at = k;
    end
    checks++;
    if (detect_at != 1) begin failures++; $display("small intestine detected after %0d labels", detect_at + 1); end
    // Oldest-frame decision, window 10. With k small-intestine labels after
    // 10-k stomach labels, a path that is small intestine throughout costs
    // 30 + 40*(10-k) + k, one that switches costs 30 + (10-k) + 60 + k; the
    // first wins from k = 9 on. A run of 3 misleading labels must not reach it.
    do_clear();
    win_size = 10;
    for (int k = 0; k < 15; k++) push(ORG_STOMACH);
    for (int k = 0; k < 3; k++) push(ORG_SMALL_INTESTINE);
    for (int k = 0; k < 10; k++) begin
      push(ORG_STOMACH);
      checks++;
      if (first_state != ORG_STOMACH) begin failures++; $display("oldest frame moved by a 3-label run"); end
    end
    detect_at = -1;
    for (int k = 0; k < 12; k++) begin
      push(ORG_SMALL_INTESTINE);
      if (detect_at < 0 && first_state == ORG_SMALL_INTESTINE) detect_at = k;
    end
    checks++;
    if (detect_at != 8) begin failures++; $display("oldest-frame decision after %0d labels, expected 9", detect_at + 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
