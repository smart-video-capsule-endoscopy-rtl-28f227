// tb_hmm_grid -- workload test: the window-size / frame-rate grid of the
// localization study, run on the Viterbi decoder at its default parameters.
//
// A synthetic capsule passage is recorded at 2 fps: 20 esophagus frames, 800
// stomach frames and 1000 small-intestine frames. The CNN labels are noisy:
// in the esophagus 20 % of the labels say "stomach"; in the stomach, bursts
// of 1-2 "small intestine" labels start with 2 % probability per frame
// (runs of poor frames); in the small intestine, bursts of 1-3 "colon" labels
// start with 10 % probability. For every frame rate 2, 1, 0.5, 0.25 and 0.125 fps
// (every 1st, 2nd, 4th, 8th or 16th label) and every window 10, 20, 30, 40
// and 50, the labels are fed to the decoder until the oldest frame of its
// decoded window is in the small intestine, the rule the sequencer uses. Every
// decoder result along the way (oldest and newest organ) is compared with a
// reference Viterbi. The detection delay in seconds
// (negative = too early) is printed for each point of the grid, and the
// energy spent before the capsule reaches the small intestine, from the
// per-frame energies measured on the capsule's demonstrator: capture (sensor,
// LEDs, core) 390.64 uJ, CNN 5.14 uJ, HMM 0.17 uJ, radio 250 uJ. Until the
// detection a frame costs capture + CNN + HMM; after it, every 2-fps frame is
// captured and transmitted. Idle power is left out. The baseline capsule
// captures and transmits every 2-fps frame.
module tb_hmm_grid;
  import vce_pkg::*;
  localparam int unsigned COST_W = 8, WIN_MAX = 50;
  localparam int unsigned WW = $clog2(WIN_MAX + 1), IW = $clog2(WIN_MAX);
  localparam int N_ESO = 20, N_STO = 800, N_SI = 1000;
  localparam int N = N_ESO + N_STO + N_SI;
  localparam int SI0 = N_ESO + N_STO;          // first small-intestine frame
  localparam longint E_CAP = 390_640, E_ANA = 5_310, E_TX = 250_000;  // nJ per frame

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              clear = 0;
  logic [WW-1:0]     win_size = 20;
  logic              tbl_we = 0;
  logic [1:0]        tbl_sel = 0;
  logic [3:0]        tbl_idx = 0;
  logic [COST_W-1:0] tbl_wdata = 0;
  logic              obs_valid = 0;
  organ_e            obs = ORG_ESOPHAGUS;
  logic              obs_ready, out_valid;
  organ_e            out_state, first_state, path_state;
  logic [IW-1:0]     path_idx = 0;
  logic [WW-1:0]     path_len;

  viterbi_decoder dut (.*);

  int checks = 0, failures = 0;
  int ic [4];
  int tc [4][4];
  int ec [4][4];
  int labels [N];
  int hist [$];
  int delay_s [5][5];
  longint energy_nj [5][5];

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
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

  // Reference decode of the newest min(ws, labels) labels; returns the organ
  // of the newest frame and, through first, that of the oldest frame.
  function automatic int reference_last(input int ws, output int first);
    int d [4], nd [4];
    int bp [WIN_MAX][4];
    int n, base, best, cur;
    n = (hist.size() < ws) ? hist.size() : ws;
    base = hist.size() - n;
    for (int s = 0; s < 4; s++) d[s] = ic[s] + ec[s][hist[base]];
    for (int t = 1; t < n; t++) begin
      for (int s = 0; s < 4; s++) begin
        int m;
        m = d[0] + tc[0][s];
        bp[t][s] = 0;
        for (int p = 1; p < 4; p++) if (d[p] + tc[p][s] < m) begin m = d[p] + tc[p][s]; bp[t][s] = p; end
        nd[s] = m + ec[s][hist[base + t]];
      end
      d = nd;
    end
    best = 0;
    for (int s = 1; s < 4; s++) if (d[s] < d[best]) best = s;
    cur = best;
    for (int t = n - 1; t > 0; t--) cur = bp[t][cur];
    first = cur;
    return best;
  endfunction

  initial begin
    int burst, dly;
    int fps_div [5];
    int wins [5];
    string fps_name [5];
    fps_div = '{1, 2, 4, 8, 16};
    fps_name = '{"2", "1", "0.5", "0.25", "0.125"};
    wins = '{10, 20, 30, 40, 50};
    // label sequence
    void'($urandom(73));
    burst = 0;
    for (int i = 0; i < N; i++) begin
      if (i < N_ESO) labels[i] = ($urandom_range(0, 99) < 20) ? 1 : 0;
      else if (i < N_ESO + N_STO) begin
        if (burst == 0 && $urandom_range(0, 99) < 2) burst = $urandom_range(1, 2);
        labels[i] = (burst > 0) ? 2 : 1;
      end else begin
        if (burst == 0 && $urandom_range(0, 99) < 10) burst = $urandom_range(1, 3);
        labels[i] = (burst > 0) ? 3 : 2;
      end
      if (burst > 0) burst--;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // GI-tract model (see the decoder's documentation)
    for (int s = 0; s < 4; s++) begin ic[s] = (s == 0) ? 0 : 30; wr(0, s, ic[s]); end
    for (int p = 0; p < 4; p++) for (int s = 0; s < 4; s++) begin
      tc[p][s] = (s == p) ? 0 : (s == p + 1) ? 60 : 255; wr(1, p*4+s, tc[p][s]);
      ec[p][s] = (s == p) ? 1 : 40;                       wr(2, p*4+s, ec[p][s]);
    end
    for (int wi = 0; wi < 5; wi++) begin
      for (int fi = 0; fi < 5; fi++) begin
        int det, gap, first, last;
        longint e;
        @(negedge clk); clear = 1; @(negedge clk); clear = 0;
        hist.delete();
        win_size = WW'(wins[wi]);
        det = -1;
        e = 0;
        for (int i = 0; i < N && det < 0; i += fps_div[fi]) begin
          while (!obs_ready) @(negedge clk);
          obs = organ_e'(labels[i]); obs_valid = 1;
          @(negedge clk);
          obs_valid = 0;
          hist.push_back(labels[i]);
          if (i < SI0) e += E_CAP + E_ANA;
          while (!out_valid) @(negedge clk);
          last = reference_last(wins[wi], first);
          checks++;
          if (int'(out_state) != last || int'(first_state) != first) begin
            failures++;
            $display("window %0d fps %s label %0d: decoder %0d/%0d, reference %0d/%0d", wins[wi], fps_name[fi], i,
                     first_state, out_state, first, last);
          end
          if (first_state == ORG_SMALL_INTESTINE) det = i;
        end
        checks++;
        if (det < 0) begin failures++; $display("window %0d fps %s: never detected", wins[wi], fps_name[fi]); end
        dly = (det - SI0) / 2;
        gap = SI0 - 1 - det;
        if (det >= 0 && det < SI0) e += longint'(gap) * (E_CAP + E_TX);
        delay_s[wi][fi] = dly;
        energy_nj[wi][fi] = e;
      end
    end
    $display("detection delay [s] (negative = too early); rows: window, columns: 2 1 0.5 0.25 0.125 fps");
    for (int wi = 0; wi < 5; wi++)
      $display("window %2d: %6d %6d %6d %6d %6d", wins[wi], delay_s[wi][0], delay_s[wi][1],
               delay_s[wi][2], delay_s[wi][3], delay_s[wi][4]);
    $display("energy before the small intestine [mJ]; baseline capsule %0.1f", real'(SI0 * (E_CAP + E_TX)) / 1.0e6);
    for (int wi = 0; wi < 5; wi++)
      $display("window %2d: %6.1f %6.1f %6.1f %6.1f %6.1f", wins[wi], real'(energy_nj[wi][0]) / 1.0e6,
               real'(energy_nj[wi][1]) / 1.0e6, real'(energy_nj[wi][2]) / 1.0e6,
               real'(energy_nj[wi][3]) / 1.0e6, real'(energy_nj[wi][4]) / 1.0e6);
    // a longer window or a lower frame rate must delay the detection
    for (int wi = 0; wi < 5; wi++) for (int fi = 0; fi < 5; fi++) begin
      if (wi > 0) begin
        checks++;
        if (delay_s[wi][fi] <= delay_s[wi-1][fi]) begin
          failures++; $display("window %0d does not delay more than window %0d at %s fps", wins[wi], wins[wi-1], fps_name[fi]);
        end
      end
      if (fi > 0) begin
        checks++;
        if (delay_s[wi][fi] <= delay_s[wi][fi-1]) begin
          failures++; $display("%s fps does not delay more than %s fps at window %0d", fps_name[fi], fps_name[fi-1], wins[wi]);
        end
      end
    end
    // the slowest rate must cost less than the baseline: it captures 1/16 of the frames
    checks++;
    if (energy_nj[1][4] >= longint'(SI0) * (E_CAP + E_TX)) begin
      failures++; $display("0.125 fps does not save energy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
