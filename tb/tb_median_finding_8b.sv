// tb_median_finding_8b: end-to-end check of the Tiny Median Filter at its
// default size (8-bit data, 8-bit counters, 256-word data pipes).
//
// The filter is run through a list of (N, M) settings. Each run starts with
// a reset, then streams back-to-back data sets of N random points (uniform,
// clustered into few values to force ties, or pinned to the extremes 0 and
// 255), followed by one trailing set whose marker closes the last checked
// set. The TB computes the M-th highest value of every set by sorting and
// checks, every cycle:
//   * dv rises exactly 4*(N+5) cycles after the set's d1st, and at no other
//     time (spacing N, one result per N cycles, no stall);
//   * dout repeats din of 4*(N+5) cycles earlier;
//   * median equals the expected M-th highest value for the N cycles that
//     start at dv.
// It first replays the published example data sets (3-point, 25-point and
// 9-point sets with M = 5, 1, 2, 3, 9) and checks them against the results
// printed with them. The settings then cover the sizes used in the paper's examples (3-point sets,
// 3x3 / 5x5 / 3x5 / 3x7 windows, diamond windows of 13 and 25 pixels, rank
// sweeps on 9 points, 250 points, 81 and 99 points) plus random ones.
// Mechanisms counted, each must occur: back-to-back sets, maximum (M=1),
// minimum (M=N), median, ties at the selected rank, N at its largest value
// (250), N changed between runs, single-point sets.
module tb_median_finding_8b;
  localparam int W = 8, CW = 8, AW = 8;
  localparam int MAXT = 4000;

  logic clk = 0, rst = 1;
  logic [W-1:0]  din = '0;
  logic          d1st = 0;
  logic [CW-1:0] pt_sum0x = '0;
  logic [AW-1:0] n_size = '0;
  logic [W-1:0]  median, dout;
  logic          dv;

  int checks = 0, failures = 0;
  int n_b2b = 0, n_max = 0, n_min = 0, n_median = 0, n_ties = 0,
      n_n250 = 0, n_nchange = 0, n_single = 0, n_published = 0;

  median_finding_8b dut (
    .clk(clk), .rst(rst), .din(din), .d1st(d1st), .pt_sum0x(pt_sum0x),
    .n_size(n_size), .median(median), .dout(dout), .dv(dv));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  // One run: reset, then nsets checked sets plus one trailing set.
  task automatic run(input int n, input int m, input int nsets, input int style);
    int none [$];
    none = {};
    run_vec(n, m, nsets, style, none, none);
  endtask

  // fixed: data of the first sets (used instead of random data);
  // printed: expected results of the first sets, taken from the published
  // waveforms (used instead of the sorted reference).
  task automatic run_vec(input int n, input int m, input int nsets, input int style,
                         input int fixed [$], input int printed [$]);
    logic [W-1:0] s_din [MAXT];
    logic         s_d1st[MAXT];
    int           exp_med [$];
    int           total, lat, dv_seen, cur_set, t_end;
    total = (nsets + 1) * n;
    lat = 4 * (n + 5);
    for (int i = 0; i < MAXT; i++) begin s_din[i] = '0; s_d1st[i] = 0; end
    exp_med = {};
    for (int k = 0; k <= nsets; k++) begin
      int vals [$];
      int st;
      st = (style < 0) ? $urandom_range(0, 2) : style;
      vals = {};
      for (int i = 0; i < n; i++) begin
        int v;
        case (st)
          0: v = $urandom_range(0, 255);
          1: v = 8 * $urandom_range(0, 3) + 100;       // few distinct values
          default: v = $urandom_range(0, 1) ? 255 : 0; // extremes only
        endcase
        if (k*n + i < fixed.size()) v = fixed[k*n + i];
        s_din[k*n + i] = W'(v);
        s_d1st[k*n + i] = (i == 0);
        vals.push_back(v);
      end
      vals.rsort();
      exp_med.push_back((k < printed.size()) ? printed[k] : vals[m-1]);
      if (k < nsets) begin
        if ((m >= 2 && vals[m-2] == vals[m-1]) || (m < n && vals[m] == vals[m-1])) n_ties++;
        if (k > 0) n_b2b++;
        if (m == 1) n_max++;
        if (m == n) n_min++;
        if (m == (n + 1) / 2) n_median++;
        if (n == 250) n_n250++;
        if (n == 1) n_single++;
      end
    end

    // reset with the new settings
    @(posedge clk); #1;
    rst = 1; d1st = 0; din = '0;
    n_size = AW'(n);
    pt_sum0x = CW'(128 - m);
    repeat (3) @(posedge clk);
    #1 rst = 0;

    dv_seen = 0; cur_set = -1;
    t_end = lat + nsets * n + 2;
    for (int t = 0; t < t_end + n; t++) begin
      din  = (t < total) ? s_din[t] : W'($urandom);
      d1st = (t < total) ? s_d1st[t] : 1'b0;
      @(negedge clk);
      // expected output marker and data
      if (t >= lat) begin
        logic exp_dv;
        int src;
        src = t - lat;
        exp_dv = (src < total) ? s_d1st[src] : 1'b0;
        if (src < nsets * n) begin
          checks++;
          if (dv !== exp_dv) fail($sformatf("N=%0d M=%0d t=%0d dv=%0d exp=%0d", n, m, t, dv, exp_dv));
          checks++;
          if (dout !== s_din[src]) fail($sformatf("N=%0d t=%0d dout=%0d exp=%0d", n, t, dout, s_din[src]));
          cur_set = src / n;
          checks++;
          if (median !== W'(exp_med[cur_set]))
            fail($sformatf("N=%0d M=%0d set=%0d t=%0d median=%0d exp=%0d", n, m, cur_set, t, median, exp_med[cur_set]));
        end
      end else begin
        checks++;
        if (dv !== 1'b0) fail($sformatf("N=%0d t=%0d dv before latency", n, t));
      end
      if (dv) dv_seen++;
      @(posedge clk); #1;
    end
    checks++;
    if (dv_seen < nsets) fail($sformatf("N=%0d M=%0d only %0d of %0d results", n, m, dv_seen, nsets));
  endtask

  initial begin
    static int prev_n = -1;
    // Published examples with their printed results.
    // 3-point sets, median:
    static int v3 [$] = '{255, 56, 219, 12, 82, 144, 194, 54, 249};
    // two 25-point sets, median:
    static int v25 [$] = '{255, 56, 219, 2, 235, 89, 156, 121, 185, 123, 184, 17, 32,
                           42, 110, 178, 28, 170, 204, 198, 102, 76, 74, 130, 96,
                           22, 135, 138, 92, 52, 17, 234, 233, 189, 151, 213, 214, 183,
                           55, 33, 182, 137, 165, 240, 33, 251, 131, 25, 198, 192};
    // 9-point sets for the rank sweep:
    static int v9 [$] = '{255, 56, 219, 2, 235, 89, 156, 121, 185,
                          12, 82, 144, 108, 75, 132, 177, 6, 155,
                          194, 54, 249, 229, 29, 25, 247, 241, 119,
                          44, 148, 247, 124, 218, 128, 233, 204, 72};
    // {N, M, sets, style}; style -1 picks per set
    static int runs [][4] = '{
      '{3, 2, 8, -1},                                 // 3-point sets
      '{9, 5, 6, -1}, '{9, 1, 6, -1}, '{9, 2, 6, -1}, // rank sweep on 9 points
      '{9, 3, 6, -1}, '{9, 9, 6, -1},
      '{25, 13, 5, -1},                               // 5x5 window / diamond 7
      '{15, 8, 5, -1}, '{21, 11, 5, -1},              // 3x5, 3x7 windows
      '{13, 7, 5, -1},                                // diamond 5
      '{81, 48, 3, -1}, '{81, 41, 3, -1},             // 81 points
      '{99, 31, 3, -1}, '{99, 50, 3, -1},             // 99 points
      '{250, 125, 3, -1},                             // largest set
      '{1, 1, 6, 0},                                  // single-point sets
      '{250, 250 - 127, 2, 0}                         // widest rank range at N=250
    };
    run_vec(3, 2, 3, 0, v3, '{219, 82, 194});
    run_vec(25, 13, 2, 0, v25, '{121, 151});
    run_vec(9, 5, 4, 0, v9, '{156, 108, 194, 148});  // median
    run_vec(9, 1, 4, 0, v9, '{255, 177, 249, 247});  // maximum
    run_vec(9, 2, 4, 0, v9, '{235, 155, 247, 233});  // 2nd highest
    run_vec(9, 3, 4, 0, v9, '{219, 144, 241, 218});  // 3rd highest
    run_vec(9, 9, 4, 0, v9, '{2, 6, 25, 44});        // minimum
    n_published = 7;
    foreach (runs[r]) begin
      if (prev_n >= 0 && prev_n != runs[r][0]) n_nchange++;
      run(runs[r][0], runs[r][1], runs[r][2], runs[r][3]);
      prev_n = runs[r][0];
    end
    // random settings
    for (int r = 0; r < 12; r++) begin
      int n, m;
      n = $urandom_range(1, 250);
      m = $urandom_range((n > 127) ? n - 127 : 1, (n > 128) ? 128 : n);
      if (n != prev_n) n_nchange++;
      run(n, m, 3, -1);
      prev_n = n;
    end

    $display("mechanisms: back_to_back=%0d max=%0d min=%0d median=%0d ties=%0d n250=%0d n_change=%0d single=%0d",
             n_b2b, n_max, n_min, n_median, n_ties, n_n250, n_nchange, n_single);
    checks++; if (n_b2b == 0)     fail("no back-to-back sets");
    checks++; if (n_max == 0)     fail("no maximum search");
    checks++; if (n_min == 0)     fail("no minimum search");
    checks++; if (n_median == 0)  fail("no median search");
    checks++; if (n_ties == 0)    fail("no ties at the selected rank");
    checks++; if (n_n250 == 0)    fail("N=250 never run");
    checks++; if (n_nchange == 0) fail("N never changed");
    checks++; if (n_single == 0)  fail("no single-point sets");
    checks++; if (n_published != 7) fail("published examples not run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
