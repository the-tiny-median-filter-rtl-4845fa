// tb_median_finding_2b: check of one 2-bit median finding stage.
//
// Back-to-back data sets of random size (1..40) are streamed with a random
// partial median per set and a random rank M per run. For each set the TB
// counts, with integers, the points at or above 4P+3, 4P+2 and 4P+1 (P the
// partial median) and derives the two new bits as the highest boundary
// passed by at least M points. The stage output must show {P, bits} from
// exactly five cycles after the next set's marker until five cycles after
// the marker of the set after that; it is checked every cycle. A second part
// uses the stage as the first stage of a filter (P = 0, data = top two bits)
// and checks the result against the top two bits of the M-th highest value.
module tb_median_finding_2b;
  localparam int W = 8, CW = 8, LAT = 5;
  localparam int T = 6000;
  logic clk = 0, rst = 1;
  logic [CW-1:0] pt_sum0x = '0;
  logic [W-1:0]  pt_med_in = '0, data7n = '0;
  logic          d1st = 0;
  logic [W-1:0]  pt_med_out;
  int checks = 0, failures = 0;

  // stimulus and expectation tables
  logic [W-1:0] s_data [T];
  logic [W-1:0] s_pm   [T];
  logic         s_d1st [T];
  int           s_m    [T];
  int           exp_out[T];   // -1: not checked

  median_finding_2b #(.DATA_W(W), .CNT_W(CW)) dut (
    .clk(clk), .rst(rst), .pt_sum0x(pt_sum0x), .pt_med_in(pt_med_in),
    .data7n(data7n), .d1st(d1st), .pt_med_out(pt_med_out));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (3*T) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Build one part of the stimulus. first_stage=1: P = 0 and the data are the
  // top two bits of random 8-bit values; expectation = top two bits of the
  // M-th highest of those values.
  task automatic build(input bit first_stage, output int nsets);
    int t, k, m;
    int starts [$];
    int res [$];
    t = 0; k = 0;
    for (int i = 0; i < T; i++) begin s_d1st[i] = 0; exp_out[i] = -1; s_data[i] = '0; s_pm[i] = '0; end
    m = $urandom_range(1, 6);
    while (1) begin
      int n, p, dens;
      int c3, c2, c1, bits;
      int vals [$];
      n = $urandom_range(1, 40);
      if (m > n) n = m;                 // keep M a valid rank in this set
      if (t + n + 2*45 + LAT >= T) break;
      p = first_stage ? 0 : $urandom_range(0, (1 << (W-2)) - 1);
      dens = $urandom_range(0, 3);
      c3 = 0; c2 = 0; c1 = 0; vals = {};
      for (int i = 0; i < n; i++) begin
        int d, full;
        if (first_stage) begin
          full = $urandom_range(0, 255);
          vals.push_back(full);
          d = full >> (W - 2);
        end else begin
          // cluster the data round the sub-range boundaries
          d = (dens == 0) ? $urandom_range(0, 255) : 4*p + $urandom_range(0, 3);
          if (d > 255) d = 255;
        end
        s_data[t+i] = W'(d); s_pm[t+i] = W'(p); s_d1st[t+i] = (i == 0); s_m[t+i] = m;
        c3 += int'(d >= 4*p + 3); c2 += int'(d >= 4*p + 2); c1 += int'(d >= 4*p + 1);
      end
      if (first_stage) begin
        vals.rsort();
        bits = vals[m-1] >> (W - 2);
      end else begin
        bits = (c3 >= m) ? 3 : (c2 >= m) ? 2 : (c1 >= m) ? 1 : 0;
      end
      starts.push_back(t);
      res.push_back(((p << 2) | bits) & 8'hff);
      t += n;
      k++;
    end
    // the set of index j is output from starts[j+1]+LAT to starts[j+2]+LAT-1
    for (int j = 0; j + 2 < starts.size(); j++)
      for (int c = starts[j+1] + LAT; c < starts[j+2] + LAT; c++) exp_out[c] = res[j];
    nsets = k;
  endtask

  task automatic run_part(input bit first_stage);
    int nsets;
    build(first_stage, nsets);
    rst = 1; d1st = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < T; t++) begin
      data7n = s_data[t]; pt_med_in = s_pm[t]; d1st = s_d1st[t];
      pt_sum0x = CW'(128 - s_m[t]);
      @(negedge clk);
      if (exp_out[t] >= 0) begin
        checks++;
        if (pt_med_out !== W'(exp_out[t])) begin
          failures++;
          if (failures < 10) $display("FAIL part=%0d t=%0d out=%02h exp=%02h", first_stage, t, pt_med_out, exp_out[t]);
        end
      end
      @(posedge clk); #1;
    end
  endtask

  initial begin
    run_part(1'b0);
    run_part(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
