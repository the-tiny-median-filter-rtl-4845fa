// tmf_run_check: self-checking driver for one median_finding_8b instance of
// a given size, used by tb_tmf_configs.
//
// It streams runs of back-to-back random data sets (random N up to NMAX and
// random M valid for 8-bit counters, M <= 128 and N - M <= 127), each run started with a reset and
// closed by one trailing set, and checks at every result marker that the
// marker comes DATA_W/2 * (N+5) cycles after the set's input marker and
// that median equals the M-th highest value of the set, found by sorting.
// done goes high when all runs are over; checks and failures are the counts.
module tmf_run_check #(
  parameter int DATA_W     = 8,
  parameter int PIPE_DEPTH = 256,
  parameter int NMAX       = 250,
  parameter int RUNS       = 20
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int AW = $clog2(PIPE_DEPTH);
  localparam int STAGES = DATA_W / 2;

  logic rst = 1;
  logic [DATA_W-1:0] din = '0;
  logic d1st = 0;
  logic [7:0] pt_sum0x = '0;
  logic [AW-1:0] n_size = '0;
  logic [DATA_W-1:0] median, dout;
  logic dv;

  median_finding_8b #(.DATA_W(DATA_W), .CNT_W(8), .PIPE_DEPTH(PIPE_DEPTH)) dut (
    .clk(clk), .rst(rst), .din(din), .d1st(d1st), .pt_sum0x(pt_sum0x),
    .n_size(n_size), .median(median), .dout(dout), .dv(dv));

  initial begin
    done = 0; checks = 0; failures = 0;
    for (int r = 0; r < RUNS; r++) begin
      int n, m, nsets, lat, t, res_i;
      int exp_q [$];
      n = (r == 0) ? NMAX : (r == 2) ? $urandom_range(1, (NMAX > 128) ? 128 : NMAX) : $urandom_range(1, NMAX);
      m = (r == 1) ? 1 : (r == 2) ? n : $urandom_range((n > 127) ? n - 127 : 1, (n > 128) ? 128 : n);
      nsets = 4;
      lat = STAGES * (n + 5);
      exp_q = {};
      @(posedge clk); #1;
      rst = 1; d1st = 0; n_size = AW'(n); pt_sum0x = 8'(128 - m);
      repeat (3) @(posedge clk);
      #1 rst = 0;
      t = 0; res_i = 0;
      while (res_i < nsets) begin
        if (t < (nsets + 1) * n) begin
          din  = DATA_W'($urandom);
          d1st = (t % n == 0);
        end else begin
          din = '0; d1st = 0;
        end
        // the expected value of a set is known once its last point is out
        begin : collect
          static int vals [$];
          if (t < (nsets + 1) * n) begin
            if (t % n == 0) vals = {};
            vals.push_back(int'(din));
            if (t % n == n - 1) begin
              vals.rsort();
              exp_q.push_back(vals[m-1]);
            end
          end
        end
        @(negedge clk);
        if (dv) begin
          checks++;
          if (t != res_i * n + lat || median !== DATA_W'(exp_q[res_i])) begin
            failures++;
            if (failures < 10)
              $display("FAIL W=%0d depth=%0d N=%0d M=%0d set=%0d t=%0d median=%0d exp=%0d at %0d",
                       DATA_W, PIPE_DEPTH, n, m, res_i, t, median, exp_q[res_i], res_i * n + lat);
          end
          res_i++;
        end
        if (t > (nsets + 2) * n + lat) begin
          failures++;
          $display("FAIL W=%0d depth=%0d N=%0d: results missing", DATA_W, PIPE_DEPTH, n);
          break;
        end
        @(posedge clk); #1;
        t++;
      end
    end
    done = 1;
  end
endmodule
