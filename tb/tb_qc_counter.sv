// tb_qc_counter: check of the preset counter and its built-in comparison.
// Random "data sets" of 1..200 increments are counted with a preset of
// 128 - M; the TB keeps the plain count of increments and checks every cycle
// that qc equals 128 - M + count and that the MSB is 1 exactly when
// count >= M.
module tb_qc_counter;
  localparam int CW = 8;
  logic clk = 0;
  logic sel_a = 0, inc1 = 0;
  logic [CW-1:0] a = '0;
  logic [CW-1:0] qc;
  int checks = 0, failures = 0;

  qc_counter #(.CNT_W(CW)) dut (.clk(clk), .sel_a(sel_a), .a(a), .inc1(inc1), .qc(qc));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int msb_hi = 0, msb_lo = 0;
    for (int set = 0; set < 300; set++) begin
      int n, m, cnt, dens;
      n = $urandom_range(1, 200);
      m = $urandom_range((n > 127) ? n - 127 : 1, (n > 128) ? 128 : n);
      dens = $urandom_range(0, 100);
      cnt = 0;
      for (int i = 0; i < n; i++) begin
        @(posedge clk); #1;
        sel_a = (i == 0);
        a = CW'(128 - m);
        inc1 = ($urandom_range(0, 99) < dens);
        if (i == 0) cnt = 0;
        cnt += int'(inc1);
        @(posedge clk); #1;   // let the counter take the value
        sel_a = 0; inc1 = 0;  // hold: no increment on the check cycle
        checks++;
        if (qc !== CW'(128 - m + cnt) || qc[CW-1] !== (cnt >= m)) begin
          failures++;
          if (failures < 10) $display("FAIL set=%0d i=%0d qc=%0d exp=%0d", set, i, qc, 128 - m + cnt);
        end
        if (i == n - 1) begin
          if (cnt >= m) msb_hi++; else msb_lo++;
        end
      end
    end
    checks++;
    if (msb_hi == 0 || msb_lo == 0) begin
      failures++;
      $display("FAIL both outcomes of the comparison not seen (%0d/%0d)", msb_hi, msb_lo);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
