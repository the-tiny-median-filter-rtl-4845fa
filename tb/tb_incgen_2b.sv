// tb_incgen_2b: random check of the increment generator.
// Random data and partial medians are applied every cycle; three cycles
// later the increments must equal the three comparisons
// data >= 4*pm + 3, 4*pm + 2, 4*pm + 1, computed here with integers.
module tb_incgen_2b;
  localparam int W = 8;
  logic clk = 0;
  logic [W-1:0] data_q;
  logic [W-3:0] pt_med_q;
  logic [2:0] inc;
  int checks = 0, failures = 0;
  logic [2:0] expq [$];

  incgen_2b #(.DATA_W(W)) dut (.clk(clk), .data_q(data_q), .pt_med_q(pt_med_q), .inc(inc));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int d, p;
      logic [2:0] e;
      @(posedge clk); #1;
      // bias half the samples to lie near a boundary
      p = $urandom_range(0, (1 << (W-2)) - 1);
      d = (t % 2) ? $urandom_range(0, (1 << W) - 1) : (4*p + $urandom_range(0, 3));
      data_q = W'(d); pt_med_q = (W-2)'(p);
      e[2] = d >= 4*p + 3; e[1] = d >= 4*p + 2; e[0] = d >= 4*p + 1;
      expq.push_back(e);
      @(negedge clk);
      // value applied three cycles ago: entries [size-4] (current is last)
      if (expq.size() >= 4) begin
        checks++;
        if (inc !== expq[expq.size()-4]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d inc=%03b exp=%03b", t, inc, expq[expq.size()-4]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
