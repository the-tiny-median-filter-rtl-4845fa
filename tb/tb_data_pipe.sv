// tb_data_pipe: check of the data pipe memory.
// The TB drives the two addresses itself (read trailing write by K) and
// streams random data and markers. The output must repeat the input K + 1
// cycles later, and the marker output must stay low while rd_ok is low.
// Several K up to the full depth are tried.
module tb_data_pipe;
  localparam int W = 8, DEPTH = 256, AW = 8;
  logic clk = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic rd_ok = 0;
  logic [W-1:0] din = '0, dout;
  logic d1st = 0, dv;
  int checks = 0, failures = 0;

  data_pipe #(.DATA_W(W), .DEPTH(DEPTH)) dut (
    .clk(clk), .waddr(waddr), .raddr(raddr), .rd_ok(rd_ok),
    .din(din), .d1st(d1st), .dout(dout), .dv(dv));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int ks [] = '{5, 13, 30, 254, 255};
    foreach (ks[i]) begin
      int k;
      logic [W:0] hist [$];
      logic       okh  [$];
      k = ks[i];
      hist = {}; okh = {};
      for (int t = 0; t < 1200; t++) begin
        @(posedge clk); #1;
        waddr = AW'(t + 17 * i);
        raddr = AW'(t + 17 * i - k);
        rd_ok = (t >= k);
        din  = W'($urandom);
        d1st = ($urandom_range(0, 6) == 0);
        hist.push_back({d1st, din});
        okh.push_back(rd_ok);
        @(negedge clk);
        // output now shows the read issued in the previous cycle
        if (t >= 1) begin
          logic ok_prev;
          ok_prev = okh[t-1];
          checks++;
          if (ok_prev) begin
            if ({dv, dout} !== hist[t-1-k]) begin
              failures++;
              if (failures < 10) $display("FAIL k=%0d t=%0d got %03h exp %03h", k, t, {dv, dout}, hist[t-1-k]);
            end
          end else if (dv !== 1'b0) begin
            failures++;
            if (failures < 10) $display("FAIL k=%0d t=%0d dv high before fill", k, t);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
