// tb_pipe_addr_gen: check of the shared data-pipe address counters.
// For several data set sizes N (applied during reset), the TB counts cycles
// since reset and checks every cycle that the write address equals that
// count modulo the depth, that the read address trails it by N + 4, and
// that rd_ok rises exactly when the trailing address reaches a word that has
// been written since reset.
module tb_pipe_addr_gen;
  localparam int DEPTH = 256, AW = 8;
  logic clk = 0, rst = 1;
  logic [AW-1:0] n_size = 8'd25;
  logic [AW-1:0] waddr, raddr;
  logic rd_ok;
  int checks = 0, failures = 0;

  pipe_addr_gen #(.DEPTH(DEPTH), .FINDER_LAT(5)) dut (
    .clk(clk), .rst(rst), .n_size(n_size), .waddr(waddr), .raddr(raddr), .rd_ok(rd_ok));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int ns [] = '{1, 3, 9, 25, 99, 250, 251};
    foreach (ns[i]) begin
      int n;
      n = ns[i];
      @(posedge clk); #1;
      rst = 1; n_size = AW'(n);
      @(posedge clk); #1;
      rst = 0;
      for (int t = 0; t < 700; t++) begin
        @(negedge clk);
        checks++;
        if (waddr !== AW'(t) || raddr !== AW'(t - (n + 4)) || rd_ok !== (t >= n + 4)) begin
          failures++;
          if (failures < 10)
            $display("FAIL n=%0d t=%0d waddr=%0d raddr=%0d rd_ok=%0d", n, t, waddr, raddr, rd_ok);
        end
        @(posedge clk); #1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
