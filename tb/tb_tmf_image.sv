// tb_tmf_image: image filtering with the window shapes of the single-core
// application table: 3x3, 5x5, 3x5, 3x7, diamond of radius 2 (13 pixels)
// and diamond of radius 3 (25 pixels), each with M = (N+1)/2 (median).
//
// A random 1024x768 test image (the frame size of the table) is held in the
// testbench. The feeder works like the
// address generator described for irregular windows: an X and a Y counter
// step over the output pixels and a pixel counter indexes an offset table of
// the window; pixel = image[Y + dy][X + dx]. Only pixels whose whole window
// lies inside the image are filtered. The points of successive windows are
// sent back to back, one per clock, with no gap.
//
// For every output pixel the result is compared with the median worked out
// by sorting the window here. The run also checks the throughput: the last
// result marker must arrive exactly (P-1)*N + 4*(N+5) cycles after the
// first input marker (P output pixels), i.e. one point per clock.
module tb_tmf_image;
  localparam int W = 8;
  localparam int IMG_W = 1024, IMG_H = 768;

  logic clk = 0, rst = 1;
  logic [W-1:0] din = '0;
  logic d1st = 0;
  logic [7:0] pt_sum0x = '0;
  logic [7:0] n_size = '0;
  logic [W-1:0] median, dout;
  logic dv;

  int checks = 0, failures = 0;
  int windows_run = 0;
  logic [W-1:0] img [IMG_H][IMG_W];

  median_finding_8b dut (
    .clk(clk), .rst(rst), .din(din), .d1st(d1st), .pt_sum0x(pt_sum0x),
    .n_size(n_size), .median(median), .dout(dout), .dv(dv));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // shape 0: rectangle rows x cols; shape 1: diamond |dx|+|dy| <= rad
  task automatic filter(input string name, input int shape, input int rows, input int cols, input int rad);
    int dxs [$], dys [$];
    int n, m, r, px, py, np, lat, t, t_first, t_last_dv, res_i;
    int exp_q [$];
    dxs = {}; dys = {};
    if (shape == 0) begin
      for (int y = 0; y < rows; y++) for (int x = 0; x < cols; x++) begin
        dxs.push_back(x - cols / 2); dys.push_back(y - rows / 2);
      end
      px = cols / 2; py = rows / 2;
    end else begin
      for (int y = -rad; y <= rad; y++) for (int x = -rad; x <= rad; x++)
        if ((x < 0 ? -x : x) + (y < 0 ? -y : y) <= rad) begin
          dxs.push_back(x); dys.push_back(y);
        end
      px = rad; py = rad;
    end
    n = dxs.size();
    m = (n + 1) / 2;
    lat = 4 * (n + 5);
    np = (IMG_W - 2*px) * (IMG_H - 2*py);
    exp_q = {};

    @(posedge clk); #1;
    rst = 1; d1st = 0;
    n_size = 8'(n); pt_sum0x = 8'(128 - m);
    repeat (3) @(posedge clk);
    #1 rst = 0;

    t = 0; t_first = -1; t_last_dv = -1; res_i = 0;
    // raster scan of the output pixels, plus one trailing window
    for (int oy = py; oy < IMG_H - py + 1; oy++) begin
      for (int ox = px; ox < IMG_W - px; ox++) begin
        int vals [$];
        bit trailing;
        trailing = (oy == IMG_H - py);
        if (trailing && ox != px) break;
        vals = {};
        for (int i = 0; i < n; i++) begin
          int yy;
          yy = trailing ? py : oy;
          din  = img[yy + dys[i]][ox + dxs[i]];
          d1st = (i == 0);
          vals.push_back(int'(din));
          if (i == 0 && t_first < 0) t_first = t;
          @(negedge clk);
          if (dv) begin
            if (res_i < np) begin
              checks++;
              if (median !== W'(exp_q[res_i])) begin
                failures++;
                if (failures < 10) $display("FAIL %s pixel %0d median=%0d exp=%0d", name, res_i, median, exp_q[res_i]);
              end
            end
            res_i++;
            t_last_dv = t;
          end
          @(posedge clk); #1;
          t++;
        end
        if (!trailing) begin
          vals.rsort();
          exp_q.push_back(vals[m-1]);
        end
      end
    end
    // drain: keep the last window's data flowing until its result is out
    d1st = 0;
    while (res_i < np + 1 && t < t_first + np * n + 2 * lat + 2 * n) begin
      din = W'($urandom);
      @(negedge clk);
      if (dv) begin
        if (res_i < np) begin
          checks++;
          if (median !== W'(exp_q[res_i])) begin
            failures++;
            if (failures < 10) $display("FAIL %s pixel %0d median=%0d exp=%0d", name, res_i, median, exp_q[res_i]);
          end
        end
        res_i++;
        t_last_dv = t;
      end
      @(posedge clk); #1;
      t++;
    end
    // throughput: marker of the trailing window (index np) at t_first + np*n + lat
    checks++;
    if (res_i != np + 1 || t_last_dv != t_first + np * n + lat) begin
      failures++;
      $display("FAIL %s results=%0d of %0d, last marker at %0d, expected %0d",
               name, res_i, np + 1, t_last_dv, t_first + np * n + lat);
    end
    $display("%s: N=%0d M=%0d, %0d pixels, %0d cycles per pixel, %0.1f frames/s at 275 MHz for %0dx%0d",
             name, n, m, np, n, 275.0e6 / (real'(IMG_W) * real'(IMG_H) * real'(n)), IMG_W, IMG_H);
    windows_run++;
  endtask

  initial begin
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++)
        img[y][x] = W'($urandom);
    filter("3x3", 0, 3, 3, 0);
    filter("5x5", 0, 5, 5, 0);
    filter("3x5", 0, 3, 5, 0);
    filter("3x7", 0, 3, 7, 0);
    filter("diamond5", 1, 0, 0, 2);
    filter("diamond7", 1, 0, 0, 3);
    checks++;
    if (windows_run != 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
