// median_finding_8b: the Tiny Median Filter, basic single-core version
// (MedianFinding8B).
//
// Finds the M-th highest value of each data set of N unsigned DATA_W-bit
// points. Points enter one per clock on din, with d1st high on the first
// point of each set; sets follow each other without gaps, and the marker
// spacing is N. M is given as pt_sum0x = 2**(CNT_W-1) - M (128 - M); M = 1
// gives the maximum, M = N the minimum, M = (N+1)/2 the median of odd N.
// N is n_size; it sets the delay of the data pipes (N + 5 cycles each) and
// must satisfy N + 5 <= PIPE_DEPTH and 2**(CNT_W-1) - M + N < 2**CNT_W.
//
// Structure: DATA_W/2 median_finding_2b stages in a chain, each deciding
// two more bits of the result (stage s looks at the top 2s data bits), and
// DATA_W/2 data_pipe delay lines beside them sharing one pipe_addr_gen.
// Stage 1 takes the data before the first pipe, stage s+1 after pipe s, so
// each stage sees a data set exactly when the previous stage's partial
// median for it is ready. The partial median of stage 1 starts at zero.
//
// Timing: for a set whose d1st enters in cycle c, dv rises in cycle
// c + 4(N+5) (DATA_W/2 pipes) with dout repeating the set's points, and
// median holds that set's result for the N cycles from then on, aligned
// with dout. One result per N cycles, with no stall. The structure is the
// paper's; the reset and the pipe fill mask are this design's choices.
//
// Input rules, checked by assertions in simulation: markers are at least
// n_size cycles apart (exactly n_size while data flow), 1 <= M <= 2**(CNT_W-1)
// (pt_sum0x MSB clear), the counters cannot wrap, and 1 <= N <=
// PIPE_DEPTH - 5. The marker-distance counter only serves these checks and
// drives no output.
module median_finding_8b #(
  parameter int unsigned DATA_W     = tmf_pkg::DATA_W_DEF,
  parameter int unsigned CNT_W      = tmf_pkg::CNT_W_DEF,
  parameter int unsigned PIPE_DEPTH = tmf_pkg::PIPE_DEPTH_DEF,
  localparam int unsigned AW        = $clog2(PIPE_DEPTH)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [DATA_W-1:0] din,
  input  logic              d1st,
  input  logic [CNT_W-1:0]  pt_sum0x,
  input  logic [AW-1:0]     n_size,
  output logic [DATA_W-1:0] median,
  output logic [DATA_W-1:0] dout,
  output logic              dv
);

  localparam int unsigned STAGES = DATA_W / 2;

  if (DATA_W % 2 != 0 || DATA_W < 4) begin : g_bad_width
    $error("median_finding_8b: DATA_W must be even and at least 4");
  end

  logic [AW-1:0]     waddr, raddr;
  logic              rd_ok;
  logic [DATA_W-1:0] s_data [STAGES+1];  // s_data[0] = din, s_data[k] = pipe k output
  logic              s_d1st [STAGES+1];
  logic [DATA_W-1:0] s_med  [STAGES+1];  // s_med[0] = 0, s_med[k] = stage k output

  assign s_data[0] = din;
  assign s_d1st[0] = d1st;
  assign s_med[0]  = '0;

  pipe_addr_gen #(.DEPTH(PIPE_DEPTH), .FINDER_LAT(tmf_pkg::FINDER_LAT)) u_addr (
    .clk    (clk),
    .rst    (rst),
    .n_size (n_size),
    .waddr  (waddr),
    .raddr  (raddr),
    .rd_ok  (rd_ok)
  );

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    localparam int unsigned USED = 2 * (s + 1);  // data bits this stage examines
    logic [DATA_W-1:0] data7n;

    assign data7n = DATA_W'(s_data[s][DATA_W-1 -: USED]);

    median_finding_2b #(.DATA_W(DATA_W), .CNT_W(CNT_W)) u_find (
      .clk        (clk),
      .rst        (rst),
      .pt_sum0x   (pt_sum0x),
      .pt_med_in  (s_med[s]),
      .data7n     (data7n),
      .d1st       (s_d1st[s]),
      .pt_med_out (s_med[s+1])
    );

    data_pipe #(.DATA_W(DATA_W), .DEPTH(PIPE_DEPTH)) u_pipe (
      .clk   (clk),
      .waddr (waddr),
      .raddr (raddr),
      .rd_ok (rd_ok),
      .din   (s_data[s]),
      .d1st  (s_d1st[s]),
      .dout  (s_data[s+1]),
      .dv    (s_d1st[s+1])
    );
  end

  // ---- input rules ----
  logic [AW:0] since_mark;  // cycles since the last marker, saturating

  always_ff @(posedge clk) begin
    if (rst)                  since_mark <= '1;
    else if (d1st)            since_mark <= (AW+1)'(1);
    else if (since_mark != '1) since_mark <= since_mark + 1'b1;
  end

  a_spacing: assert property (@(posedge clk) disable iff (rst)
    d1st |-> since_mark >= (AW+1)'(n_size))
    else $error("data set shorter than n_size");
  a_rank: assert property (@(posedge clk) disable iff (rst)
    !pt_sum0x[CNT_W-1])
    else $error("pt_sum0x out of range: M must be 1..2**(CNT_W-1)");
  a_no_wrap: assert property (@(posedge clk) disable iff (rst)
    (CNT_W+1)'(pt_sum0x) + (CNT_W+1)'(n_size) < (CNT_W+1)'(2**CNT_W))
    else $error("counters would wrap: N - M too large");
  a_depth: assert property (@(posedge clk) disable iff (rst)
    n_size != '0 && (AW+1)'(n_size) + (AW+1)'(tmf_pkg::FINDER_LAT) <= (AW+1)'(PIPE_DEPTH))
    else $error("n_size out of range for the data pipe depth");

  assign median = s_med[STAGES];
  assign dout   = s_data[STAGES];
  assign dv     = s_d1st[STAGES];

endmodule
