// median_finding_2b: one 2-bit stage of the Tiny Median Filter
// (MedianFinding2B).
//
// The stage receives a stream of data points, one per clock, with a
// first-data marker d1st on the first point of each data set, plus the
// partial median from the previous stage, which is valid in the cycle of
// d1st. The partial median names a range that holds the M-th highest value;
// the stage counts, over the whole data set, the points at or above each of
// the three inner boundaries of that range, and at the end appends two bits
// that select the quarter of the range holding the M-th highest value.
//
// Structure (register steps copied from the paper's block diagram):
//   * d1st passes four registers and becomes d1st4q (D1st4Q);
//   * the partial median passes one register, feeds the comparators, and
//     three more registers bring it level with d1st4q;
//   * data7n passes one register, then incgen_2b (three steps) makes the
//     increments, level with d1st4q;
//   * three qc_counter instances are preset with pt_sum0x on d1st4q and
//     count the increments (fifth step);
//   * on d1st4q, i.e. on the first point of the following data set, the
//     partial median of the finished set is output with the two bits from
//     ptmed_lut appended, and the new set's partial median is taken in.
// The result for a data set whose marker entered in cycle c therefore
// appears in cycle c + N + 5 and holds for N cycles when data sets follow
// each other without a gap, which the scheme requires: the marker spacing
// is the data set size.
//
// Bit mapping to the paper's names: data7n[DATA_W-1:0] is Data7n[17:10],
// pt_med_in[DATA_W-1:0] is PtMed1yIn[19:12] (only its lower DATA_W-2 bits,
// [17:12], are used), pt_med_out[DATA_W-1:0] is PtMed1yOut[17:10]. Chaining
// out to in shifts the effective bits up by two per stage.
//
// Own choices: a synchronous reset clears the marker pipeline and the
// output register; the partial median hold register is loaded by d1st4q
// (the diagram shows its load pin but not its driver).
module median_finding_2b #(
  parameter int unsigned DATA_W = tmf_pkg::DATA_W_DEF,
  parameter int unsigned CNT_W  = tmf_pkg::CNT_W_DEF
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [CNT_W-1:0]  pt_sum0x,    // 2**(CNT_W-1) - M
  input  logic [DATA_W-1:0] pt_med_in,   // partial median from previous stage
  input  logic [DATA_W-1:0] data7n,      // data bits used by this stage, zero-extended
  input  logic              d1st,        // first point of a data set
  output logic [DATA_W-1:0] pt_med_out   // partial median with two more bits
);

  localparam int unsigned PW = DATA_W - 2;  // partial median bits carried

  logic [3:0]          d1st_q;
  logic                d1st4q;
  logic [PW-1:0]       pt_med_q [4];
  logic [PW-1:0]       pt_med_hold;
  logic [DATA_W-1:0]   data_q;
  logic [2:0]          inc;
  logic [CNT_W-1:0]    qc [3];
  logic [2:0]          qc_msb;
  logic [1:0]          new_bits;

  // marker pipeline: D1st -> D1st4Q
  always_ff @(posedge clk) begin
    if (rst) d1st_q <= '0;
    else     d1st_q <= {d1st_q[2:0], d1st};
  end
  assign d1st4q = d1st_q[3];

  // partial median pipeline and data input register
  always_ff @(posedge clk) begin
    pt_med_q[0] <= pt_med_in[PW-1:0];
    pt_med_q[1] <= pt_med_q[0];
    pt_med_q[2] <= pt_med_q[1];
    pt_med_q[3] <= pt_med_q[2];
    data_q      <= data7n;
  end

  incgen_2b #(.DATA_W(DATA_W)) u_incgen (
    .clk      (clk),
    .data_q   (data_q),
    .pt_med_q (pt_med_q[0]),
    .inc      (inc)
  );

  for (genvar i = 0; i < 3; i++) begin : g_cnt
    qc_counter #(.CNT_W(CNT_W)) u_cnt (
      .clk   (clk),
      .sel_a (d1st4q),
      .a     (pt_sum0x),
      .inc1  (inc[i]),
      .qc    (qc[i])
    );
    assign qc_msb[i] = qc[i][CNT_W-1];
  end

  ptmed_lut u_lut (
    .qc_msb   (qc_msb),
    .new_bits (new_bits)
  );

  always_ff @(posedge clk) begin
    if (d1st4q) pt_med_hold <= pt_med_q[3];
  end

  always_ff @(posedge clk) begin
    if (rst)         pt_med_out <= '0;
    else if (d1st4q) pt_med_out <= {pt_med_hold, new_bits};
  end

endmodule
