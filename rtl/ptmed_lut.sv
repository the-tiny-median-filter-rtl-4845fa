// ptmed_lut: the "C" lookup table of a median finding stage.
//
// After a whole data set has been counted, the MSB of each of the three
// counters says whether at least M points lie at or above one of the three
// boundaries that split the current range into four sub-ranges (QC3x for the
// top boundary, QC1x for the lowest). This table turns the three flags into
// the two new bits of the partial median, the index of the sub-range that
// holds the M-th highest value:
//
//   QC3x[7] QC2x[7] QC1x[7] | new bits
//      0       0       0    |   00
//      0       0       1    |   01
//      0       1       x    |   10
//      1       x       x    |   11
//
// The table is the paper's. In use the flags are thermometer coded (a higher
// boundary passed implies the lower ones); the "x" rows are resolved here by
// priority from the top flag down. Purely combinational.
module ptmed_lut (
  input  logic [2:0] qc_msb,   // {QC3x[MSB], QC2x[MSB], QC1x[MSB]}
  output logic [1:0] new_bits  // two new partial median bits
);

  always_comb begin
    if (qc_msb[2])      new_bits = 2'b11;
    else if (qc_msb[1]) new_bits = 2'b10;
    else if (qc_msb[0]) new_bits = 2'b01;
    else                new_bits = 2'b00;
  end

endmodule
