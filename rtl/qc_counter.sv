// qc_counter: self-comparing counter of a median finding stage.
//
// Counting the points above a boundary and then comparing the count with M
// would need a comparator that is used once per data set. Instead the
// counter is preset, on the first point of each data set, to
// PtSum0x + inc1 with PtSum0x = 2**(CNT_W-1) - M (128 - M for 8 bits), and adds
// inc1 on every other cycle. Its MSB is then 1 exactly when M or more points
// have been counted. This preset scheme is the paper's.
//
// Interface: sel_a (the delayed first-data marker D1st4Q) selects the preset
// A instead of the running count. qc is registered: it shows the sum one
// edge after the increment. The count is reloaded every data set, so it
// needs no reset. The count must not wrap: 2**(CNT_W-1) - M + N < 2**CNT_W.
module qc_counter #(
  parameter int unsigned CNT_W = tmf_pkg::CNT_W_DEF
) (
  input  logic             clk,
  input  logic             sel_a,  // first point of a data set: load A + inc1
  input  logic [CNT_W-1:0] a,      // PtSum0x
  input  logic             inc1,   // increment
  output logic [CNT_W-1:0] qc      // QCnx
);

  always_ff @(posedge clk)
    qc <= (sel_a ? a : qc) + CNT_W'(inc1);

endmodule
