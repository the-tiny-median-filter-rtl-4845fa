// incgen_2b: increment generator of a median finding stage (INCGEN2B).
//
// The partial median fixes a range that still holds the wanted value. The
// range is cut into four sub-ranges whose three lower boundaries are the
// partial median with 11, 10 and 01 appended as the two lowest bits. Each
// data word is compared with the three boundaries; a comparison that holds
// raises the matching increment bit, which steps one of the three counters.
// Both operands are DATA_W bits; a stage that needs fewer bits gets them
// zero-extended from above, as the paper codes every comparator as 8 bits
// and lets synthesis trim the constant bits.
//
// Timing: the comparison result is registered, then passed through two more
// registers, so inc appears three clock edges after data_q / pt_med_q. The
// paper reserves these steps for future extension and reports that the
// comparison itself fits in one.
//
// inc[2] feeds the Q3x counter (boundary ..11), inc[1] Q2x (..10),
// inc[0] Q1x (..01).
module incgen_2b #(
  parameter int unsigned DATA_W = tmf_pkg::DATA_W_DEF
) (
  input  logic              clk,
  input  logic [DATA_W-1:0] data_q,    // registered Data7n
  input  logic [DATA_W-3:0] pt_med_q,  // registered partial median (upper DATA_W-2 bits)
  output logic [2:0]        inc        // {Inc Q3x, Inc Q2x, Inc Q1x}
);

  logic [2:0] ge_q, step2_q, step3_q;

  always_ff @(posedge clk) begin
    ge_q[2] <= data_q >= {pt_med_q, 2'b11};
    ge_q[1] <= data_q >= {pt_med_q, 2'b10};
    ge_q[0] <= data_q >= {pt_med_q, 2'b01};
    step2_q <= ge_q;
    step3_q <= step2_q;
  end

  assign inc = step3_q;

endmodule
