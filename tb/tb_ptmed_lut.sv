// tb_ptmed_lut: exhaustive check of the partial-median lookup table.
// All eight flag combinations are applied; the expected pair of bits is the
// number of the highest boundary whose flag is set (3, 2, 1) or 0.
module tb_ptmed_lut;
  logic [2:0] qc_msb;
  logic [1:0] new_bits;
  int checks = 0, failures = 0;

  ptmed_lut dut (.qc_msb(qc_msb), .new_bits(new_bits));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      int exp_idx;
      qc_msb = 3'(v);
      exp_idx = 0;
      for (int b = 0; b < 3; b++) if (v[b]) exp_idx = b + 1;
      #1;
      checks++;
      if (new_bits !== 2'(exp_idx)) begin
        failures++;
        $display("FAIL flags=%03b got %02b expected %02b", qc_msb, new_bits, 2'(exp_idx));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
