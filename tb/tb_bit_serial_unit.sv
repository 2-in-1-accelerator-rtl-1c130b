// tb_bit_serial_unit -- exhaustive check of the bit-serial unit: for every
// input bit and every 4-bit weight part the partial product must be the
// integer product bit * weight.
module tb_bit_serial_unit;
  logic       a_bit;
  logic [3:0] w_part, pp;
  int checks = 0, failures = 0;

  bit_serial_unit #(.WP_W(4)) dut (.a_bit(a_bit), .w_part(w_part), .pp(pp));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 2; b++) begin
      for (int w = 0; w < 16; w++) begin
        a_bit = 1'(b); w_part = 4'(w);
        #1;
        checks++;
        if (int'(pp) != b * w) begin
          failures++;
          $display("FAIL bit=%0d w=%0d pp=%0d", b, w, pp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
