// tb_bsu_group -- checks one group of bit-serial units with its group
// shift-add. For random input parts of 1..4 bits and random 4-bit weight
// parts it streams the input bits MSB first, one per cycle, and checks that
// after the last bit the accumulator equals sum_j a_j * w_j. Passes run back
// to back, each restarting with `first`.
module tb_bsu_group;
  localparam int NB = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en, first;
  logic [NB-1:0] a_bits;
  logic [NB-1:0][3:0] w_parts;
  logic [9:0] acc_next, acc_q;
  int checks = 0, failures = 0;

  bsu_group #(.NB(NB), .WP_W(4), .MAXCYC(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a [NB];
    int exp_sum, nbits;
    en = 0; first = 0; a_bits = '0; w_parts = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      nbits = 1 + $urandom % 4;
      exp_sum = 0;
      for (int j = 0; j < NB; j++) begin
        a[j] = $urandom % (1 << nbits);
        w_parts[j] = 4'($urandom);
        exp_sum += a[j] * int'(w_parts[j]);
      end
      for (int b = nbits - 1; b >= 0; b--) begin
        @(negedge clk);
        en = 1'b1;
        first = (b == nbits - 1);
        for (int j = 0; j < NB; j++) a_bits[j] = 1'(a[j] >> b);
      end
      @(posedge clk); #1;
      checks++;
      if (int'(acc_q) != exp_sum) begin
        failures++;
        $display("FAIL nbits=%0d got %0d exp %0d", nbits, acc_q, exp_sum);
      end
    end
    @(negedge clk); en = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
