// tb_rps_select -- checks the random precision selector: every pick lies in
// the candidate set, every member of a set is drawn with roughly equal
// frequency (within 35% of the mean over 1600 draws), a one-member set
// always returns that member, and an empty set returns 8 bits.
module tb_rps_select;
  import accel_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic req, valid;
  logic [15:0] set_mask;
  prec_t prec;
  int checks = 0, failures = 0;

  rps_select dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic draw(output int p);
    @(negedge clk); req = 1'b1;
    @(negedge clk); req = 1'b0;
    while (!valid) @(negedge clk);
    p = int'(prec);
  endtask

  task automatic check_set(logic [15:0] m, int ndraw);
    int hist [17];
    int members, p;
    foreach (hist[i]) hist[i] = 0;
    set_mask = m;
    members = $countones(m);
    for (int d = 0; d < ndraw; d++) begin
      draw(p);
      checks++;
      if (p < 1 || p > 16 || !m[p-1]) begin
        failures++;
        $display("FAIL pick %0d outside set %h", p, m);
      end else hist[p]++;
    end
    for (int q = 1; q <= 16; q++) if (m[q-1]) begin
      checks++;
      if (hist[q] * members < ndraw * 65 / 100 || hist[q] * members > ndraw * 135 / 100) begin
        failures++;
        $display("FAIL set %h precision %0d drawn %0d of %0d", m, q, hist[q], ndraw);
      end
    end
  endtask

  initial begin
    int p;
    req = 0; set_mask = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check_set(16'b1000_1000_1000_1000, 1600);  // {4, 8, 12, 16}
    check_set(16'b0000_0000_1111_1000, 1600);  // 4..8
    check_set(16'b0000_0000_0000_1000, 50);    // static 4 bit
    set_mask = '0;
    draw(p);
    checks++;
    if (p != 8) begin failures++; $display("FAIL empty mask gave %0d", p); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
