// tb_mac_unit -- self-checking test of the spatial-temporal MAC unit.
//
// For a list of (input, weight) precision pairs, symmetric and asymmetric,
// from 1 to 16 bits, it issues bursts of back-to-back operations with random
// unsigned operands, the first of each burst clearing the accumulator, and
// compares the accumulator with a sum of products computed here in plain
// integer arithmetic. It also checks that each operation occupies exactly
// passes * cycles clock cycles, the count the schedule implies
// (e.g. 8x8 bit: 4 cycles for 4 products, 4x4 bit: 4 cycles for 16).
module tb_mac_unit;
  import accel_pkg::*;

  localparam int unsigned ACC_W = 48;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, ready, clear, done, busy;
  mac_cfg_t cfg;
  operand_t [N_LANES-1:0] a_ops, w_ops;
  logic [ACC_W-1:0] acc;

  int checks = 0, failures = 0;

  mac_unit #(.ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // done-pulse timestamps
  longint unsigned cyc = 0;
  always @(posedge clk) cyc++;

  function automatic int unsigned expected_pairs(int pa, int pw);
    int ka, kw, n;
    ka = (pa > 8) ? (pa + 1) / 2 : pa;
    kw = (pw > 8) ? (pw + 1) / 2 : pw;
    n = 16;
    if (ka > 4) n = n / 2;
    if (kw > 4) n = n / 2;
    return n;
  endfunction

  function automatic int unsigned expected_cycles(int pa, int pw);
    int ka, c, p;
    ka = (pa > 8) ? (pa + 1) / 2 : pa;
    c = (ka > 4) ? (ka + 1) / 2 : ka;
    p = ((pa > 8) ? 2 : 1) * ((pw > 8) ? 2 : 1);
    return c * p;
  endfunction

  task automatic run_burst(int pa, int pw, int nops);
    longint unsigned ref_acc = 0;
    longint unsigned t_first_done = 0, t_last_done = 0;
    int ndone = 0;
    int np;
    np = expected_pairs(pa, pw);
    fork
      begin
        // inputs change at the falling edge; an op is taken at the rising
        // edge that follows a falling edge where ready was seen high
        for (int op = 0; op < nops; op++) begin
          for (int l = 0; l < N_LANES; l++) begin
            a_ops[l] = OP_W'($urandom) & OP_W'((32'd1 << pa) - 1);
            w_ops[l] = OP_W'($urandom) & OP_W'((32'd1 << pw) - 1);
            if (l < np) ref_acc += longint'(a_ops[l]) * longint'(w_ops[l]);
          end
          cfg   = decode_prec(PREC_W'(pa), PREC_W'(pw));
          clear = (op == 0);
          start = 1'b1;
          while (!ready) @(negedge clk);
          @(negedge clk);
        end
        start = 1'b0;
      end
      begin
        while (ndone < nops) begin
          @(negedge clk);
          if (done) begin
            ndone++;
            if (ndone == 1) t_first_done = cyc;
            t_last_done = cyc;
          end
        end
      end
    join
    checks++;
    if (acc !== ACC_W'(ref_acc)) begin
      failures++;
      $display("FAIL acc pa=%0d pw=%0d got %0d exp %0d", pa, pw, acc, ref_acc);
    end
    if (nops > 1) begin
      checks++;
      if ((t_last_done - t_first_done) != longint'((nops - 1) * expected_cycles(pa, pw))) begin
        failures++;
        $display("FAIL rate pa=%0d pw=%0d %0d cycles for %0d ops, exp %0d per op",
                 pa, pw, t_last_done - t_first_done, nops - 1, expected_cycles(pa, pw));
      end
    end
  endtask

  initial begin
    start = 1'b0; clear = 1'b0; cfg = '0; a_ops = '0; w_ops = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // every symmetric precision 1..16
    for (int p = 1; p <= 16; p++) run_burst(p, p, 6);
    // asymmetric pairs, including one chunked and one not
    run_burst(2, 4, 5);
    run_burst(4, 2, 5);
    run_burst(8, 3, 5);
    run_burst(3, 8, 5);
    run_burst(5, 7, 5);
    run_burst(16, 4, 4);
    run_burst(4, 16, 4);
    run_burst(12, 6, 4);
    for (int r = 0; r < 20; r++) run_burst(1 + $urandom % 16, 1 + $urandom % 16, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
