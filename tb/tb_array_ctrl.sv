// tb_array_ctrl -- checks the tile sequencer against a behavioural stand-in
// for the MAC array (ready after T cycles per op, done two cycles after each
// op). For each tile it checks that op k is issued with block k mod B of word
// base + k div B (B = blocks per word at the precision's granularity), that
// only the first op clears and none does when keep is set, that the decoded schedule and granularities are
// right, that the ops are issued back to back and that done pulses once,
// after the last op's done.
module tb_array_ctrl;
  import accel_pkg::*;
  localparam int WORD_W = 256, DEPTH = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, keep, busy, done, re, mac_start, mac_ready, mac_clear, mac_done;
  prec_t prec_a, prec_w;
  logic [15:0] n_ops;
  logic [5:0] a_base, w_base, a_addr, w_addr;
  gran_t gran_a, gran_w;
  logic [3:0] sel_a, sel_w;
  mac_cfg_t mac_cfg;
  int checks = 0, failures = 0;

  array_ctrl #(.WORD_W(WORD_W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural MAC array: T cycles per op, done 2 cycles after the op ends
  int T = 1;
  int remain = 0;
  logic [3:0] done_pipe = '0;
  assign mac_ready = (remain <= 1);
  assign mac_done  = done_pipe[2];
  always @(posedge clk) begin
    logic ends;
    ends = (remain == 1);
    if (mac_start && mac_ready) remain <= T;
    else if (remain > 0) remain <= remain - 1;
    done_pipe <= {done_pipe[2:0], ends};
  end

  // last word read, as seen by the read port
  logic [5:0] rd_a, rd_w;
  always @(posedge clk) if (re) begin rd_a <= a_addr; rd_w <= w_addr; end

  task automatic tile(int pa, int pw, int n, int ab, int wb, bit kp = 0);
    int k, bpa, bpw, ndone, t0, t_iss0, t_issn;
    mac_cfg_t c;
    c = decode_prec(PREC_W'(pa), PREC_W'(pw));
    T = int'(c.passes) * int'(c.cycles);
    bpa = 16 >> int'(gran_of(PREC_W'(pa)));
    bpw = 16 >> int'(gran_of(PREC_W'(pw)));
    @(negedge clk);
    prec_a = PREC_W'(pa); prec_w = PREC_W'(pw); n_ops = 16'(n);
    a_base = 6'(ab); w_base = 6'(wb); keep = kp; start = 1'b1;
    @(negedge clk); start = 1'b0;
    k = 0; ndone = 0; t0 = 0;
    while (!done) begin
      // sample at the falling edge: what the controller drives this cycle
      if (mac_start && mac_ready) begin
        if (k == 0) t_iss0 = t0;
        t_issn = t0;
        checks++;
        if (sel_a != 4'(k % bpa) || sel_w != 4'(k % bpw) ||
            rd_a != 6'(ab + k / bpa) || rd_w != 6'(wb + k / bpw) ||
            mac_clear != (k == 0 && !kp) || mac_cfg != c ||
            gran_a != gran_of(PREC_W'(pa)) || gran_w != gran_of(PREC_W'(pw))) begin
          failures++;
          $display("FAIL p=%0d/%0d op %0d: sel %0d/%0d word %0d/%0d clear %0d", pa, pw, k,
                   sel_a, sel_w, rd_a, rd_w, mac_clear);
        end
        k++;
      end
      if (mac_done) ndone++;
      @(negedge clk);
      t0++;
      if (t0 > 100000) break;
    end
    checks++;
    if (k != n || ndone != n) begin
      failures++;
      $display("FAIL p=%0d/%0d issued %0d done %0d of %0d", pa, pw, k, ndone, n);
    end
    checks++;
    if (n > 1 && (t_issn - t_iss0) != (n - 1) * T) begin
      failures++;
      $display("FAIL p=%0d/%0d issue spacing %0d for %0d ops of %0d", pa, pw,
               t_issn - t_iss0, n - 1, T);
    end
    @(negedge clk);
    checks++;
    if (done || busy) begin failures++; $display("FAIL done/busy held"); end
  endtask

  initial begin
    start = 0; keep = 0; prec_a = 1; prec_w = 1; n_ops = 0; a_base = 0; w_base = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    tile(1, 1, 40, 3, 7);
    tile(2, 2, 20, 0, 10);
    tile(3, 4, 9, 5, 5);
    tile(8, 8, 7, 1, 2);
    tile(8, 2, 7, 0, 0);
    tile(16, 16, 3, 60, 61);
    tile(12, 5, 4, 2, 9);
    tile(4, 4, 1, 0, 0);
    tile(8, 8, 5, 0, 0, 1);
    tile(2, 3, 1, 4, 4, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
