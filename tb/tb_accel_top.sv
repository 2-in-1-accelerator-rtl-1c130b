// tb_accel_top -- end-to-end test of the accelerator at its default size
// (8 x 8 MAC units, 64-word x 256-bit banks).
//
// Each tile: random unsigned operands at the tile's precisions are packed
// into words at the dispatcher granularity (block k of a bank at word
// base + k div B, block k mod B, field i at bit (block*16+i)*G), loaded
// through the host ports, and a tile of n_ops operations is started. The
// ROWS x COLS results are compared with sums of products computed here, and
// the start-to-done time with n_ops * passes * cycles + 4 (the per-op rate of
// the MAC schedule plus the fixed pipeline latency: one read cycle, two
// shift-add stages, one controller cycle).
// Mechanisms counted, each must occur at least once: 16-pair low-precision
// mode, split 5..8-bit mode, mixed split mode, temporal passes above 8 bits,
// asymmetric precisions, words holding several blocks, back-to-back ops,
// tiles that continue the previous accumulation (keep), and random precision
// switching between at least two different precisions.
module tb_accel_top;
  import accel_pkg::*;
  localparam int ROWS = 8, COLS = 8, DEPTH = 64, WORD_W = 256, ACC_W = 48;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ld_a_we, ld_w_we;
  logic [2:0] ld_a_bank, ld_w_bank;
  logic [5:0] ld_a_addr, ld_w_addr, a_base, w_base;
  logic [WORD_W-1:0] ld_a_data, ld_w_data;
  logic rps_req, rps_valid, start, keep, use_rps, busy, done;
  logic [15:0] rps_mask, n_ops;
  prec_t rps_prec, prec_a, prec_w;
  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0] acc;

  int checks = 0, failures = 0;
  int n_lowp = 0, n_split = 0, n_mixed = 0, n_pass = 0, n_asym = 0, n_multi = 0,
      n_b2b = 0, n_rps = 0, n_keep = 0;
  longint unsigned prev [ROWS][COLS];
  int rps_seen [17];

  accel_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // operands of the current tile: [bank][op][lane]
  int unsigned A [ROWS][][N_LANES];
  int unsigned W [COLS][][N_LANES];

  function automatic int gbits(int p);
    return (p <= 1) ? 1 : (p <= 2) ? 2 : (p <= 4) ? 4 : (p <= 8) ? 8 : 16;
  endfunction

  // pack one bank's ops into words and write them through a load port
  task automatic load_bank(bit is_w, int bank, int p, int base, int n);
    int G, bpw, nwords;
    logic [WORD_W-1:0] word;
    G = gbits(p);
    bpw = WORD_W / (N_LANES * G);
    nwords = (n + bpw - 1) / bpw;
    for (int wd = 0; wd < nwords; wd++) begin
      word = '0;
      for (int b = 0; b < bpw; b++) begin
        int k;
        k = wd * bpw + b;
        if (k < n)
          for (int i = 0; i < N_LANES; i++)
            for (int x = 0; x < G; x++)
              word[(b * N_LANES + i) * G + x] = is_w ? W[bank][k][i][x] : A[bank][k][i][x];
      end
      @(negedge clk);
      if (is_w) begin
        ld_w_we = 1; ld_w_bank = 3'(bank); ld_w_addr = 6'(base + wd); ld_w_data = word;
      end else begin
        ld_a_we = 1; ld_a_bank = 3'(bank); ld_a_addr = 6'(base + wd); ld_a_data = word;
      end
      @(negedge clk);
      ld_a_we = 0; ld_w_we = 0;
    end
  endtask

  task automatic tile(int pa, int pw, int n, int ab, int wb, bit rps, bit kp = 0);
    mac_cfg_t c;
    longint unsigned ref_acc;
    int t, np, expect_t;
    if (rps) begin
      @(negedge clk); rps_req = 1;
      @(negedge clk); rps_req = 0;
      while (!rps_valid) @(negedge clk);
      pa = int'(rps_prec); pw = pa;
      rps_seen[pa]++;
      n_rps++;
    end
    c = decode_prec(PREC_W'(pa), PREC_W'(pw));
    np = int'(c.pairs);
    for (int r = 0; r < ROWS; r++) begin
      A[r] = new[n];
      for (int k = 0; k < n; k++)
        for (int i = 0; i < N_LANES; i++) A[r][k][i] = $urandom & ((1 << pa) - 1);
    end
    for (int q = 0; q < COLS; q++) begin
      W[q] = new[n];
      for (int k = 0; k < n; k++)
        for (int i = 0; i < N_LANES; i++) W[q][k][i] = $urandom & ((1 << pw) - 1);
    end
    for (int r = 0; r < ROWS; r++) load_bank(0, r, pa, ab, n);
    for (int q = 0; q < COLS; q++) load_bank(1, q, pw, wb, n);

    @(negedge clk);
    use_rps = rps; prec_a = PREC_W'(pa); prec_w = PREC_W'(pw);
    n_ops = 16'(n); a_base = 6'(ab); w_base = 6'(wb); keep = kp; start = 1;
    @(negedge clk); start = 0;
    t = 1;
    while (!done && t < 100000) begin @(negedge clk); t++; end

    expect_t = n * int'(c.passes) * int'(c.cycles) + 4;
    checks++;
    if (t != expect_t) begin
      failures++;
      $display("FAIL p=%0d/%0d n=%0d: done after %0d cycles, expected %0d", pa, pw, n, t, expect_t);
    end
    for (int r = 0; r < ROWS; r++)
      for (int q = 0; q < COLS; q++) begin
        ref_acc = kp ? prev[r][q] : 0;
        for (int k = 0; k < n; k++)
          for (int i = 0; i < np; i++) ref_acc += longint'(A[r][k][i]) * longint'(W[q][k][i]);
        prev[r][q] = ref_acc;
        checks++;
        if (acc[r][q] !== ACC_W'(ref_acc)) begin
          failures++;
          if (failures < 20)
            $display("FAIL p=%0d/%0d out(%0d,%0d) got %0d exp %0d", pa, pw, r, q, acc[r][q], ref_acc);
        end
      end
    if (c.pairs == 16) n_lowp++;
    if (c.a_split && c.w_split) n_split++;
    if (c.a_split != c.w_split) n_mixed++;
    if (c.passes > 1) n_pass++;
    if (pa != pw) n_asym++;
    if (n > WORD_W / (N_LANES * gbits(pa))) n_multi++;
    if (WORD_W / (N_LANES * gbits(pa)) > 1 && n > 1) n_multi++;
    if (n > 1) n_b2b++;
    if (kp) n_keep++;
    $display("tile p=%0d/%0d n=%0d: %0d cycles", pa, pw, n, t);
  endtask

  task automatic need(string what, int cnt);
    checks++;
    $display("mechanism %s: %0d", what, cnt);
    if (cnt == 0) begin failures++; $display("FAIL mechanism %s never happened", what); end
  endtask

  initial begin
    int distinct;
    ld_a_we = 0; ld_w_we = 0; ld_a_bank = 0; ld_w_bank = 0; ld_a_addr = 0; ld_w_addr = 0;
    ld_a_data = '0; ld_w_data = '0; rps_req = 0; rps_mask = '0; start = 0; keep = 0; use_rps = 0;
    prec_a = 8; prec_w = 8; n_ops = 0; a_base = 0; w_base = 0;
    foreach (rps_seen[i]) rps_seen[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    tile(1, 1, 40, 0, 0, 0);
    tile(2, 2, 12, 5, 9, 0);
    tile(3, 3, 6, 0, 0, 0);
    tile(4, 4, 9, 0, 0, 0);
    tile(5, 5, 4, 0, 0, 0);
    tile(6, 6, 4, 2, 3, 0);
    tile(7, 7, 4, 0, 0, 0);
    tile(8, 8, 8, 0, 0, 0);
    tile(12, 12, 3, 0, 0, 0);
    tile(16, 16, 3, 10, 20, 0);
    tile(4, 8, 5, 0, 0, 0);
    tile(8, 2, 5, 0, 0, 0);
    tile(16, 4, 3, 0, 0, 0);
    // one reduction split over three tiles: the later two keep the results
    tile(8, 8, 6, 0, 0, 0);
    tile(8, 8, 6, 20, 30, 0, 1);
    tile(8, 8, 2, 40, 50, 0, 1);
    rps_mask = 16'b1000_1000_1000_1000;   // RPS set {4, 8, 12, 16}
    for (int i = 0; i < 6; i++) tile(0, 0, 4, 0, 0, 1);
    distinct = 0;
    foreach (rps_seen[i]) if (rps_seen[i] > 0) distinct++;
    need("16-pair low-precision mode", n_lowp);
    need("split 5..8-bit mode", n_split);
    need("mixed split mode", n_mixed);
    need("temporal passes above 8 bits", n_pass);
    need("asymmetric precisions", n_asym);
    need("several blocks per word", n_multi);
    need("back-to-back ops", n_b2b);
    need("tiles continuing the accumulation", n_keep);
    need("random precision switch tiles", n_rps);
    need("distinct random precisions beyond one", distinct - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
