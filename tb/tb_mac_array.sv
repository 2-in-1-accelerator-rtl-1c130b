// tb_mac_array -- runs a 2 x 3 MAC array through bursts of random operations
// at several precisions and checks every unit's accumulator against sums of
// products of its row's inputs and its column's weights computed here.
module tb_mac_array;
  import accel_pkg::*;
  localparam int R = 2, C = 3, ACC_W = 48;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, ready, clear, done;
  mac_cfg_t cfg;
  operand_t [R-1:0][N_LANES-1:0] a_rows;
  operand_t [C-1:0][N_LANES-1:0] w_cols;
  logic [R-1:0][C-1:0][ACC_W-1:0] acc;
  int checks = 0, failures = 0;

  mac_array #(.ROWS(R), .COLS(C), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic burst(int pa, int pw, int nops);
    longint unsigned ref_acc [R][C];
    int np, ndone;
    mac_cfg_t c;
    c = decode_prec(PREC_W'(pa), PREC_W'(pw));
    np = int'(c.pairs);
    foreach (ref_acc[i, j]) ref_acc[i][j] = 0;
    ndone = 0;
    fork
      begin
        for (int op = 0; op < nops; op++) begin
          for (int l = 0; l < N_LANES; l++) begin
            for (int r = 0; r < R; r++) a_rows[r][l] = OP_W'($urandom) & OP_W'((32'd1 << pa) - 1);
            for (int k = 0; k < C; k++) w_cols[k][l] = OP_W'($urandom) & OP_W'((32'd1 << pw) - 1);
          end
          for (int r = 0; r < R; r++)
            for (int k = 0; k < C; k++)
              for (int l = 0; l < np; l++)
                ref_acc[r][k] += longint'(a_rows[r][l]) * longint'(w_cols[k][l]);
          cfg = c; clear = (op == 0); start = 1'b1;
          while (!ready) @(negedge clk);
          @(negedge clk);
        end
        start = 1'b0;
      end
      begin
        while (ndone < nops) begin
          @(negedge clk);
          if (done) ndone++;
        end
      end
    join
    for (int r = 0; r < R; r++)
      for (int k = 0; k < C; k++) begin
        checks++;
        if (acc[r][k] !== ACC_W'(ref_acc[r][k])) begin
          failures++;
          $display("FAIL p=%0d/%0d unit(%0d,%0d) got %0d exp %0d", pa, pw, r, k,
                   acc[r][k], ref_acc[r][k]);
        end
      end
  endtask

  initial begin
    start = 0; clear = 0; cfg = '0; a_rows = '0; w_cols = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    burst(1, 1, 4);
    burst(4, 4, 4);
    burst(6, 6, 4);
    burst(8, 8, 4);
    burst(4, 8, 3);
    burst(12, 12, 3);
    burst(16, 16, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
