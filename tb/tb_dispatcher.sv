// tb_dispatcher -- checks the operand unpacking at every granularity
// (1, 2, 4, 8, 16 bits) and every block select, on random words, against
// fields extracted bit by bit here; blocks past the end of the word must
// read as zero.
module tb_dispatcher;
  import accel_pkg::*;
  localparam int WORD_W = 256;
  logic [WORD_W-1:0] word;
  gran_t gran;
  logic [3:0] sel;
  operand_t [N_LANES-1:0] lanes;
  int checks = 0, failures = 0;

  dispatcher #(.WORD_W(WORD_W)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      for (int w = 0; w < WORD_W / 32; w++) word[w*32 +: 32] = $urandom;
      for (int g = 0; g < 5; g++) begin
        int G;
        G = 1 << g;
        for (int s = 0; s < 16; s++) begin
          gran = gran_t'(g);
          sel  = 4'(s);
          #1;
          for (int i = 0; i < N_LANES; i++) begin
            int unsigned exp_v;
            exp_v = 0;
            for (int b = 0; b < G; b++) begin
              int pos;
              pos = (s * N_LANES + i) * G + b;
              if (pos < WORD_W && word[pos]) exp_v |= (1 << b);
            end
            checks++;
            if (int'(lanes[i]) != int'(exp_v)) begin
              failures++;
              if (failures < 10) $display("FAIL G=%0d sel=%0d lane=%0d got %h exp %h",
                                          G, s, i, lanes[i], exp_v);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
