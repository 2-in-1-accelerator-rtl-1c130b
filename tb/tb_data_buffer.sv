// tb_data_buffer -- writes random words to every address of a buffer bank,
// reads them back in random order and checks the data and the one-cycle read
// latency, including that the output holds while re is low.
module tb_data_buffer;
  localparam int WORD_W = 64, DEPTH = 32;
  logic clk = 1'b0;
  logic we, re;
  logic [4:0] waddr, raddr;
  logic [WORD_W-1:0] wdata, rdata;
  logic [WORD_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  data_buffer #(.WORD_W(WORD_W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 5'(a); wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      int a;
      a = $urandom % DEPTH;
      @(negedge clk); re = 1; raddr = 5'(a);
      @(negedge clk); re = 0; raddr = 5'($urandom);
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL read %0d", a); end
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL hold %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
