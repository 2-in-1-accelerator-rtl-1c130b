// data_buffer -- one bank of the on-chip data buffer.
//
// A simple dual-port memory standing for a compiled SRAM macro: one write
// port, used by the host to load packed operands, and one synchronous read
// port feeding the dispatcher. Read data appears one cycle after re and is
// held until the next read. The paper gives no buffer sizes (it keeps the
// memory area of its baseline); WORD_W and DEPTH are this design's.
//
// Interface: we/waddr/wdata, re/raddr -> rdata.
// Timing: write at the clock edge; read latency 1 cycle.
module data_buffer #(
  parameter int unsigned WORD_W = 256,
  parameter int unsigned DEPTH  = 64,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [WORD_W-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [WORD_W-1:0] rdata
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
