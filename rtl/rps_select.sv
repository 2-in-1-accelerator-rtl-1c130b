// rps_select -- random precision switch (RPS) selector.
//
// For each inference, RPS quantizes weights and activations to a precision
// drawn at random from a candidate set; switching the set (e.g. 4..16 bit,
// 4..8 bit, or a single static 4 bit) trades robustness for efficiency at
// run time. This block draws that precision on chip. The set is a 16-bit
// mask, bit i standing for precision i+1. A 16-bit Galois LFSR (taps
// x^16+x^14+x^13+x^11) advances every cycle; on a request its state x
// (1..65535) is scaled to an index idx = floor(x * |set| / 2^16) and the
// precision is the idx-th member of the set, counted from 1 bit upwards, so
// every member is equally likely to within 1/65535. An empty mask returns
// 8 bits.
// The paper specifies the random choice, not where it is made; the on-chip
// LFSR, the mask format and the empty-mask rule are this design's.
//
// Interface: req (pulse), set_mask -> valid (pulse), prec.
// Timing: valid one cycle after req.
module rps_select
  import accel_pkg::*;
#(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic [15:0] set_mask,
  output logic        valid,
  output prec_t       prec
);
  logic [15:0] lfsr;
  logic [4:0]  members;
  logic [4:0]  idx;
  logic [20:0] scaled;
  prec_t       pick;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lfsr <= SEED;
    else        lfsr <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
  end

  // index into the set, then the idx-th set bit of the mask
  always_comb begin
    int unsigned seen;
    members = 5'($countones(set_mask));
    scaled  = 21'(lfsr) * 21'(members);
    idx     = scaled[20:16];
    pick    = PREC_W'(8);
    seen    = 0;
    for (int i = 15; i >= 0; i--) begin
      if (set_mask[i]) begin
        if (seen == 32'(members) - 32'(idx) - 1) pick = PREC_W'(i + 1);
        seen++;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      prec  <= PREC_W'(8);
    end else begin
      valid <= req;
      if (req) prec <= pick;
    end
  end
endmodule
