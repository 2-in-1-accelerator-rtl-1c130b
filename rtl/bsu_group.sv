// bsu_group -- a group of bit-serial units with its shared group shift-add.
//
// All units of a group hold partial products of the same magnitude (for
// example every a_i^H * b_i^H of the MAC unit's n partial sums), so their
// outputs can be added without any shifter ("first reduce, then shift").
// Each cycle the N_BSU partial products are summed by an adder tree and the
// sum enters the single group shift-add, which accumulates the bit-serial
// input most significant bit first: acc <= (acc << 1) + sum. On the first
// bit of a pass the accumulator restarts from the sum alone, so passes run
// back to back without an idle cycle.
//
// Interface: en marks a bit cycle, first marks the first bit of a pass;
// a_bits holds one input bit per unit, w_parts one weight part per unit.
// acc_next is the value the accumulator takes at the next edge, so the MAC
// unit can capture the finished group result in the same cycle as the last
// bit. acc_q is the registered accumulator.
// Follows the paper: grouping and one fused shift-add per group (Opt-2).
// This design's choices: MSB-first order, restart-on-first-bit, reset to 0.
module bsu_group
  import accel_pkg::*;
#(
  parameter int unsigned NB     = N_BSU,
  parameter int unsigned WP_W   = PART_W,
  parameter int unsigned MAXCYC = PART_W,
  localparam int unsigned PS_W  = WP_W + $clog2(NB + 1),
  localparam int unsigned ACC_W = PS_W + MAXCYC
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  logic                       first,
  input  logic [NB-1:0]              a_bits,
  input  logic [NB-1:0][WP_W-1:0]    w_parts,
  output logic [ACC_W-1:0]           acc_next,
  output logic [ACC_W-1:0]           acc_q
);
  logic [NB-1:0][WP_W-1:0] pp;
  logic [PS_W-1:0]         psum;

  for (genvar j = 0; j < NB; j++) begin : g_bsu
    bit_serial_unit #(.WP_W(WP_W)) u_bsu (
      .a_bit  (a_bits[j]),
      .w_part (w_parts[j]),
      .pp     (pp[j])
    );
  end

  always_comb begin
    psum = '0;
    for (int j = 0; j < NB; j++) psum += PS_W'(pp[j]);
  end

  always_comb begin
    if (first) acc_next = ACC_W'(psum);
    else       acc_next = (acc_q << 1) + ACC_W'(psum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc_q <= '0;
    else if (en) acc_q <= acc_next;
  end
endmodule
