// bit_serial_unit -- one bit-serial multiplier of the spatial-temporal MAC unit.
//
// Each cycle it multiplies one bit of its input (activation) part by its
// weight part of up to 4 bits, which for a single bit is a row of AND gates.
// The paper fuses the shift-add that a stand-alone bit-serial unit would
// carry into one shared "group shift-add" per group of units (its Opt-2), so
// the unit here has no accumulator of its own: its partial product goes to
// the group adder tree (bsu_group), which shifts and accumulates it.
//
// Interface: a_bit (1 bit), w_part (WP_W bits) -> pp (WP_W bits).
// Timing: purely combinational; the group samples pp every cycle.
// Follows the paper: up-to-4x4 unit, fused shift-add. This design's choice:
// the input is the serial operand and the weight the parallel one.
module bit_serial_unit #(
  parameter int unsigned WP_W = 4
) (
  input  logic            a_bit,
  input  logic [WP_W-1:0] w_part,
  output logic [WP_W-1:0] pp
);
  always_comb pp = w_part & {WP_W{a_bit}};
endmodule
