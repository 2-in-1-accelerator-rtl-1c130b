// dispatcher -- unpacks a data-buffer word into MAC operand lanes.
//
// Operands are stored densely packed at a granularity G of 1, 2, 4, 8 or 16
// bits (16 = two adjacent 8-bit fields). A WORD_W-bit word therefore holds
// WORD_W/G fields, i.e. WORD_W/(G*LANES) blocks of LANES operands. The
// dispatcher is a multiplexer: for the selected granularity it picks block
// `sel` and zero-extends its LANES fields to 16 bits each:
//   lanes[i] = word[(sel*LANES + i)*G +: G]   (zero if beyond the word).
// The paper names the dispatcher as a multiplexer with 1/2/4/8-bit access
// granularities; the 16-bit mode and this packing layout are this design's.
//
// Interface: word, gran (accel_pkg::gran_t), sel -> lanes.
// Timing: combinational.
module dispatcher
  import accel_pkg::*;
#(
  parameter int unsigned WORD_W = 256,
  parameter int unsigned LANES  = N_LANES,
  localparam int unsigned SEL_W = $clog2(WORD_W / LANES)
) (
  input  logic [WORD_W-1:0]       word,
  input  gran_t                   gran,
  input  logic [SEL_W-1:0]        sel,
  output operand_t [LANES-1:0]    lanes
);
  // one candidate lane vector per granularity, then the multiplexer
  operand_t [LANES-1:0] by_g [5];

  for (genvar gi = 0; gi < 5; gi++) begin : g_gran
    localparam int unsigned G  = 1 << gi;
    localparam int unsigned NF = WORD_W / G;      // fields in a word
    logic [G-1:0] f [NF];
    for (genvar x = 0; x < NF; x++) begin : g_field
      assign f[x] = word[x*G +: G];
    end
    for (genvar i = 0; i < LANES; i++) begin : g_lane
      always_comb begin
        if ((32'(sel) * LANES + i) < NF) by_g[gi][i] = OP_W'(f[32'(sel) * LANES + i]);
        else                             by_g[gi][i] = '0;
      end
    end
  end

  always_comb begin
    case (gran)
      GRAN_1:  lanes = by_g[0];
      GRAN_2:  lanes = by_g[1];
      GRAN_4:  lanes = by_g[2];
      GRAN_8:  lanes = by_g[3];
      GRAN_16: lanes = by_g[4];
      default: lanes = '0;
    endcase
  end
endmodule
