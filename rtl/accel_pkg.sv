// accel_pkg -- shared constants, types and the precision decoder of the
// precision-scalable spatial-temporal accelerator.
//
// A precision is a bit width from 1 to 16, the same range the accelerator is
// evaluated over. The decoder turns an (input precision, weight precision)
// pair into the schedule the MAC unit follows:
//   * above 8 bits an operand is cut into two chunks of ceil(p/2) bits and the
//     whole MAC unit runs once per chunk pair ("temporal passes"), the results
//     being accumulated with a pass shift, as the paper describes for >8 bits;
//   * a chunk wider than 4 bits is split into a low part of m = ceil(k/2) bits
//     and a high part of k-m bits, so every bit-serial unit sees at most
//     4 x 4 bits (5-bit = 3+2, 6-bit = 3+3, 7-bit = 4+3, 8-bit = 4+4);
//   * the input (activation) part is streamed bit-serially, most significant
//     bit first, so one pass takes m cycles when the input is split and k
//     cycles when it is not.
// The choice of m = ceil(k/2) as the low part and the MSB-first order are
// this design's; the splits themselves follow the paper's examples.
package accel_pkg;

  // Geometry of one MAC unit (paper: four groups, four partial sums each,
  // bit-serial units of up to 4 x 4 bits).
  localparam int unsigned N_GROUPS = 4;    // groups per MAC unit
  localparam int unsigned N_BSU    = 4;    // bit-serial units per group (n)
  localparam int unsigned N_LANES  = N_GROUPS * N_BSU;  // operand pairs per op, at most
  localparam int unsigned PART_W   = 4;    // widest operand part a bit-serial unit takes
  localparam int unsigned OP_W     = 16;   // widest operand precision
  localparam int unsigned PREC_W   = 5;    // width of a precision code (1..16)

  typedef logic [PREC_W-1:0] prec_t;
  typedef logic [OP_W-1:0]   operand_t;

  // Packing granularity of operands in a buffer word (dispatcher modes).
  typedef enum logic [2:0] {
    GRAN_1  = 3'd0,
    GRAN_2  = 3'd1,
    GRAN_4  = 3'd2,
    GRAN_8  = 3'd3,
    GRAN_16 = 3'd4
  } gran_t;

  // Schedule of one MAC operation, derived from the two precisions.
  typedef struct packed {
    logic       a_chunked;  // input wider than 8 bits: two temporal chunks
    logic       w_chunked;  // weight wider than 8 bits: two temporal chunks
    logic [3:0] ka;         // input chunk width (1..8)
    logic [3:0] kw;         // weight chunk width (1..8)
    logic       a_split;    // input chunk wider than 4: high/low parts
    logic       w_split;    // weight chunk wider than 4: high/low parts
    logic [2:0] ma;         // input low-part width when split (3..4), else 0
    logic [2:0] mw;         // weight low-part width when split (3..4), else 0
    logic [2:0] cycles;     // bit-serial cycles per pass (1..4)
    logic [2:0] passes;     // temporal passes per operation (1, 2 or 4)
    logic [4:0] pairs;      // operand pairs consumed per operation (4, 8 or 16)
  } mac_cfg_t;

  function automatic mac_cfg_t decode_prec(prec_t pa, prec_t pw);
    mac_cfg_t c;
    int unsigned a, w;
    a = (pa == '0) ? 1 : ((pa > PREC_W'(OP_W)) ? OP_W : int'(pa));
    w = (pw == '0) ? 1 : ((pw > PREC_W'(OP_W)) ? OP_W : int'(pw));
    c.a_chunked = (a > 8);
    c.w_chunked = (w > 8);
    c.ka        = 4'(c.a_chunked ? (a + 1) / 2 : a);
    c.kw        = 4'(c.w_chunked ? (w + 1) / 2 : w);
    c.a_split   = (c.ka > 4'd4);
    c.w_split   = (c.kw > 4'd4);
    c.ma        = c.a_split ? 3'((int'(c.ka) + 1) / 2) : 3'd0;
    c.mw        = c.w_split ? 3'((int'(c.kw) + 1) / 2) : 3'd0;
    c.cycles    = c.a_split ? c.ma : 3'(c.ka);
    c.passes    = 3'((c.a_chunked ? 2 : 1) * (c.w_chunked ? 2 : 1));
    c.pairs     = 5'(N_LANES >> (int'(c.a_split) + int'(c.w_split)));
    return c;
  endfunction

  // Smallest packing granularity that holds a precision.
  function automatic gran_t gran_of(prec_t p);
    if (p <= 1)      return GRAN_1;
    else if (p <= 2) return GRAN_2;
    else if (p <= 4) return GRAN_4;
    else if (p <= 8) return GRAN_8;
    else             return GRAN_16;
  endfunction

  // Field width in bits of a granularity.
  function automatic int unsigned gran_bits(gran_t g);
    return 1 << int'(g);
  endfunction

endpackage
