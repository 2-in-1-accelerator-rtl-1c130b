// mac_unit -- precision-scalable spatial-temporal MAC unit.
//
// The unit tiles N_GROUPS groups of N_BSU bit-serial units (16 units of up
// to 4 x 4 bits) and computes, per operation, the sum of several products
// that all belong to the same output (the paper's n partial sums, taken
// from different kernel rows, columns or input channels), adding it to one
// output accumulator. How the operand pairs are spread over the units
// depends on the precisions (see accel_pkg::decode_prec):
//   * both chunks <= 4 bits: every unit takes a whole pair, 16 pairs per op;
//   * one chunk split into high/low parts: 8 pairs per op;
//   * both split (5..8 bits): 4 pairs per op, one group per magnitude:
//     group 0 = a^H*b^H, group 1 = a^H*b^L, group 2 = a^L*b^H,
//     group 3 = a^L*b^L ("first reduce, then shift", the paper's Opt-1).
// Each group accumulates its bit-serial sum in its own group shift-add
// (Opt-2). When the last input bit has been processed, the group results
// are registered and, in the next cycle, the group-wise shift-add shifts
// them by (ma+mw), ma, mw, 0 -- the <<2m, <<m, <<m, <<0 of the paper for
// equal precisions -- adds them and adds the total to the accumulator.
// Keeping the two shift-add stages in separate pipeline stages follows the
// paper's remark on the critical path. Operands wider than 8 bits are cut
// into two chunks and the unit runs once per chunk pair ("pass"); each
// pass's total is shifted by the chunk weights before accumulation, as the
// paper does with 12-bit = four 6-bit executions.
//
// Interface: start/ready handshake; operands a_ops/w_ops (N_LANES x 16 bit,
// lanes beyond cfg.pairs ignored), cfg and clear are sampled with start.
// clear makes this operation overwrite the accumulator instead of adding.
// Timing: an op occupies passes*cycles cycles (8x8 bit: 4 cycles for four
// products; 4x4 bit: 4 cycles for sixteen; 1x1 bit: 1 cycle). ready is also
// high in an op's last bit cycle, so ops run back to back. acc is updated,
// and done pulses, two cycles after the op's last bit cycle.
// This design's choices: operands are unsigned, the input is the bit-serial
// operand, ACC_W is 48 bits, the lane-to-unit mapping for mixed cases.
module mac_unit
  import accel_pkg::*;
#(
  parameter int unsigned ACC_W = 48
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          ready,
  input  mac_cfg_t                      cfg,
  input  logic                          clear,
  input  operand_t [N_LANES-1:0]        a_ops,
  input  operand_t [N_LANES-1:0]        w_ops,
  output logic [ACC_W-1:0]              acc,
  output logic                          done,
  output logic                          busy
);
  localparam int unsigned PS_W   = PART_W + $clog2(N_BSU + 1);
  localparam int unsigned GACC_W = PS_W + PART_W;
  localparam int unsigned TOT_W  = GACC_W + 2 * PART_W + $clog2(N_GROUPS);

  // ---------------- operation state ----------------
  mac_cfg_t               cfg_q;
  operand_t [N_LANES-1:0] a_q, w_q;
  logic                   clear_q;
  logic [1:0]             pass_q;
  logic [2:0]             bit_q;

  logic last_bit, last_pass, accept;
  assign last_bit  = (bit_q == 3'd0);
  assign last_pass = (pass_q == 2'(cfg_q.passes - 3'd1));
  assign ready     = !busy || (last_bit && last_pass);
  assign accept    = start && ready;

  // ---------------- chunk selection for this pass ----------------
  logic       ahc, whc;              // this pass uses the high chunk of a / w
  logic [4:0] pass_shift;
  always_comb begin
    ahc = cfg_q.a_chunked && (cfg_q.w_chunked ? (pass_q < 2'd2) : (pass_q == 2'd0));
    whc = cfg_q.w_chunked && (cfg_q.a_chunked ? !pass_q[0] : (pass_q == 2'd0));
    pass_shift = (ahc ? 5'(cfg_q.ka) : 5'd0) + (whc ? 5'(cfg_q.kw) : 5'd0);
  end

  function automatic logic [7:0] chunk_of(operand_t v, logic hi, logic [3:0] k);
    operand_t s, m;
    s = hi ? (v >> k) : v;
    m = (OP_W'(1) << k) - OP_W'(1);
    return 8'(s & m);
  endfunction

  function automatic logic [PART_W-1:0] part_of(logic [7:0] c, logic split, logic hi,
                                                logic [2:0] m);
    logic [7:0] lo_mask;
    lo_mask = (8'd1 << m) - 8'd1;
    if (!split)  return PART_W'(c);
    else if (hi) return PART_W'(c >> m);
    else         return PART_W'(c & lo_mask);
  endfunction

  // ---------------- bit-level split and allocation (Opt-1) ----------------
  logic [N_GROUPS-1:0][N_BSU-1:0]             g_abits;
  logic [N_GROUPS-1:0][N_BSU-1:0][PART_W-1:0] g_wparts;
  logic [N_GROUPS-1:0][4:0]                   g_shift;

  always_comb begin
    for (int g = 0; g < N_GROUPS; g++) begin
      logic ga, gw;
      int unsigned sel;
      ga = (g == 0) || (g == 1);     // group holds the input's high part
      gw = (g == 0) || (g == 2);     // group holds the weight's high part
      if (cfg_q.a_split && cfg_q.w_split) sel = 0;
      else if (cfg_q.a_split)             sel = int'(gw);
      else if (cfg_q.w_split)             sel = int'(ga);
      else                                sel = 2 * int'(ga) + int'(gw);
      g_shift[g] = ((cfg_q.a_split && ga) ? 5'(cfg_q.ma) : 5'd0)
                 + ((cfg_q.w_split && gw) ? 5'(cfg_q.mw) : 5'd0);
      for (int j = 0; j < N_BSU; j++) begin
        int unsigned lane;
        logic [PART_W-1:0] ap;
        lane = j + N_BSU * sel;
        ap = part_of(chunk_of(a_q[lane], ahc, cfg_q.ka), cfg_q.a_split, ga, cfg_q.ma);
        g_abits[g][j]  = ap[bit_q[1:0]];
        g_wparts[g][j] = part_of(chunk_of(w_q[lane], whc, cfg_q.kw), cfg_q.w_split, gw,
                                 cfg_q.mw);
      end
    end
  end

  // ---------------- groups with their group shift-add (Opt-2) ----------------
  logic                              first_bit;
  logic [N_GROUPS-1:0][GACC_W-1:0]   g_next, g_q;
  assign first_bit = (bit_q == cfg_q.cycles - 3'd1);

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_grp
    bsu_group #(.NB(N_BSU), .WP_W(PART_W), .MAXCYC(PART_W)) u_grp (
      .clk      (clk),
      .rst_n    (rst_n),
      .en       (busy),
      .first    (first_bit),
      .a_bits   (g_abits[g]),
      .w_parts  (g_wparts[g]),
      .acc_next (g_next[g]),
      .acc_q    (g_q[g])
    );
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      pass_q  <= '0;
      bit_q   <= '0;
      cfg_q   <= '0;
      clear_q <= 1'b0;
      a_q     <= '0;
      w_q     <= '0;
    end else if (accept) begin
      busy    <= 1'b1;
      pass_q  <= '0;
      bit_q   <= cfg.cycles - 3'd1;
      cfg_q   <= cfg;
      clear_q <= clear;
      a_q     <= a_ops;
      w_q     <= w_ops;
    end else if (busy) begin
      if (!last_bit) begin
        bit_q <= bit_q - 3'd1;
      end else if (!last_pass) begin
        pass_q <= pass_q + 2'd1;
        bit_q  <= cfg_q.cycles - 3'd1;
      end else begin
        busy <= 1'b0;
      end
    end
  end

  // ---------------- stage 2: group results ----------------
  logic                            r_valid, r_clear, r_last;
  logic [4:0]                      r_pshift;
  logic [N_GROUPS-1:0][GACC_W-1:0] r_gres;
  logic [N_GROUPS-1:0][4:0]        r_gshift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid  <= 1'b0;
      r_clear  <= 1'b0;
      r_last   <= 1'b0;
      r_pshift <= '0;
      r_gres   <= '0;
      r_gshift <= '0;
    end else begin
      r_valid <= busy && last_bit;
      if (busy && last_bit) begin
        r_clear  <= clear_q && (pass_q == 2'd0);
        r_last   <= last_pass;
        r_pshift <= pass_shift;
        r_gres   <= g_next;
        r_gshift <= g_shift;
      end
    end
  end

  // ---------------- stage 3: group-wise shift-add and accumulator ----------------
  logic [TOT_W-1:0] total;
  always_comb begin
    total = '0;
    for (int g = 0; g < N_GROUPS; g++) total += TOT_W'(r_gres[g]) << r_gshift[g];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      done <= 1'b0;
    end else begin
      done <= r_valid && r_last;
      if (r_valid) acc <= (r_clear ? '0 : acc) + (ACC_W'(total) << r_pshift);
    end
  end
endmodule
