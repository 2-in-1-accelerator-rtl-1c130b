// array_ctrl -- sequencer for one output tile of the MAC array.
//
// A tile is n_ops back-to-back MAC operations that accumulate into the same
// ROWS x COLS outputs (a reduction over kernel rows, columns and input
// channels). For op k the controller reads, from every input bank and every
// weight bank, the word that holds block k of packed operands, and steers
// the dispatchers to that block: with granularity G a word holds
// WORD_W/(16*G) blocks, so the block index runs through the word before the
// address advances. The first op carries clear, so the tile overwrites the
// accumulators, unless keep is set at start: then the tile adds onto what the
// accumulators already hold, so a reduction longer than one tile's worth of
// buffer words can be split over several tiles. The read of op k+1 is
// issued in the cycle op k is accepted, so ops follow each other without a
// bubble even at one cycle per op. When the MAC array has reported done for
// all n_ops ops the controller pulses done.
// The paper describes no controller (its dataflow is found offline by an
// optimizer); this output-stationary sequencer is this design's choice.
//
// Interface: start with prec_a, prec_w, n_ops, a_base, w_base, keep
// (sampled at start); buffer read re/a_addr/w_addr; dispatcher gran_a/
// gran_w/sel_a/sel_w; MAC array start/ready/cfg/clear/done; busy and done.
// Timing: start -> first read in the same cycle, first op issued one cycle
// later; done one cycle after the array's last done.
module array_ctrl
  import accel_pkg::*;
#(
  parameter int unsigned WORD_W = 256,
  parameter int unsigned DEPTH  = 64,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned SEL_W = $clog2(WORD_W / N_LANES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  prec_t            prec_a,
  input  prec_t            prec_w,
  input  logic [15:0]      n_ops,
  input  logic             keep,
  input  logic [AW-1:0]    a_base,
  input  logic [AW-1:0]    w_base,
  output logic             busy,
  output logic             done,
  // data buffers
  output logic             re,
  output logic [AW-1:0]    a_addr,
  output logic [AW-1:0]    w_addr,
  // dispatchers
  output gran_t            gran_a,
  output gran_t            gran_w,
  output logic [SEL_W-1:0] sel_a,
  output logic [SEL_W-1:0] sel_w,
  // MAC array
  output logic             mac_start,
  input  logic             mac_ready,
  output mac_cfg_t         mac_cfg,
  output logic             mac_clear,
  input  logic             mac_done
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT, S_DONE} state_t;
  state_t state;

  localparam int unsigned BLOCKS = WORD_W / N_LANES;  // blocks per word at 1 bit

  logic [15:0]      n_q, k_q, ndone_q;
  logic             keep_q;
  logic [AW-1:0]    cur_a, cur_w;        // word of the op being issued
  logic [SEL_W-1:0] cur_sa, cur_sw;      // block of the op being issued
  logic [SEL_W:0]   bpw_a, bpw_w;        // blocks per word
  logic [AW-1:0]    nxt_a, nxt_w;
  logic [SEL_W-1:0] nxt_sa, nxt_sw;
  logic             accept;

  assign accept = (state == S_ISSUE) && mac_ready;

  // pointer of the following op
  always_comb begin
    if (SEL_W'(cur_sa + 1'b1) == bpw_a[SEL_W-1:0] || bpw_a == 1) begin
      nxt_a = cur_a + 1'b1; nxt_sa = '0;
    end else begin
      nxt_a = cur_a;        nxt_sa = cur_sa + 1'b1;
    end
    if (SEL_W'(cur_sw + 1'b1) == bpw_w[SEL_W-1:0] || bpw_w == 1) begin
      nxt_w = cur_w + 1'b1; nxt_sw = '0;
    end else begin
      nxt_w = cur_w;        nxt_sw = cur_sw + 1'b1;
    end
  end

  // buffer reads: first op at start, op k+1 when op k is accepted
  always_comb begin
    re     = 1'b0;
    a_addr = nxt_a;
    w_addr = nxt_w;
    if (state == S_IDLE && start) begin
      re = (n_ops != 0); a_addr = a_base; w_addr = w_base;
    end else if (accept && (k_q + 1'b1 < n_q)) begin
      re = 1'b1;
    end
  end

  assign sel_a     = cur_sa;
  assign sel_w     = cur_sw;
  assign mac_start = (state == S_ISSUE);
  assign mac_clear = (k_q == '0) && !keep_q;
  assign busy      = (state != S_IDLE);
  assign done      = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      n_q     <= '0;
      keep_q  <= 1'b0;
      k_q     <= '0;
      ndone_q <= '0;
      cur_a   <= '0;
      cur_w   <= '0;
      cur_sa  <= '0;
      cur_sw  <= '0;
      bpw_a   <= '0;
      bpw_w   <= '0;
      gran_a  <= GRAN_1;
      gran_w  <= GRAN_1;
      mac_cfg <= '0;
    end else begin
      if (mac_done) ndone_q <= ndone_q + 1'b1;
      case (state)
        S_IDLE: if (start) begin
          n_q     <= n_ops;
          keep_q  <= keep;
          k_q     <= '0;
          ndone_q <= '0;
          cur_a   <= a_base;
          cur_w   <= w_base;
          cur_sa  <= '0;
          cur_sw  <= '0;
          gran_a  <= gran_of(prec_a);
          gran_w  <= gran_of(prec_w);
          bpw_a   <= (SEL_W+1)'(BLOCKS >> int'(gran_of(prec_a)));
          bpw_w   <= (SEL_W+1)'(BLOCKS >> int'(gran_of(prec_w)));
          mac_cfg <= decode_prec(prec_a, prec_w);
          state   <= (n_ops == 0) ? S_DONE : S_ISSUE;
        end
        S_ISSUE: if (accept) begin
          k_q    <= k_q + 1'b1;
          cur_a  <= nxt_a;
          cur_w  <= nxt_w;
          cur_sa <= nxt_sa;
          cur_sw <= nxt_sw;
          if (k_q + 1'b1 == n_q) state <= S_WAIT;
        end
        S_WAIT: if ((ndone_q + 16'(mac_done)) == n_q) state <= S_DONE;
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
