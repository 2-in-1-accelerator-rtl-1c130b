// accel_top -- precision-scalable accelerator with random precision switch.
//
// Data path, left to right as in the architecture drawing: data buffer
// banks -> dispatchers -> MAC array. There is one input bank per array row
// and one weight bank per array column; each bank feeds its own dispatcher,
// which unpacks the word at the granularity of the current precision into
// 16 operand lanes. The MAC array (ROWS x COLS spatial-temporal MAC units)
// accumulates one output per unit. array_ctrl sequences a tile of n_ops
// operations; rps_select draws a random precision from a candidate set.
//
// Use: (1) optionally pulse rps_req with rps_mask and wait for rps_valid;
// rps_prec is the precision to quantize the layer to. (2) Load the packed
// operands through the ld_a_* / ld_w_* write ports (bank = row or column).
// (3) Pulse start with n_ops, a_base, w_base and either prec_a/prec_w or
// use_rps=1 (then both precisions are rps_prec); keep=1 adds the tile onto
// the previous results instead of starting over. (4) When done pulses, acc
// holds the ROWS x COLS sums of products. Results are raw unsigned
// accumulators: scaling and bias (into which the paper folds its switchable
// batch normalisation) are left to the consumer.
// The block structure follows the paper; the banking, host ports, array
// size and buffer sizes are this design's.
module accel_top
  import accel_pkg::*;
#(
  parameter int unsigned ROWS   = 8,
  parameter int unsigned COLS   = 8,
  parameter int unsigned DEPTH  = 64,
  parameter int unsigned WORD_W = 256,
  parameter int unsigned ACC_W  = 48,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned RB_W  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CB_W  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  // host load ports
  input  logic                                     ld_a_we,
  input  logic [RB_W-1:0]                          ld_a_bank,
  input  logic [AW-1:0]                            ld_a_addr,
  input  logic [WORD_W-1:0]                        ld_a_data,
  input  logic                                     ld_w_we,
  input  logic [CB_W-1:0]                          ld_w_bank,
  input  logic [AW-1:0]                            ld_w_addr,
  input  logic [WORD_W-1:0]                        ld_w_data,
  // random precision switch
  input  logic                                     rps_req,
  input  logic [15:0]                              rps_mask,
  output logic                                     rps_valid,
  output prec_t                                    rps_prec,
  // tile control
  input  logic                                     start,
  input  logic                                     use_rps,
  input  prec_t                                    prec_a,
  input  prec_t                                    prec_w,
  input  logic [15:0]                              n_ops,
  input  logic                                     keep,
  input  logic [AW-1:0]                            a_base,
  input  logic [AW-1:0]                            w_base,
  output logic                                     busy,
  output logic                                     done,
  output logic [ROWS-1:0][COLS-1:0][ACC_W-1:0]     acc
);
  localparam int unsigned SEL_W = $clog2(WORD_W / N_LANES);

  logic             re;
  logic [AW-1:0]    a_addr, w_addr;
  gran_t            gran_a, gran_w;
  logic [SEL_W-1:0] sel_a, sel_w;
  logic             mac_start, mac_ready, mac_clear, mac_done;
  mac_cfg_t         mac_cfg;
  prec_t            pa_eff, pw_eff;

  assign pa_eff = use_rps ? rps_prec : prec_a;
  assign pw_eff = use_rps ? rps_prec : prec_w;

  rps_select u_rps (
    .clk      (clk),
    .rst_n    (rst_n),
    .req      (rps_req),
    .set_mask (rps_mask),
    .valid    (rps_valid),
    .prec     (rps_prec)
  );

  array_ctrl #(.WORD_W(WORD_W), .DEPTH(DEPTH)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .prec_a    (pa_eff),
    .prec_w    (pw_eff),
    .n_ops     (n_ops),
    .keep      (keep),
    .a_base    (a_base),
    .w_base    (w_base),
    .busy      (busy),
    .done      (done),
    .re        (re),
    .a_addr    (a_addr),
    .w_addr    (w_addr),
    .gran_a    (gran_a),
    .gran_w    (gran_w),
    .sel_a     (sel_a),
    .sel_w     (sel_w),
    .mac_start (mac_start),
    .mac_ready (mac_ready),
    .mac_cfg   (mac_cfg),
    .mac_clear (mac_clear),
    .mac_done  (mac_done)
  );

  operand_t [ROWS-1:0][N_LANES-1:0] a_rows;
  operand_t [COLS-1:0][N_LANES-1:0] w_cols;

  for (genvar r = 0; r < ROWS; r++) begin : g_abank
    logic [WORD_W-1:0] rdata;
    data_buffer #(.WORD_W(WORD_W), .DEPTH(DEPTH)) u_buf (
      .clk   (clk),
      .we    (ld_a_we && (ld_a_bank == RB_W'(r))),
      .waddr (ld_a_addr),
      .wdata (ld_a_data),
      .re    (re),
      .raddr (a_addr),
      .rdata (rdata)
    );
    dispatcher #(.WORD_W(WORD_W)) u_disp (
      .word  (rdata),
      .gran  (gran_a),
      .sel   (sel_a),
      .lanes (a_rows[r])
    );
  end

  for (genvar c = 0; c < COLS; c++) begin : g_wbank
    logic [WORD_W-1:0] rdata;
    data_buffer #(.WORD_W(WORD_W), .DEPTH(DEPTH)) u_buf (
      .clk   (clk),
      .we    (ld_w_we && (ld_w_bank == CB_W'(c))),
      .waddr (ld_w_addr),
      .wdata (ld_w_data),
      .re    (re),
      .raddr (w_addr),
      .rdata (rdata)
    );
    dispatcher #(.WORD_W(WORD_W)) u_disp (
      .word  (rdata),
      .gran  (gran_w),
      .sel   (sel_w),
      .lanes (w_cols[c])
    );
  end

  mac_array #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W)) u_array (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (mac_start),
    .ready  (mac_ready),
    .cfg    (mac_cfg),
    .clear  (mac_clear),
    .a_rows (a_rows),
    .w_cols (w_cols),
    .acc    (acc),
    .done   (mac_done)
  );
endmodule
