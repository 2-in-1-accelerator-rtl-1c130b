// mac_array -- ROWS x COLS array of precision-scalable MAC units.
//
// Every unit runs the same schedule in lock step. Unit (r, c) takes the
// input lanes of row r and the weight lanes of column c, so a row shares
// its inputs across output channels and a column shares its weights across
// output pixels; each unit keeps one output in its accumulator
// (output-stationary). The paper leaves the array dataflow to its offline
// optimizer and gives no array size; this fixed mapping and the 8 x 8 size
// are this design's.
//
// Interface: start/ready, cfg, clear, a_rows, w_cols -> acc, done.
// Timing: that of mac_unit; all units are identical, so ready and done are
// taken from unit (0,0) and the others are checked against it.
module mac_array
  import accel_pkg::*;
#(
  parameter int unsigned ROWS  = 8,
  parameter int unsigned COLS  = 8,
  parameter int unsigned ACC_W = 48
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  logic                                      start,
  output logic                                      ready,
  input  mac_cfg_t                                  cfg,
  input  logic                                      clear,
  input  operand_t [ROWS-1:0][N_LANES-1:0]          a_rows,
  input  operand_t [COLS-1:0][N_LANES-1:0]          w_cols,
  output logic     [ROWS-1:0][COLS-1:0][ACC_W-1:0]  acc,
  output logic                                      done
);
  logic [ROWS-1:0][COLS-1:0] rdy, dn, bsy;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      mac_unit #(.ACC_W(ACC_W)) u_mac (
        .clk   (clk),
        .rst_n (rst_n),
        .start (start),
        .ready (rdy[r][c]),
        .cfg   (cfg),
        .clear (clear),
        .a_ops (a_rows[r]),
        .w_ops (w_cols[c]),
        .acc   (acc[r][c]),
        .done  (dn[r][c]),
        .busy  (bsy[r][c])
      );
    end
  end

  assign ready = rdy[0][0];
  assign done  = dn[0][0];

  // all units share one schedule
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (rdy == '0 || rdy == '1) && (dn == '0 || dn == '1));
endmodule
