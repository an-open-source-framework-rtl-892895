// systolic_array -- N_ROWS x M_COLS grid of fused-dot-product PEs.
//
// Output-stationary matrix multiplication: PE (i,j) accumulates
// C(i,j) = sum_k A(i,k) * B(k,j). Row i of A enters at the right edge
// (column M_COLS-1) and moves one PE to the left per clock; column j of B,
// with its valid and end-of-block (EOB) flags, enters at the top and moves
// one PE down per clock. Finished sums go down the columns through the PEs'
// drain chains and leave at the bottom, still in fixed point; the array
// never rounds.
//
// Input timing: for operand pair k, A(i,k) must be at the right edge at
// clock t0+k+i and B(k,j) at the top at clock t0+k+(M_COLS-1-j), so that
// both reach PE (i,j) together at t0+k+i+(M_COLS-1-j); skew_regs produce
// this stagger. Output timing: for a block whose EOB pair is k = K-1, the
// sum of row i is on the bottom outputs of column j during clock
// t0 + K-1 + (M_COLS-1-j) + 2*N_ROWS-1-i (the clock at which the EOB pair is
// at the PE inputs counts as t0+K-1+i+(M_COLS-1-j)); the rows of one column
// come out on consecutive clocks, last row first. Blocks must have
// K >= N_ROWS pairs.
//
// Follows the source: full systolic structure, data and control only to
// neighbours, top-to-bottom and right-to-left flow, rounding outside the
// array. Own choice: the drain chain through the PEs.
module systolic_array #(
  parameter int unsigned N_ROWS = 32,
  parameter int unsigned M_COLS = 31,
  parameter int unsigned WE     = 8,
  parameter int unsigned WF     = 7,
  parameter int          OVF    = 5,
  parameter int          MSB    = 5,
  parameter int          LSB    = -20,
  parameter int unsigned W      = OVF + MSB - LSB + 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // A operands at the right edge, one per row
  input  logic [N_ROWS-1:0]             a_nan_i,
  input  logic [N_ROWS-1:0]             a_sign_i,
  input  logic [N_ROWS-1:0][WE-1:0]     a_scale_i,
  input  logic [N_ROWS-1:0][WF:0]       a_sig_i,
  // B operands and control at the top edge, one per column
  input  logic [M_COLS-1:0]             b_valid_i,
  input  logic [M_COLS-1:0]             b_eob_i,
  input  logic [M_COLS-1:0]             b_nan_i,
  input  logic [M_COLS-1:0]             b_sign_i,
  input  logic [M_COLS-1:0][WE-1:0]     b_scale_i,
  input  logic [M_COLS-1:0][WF:0]       b_sig_i,
  // finished sums at the bottom edge, one per column
  output logic [M_COLS-1:0]             c_valid_o,
  output logic [M_COLS-1:0]             c_nan_o,
  output logic [M_COLS-1:0][W-1:0]      c_acc_o
);
  // horizontal links: index j is the input of column j, j = M_COLS the edge
  logic [N_ROWS-1:0][M_COLS:0]          ah_nan, ah_sign;
  logic [N_ROWS-1:0][M_COLS:0][WE-1:0]  ah_scale;
  logic [N_ROWS-1:0][M_COLS:0][WF:0]    ah_sig;
  // vertical links: index i is the input of row i, i = N_ROWS the bottom
  logic [N_ROWS:0][M_COLS-1:0]          bv_valid, bv_eob, bv_nan, bv_sign;
  logic [N_ROWS:0][M_COLS-1:0][WE-1:0]  bv_scale;
  logic [N_ROWS:0][M_COLS-1:0][WF:0]    bv_sig;
  logic [N_ROWS:0][M_COLS-1:0]          cv_valid, cv_nan;
  logic [N_ROWS:0][M_COLS-1:0][W-1:0]   cv_acc;

  for (genvar i = 0; i < N_ROWS; i++) begin : g_edge_a
    assign ah_nan[i][M_COLS]   = a_nan_i[i];
    assign ah_sign[i][M_COLS]  = a_sign_i[i];
    assign ah_scale[i][M_COLS] = a_scale_i[i];
    assign ah_sig[i][M_COLS]   = a_sig_i[i];
  end

  assign bv_valid[0] = b_valid_i;
  assign bv_eob[0]   = b_eob_i;
  assign bv_nan[0]   = b_nan_i;
  assign bv_sign[0]  = b_sign_i;
  assign bv_scale[0] = b_scale_i;
  assign bv_sig[0]   = b_sig_i;
  assign cv_valid[0] = '0;
  assign cv_nan[0]   = '0;
  assign cv_acc[0]   = '0;

  for (genvar i = 0; i < N_ROWS; i++) begin : g_row
    for (genvar j = 0; j < M_COLS; j++) begin : g_col
      fdp_pe #(.WE(WE), .WF(WF), .OVF(OVF), .MSB(MSB), .LSB(LSB), .W(W)) u_pe (
        .clk, .rst_n,
        .a_nan_i   (ah_nan[i][j+1]),   .a_sign_i  (ah_sign[i][j+1]),
        .a_scale_i (ah_scale[i][j+1]), .a_sig_i   (ah_sig[i][j+1]),
        .a_nan_o   (ah_nan[i][j]),     .a_sign_o  (ah_sign[i][j]),
        .a_scale_o (ah_scale[i][j]),   .a_sig_o   (ah_sig[i][j]),
        .b_valid_i (bv_valid[i][j]),   .b_eob_i   (bv_eob[i][j]),
        .b_nan_i   (bv_nan[i][j]),     .b_sign_i  (bv_sign[i][j]),
        .b_scale_i (bv_scale[i][j]),   .b_sig_i   (bv_sig[i][j]),
        .b_valid_o (bv_valid[i+1][j]), .b_eob_o   (bv_eob[i+1][j]),
        .b_nan_o   (bv_nan[i+1][j]),   .b_sign_o  (bv_sign[i+1][j]),
        .b_scale_o (bv_scale[i+1][j]), .b_sig_o   (bv_sig[i+1][j]),
        .c_valid_i (cv_valid[i][j]),   .c_nan_i   (cv_nan[i][j]),
        .c_acc_i   (cv_acc[i][j]),
        .c_valid_o (cv_valid[i+1][j]), .c_nan_o   (cv_nan[i+1][j]),
        .c_acc_o   (cv_acc[i+1][j])
      );
    end
  end

  assign c_valid_o = cv_valid[N_ROWS];
  assign c_nan_o   = cv_nan[N_ROWS];
  assign c_acc_o   = cv_acc[N_ROWS];
endmodule
