// fdp_array_axis -- the FDP systolic array wrapped with AXI-stream buses.
//
// Input stream: each beat carries one step k of the product C = A * B: the
// N_ROWS words of column k of A in the low lanes (word i at bits
// [i*FW +: FW]) followed by the M_COLS words of row k of B (word j at
// [(N_ROWS+j)*FW +: FW]), FW = 1 + WE + WF. tlast marks the last step of a
// block: it is the end-of-block (EOB) flag that makes every PE hand out its
// dot product and start a new one.
//
// Datapath: one input register, a decoder per word, skew registers (A lane
// i delayed i clocks, B lane j delayed M_COLS-1-j), the array, de-skew
// registers (column j delayed j clocks) so that a whole row of C leaves at
// once, a rounder per column, and the backpressure FIFO.
//
// Output stream: one beat per row of C, word j at [j*FWO +: FWO]. The rows
// of a block come out last row first (row N_ROWS-1 ... row 0), because the
// lowest PE of a column finishes and drains first; tlast marks row 0, the
// last row of the block.
//
// Flow control: s_axis_tready is low while the FIFO is full (its full flag
// already counts the rows of blocks inside the array), and also holds back
// a tlast beat until at least N_ROWS clocks have passed since the previous
// one, so that the array's drain chains never collide; blocks shorter than
// N_ROWS steps are thereby padded with idle clocks. m_axis_tvalid is the
// FIFO's non-empty flag.
//
// Follows the source: AXI-stream wrapping, FIFO at the bottom whose
// full/empty flags make ready/valid, rounding on exit. Own choices: beat
// layout, tlast as EOB, reservation in the FIFO, the EOB spacing rule, the
// row order of the output, the widths DW_IN/DW_OUT (1024/512 bits).
module fdp_array_axis #(
  parameter int unsigned N_ROWS     = fdp_pkg::N_ROWS,
  parameter int unsigned M_COLS     = fdp_pkg::M_COLS,
  parameter int unsigned WE         = fdp_pkg::WE,
  parameter int unsigned WF         = fdp_pkg::WF,
  parameter int          OVF        = fdp_pkg::OVF,
  parameter int          MSB        = fdp_pkg::MSB,
  parameter int          LSB        = fdp_pkg::LSB,
  parameter int unsigned WEO        = WE,
  parameter int unsigned WFO        = WF,
  parameter int unsigned DW_IN      = 1024,
  parameter int unsigned DW_OUT     = 512,
  parameter int unsigned FIFO_DEPTH = 4 * N_ROWS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DW_IN-1:0]  s_axis_tdata,
  input  logic              s_axis_tvalid,
  input  logic              s_axis_tlast,
  output logic              s_axis_tready,
  output logic [DW_OUT-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  output logic              m_axis_tlast,
  input  logic              m_axis_tready
);
  localparam int unsigned FW  = 1 + WE + WF;
  localparam int unsigned FWO = 1 + WEO + WFO;
  localparam int unsigned W   = OVF + MSB - LSB + 1;
  localparam int unsigned AL  = 3 + WE + WF;       // A lane: nan, sign, scale, sig
  localparam int unsigned BL  = 5 + WE + WF;       // B lane: + valid, eob
  localparam int unsigned CL  = 2 + W;             // C lane: valid, nan, acc

  if ((N_ROWS + M_COLS) * FW > DW_IN) begin : g_chk_in
    $error("fdp_array_axis: input beat too narrow");
  end
  if (M_COLS * FWO > DW_OUT) begin : g_chk_out
    $error("fdp_array_axis: output beat too narrow");
  end

  // ---- flow control ----
  logic                        fifo_full, fifo_empty, in_fire, eob_fire, eob_hold;
  logic [$clog2(N_ROWS+1)-1:0] gap;

  assign eob_hold      = s_axis_tlast && (32'(gap) < N_ROWS - 1);
  assign s_axis_tready = ~fifo_full & ~eob_hold;
  assign in_fire       = s_axis_tvalid & s_axis_tready;
  assign eob_fire      = in_fire & s_axis_tlast;

  always_ff @(posedge clk) begin
    if (!rst_n)                       gap <= $bits(gap)'(N_ROWS - 1);
    else if (eob_fire)                gap <= '0;
    else if (32'(gap) < N_ROWS - 1)   gap <= gap + 1'b1;
  end

  // ---- input register ----
  logic                 in_valid_q, in_eob_q;
  logic [DW_IN-1:0]     in_data_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_valid_q <= 1'b0;
      in_eob_q   <= 1'b0;
      in_data_q  <= '0;
    end else begin
      in_valid_q <= in_fire;
      in_eob_q   <= eob_fire;
      if (in_fire) in_data_q <= s_axis_tdata;
    end
  end

  // ---- decode and skew ----
  logic [N_ROWS-1:0][AL-1:0] a_lane, a_skew;
  logic [M_COLS-1:0][BL-1:0] b_lane, b_skew;

  for (genvar i = 0; i < N_ROWS; i++) begin : g_dec_a
    logic nan, ftz, sgn; logic [WE-1:0] sc; logic [WF:0] sg;
    fp_decoder #(.WE(WE), .WF(WF)) u_dec (
      .x(in_data_q[i*FW +: FW]), .is_nan(nan), .ftz(ftz), .sign(sgn),
      .scale(sc), .sig(sg));
    assign a_lane[i] = {nan, sgn, sc, sg};
  end
  for (genvar j = 0; j < M_COLS; j++) begin : g_dec_b
    logic nan, ftz, sgn; logic [WE-1:0] sc; logic [WF:0] sg;
    fp_decoder #(.WE(WE), .WF(WF)) u_dec (
      .x(in_data_q[(N_ROWS+j)*FW +: FW]), .is_nan(nan), .ftz(ftz), .sign(sgn),
      .scale(sc), .sig(sg));
    assign b_lane[j] = {in_valid_q, in_eob_q, nan, sgn, sc, sg};
  end

  skew_regs #(.LANES(N_ROWS), .WIDTH(AL), .REVERSE(1'b0)) u_skew_a (
    .clk, .rst_n, .din(a_lane), .dout(a_skew));
  skew_regs #(.LANES(M_COLS), .WIDTH(BL), .REVERSE(1'b1)) u_skew_b (
    .clk, .rst_n, .din(b_lane), .dout(b_skew));

  // ---- array ----
  logic [N_ROWS-1:0]          a_nan, a_sign;
  logic [N_ROWS-1:0][WE-1:0]  a_scale;
  logic [N_ROWS-1:0][WF:0]    a_sig;
  logic [M_COLS-1:0]          b_valid, b_eob, b_nan, b_sign;
  logic [M_COLS-1:0][WE-1:0]  b_scale;
  logic [M_COLS-1:0][WF:0]    b_sig;
  logic [M_COLS-1:0]          c_valid, c_nan;
  logic [M_COLS-1:0][W-1:0]   c_acc;

  for (genvar i = 0; i < N_ROWS; i++) begin : g_unpack_a
    assign {a_nan[i], a_sign[i], a_scale[i], a_sig[i]} = a_skew[i];
  end
  for (genvar j = 0; j < M_COLS; j++) begin : g_unpack_b
    assign {b_valid[j], b_eob[j], b_nan[j], b_sign[j], b_scale[j], b_sig[j]} = b_skew[j];
  end

  systolic_array #(.N_ROWS(N_ROWS), .M_COLS(M_COLS), .WE(WE), .WF(WF),
                   .OVF(OVF), .MSB(MSB), .LSB(LSB), .W(W)) u_array (
    .clk, .rst_n,
    .a_nan_i(a_nan), .a_sign_i(a_sign), .a_scale_i(a_scale), .a_sig_i(a_sig),
    .b_valid_i(b_valid), .b_eob_i(b_eob), .b_nan_i(b_nan), .b_sign_i(b_sign),
    .b_scale_i(b_scale), .b_sig_i(b_sig),
    .c_valid_o(c_valid), .c_nan_o(c_nan), .c_acc_o(c_acc));

  // ---- de-skew, round ----
  logic [M_COLS-1:0][CL-1:0]  c_lane, c_deskew;
  logic [M_COLS-1:0]          r_valid;
  logic [M_COLS-1:0][FWO-1:0] r_word;

  for (genvar j = 0; j < M_COLS; j++) begin : g_round
    assign c_lane[j] = {c_valid[j], c_nan[j], c_acc[j]};
    acc_rounder #(.W(W), .LSB(LSB), .WEO(WEO), .WFO(WFO)) u_rnd (
      .clk, .rst_n,
      .in_valid(c_deskew[j][CL-1]), .in_nan(c_deskew[j][CL-2]),
      .in_acc(c_deskew[j][W-1:0]),
      .out_valid(r_valid[j]), .out_word(r_word[j]));
  end

  skew_regs #(.LANES(M_COLS), .WIDTH(CL), .REVERSE(1'b0)) u_deskew_c (
    .clk, .rst_n, .din(c_lane), .dout(c_deskew));

  // ---- backpressure FIFO ----
  logic [M_COLS*FWO-1:0]       fifo_rdata;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;  // occupancy, for observation
  logic                        pop;
  logic [$clog2(N_ROWS+1)-1:0] row_cnt;

  bp_fifo #(.WIDTH(M_COLS * FWO), .DEPTH(FIFO_DEPTH), .RESERVE(N_ROWS)) u_fifo (
    .clk, .rst_n,
    .rsv_i(eob_fire), .wr_i(r_valid[0]), .wdata_i(r_word),
    .rd_i(pop), .rdata_o(fifo_rdata), .empty_o(fifo_empty), .full_o(fifo_full),
    .count_o(fifo_count));

  assign m_axis_tvalid = ~fifo_empty;
  assign m_axis_tdata  = DW_OUT'(fifo_rdata);
  assign m_axis_tlast  = (32'(row_cnt) == N_ROWS - 1);
  assign pop           = m_axis_tvalid & m_axis_tready;

  always_ff @(posedge clk) begin
    if (!rst_n)   row_cnt <= '0;
    else if (pop) row_cnt <= (32'(row_cnt) == N_ROWS - 1) ? '0 : row_cnt + 1'b1;
  end

  // all columns of a row leave the de-skew registers together
  a_row_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (r_valid == '0) || (r_valid == '1));
  // AXI-stream: data held stable while valid is not accepted
  a_m_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata));
endmodule
