// fdp_pe -- one processing element of the fused-dot-product systolic array.
//
// Each PE owns one element C(i,j) of the result and computes the dot product
// of row i of A with column j of B, one pair of operands per clock. The
// operands arrive already decoded (NaN flag, sign, biased exponent "Scale",
// significand "1.F"):
//   * the two biased exponents go through an unsigned adder and the two
//     significands through an unsigned multiplier, giving an exact product;
//   * a shift-value generator turns the exponent sum into the position of the
//     product inside the accumulator window, and the product is shifted
//     there; bits below LSB are truncated, bits beyond the top of the window
//     wrap (modular arithmetic, as in any fixed-size accumulator);
//   * the shifted magnitude is negated when the signs differ and added to the
//     two's-complement accumulator of OVF + MSB - LSB + 1 bits;
//   * NaN flags are combined into a sticky flag that travels with the sum;
//   * when the end-of-block flag (EOB) comes with an operand pair, the final
//     sum (including that pair) leaves the PE and the accumulator restarts
//     from zero with the next pair: no rounding happens inside the array.
//
// Systolic links. A operands enter from the right neighbour and are passed,
// registered, to the left; B operands, their valid bit and EOB enter from
// the neighbour above and are passed, registered, downward. There is no
// global bus: every output is a flip-flop. Finished sums go down the column
// through a drain chain of two registers per PE (c_pass, then c_out); a PE
// writes its sum into c_out, so neighbouring PEs, which finish one clock
// apart, never collide. The chain needs blocks of at least N_ROWS operand
// pairs so that two blocks' drains do not overlap; an assertion checks it.
//
// Timing: A and B outputs one clock after the inputs; a sum is in c_out one
// clock after the EOB pair is at the inputs.
//
// Follows the source: the unsigned exponent adder and significand
// multiplier, the shift value generation, the sticky NaN and the EOB
// flag, registered right-to-left / top-to-bottom links. Own choices: a
// single-cycle accumulate (the source's accumulator is segmented and
// pipelined), truncation of each product toward zero below LSB, wrap-around
// above the window, the two-register drain chain, synchronous active-low
// reset.
module fdp_pe #(
  parameter int unsigned WE  = 8,
  parameter int unsigned WF  = 7,
  parameter int          OVF = 5,
  parameter int          MSB = 5,
  parameter int          LSB = -20,
  parameter int unsigned W   = OVF + MSB - LSB + 1  // accumulator width
) (
  input  logic          clk,
  input  logic          rst_n,
  // A operand, from the right neighbour / to the left neighbour
  input  logic          a_nan_i,
  input  logic          a_sign_i,
  input  logic [WE-1:0] a_scale_i,
  input  logic [WF:0]   a_sig_i,
  output logic          a_nan_o,
  output logic          a_sign_o,
  output logic [WE-1:0] a_scale_o,
  output logic [WF:0]   a_sig_o,
  // B operand and control, from the neighbour above / to the one below
  input  logic          b_valid_i,
  input  logic          b_eob_i,
  input  logic          b_nan_i,
  input  logic          b_sign_i,
  input  logic [WE-1:0] b_scale_i,
  input  logic [WF:0]   b_sig_i,
  output logic          b_valid_o,
  output logic          b_eob_o,
  output logic          b_nan_o,
  output logic          b_sign_o,
  output logic [WE-1:0] b_scale_o,
  output logic [WF:0]   b_sig_o,
  // drain chain of finished sums
  input  logic          c_valid_i,
  input  logic          c_nan_i,
  input  logic [W-1:0]  c_acc_i,
  output logic          c_valid_o,
  output logic          c_nan_o,
  output logic [W-1:0]  c_acc_o
);
  localparam int unsigned PW   = 2 * (WF + 1);         // product width
  localparam int unsigned SW   = W + PW;               // shifter width
  localparam int          BIAS = (1 << (WE - 1)) - 1;
  // product value = P * 2^(ea + eb - 2*BIAS - 2*WF); its bit 0 lands at
  // accumulator bit (ea + eb - 2*BIAS - 2*WF - LSB); shift by that + PW in a
  // field whose low PW bits are dropped afterwards.
  localparam int          K0   = 2 * BIAS + 2 * int'(WF) + LSB - int'(PW);

  // ---- unsigned exponent adder and significand multiplier ----
  logic [WE:0]    esum;
  logic [PW-1:0]  prod;
  logic           psign;
  // ---- shift value generation ----
  int             sh;
  logic [SW-1:0]  shifted;
  logic [W-1:0]   mag, addend, sum;

  always_comb begin
    esum  = {1'b0, a_scale_i} + {1'b0, b_scale_i};
    prod  = PW'(a_sig_i) * PW'(b_sig_i);
    psign = a_sign_i ^ b_sign_i;
    sh    = int'(esum) - K0;
    if (sh >= 0 && sh < int'(SW)) shifted = SW'(prod) << sh;
    else                          shifted = '0;
    mag    = shifted[SW-1:PW];
    addend = psign ? W'(-mag) : mag;
  end

  // ---- accumulator ----
  logic         acc_nan;
  logic [W-1:0] acc;
  logic         c_pass_valid, c_pass_nan;
  logic [W-1:0] c_pass_acc;
  logic         fire, fire_nan;

  always_comb begin
    fire     = b_valid_i & b_eob_i;
    sum      = acc + addend;
    fire_nan = acc_nan | a_nan_i | b_nan_i;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc     <= '0;
      acc_nan <= 1'b0;
    end else if (b_valid_i) begin
      if (b_eob_i) begin
        acc     <= '0;
        acc_nan <= 1'b0;
      end else begin
        acc     <= sum;
        acc_nan <= fire_nan;
      end
    end
  end

  // ---- registered systolic links ----
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_nan_o   <= 1'b0;  a_sign_o  <= 1'b0;  a_scale_o <= '0;  a_sig_o <= '0;
      b_valid_o <= 1'b0;  b_eob_o   <= 1'b0;  b_nan_o   <= 1'b0;
      b_sign_o  <= 1'b0;  b_scale_o <= '0;    b_sig_o   <= '0;
    end else begin
      a_nan_o   <= a_nan_i;   a_sign_o  <= a_sign_i;
      a_scale_o <= a_scale_i; a_sig_o   <= a_sig_i;
      b_valid_o <= b_valid_i; b_eob_o   <= b_eob_i;   b_nan_o <= b_nan_i;
      b_sign_o  <= b_sign_i;  b_scale_o <= b_scale_i; b_sig_o <= b_sig_i;
    end
  end

  // ---- drain chain ----
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      c_pass_valid <= 1'b0; c_pass_nan <= 1'b0; c_pass_acc <= '0;
      c_valid_o    <= 1'b0; c_nan_o    <= 1'b0; c_acc_o    <= '0;
    end else begin
      c_pass_valid <= c_valid_i;
      c_pass_nan   <= c_nan_i;
      c_pass_acc   <= c_acc_i;
      if (fire) begin
        c_valid_o <= 1'b1;
        c_nan_o   <= fire_nan;
        c_acc_o   <= sum;
      end else begin
        c_valid_o <= c_pass_valid;
        c_nan_o   <= c_pass_nan;
        c_acc_o   <= c_pass_acc;
      end
    end
  end

  // A finished sum must never overwrite one passing through.
  a_no_drain_collision: assert property (@(posedge clk) disable iff (!rst_n)
    !(fire && c_pass_valid));

endmodule
