// acc_rounder -- converts a finished fixed-point dot product into a
// floating-point word as it leaves the bottom of the array.
//
// The array keeps every sum exact in a W-bit two's-complement accumulator
// whose bit 0 weighs 2^LSB; rounding happens only here, once per result.
// The converter takes the magnitude, finds its leading one, normalises it,
// and rounds the fraction to WFO bits, round-to-nearest, ties-to-even,
// using a guard bit and a sticky bit. The exponent is rebiased for the
// output format (WEO exponent bits). A rounding carry out of the fraction
// bumps the exponent, as the {exponent,fraction} pair is incremented as one
// number.
//
// Special cases (choices of this design): a sum whose NaN flag is set gives
// the quiet NaN with only the top fraction bit set; a zero sum gives +0;
// results too large for the format give infinity of the right sign; results
// below the smallest normal number are flushed to a signed zero, matching
// the flush-to-zero inputs.
//
// Interface: in_valid/in_nan/in_acc in, out_valid/out_word one clock later
// (one register stage).
module acc_rounder #(
  parameter int          W     = 31,   // accumulator width
  parameter int          LSB   = -20,  // weight exponent of accumulator bit 0
  parameter int unsigned WEO   = 8,    // output exponent bits
  parameter int unsigned WFO   = 7     // output fraction bits
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               in_nan,
  input  logic [W-1:0]       in_acc,
  output logic               out_valid,
  output logic [WEO+WFO:0]   out_word
);
  localparam int NW    = (W > int'(WFO) + 3) ? W : int'(WFO) + 3;  // normaliser width
  localparam int BIASO = (1 << (WEO - 1)) - 1;
  localparam int EMAX  = (1 << WEO) - 1;

  logic               sgn;
  logic [W-1:0]       mag;
  int                 lead;
  logic [NW-1:0]      norm;
  logic [WFO-1:0]     frac;
  logic               guard, sticky, rnd;
  int                 ebiased;
  logic [WEO+WFO:0]   word;
  logic [WEO+WFO-1:0] ef;   // {exponent, fraction}; a carry reaches at most all-ones

  always_comb begin
    sgn  = in_acc[W-1];
    mag  = sgn ? W'(-in_acc) : in_acc;
    lead = 0;
    for (int b = 0; b < W; b++) if (mag[b]) lead = b;
    norm    = NW'({mag, {(NW - W){1'b0}}} << (W - 1 - lead));
    frac    = norm[NW-2 -: WFO];
    guard   = norm[NW-2-int'(WFO)];
    sticky  = |(norm & ((NW'(1) << (NW - 2 - int'(WFO))) - NW'(1)));
    rnd     = guard & (sticky | frac[0]);
    ebiased = lead + LSB + BIASO;
    ef      = '0;
    word    = '0;
    if (in_nan) begin
      word = {1'b0, {WEO{1'b1}}, 1'b1, {(WFO - 1){1'b0}}};
    end else if (mag == '0) begin
      word = '0;
    end else if (ebiased <= 0) begin
      word = {sgn, {(WEO + WFO){1'b0}}};
    end else if (ebiased >= EMAX) begin
      word = {sgn, {WEO{1'b1}}, {WFO{1'b0}}};
    end else begin
      ef = {WEO'(ebiased), frac} + (WEO + WFO)'(rnd);
      if (ef[WEO+WFO-1 -: WEO] == {WEO{1'b1}}) word = {sgn, {WEO{1'b1}}, {WFO{1'b0}}};
      else                                   word = {sgn, ef};
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_word  <= '0;
    end else begin
      out_valid <= in_valid;
      out_word  <= word;
    end
  end
endmodule
