// fdp_pkg -- constants and helpers shared by the fused-dot-product (FDP)
// systolic array.
//
// The array multiplies two matrices of floating-point words and adds every
// product of one dot product exactly into a wide two's-complement fixed-point
// accumulator. The accumulator window is given by three integers:
//   MSB  weight exponent of the top magnitude bit a single product is meant
//        to fill,
//   LSB  weight exponent of the lowest bit kept (bits below are truncated),
//   OVF  extra bits above MSB that absorb the growth of long sums (one more
//        bit doubles the number of products that can be added safely).
// The accumulator is OVF + MSB - LSB + 1 bits wide, bit 0 weighing 2^LSB and
// the top (sign) bit weighing 2^(MSB+OVF). With <ovf:30,msb:30,lsb:-30> this
// gives 91 bits, the SSH configuration.
//
// Defaults are the array shown as the main build: 32 x 31 PEs, bfloat16 in
// and out, accumulator <ovf:5,msb:5,lsb:-20> (31 bits). The array size and
// format are printed on the board floorplan; the accumulator triple is the
// bfloat16 FDP of the ResNet50 experiment, since the floorplan's own label
// "<5,-30,2>" does not say which number is which.
package fdp_pkg;

  // Array geometry: N_ROWS rows of A / rows of C, M_COLS columns of B / C.
  localparam int unsigned N_ROWS = 32;
  localparam int unsigned M_COLS = 31;

  // Input and output format: IEEE754-style, WE exponent bits, WF fraction
  // bits (bfloat16: 8 / 7).
  localparam int unsigned WE = 8;
  localparam int unsigned WF = 7;

  // Accumulator window.
  localparam int OVF = 5;
  localparam int MSB = 5;
  localparam int LSB = -20;

  // Width of an IEEE754-style word.
  function automatic int unsigned fmt_width(int unsigned we, int unsigned wf);
    return 1 + we + wf;
  endfunction

  // Width of the fixed-point accumulator.
  function automatic int unsigned acc_width(int ovf, int msb, int lsb);
    return ovf + msb - lsb + 1;
  endfunction

  // Exponent bias of an IEEE754-style format.
  function automatic int fmt_bias(int unsigned we);
    return (1 << (we - 1)) - 1;
  endfunction

  // Read-only format word reported to software (configuration register).
  //   [7:0]  WE      [15:8]  WF
  //   [23:16] OVF    [31:24] MSB (signed)   -- second word: LSB, N, M
  typedef struct packed {
    logic [7:0] m_cols;
    logic [7:0] n_rows;
    logic [7:0] lsb;     // two's complement
    logic [7:0] msb;     // two's complement
    logic [7:0] ovf;
    logic [7:0] wf;
    logic [7:0] we;
    logic [7:0] fmt_id;  // 0: IEEE754-style binary format
  } fmt_info_t;

endpackage
