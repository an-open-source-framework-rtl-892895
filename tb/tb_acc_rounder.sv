// tb_acc_rounder -- self-checking test of acc_rounder.
//
// Three configurations: the default bfloat16 output of a 31-bit
// <5,5,-20> accumulator, binary32 output of a 64-bit <9,6,-48> accumulator,
// and binary64 output of the 91-bit <30,30,-30> accumulator. Random
// accumulator values of random magnitude, ties built on purpose, zero, the
// most negative value and NaN are compared with the reference rounding of
// fdp_ref_pkg; the result must appear one clock after the input.
module tb_acc_rounder;
  import fdp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          v, nan;
  logic [127:0]  acc;
  logic          ov1, ov2, ov3;
  logic [15:0]   w1;
  logic [31:0]   w2;
  logic [63:0]   w3;

  acc_rounder #(.W(31), .LSB(-20), .WEO(8),  .WFO(7))  u1 (.clk, .rst_n, .in_valid(v), .in_nan(nan), .in_acc(acc[30:0]), .out_valid(ov1), .out_word(w1));
  acc_rounder #(.W(64), .LSB(-48), .WEO(8),  .WFO(23)) u2 (.clk, .rst_n, .in_valid(v), .in_nan(nan), .in_acc(acc[63:0]), .out_valid(ov2), .out_word(w2));
  acc_rounder #(.W(91), .LSB(-30), .WEO(11), .WFO(52)) u3 (.clk, .rst_n, .in_valid(v), .in_nan(nan), .in_acc(acc[90:0]), .out_valid(ov3), .out_word(w3));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s acc=%h nan=%b", what, acc, nan); end
  endtask

  initial begin
    wide_t a1, a2, a3;
    v = 0; nan = 0; acc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      int nb;
      @(negedge clk);
      nb  = 1 + $urandom_range(90);
      acc = {$urandom, $urandom, $urandom, $urandom};
      acc = acc & ((128'd1 << nb) - 1);
      if ($urandom_range(1)) acc = -acc;
      nan = ($urandom_range(50) == 0);
      if (t == 0) acc = '0;
      if (t == 1) acc = 128'h4000_0000;                 // most negative of 31 bits
      if (t == 2) acc = 128'h0000_0180;                 // tie: 1.1000_0000 -> even
      if (t == 3) acc = 128'h0000_0280;                 // tie below odd: rounds up
      if (t == 4) acc = 128'h7FFF_FFFF;                 // rounding carry into exponent
      if (t < 5) nan = 0;
      v = 1;
      a1 = ref_wrap(wide_t'(acc), 31);
      a2 = ref_wrap(wide_t'(acc), 64);
      a3 = ref_wrap(wide_t'(acc), 91);
      @(posedge clk); #1;
      chk(ov1 && ov2 && ov3, "valid after one clock");
      chk(w1 == 16'(ref_round(a1, -20, 8, 7, nan)),  "bf16");
      chk(w2 == 32'(ref_round(a2, -48, 8, 23, nan)), "fp32");
      chk(w3 == ref_round(a3, -30, 11, 52, nan),     "fp64");
    end
    @(negedge clk); v = 0;
    @(posedge clk); #1;
    chk(!ov1, "valid drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
