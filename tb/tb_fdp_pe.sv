// tb_fdp_pe -- self-checking test of one FDP processing element.
//
// Drives blocks of random bfloat16 operand pairs (with idle clocks mixed
// in) and checks: the finished sum against the reference fixed-point
// dot product, that it appears in c_out exactly one clock after the EOB pair,
// that A and B are forwarded with one clock of delay, that the drain
// chain passes a sum from above in two clocks, and that a NaN operand marks
// the sum. A second PE instance uses a narrow accumulator <ovf:1,msb:2,
// lsb:-4> so that truncation below LSB and wrap-around above the window are
// exercised.
module tb_fdp_pe;
  import fdp_ref_pkg::*;
  localparam int WE = 8, WF = 7;
  localparam int OVF = 5, MSB = 5, LSB = -20, W = OVF + MSB - LSB + 1;
  localparam int OVF2 = 1, MSB2 = 2, LSB2 = -4, W2 = OVF2 + MSB2 - LSB2 + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic a_nan, a_sign, b_valid, b_eob, b_nan, b_sign;
  logic [WE-1:0] a_scale, b_scale;
  logic [WF:0]   a_sig, b_sig;
  logic c_valid_i, c_nan_i;
  logic [W-1:0]  c_acc_i;
  logic a_nan_o, a_sign_o, b_valid_o, b_eob_o, b_nan_o, b_sign_o;
  logic [WE-1:0] a_scale_o, b_scale_o;
  logic [WF:0]   a_sig_o, b_sig_o;
  logic c_valid_o, c_nan_o;
  logic [W-1:0]  c_acc_o;
  logic c2_valid, c2_nan;
  logic [W2-1:0] c2_acc;

  fdp_pe #(.WE(WE), .WF(WF), .OVF(OVF), .MSB(MSB), .LSB(LSB)) dut (
    .clk, .rst_n,
    .a_nan_i(a_nan), .a_sign_i(a_sign), .a_scale_i(a_scale), .a_sig_i(a_sig),
    .a_nan_o, .a_sign_o, .a_scale_o, .a_sig_o,
    .b_valid_i(b_valid), .b_eob_i(b_eob), .b_nan_i(b_nan), .b_sign_i(b_sign),
    .b_scale_i(b_scale), .b_sig_i(b_sig),
    .b_valid_o, .b_eob_o, .b_nan_o, .b_sign_o, .b_scale_o, .b_sig_o,
    .c_valid_i, .c_nan_i, .c_acc_i, .c_valid_o, .c_nan_o, .c_acc_o);

  fdp_pe #(.WE(WE), .WF(WF), .OVF(OVF2), .MSB(MSB2), .LSB(LSB2)) dut2 (
    .clk, .rst_n,
    .a_nan_i(a_nan), .a_sign_i(a_sign), .a_scale_i(a_scale), .a_sig_i(a_sig),
    .a_nan_o(), .a_sign_o(), .a_scale_o(), .a_sig_o(),
    .b_valid_i(b_valid), .b_eob_i(b_eob), .b_nan_i(b_nan), .b_sign_i(b_sign),
    .b_scale_i(b_scale), .b_sig_i(b_sig),
    .b_valid_o(), .b_eob_o(), .b_nan_o(), .b_sign_o(), .b_scale_o(), .b_sig_o(),
    .c_valid_i(1'b0), .c_nan_i(1'b0), .c_acc_i('0),
    .c_valid_o(c2_valid), .c_nan_o(c2_nan), .c_acc_o(c2_acc));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic drive(logic [15:0] a, logic [15:0] b, bit v, bit eob);
    a_nan = ref_is_nan(64'(a), WE, WF); a_sign = a[15]; a_scale = a[14:7];
    a_sig = (a[14:7] == 0) ? '0 : {1'b1, a[6:0]};
    b_nan = ref_is_nan(64'(b), WE, WF); b_sign = b[15]; b_scale = b[14:7];
    b_sig = (b[14:7] == 0) ? '0 : {1'b1, b[6:0]};
    b_valid = v; b_eob = eob;
  endtask

  initial begin
    wide_t ref1, ref2;
    bit    refnan;
    logic [15:0] a, b;
    drive(16'h0, 16'h0, 0, 0);
    c_valid_i = 0; c_nan_i = 0; c_acc_i = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 60; blk++) begin
      automatic int k = 1 + $urandom_range(40);
      ref1 = 0; ref2 = 0; refnan = 0;
      for (int n = 0; n < k; n++) begin
        // idle clocks between pairs must not change the sum
        while ($urandom_range(3) == 0) begin
          @(negedge clk);
          drive(16'($urandom), 16'($urandom), 0, 0);
        end
        @(negedge clk);
        a = rand_fp(WE, WF, -2, 6)[15:0];
        b = rand_fp(WE, WF, -2, 6)[15:0];
        if (blk == 7 && n == 0) a = 16'h7FC0;              // NaN operand
        if (blk == 9 && n == 1) b = 16'h0000;              // zero
        if (blk == 11) begin a = 16'h4100; b = 16'h4100; end // 8*8 repeated: wraps dut2
        if (blk == 13) begin a = 16'h3C80; b = 16'h3A00; end // 2^-6*2^-11: below LSB2
        drive(a, b, 1, n == k - 1);
        refnan |= ref_is_nan(64'(a), WE, WF) | ref_is_nan(64'(b), WE, WF);
        ref1 += ref_prod_fix(64'(a), 64'(b), WE, WF, LSB);
        ref2 += ref_prod_fix(64'(a), 64'(b), WE, WF, LSB2);
        @(posedge clk); #1;
        // forwarding
        chk(a_sign_o == a[15] && a_scale_o == a[14:7] && b_sign_o == b[15] &&
            b_scale_o == b[14:7] && b_valid_o && (b_eob_o == (n == k - 1)), "forward");
        if (n == k - 1) begin
          chk(c_valid_o, "c_valid one clock after EOB");
          chk(c_acc_o == W'(ref_wrap(ref1, W)), $sformatf("sum blk %0d", blk));
          chk(c_nan_o == refnan, "nan flag");
          chk(c2_valid && c2_acc == W2'(ref_wrap(ref2, W2)), "narrow window sum");
        end else begin
          chk(!c_valid_o, "no early c_valid");
        end
      end
      @(negedge clk); drive(16'h0, 16'h0, 0, 0);
      // pass a sum down the drain chain
      c_valid_i = 1; c_nan_i = 1'($urandom); c_acc_i = W'({$urandom, $urandom});
      @(negedge clk); c_valid_i = 0;
      @(posedge clk); #1;
      chk(c_valid_o && c_acc_o == c_acc_i && c_nan_o == c_nan_i, "drain pass");
      @(posedge clk); #1;
      chk(!c_valid_o, "drain single");
    end
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
