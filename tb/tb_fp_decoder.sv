// tb_fp_decoder -- self-checking test of fp_decoder for bfloat16 and
// binary64: random words, plus zeros, subnormals, infinities and NaNs; each
// output field is compared with the field extracted by the testbench.
module tb_fp_decoder;
  logic [15:0] xb;  logic nb, zb, sb; logic [7:0]  eb; logic [7:0]  mb;
  logic [63:0] xd;  logic nd, zd, sd; logic [10:0] ed; logic [52:0] md;
  int checks = 0, failures = 0;

  fp_decoder #(.WE(8),  .WF(7))  u_bf (.x(xb), .is_nan(nb), .ftz(zb), .sign(sb), .scale(eb), .sig(mb));
  fp_decoder #(.WE(11), .WF(52)) u_d  (.x(xd), .is_nan(nd), .ftz(zd), .sign(sd), .scale(ed), .sig(md));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s xb=%h xd=%h", what, xb, xd); end
  endtask

  initial begin
    for (int t = 0; t < 2000; t++) begin
      xb = 16'($urandom);
      xd = {$urandom, $urandom};
      if (t == 0) begin xb = 16'h0000; xd = 64'h0; end
      if (t == 1) begin xb = 16'h0001; xd = 64'h000F_FFFF_FFFF_FFFF; end  // subnormal
      if (t == 2) begin xb = 16'h7F80; xd = 64'h7FF0_0000_0000_0000; end  // inf
      if (t == 3) begin xb = 16'hFFC1; xd = 64'hFFF8_0000_0000_0001; end  // nan
      if (t == 4) begin xb = 16'h3F80; xd = 64'h3FF0_0000_0000_0000; end  // 1.0
      #1;
      chk(nb == (xb[14:7] == 8'hFF), "bf nan");
      chk(zb == (xb[14:7] == 8'h00), "bf ftz");
      chk(sb == xb[15], "bf sign");
      chk(eb == xb[14:7], "bf scale");
      chk(mb == ((xb[14:7] == 0) ? 8'h00 : {1'b1, xb[6:0]}), "bf sig");
      chk(nd == (xd[62:52] == 11'h7FF), "d nan");
      chk(zd == (xd[62:52] == 11'h000), "d ftz");
      chk(sd == xd[63], "d sign");
      chk(ed == xd[62:52], "d scale");
      chk(md == ((xd[62:52] == 0) ? 53'd0 : {1'b1, xd[51:0]}), "d sig");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
