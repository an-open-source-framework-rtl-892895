// tb_skew_regs -- self-checking test of skew_regs in both orientations:
// random words enter every clock, and each lane's output is compared with
// the input of l (or LANES-1-l) clocks earlier, kept in a history buffer.
module tb_skew_regs;
  localparam int L = 5, WD = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [L-1:0][WD-1:0] din, dfw, drv;
  logic [L-1:0][WD-1:0] hist [$];
  int checks = 0, failures = 0;

  skew_regs #(.LANES(L), .WIDTH(WD), .REVERSE(1'b0)) u_fw (.clk, .rst_n, .din, .dout(dfw));
  skew_regs #(.LANES(L), .WIDTH(WD), .REVERSE(1'b1)) u_rv (.clk, .rst_n, .din, .dout(drv));

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) din[l] = WD'($urandom);
      hist.push_front(din);
      #1;
      for (int l = 0; l < L; l++) begin
        automatic int df = l, dr = L - 1 - l;
        if (t >= L) begin
          checks += 2;
          if (dfw[l] != hist[df][l]) begin failures++; if (failures < 4) $display("FAIL fw lane %0d t %0d got %h exp %h h1 %h", l, t, dfw[l], hist[df][l], hist[1][l]); end
          if (drv[l] != hist[dr][l]) begin failures++; if (failures < 6) $display("FAIL rv lane %0d t %0d got %h exp %h h0 %h h1 %h", l, t, drv[l], hist[dr][l], hist[0][l], hist[1][l]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
