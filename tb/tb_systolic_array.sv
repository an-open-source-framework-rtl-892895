// tb_systolic_array -- self-checking test of a 4 x 3 FDP systolic array.
//
// The testbench skews the operand stream itself (A(i,k) at the right edge
// i clocks late, B(k,j) at the top M-1-j clocks late), with idle steps and
// blocks of random length K >= N_ROWS. Every result leaving the bottom is
// compared with the reference dot product, and its exit clock with
// eob_clock + (M-1-j) + 2*N-1-i, the timing stated by the array.
module tb_systolic_array;
  import fdp_ref_pkg::*;
  localparam int N = 4, M = 3, WE = 8, WF = 7, OVF = 5, MSB = 5, LSB = -20;
  localparam int W = OVF + MSB - LSB + 1;
  localparam int T = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] a_nan, a_sign;  logic [N-1:0][WE-1:0] a_scale; logic [N-1:0][WF:0] a_sig;
  logic [M-1:0] b_valid, b_eob, b_nan, b_sign;
  logic [M-1:0][WE-1:0] b_scale; logic [M-1:0][WF:0] b_sig;
  logic [M-1:0] c_valid, c_nan;  logic [M-1:0][W-1:0] c_acc;

  systolic_array #(.N_ROWS(N), .M_COLS(M), .WE(WE), .WF(WF), .OVF(OVF), .MSB(MSB), .LSB(LSB)) dut (
    .clk, .rst_n,
    .a_nan_i(a_nan), .a_sign_i(a_sign), .a_scale_i(a_scale), .a_sig_i(a_sig),
    .b_valid_i(b_valid), .b_eob_i(b_eob), .b_nan_i(b_nan), .b_sign_i(b_sign),
    .b_scale_i(b_scale), .b_sig_i(b_sig),
    .c_valid_o(c_valid), .c_nan_o(c_nan), .c_acc_o(c_acc));

  // the operand stream, one step per clock
  bit          s_valid [T];
  bit          s_eob   [T];
  logic [15:0] s_a [T][N];
  logic [15:0] s_b [T][M];

  typedef struct { int cyc; logic [W-1:0] acc; bit nan; } exp_t;
  exp_t expq [M][$];

  int checks = 0, failures = 0, cyc = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  function automatic void set_a(int i, logic [15:0] x, bit ok);
    if (!ok) x = 16'h0;
    a_nan[i] = ref_is_nan(64'(x), WE, WF); a_sign[i] = x[15]; a_scale[i] = x[14:7];
    a_sig[i] = (x[14:7] == 0) ? '0 : {1'b1, x[6:0]};
  endfunction
  function automatic void set_b(int j, logic [15:0] x, bit v, bit e);
    b_valid[j] = v; b_eob[j] = e;
    b_nan[j] = ref_is_nan(64'(x), WE, WF); b_sign[j] = x[15]; b_scale[j] = x[14:7];
    b_sig[j] = (x[14:7] == 0) ? '0 : {1'b1, x[6:0]};
  endfunction

  initial begin
    // build the stream and the expected results
    automatic int t = 0;
    automatic int nblk = 0;
    for (int c = 0; c < T; c++) begin s_valid[c] = 0; s_eob[c] = 0; end
    while (t < T - 80) begin
      automatic int k = N + $urandom_range(8);
      wide_t acc [N][M];
      bit    nanf [N][M];
      for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) begin acc[i][j] = 0; nanf[i][j] = 0; end
      for (int n = 0; n < k; n++) begin
        if ($urandom_range(4) == 0) t++;          // idle step
        s_valid[t] = 1; s_eob[t] = (n == k - 1);
        for (int i = 0; i < N; i++) s_a[t][i] = rand_fp(WE, WF, 0, 5)[15:0];
        for (int j = 0; j < M; j++) s_b[t][j] = rand_fp(WE, WF, 0, 5)[15:0];
        if (nblk == 2 && n == 3) s_a[t][1] = 16'hFFC0;
        for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) begin
          acc[i][j] += ref_prod_fix(64'(s_a[t][i]), 64'(s_b[t][j]), WE, WF, LSB);
          nanf[i][j] |= ref_is_nan(64'(s_a[t][i]), WE, WF) | ref_is_nan(64'(s_b[t][j]), WE, WF);
        end
        t++;
      end
      for (int j = 0; j < M; j++)
        for (int i = N - 1; i >= 0; i--)
          expq[j].push_back('{cyc: (t - 1) + (M - 1 - j) + 2 * N - 1 - i,
                              acc: W'(ref_wrap(acc[i][j], W)), nan: nanf[i][j]});
      nblk++;
    end
    // run it
    for (int i = 0; i < N; i++) set_a(i, 0, 0);
    for (int j = 0; j < M; j++) set_b(j, 0, 0, 0);
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (cyc = 0; cyc < T + 40; cyc++) begin
      for (int i = 0; i < N; i++) begin
        automatic int c = cyc - i;
        set_a(i, (c >= 0 && c < T) ? s_a[c][i] : 16'h0, c >= 0 && c < T && s_valid[c]);
      end
      for (int j = 0; j < M; j++) begin
        automatic int c = cyc - (M - 1 - j);
        automatic bit ok = c >= 0 && c < T && s_valid[c];
        set_b(j, ok ? s_b[c][j] : 16'h0, ok, ok && s_eob[c]);
      end
      #1;
      for (int j = 0; j < M; j++) if (c_valid[j]) begin
        if (expq[j].size() == 0) chk(0, "unexpected result");
        else begin
          automatic exp_t e = expq[j].pop_front();
          chk(c_acc[j] == e.acc, $sformatf("value col %0d", j));
          chk(c_nan[j] == e.nan, "nan");
          chk(cyc == e.cyc, $sformatf("timing col %0d exp %0d", j, e.cyc));
        end
      end
      @(negedge clk);
    end
    for (int j = 0; j < M; j++) chk(expq[j].size() == 0, "all results seen");
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
