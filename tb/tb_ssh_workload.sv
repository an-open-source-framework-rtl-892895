// tb_ssh_workload -- sea-surface-height style global sum on the FDP array
// configured for binary64 operands and the 91-bit <ovf:30,msb:30,lsb:-30>
// accumulator (2 x 2 PEs).
//
// The data imitate the SSH reduction: V local values of magnitude 1e10 to
// 1e15 in pairs of almost opposite sign, so that the exact total is of
// order 1 to 1e4. Each value is multiplied by 1.0 (the B operand) and summed
// by the array. Four different orders of the same values are summed: the
// two PE rows get two shuffles in one block and two further shuffles in a
// second block. Checked: all four results are bit-identical (reproducible),
// and equal to the exact sum rounded once to binary64 by the reference.
// For comparison the testbench also sums each order naively in binary64
// and reports how far apart those sums are. Vector sizes: 7680, 153600, 460800
// elements (the SSH evaluation range: smallest, middle, largest).
module tb_ssh_workload;
  import fdp_ref_pkg::*;
  localparam int N = 2, M = 2, WE = 11, WF = 52, OVF = 30, MSB = 30, LSB = -30;
  localparam int W = OVF + MSB - LSB + 1;
  localparam int DWI = (N + M) * 64, DWO = M * 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [DWI-1:0] s_tdata; logic s_tvalid, s_tlast, s_tready;
  logic [DWO-1:0] m_tdata; logic m_tvalid, m_tlast, m_tready;

  fdp_array_axis #(.N_ROWS(N), .M_COLS(M), .WE(WE), .WF(WF), .OVF(OVF), .MSB(MSB),
                   .LSB(LSB), .DW_IN(DWI), .DW_OUT(DWO), .FIFO_DEPTH(8)) dut (
    .clk, .rst_n,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tlast(s_tlast), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tlast(m_tlast), .m_axis_tready(m_tready));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [63:0] vals [];
  int          ord  [4][];
  logic [63:0] got  [$];

  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    got.push_back(m_tdata[63:0]);     // column 0
    chk(m_tdata[127:64] == m_tdata[63:0], "both columns agree");
  end

  task automatic run_size(int v);
    wide_t exact;
    logic [63:0] ref_bits;
    real   naive [4];
    real   nmin, nmax;
    vals = new[v];
    for (int p = 0; p < v / 2; p++) begin
      real mag, tiny;
      mag   = 10.0 ** (10.0 + 5.0 * real'($urandom) / 4294967296.0);
      tiny = real'($urandom_range(1000000)) / 1000.0;
      vals[2*p]   = $realtobits(($urandom_range(1) != 0) ? mag : -mag);
      vals[2*p+1] = $realtobits(-($bitstoreal(vals[2*p]) - tiny));
    end
    exact = 0;
    for (int e = 0; e < v; e++) exact += ref_prod_fix(vals[e], 64'h3FF0_0000_0000_0000, WE, WF, LSB);
    ref_bits = ref_round(ref_wrap(exact, W), LSB, WE, WF, 0);
    for (int o = 0; o < 4; o++) begin
      ord[o] = new[v];
      for (int e = 0; e < v; e++) ord[o][e] = e;
      if (o > 0) ord[o].shuffle();
      naive[o] = 0.0;
      for (int e = 0; e < v; e++) naive[o] += $bitstoreal(vals[ord[o][e]]);
    end
    got.delete();
    for (int blk = 0; blk < 2; blk++)
      for (int e = 0; e < v; e++) begin
        @(negedge clk);
        s_tdata = '0;
        s_tdata[0 +: 64]   = vals[ord[2*blk][e]];
        s_tdata[64 +: 64]  = vals[ord[2*blk+1][e]];
        s_tdata[128 +: 64] = 64'h3FF0_0000_0000_0000;
        s_tdata[192 +: 64] = 64'h3FF0_0000_0000_0000;
        s_tvalid = 1; s_tlast = (e == v - 1);
        @(posedge clk);
        while (!s_tready) @(posedge clk);
      end
    @(negedge clk); s_tvalid = 0;
    while (got.size() < 4) @(posedge clk);
    nmin = naive[0]; nmax = naive[0];
    for (int o = 1; o < 4; o++) begin
      if (naive[o] < nmin) nmin = naive[o];
      if (naive[o] > nmax) nmax = naive[o];
    end
    for (int o = 0; o < 4; o++) chk(got[o] == ref_bits, $sformatf("size %0d order %0d: %h vs %h", v, o, got[o], ref_bits));
    $display("size %0d: FDP sum %.6f (all 4 orders %s), naive binary64 sums %.6f .. %.6f",
             v, $bitstoreal(got[0]), (got[0] == got[1] && got[1] == got[2] && got[2] == got[3]) ? "identical" : "DIFFER",
             nmin, nmax);
  endtask

  initial begin
    s_tvalid = 0; s_tlast = 0; s_tdata = '0; m_tready = 1;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    run_size(7680);
    run_size(153600);
    run_size(460800);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
