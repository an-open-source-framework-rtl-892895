// tb_ai_workload -- inference-style GEMM tiles on the FDP array with binary32
// operands and the sweep of accumulators <ovf:9,msb:6,lsb:L> for
// L = -48, -38, -28, -24, -20, -10 (4 x 3 PEs, one array per accumulator).
//
// A neural-network layer computed as a GEMM multiplies non-negative, partly
// zero activations (after ReLU) by small signed weights, with a reduction
// length of a few hundred (here K = 576, a 3x3 convolution over 64 input
// channels). Three such tiles are streamed through six arrays built with
// the six accumulators; all six see the same input stream and the same
// output stalls.
//
// Checked for every output word of every array: it equals the reference
// model of that accumulator (each product truncated below 2^L, summed
// exactly in a wide integer, wrapped to W bits, rounded once to nearest
// even). Also checked: with L = -48 every result is the exact dot product
// rounded once (error at most half an ulp of binary32), and the total error
// grows from L = -48 to L = -20 and again to L = -10, the accuracy
// trade-off this accumulator sweep is about. The table of errors is printed.
// Tile count, array size and value ranges are choices of this test.
module tb_ai_workload;
  import fdp_ref_pkg::*;
  localparam int N = 4, M = 3, WE = 8, WF = 23, OVF = 9, MSB = 6;
  localparam int NCFG = 6;
  localparam int LSBS [NCFG] = '{-48, -38, -28, -24, -20, -10};
  localparam int K = 576, TILES = 3;
  localparam int DWI = (N + M) * 32, DWO = M * 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [DWI-1:0] s_tdata; logic s_tvalid, s_tlast;
  logic [NCFG-1:0] s_tready;
  logic m_tready;
  logic [DWO-1:0] m_tdata [NCFG];
  logic [NCFG-1:0] m_tvalid, m_tlast;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] a_w [TILES][N][K];
  logic [31:0] b_w [TILES][K][M];
  logic [DWO-1:0] got [NCFG][$];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    fdp_array_axis #(.N_ROWS(N), .M_COLS(M), .WE(WE), .WF(WF), .OVF(OVF), .MSB(MSB),
                     .LSB(LSBS[g]), .DW_IN(DWI), .DW_OUT(DWO), .FIFO_DEPTH(8)) dut (
      .clk, .rst_n,
      .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tlast(s_tlast),
      .s_axis_tready(s_tready[g]),
      .m_axis_tdata(m_tdata[g]), .m_axis_tvalid(m_tvalid[g]), .m_axis_tlast(m_tlast[g]),
      .m_axis_tready(m_tready));
    always @(posedge clk) if (rst_n && m_tvalid[g] && m_tready) got[g].push_back(m_tdata[g]);
  end

  always @(posedge clk) if (rst_n)
    chk(s_tready == {NCFG{s_tready[0]}} && m_tvalid == {NCFG{m_tvalid[0]}},
        "all arrays move in step");

  initial begin
    real err [NCFG];
    real exact, gotr, ulp;
    int  e2;
    wide_t acc;
    logic [31:0] ref_bits, w;
    s_tvalid = 0; s_tlast = 0; s_tdata = '0; m_tready = 1;
    for (int t = 0; t < TILES; t++) begin
      for (int i = 0; i < N; i++)
        for (int k = 0; k < K; k++) begin
          a_w[t][i][k] = ($urandom_range(9) < 3) ? 32'd0 : 32'(rand_fp(WE, WF, 0, 3));
          a_w[t][i][k][31] = 1'b0;                  // ReLU output
        end
      for (int k = 0; k < K; k++)
        for (int j = 0; j < M; j++) b_w[t][k][j] = 32'(rand_fp(WE, WF, -5, 3));
    end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    fork
      begin
        for (int t = 0; t < TILES; t++)
          for (int k = 0; k < K; k++) begin
            @(negedge clk);
            for (int i = 0; i < N; i++) s_tdata[32*i +: 32] = a_w[t][i][k];
            for (int j = 0; j < M; j++) s_tdata[32*(N+j) +: 32] = b_w[t][k][j];
            s_tvalid = 1; s_tlast = (k == K - 1);
            @(posedge clk);
            while (!s_tready[0]) @(posedge clk);
          end
        @(negedge clk); s_tvalid = 0;
      end
      begin
        while (got[0].size() < TILES * N) begin
          @(negedge clk);
          m_tready = ($urandom_range(3) != 0);
        end
        m_tready = 1;
      end
    join
    repeat (5) @(posedge clk);
    for (int g = 0; g < NCFG; g++) begin
      err[g] = 0.0;
      chk(got[g].size() == TILES * N, $sformatf("cfg %0d row count %0d", g, got[g].size()));
    end
    for (int t = 0; t < TILES; t++)
      for (int r = 0; r < N; r++) begin
        automatic int i = N - 1 - r;                // rows leave last first
        for (int j = 0; j < M; j++) begin
          exact = 0.0;
          for (int k = 0; k < K; k++)
            exact += fp_to_real(64'(a_w[t][i][k]), WE, WF) * fp_to_real(64'(b_w[t][k][j]), WE, WF);
          for (int g = 0; g < NCFG; g++) begin
            acc = 0;
            for (int k = 0; k < K; k++)
              acc += ref_prod_fix(64'(a_w[t][i][k]), 64'(b_w[t][k][j]), WE, WF, LSBS[g]);
            ref_bits = 32'(ref_round(ref_wrap(acc, OVF + MSB - LSBS[g] + 1), LSBS[g], WE, WF, 0));
            w = got[g][t * N + r][32*j +: 32];
            chk(w == ref_bits, $sformatf("lsb %0d tile %0d C[%0d][%0d]: %h vs %h",
                                         LSBS[g], t, i, j, w, ref_bits));
            gotr = fp_to_real(64'(w), WE, WF);
            err[g] += (gotr > exact) ? gotr - exact : exact - gotr;
            if (g == 0) begin
              // half an ulp of binary32 at |exact|, plus slack for the
              // binary64 rounding of the reference sum itself
              ulp = (exact < 0) ? -exact : exact;
              e2 = 0;
              if (ulp > 0.0) begin
                while (ulp >= 2.0) begin ulp = ulp / 2.0; e2++; end
                while (ulp < 1.0)  begin ulp = ulp * 2.0; e2--; end
              end
              ulp = 2.0 ** (e2 - 24);
              chk(((gotr > exact) ? gotr - exact : exact - gotr) <= ulp + 1.0e-12,
                  $sformatf("lsb -48 C[%0d][%0d] not correctly rounded: %g vs %g", i, j, gotr, exact));
            end
          end
        end
      end
    for (int g = 0; g < NCFG; g++)
      $display("accumulator <9,6,%0d> (%0d bits): total |error| over %0d outputs = %g",
               LSBS[g], OVF + MSB - LSBS[g] + 1, TILES * N * M, err[g]);
    chk(err[0] <= err[4], "error at lsb -48 not above lsb -20");
    chk(err[4] < err[5], "error grows from lsb -20 to lsb -10");
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
