// tb_fdp_array_axis -- self-checking test of the AXI-stream wrapped array,
// 4 x 3 PEs, bfloat16, accumulator <5,5,-20>, an 8-row FIFO.
//
// A random source sends blocks of 1..10 steps (short blocks force the
// end-of-block spacing rule), with random gaps; a random sink applies
// backpressure, in some phases for long stretches so that the FIFO fills
// and s_axis_tready falls. Each output beat is compared with the reference
// rows (last row first, tlast on row 0), rounded to bfloat16 by the
// reference rounding. Also counted, and required at least once: FIFO-full
// backpressure, a held end-of-block beat, a NaN result.
module tb_fdp_array_axis;
  import fdp_ref_pkg::*;
  localparam int N = 4, M = 3, WE = 8, WF = 7, OVF = 5, MSB = 5, LSB = -20;
  localparam int DWI = 128, DWO = 64, NBLK = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DWI-1:0] s_tdata;  logic s_tvalid, s_tlast, s_tready;
  logic [DWO-1:0] m_tdata;  logic m_tvalid, m_tlast, m_tready;

  fdp_array_axis #(.N_ROWS(N), .M_COLS(M), .WE(WE), .WF(WF), .OVF(OVF), .MSB(MSB),
                   .LSB(LSB), .DW_IN(DWI), .DW_OUT(DWO), .FIFO_DEPTH(8)) dut (
    .clk, .rst_n,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tlast(s_tlast), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tlast(m_tlast), .m_axis_tready(m_tready));

  typedef struct { logic [DWO-1:0] data; bit last; } beat_t;
  beat_t expq [$];
  int checks = 0, failures = 0, n_out = 0, n_full = 0, n_hold = 0, n_nan = 0;
  bit  sink_slow = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // source
  initial begin
    s_tvalid = 0; s_tlast = 0; s_tdata = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int b = 0; b < NBLK; b++) begin
      automatic int k = 1 + $urandom_range(9);
      wide_t acc [N][M];
      bit    nanf [N][M];
      for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) begin acc[i][j] = 0; nanf[i][j] = 0; end
      for (int n = 0; n < k; n++) begin
        logic [15:0] av [N];
        logic [15:0] bv [M];
        for (int i = 0; i < N; i++) av[i] = rand_fp(WE, WF, 0, 4)[15:0];
        for (int j = 0; j < M; j++) bv[j] = rand_fp(WE, WF, 0, 4)[15:0];
        if (b == 5 && n == 0) bv[2] = 16'h7F80;                     // infinity -> NaN
        for (int i = 0; i < N; i++) s_tdata[i*16 +: 16] = av[i];
        for (int j = 0; j < M; j++) s_tdata[(N+j)*16 +: 16] = bv[j];
        for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) begin
          acc[i][j] += ref_prod_fix(64'(av[i]), 64'(bv[j]), WE, WF, LSB);
          nanf[i][j] |= ref_is_nan(64'(av[i]), WE, WF) | ref_is_nan(64'(bv[j]), WE, WF);
        end
        s_tvalid = 1; s_tlast = (n == k - 1);
        @(posedge clk);
        while (!s_tready) begin
          if (s_tlast) n_hold += (!dut.fifo_full);
          n_full += dut.fifo_full;
          @(posedge clk);
        end
        @(negedge clk);
        s_tvalid = 0;
        while ($urandom_range(3) == 0) @(negedge clk);
      end
      for (int i = N - 1; i >= 0; i--) begin
        beat_t e;
        e.data = '0;
        for (int j = 0; j < M; j++)
          e.data[j*16 +: 16] = 16'(ref_round(ref_wrap(acc[i][j], OVF + MSB - LSB + 1), LSB, WE, WF, nanf[i][j]));
        e.last = (i == 0);
        expq.push_back(e);
      end
    end
  end

  // sink
  initial begin
    m_tready = 0;
    forever begin
      @(negedge clk);
      if ($urandom_range(60) == 0) sink_slow = ~sink_slow;
      m_tready = sink_slow ? ($urandom_range(9) == 0) : ($urandom_range(3) != 0);
    end
  end

  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    if (expq.size() == 0) chk(0, "unexpected output");
    else begin
      automatic beat_t e = expq.pop_front();
      chk(m_tdata == e.data, $sformatf("row data %0d: %h vs %h", n_out, m_tdata, e.data));
      chk(m_tlast == e.last, "tlast");
      for (int j = 0; j < M; j++) if (m_tdata[j*16 +: 16] == 16'h7FC0) n_nan++;
    end
    n_out++;
    if (n_out == NBLK * N) begin
      chk(n_full > 0, "FIFO-full backpressure seen");
      chk(n_hold > 0, "end-of-block hold seen");
      chk(n_nan > 0, "NaN result seen");
      $display("events: fifo_full=%0d eob_hold=%0d nan=%0d", n_full, n_hold, n_nan);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d rows out", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
