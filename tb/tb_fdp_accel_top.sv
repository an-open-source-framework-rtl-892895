// tb_fdp_accel_top -- end-to-end test of the accelerator at reduced size
// (4 x 3 PEs, bfloat16, <5,5,-20>, 8-row FIFO).
//
// Host software is modelled by tasks on the AXI4-Lite port; shared memory by
// axi_mem_model. Three jobs are run, each a set of C tiles computed from
// operand beats in memory:
//   job 1: 5 tiles of K = 2 steps (shorter than the array: end-of-block hold),
//   job 2: 6 tiles of K = 37 steps with random data, one NaN, one subnormal,
//          and a tile of large products that overflows the accumulator
//          window (wraps, as without enough OVF bits),
//   job 3: 3 tiles of K = 9 steps read across a 4 KiB page boundary.
// Every output line is compared with the reference result. Mechanisms
// counted, each required at least once: FIFO-full backpressure, end-of-block
// hold, burst split at a page, accumulator wrap, NaN result, flushed
// subnormal input, write-channel stall.
module tb_fdp_accel_top;
  import fdp_ref_pkg::*;
  localparam int N = 4, M = 3, WE = 8, WF = 7, OVF = 5, MSB = 5, LSB = -20;
  localparam int W = OVF + MSB - LSB + 1;
  localparam int AW = 64, DW = 1024, OW = 512, LB = DW / 8;
  localparam longint WATCHDOG = 200000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] awaddr_l, araddr_l; logic awvalid_l, awready_l, wvalid_l, wready_l, bvalid_l, bready_l;
  logic arvalid_l, arready_l, rvalid_l, rready_l; logic [31:0] wdata_l, rdata_l; logic [1:0] bresp_l, rresp_l;
  logic [AW-1:0] araddr, awaddr; logic [7:0] arlen, awlen; logic [2:0] arsize, awsize; logic [1:0] arburst, awburst;
  logic arvalid, arready, rvalid, rready, rlast, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [DW-1:0] rdata, wdata; logic [DW/8-1:0] wstrb; logic [1:0] rresp, bresp;

  fdp_accel_top #(.N_ROWS(N), .M_COLS(M), .WE(WE), .WF(WF), .OVF(OVF), .MSB(MSB), .LSB(LSB),
                  .FIFO_DEPTH(8)) dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr_l), .s_axil_awvalid(awvalid_l), .s_axil_awready(awready_l),
    .s_axil_wdata(wdata_l), .s_axil_wvalid(wvalid_l), .s_axil_wready(wready_l),
    .s_axil_bresp(bresp_l), .s_axil_bvalid(bvalid_l), .s_axil_bready(bready_l),
    .s_axil_araddr(araddr_l), .s_axil_arvalid(arvalid_l), .s_axil_arready(arready_l),
    .s_axil_rdata(rdata_l), .s_axil_rresp(rresp_l), .s_axil_rvalid(rvalid_l), .s_axil_rready(rready_l),
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid), .m_axi_arready(arready),
    .m_axi_rdata(rdata), .m_axi_rresp(rresp), .m_axi_rlast(rlast), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready),
    .m_axi_wdata(wdata), .m_axi_wstrb(wstrb), .m_axi_wlast(wlast), .m_axi_wvalid(wvalid), .m_axi_wready(wready),
    .m_axi_bresp(bresp), .m_axi_bvalid(bvalid), .m_axi_bready(bready));

  axi_mem_model #(.ADDR_W(AW), .DATA_W(DW), .STALL(40)) u_mem (
    .clk, .rst_n, .araddr, .arlen, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready);

  int checks = 0, failures = 0;
  int n_full = 0, n_hold = 0, n_wrap = 0, n_nan = 0, n_ftz = 0, n_wstall = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.u_array.fifo_full && dut.in_tvalid) n_full++;
    if (dut.u_array.eob_hold && dut.in_tvalid && !dut.u_array.fifo_full) n_hold++;
    if (wvalid && !wready) n_wstall++;
  end

  task automatic reg_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); awaddr_l = a; awvalid_l = 1; wdata_l = d; wvalid_l = 1;
    fork
      begin do @(posedge clk); while (!awready_l); #1 awvalid_l = 0; end
      begin do @(posedge clk); while (!wready_l);  #1 wvalid_l = 0; end
    join
    bready_l = 1; do @(posedge clk); while (!bvalid_l); #1 bready_l = 0;
  endtask
  task automatic reg_rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); araddr_l = a; arvalid_l = 1;
    do @(posedge clk); while (!arready_l); #1 arvalid_l = 0;
    rready_l = 1; do @(posedge clk); while (!rvalid_l); d = rdata_l; #1 rready_l = 0;
  endtask

  // kind: 0 random, 1 with specials, 2 large products (wraps)
  task automatic run_job(longint src, longint dst, int tiles, int k, int kind);
    logic [31:0] d;
    longint t0;
    logic [DW-1:0] line;
    logic [15:0] av, bv;
    wide_t acc [N][M];
    bit    nanf [N][M];
    for (int t = 0; t < tiles; t++) begin
      for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) begin acc[i][j] = 0; nanf[i][j] = 0; end
      for (int s = 0; s < k; s++) begin
        line = '0;
        for (int x = 0; x < N + M; x++) begin
          logic [15:0] v;
          v = rand_fp(WE, WF, -1, 5)[15:0];
          if (kind == 1 && t == 1 && s == 3 && x == 0) v = 16'h7FC1;          // NaN
          if (kind == 1 && t == 2 && s == 0 && x == N) begin v = 16'h0005; n_ftz++; end // subnormal
          if (kind == 2 && t == 3) v = 16'h4200 | 16'(x[0]);                   // ~32: 1024 per product
          line[x*16 +: 16] = v;
        end
        u_mem.mem[src / LB + longint'(t * k + s)] = line;
        for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) begin
          av = line[i*16 +: 16]; bv = line[(N+j)*16 +: 16];
          acc[i][j] += ref_prod_fix(64'(av), 64'(bv), WE, WF, LSB);
          nanf[i][j] |= ref_is_nan(64'(av), WE, WF) | ref_is_nan(64'(bv), WE, WF);
        end
      end
      for (int i = 0; i < N; i++) begin
        logic [DW-1:0] e;
        e = '0;
        for (int j = 0; j < M; j++) begin
          if (ref_wrap(acc[i][j], W) != acc[i][j]) n_wrap++;
          if (nanf[i][j]) n_nan++;
          e[j*16 +: 16] = 16'(ref_round(ref_wrap(acc[i][j], W), LSB, WE, WF, nanf[i][j]));
        end
        exp_lines[dst / LB + longint'(t * N + (N - 1 - i))] = e;
      end
    end
    reg_wr(8'h08, src[31:0]); reg_wr(8'h0C, src[63:32]);
    reg_wr(8'h10, dst[31:0]); reg_wr(8'h14, dst[63:32]);
    reg_wr(8'h18, tiles * k); reg_wr(8'h1C, k); reg_wr(8'h20, tiles * N);
    t0 = longint'($time);
    reg_wr(8'h00, 32'h1);
    do reg_rd(8'h04, d); while (!d[1]);
    $display("job: %0d tiles x %0d steps in %0d clocks", tiles, k, (longint'($time) - t0) / 10);
    for (int r = 0; r < tiles * N; r++) begin
      automatic longint a = dst / LB + longint'(r);
      chk(u_mem.peek(a) == exp_lines[a], $sformatf("output line %0d", r));
    end
  endtask

  logic [DW-1:0] exp_lines [longint];

  initial begin
    logic [31:0] d;
    awvalid_l = 0; wvalid_l = 0; bready_l = 0; arvalid_l = 0; rready_l = 0;
    awaddr_l = 0; araddr_l = 0; wdata_l = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    reg_rd(8'h24, d); chk(d == {8'(MSB), 8'(OVF), 8'(WF), 8'(WE)}, "FMT0 register");
    reg_rd(8'h28, d); chk(d == {8'(M), 8'(N), 8'(LSB), 8'd0}, "FMT1 register");
    run_job(64'h1000_0000, 64'h2000_0000, 5, 2, 0);
    run_job(64'h1100_0000, 64'h2100_0000, 6, 37, 1);
    run_job(64'h1200_0000 + 4096 - 5 * LB, 64'h2200_0000, 3, 9, 2);
    chk(u_mem.page_errors == 0, "no burst crosses a page");
    $display("events: fifo_full=%0d eob_hold=%0d wrap=%0d nan=%0d ftz=%0d wstall=%0d rd_bursts=%0d",
             n_full, n_hold, n_wrap, n_nan, n_ftz, n_wstall, u_mem.rd_bursts);
    chk(n_full > 0, "FIFO-full backpressure happened");
    chk(n_hold > 0, "end-of-block hold happened");
    chk(n_wrap > 0, "accumulator wrap happened");
    chk(n_nan > 0, "NaN result happened");
    chk(n_ftz > 0, "subnormal input flushed");
    chk(n_wstall > 0, "write-channel stall happened");
    chk(u_mem.rd_bursts > 3, "bursts split");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
