// tb_axi_mm_stream_bridge -- self-checking test of the AXI-MM / AXI-stream
// bridge and its register file.
//
// The memory model holds 100 random 1024-bit input lines starting three
// lines before a 4 KiB page end. The stream side is a loopback model: every
// beat the bridge streams out is checked against memory and for tlast every
// BLOCK_LEN (7) beats, and turned into one 512-bit output beat (its low half
// inverted) that is streamed back, both sides with random stalls. Checks:
// register read-back, the read-only format words, busy/done, all 100
// output lines in memory (zero-padded), burst page limits and counts.
module tb_axi_mm_stream_bridge;
  localparam int AW = 64, DW = 1024, SDW = 1024, MDW = 512, NIN = 100, BLK = 7;
  localparam logic [AW-1:0] SRC = 64'h0000_0001_0000_0000 + 4096 - 3 * 128;
  localparam logic [AW-1:0] DST = 64'h0000_0002_0000_0080;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] awaddr_l, araddr_l; logic awvalid_l, awready_l, wvalid_l, wready_l, bvalid_l, bready_l;
  logic arvalid_l, arready_l, rvalid_l, rready_l; logic [31:0] wdata_l, rdata_l; logic [1:0] bresp_l, rresp_l;
  logic [AW-1:0] araddr, awaddr; logic [7:0] arlen, awlen; logic [2:0] arsize, awsize; logic [1:0] arburst, awburst;
  logic arvalid, arready, rvalid, rready, rlast, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [DW-1:0] rdata, wdata; logic [DW/8-1:0] wstrb; logic [1:0] rresp, bresp;
  logic [SDW-1:0] o_tdata; logic o_tvalid, o_tlast, o_tready;
  logic [MDW-1:0] i_tdata; logic i_tvalid, i_tlast, i_tready;

  axi_mm_stream_bridge #(.ADDR_W(AW), .DATA_W(DW), .S_DW(SDW), .M_DW(MDW), .MAX_BURST(32),
                         .FMT0(32'hA5A5_0102), .FMT1(32'h1F20_EC00)) dut (
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
    .m_axi_bresp(bresp), .m_axi_bvalid(bvalid), .m_axi_bready(bready),
    .m_axis_tdata(o_tdata), .m_axis_tvalid(o_tvalid), .m_axis_tlast(o_tlast), .m_axis_tready(o_tready),
    .s_axis_tdata(i_tdata), .s_axis_tvalid(i_tvalid), .s_axis_tlast(i_tlast), .s_axis_tready(i_tready));

  axi_mem_model #(.ADDR_W(AW), .DATA_W(DW), .STALL(30)) u_mem (
    .clk, .rst_n, .araddr, .arlen, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready);

  int checks = 0, failures = 0, n_seen = 0;
  logic [MDW-1:0] loopq [$];
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

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

  // loopback of the stream
  always @(posedge clk) if (rst_n && o_tvalid && o_tready) begin
    chk(o_tdata == u_mem.peek((longint'(SRC) / 128) + longint'(n_seen)), "streamed input line");
    chk(o_tlast == ((n_seen % BLK) == BLK - 1), "tlast every BLOCK_LEN");
    loopq.push_back(~o_tdata[MDW-1:0]);
    n_seen++;
  end
  initial begin
    o_tready = 0; i_tvalid = 0; i_tdata = '0; i_tlast = 0;
    forever begin
      @(negedge clk);
      o_tready = ($urandom_range(3) != 0);
      if (!i_tvalid || i_tready_q) begin
        if (loopq.size() != 0 && $urandom_range(3) != 0) begin
          i_tdata = loopq.pop_front(); i_tvalid = 1;
        end else i_tvalid = 0;
      end
    end
  end
  logic i_tready_q;
  always @(posedge clk) i_tready_q <= i_tvalid & i_tready;

  initial begin
    logic [31:0] d;
    awvalid_l = 0; wvalid_l = 0; bready_l = 0; arvalid_l = 0; rready_l = 0;
    awaddr_l = 0; araddr_l = 0; wdata_l = 0;
    for (int k = 0; k < NIN; k++) begin
      logic [DW-1:0] line;
      for (int w = 0; w < DW / 32; w++) line[w*32 +: 32] = $urandom;
      u_mem.mem[(longint'(SRC) / 128) + longint'(k)] = line;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    reg_wr(8'h08, SRC[31:0]); reg_wr(8'h0C, SRC[63:32]);
    reg_wr(8'h10, DST[31:0]); reg_wr(8'h14, DST[63:32]);
    reg_wr(8'h18, NIN); reg_wr(8'h1C, BLK); reg_wr(8'h20, NIN);
    reg_rd(8'h08, d); chk(d == SRC[31:0], "SRC_LO readback");
    reg_rd(8'h0C, d); chk(d == SRC[63:32], "SRC_HI readback");
    reg_rd(8'h1C, d); chk(d == BLK, "BLOCK_LEN readback");
    reg_rd(8'h24, d); chk(d == 32'hA5A5_0102, "FMT0");
    reg_rd(8'h28, d); chk(d == 32'h1F20_EC00, "FMT1");
    reg_rd(8'h04, d); chk(d[1:0] == 2'b00, "idle before start");
    reg_wr(8'h00, 32'h1);
    reg_rd(8'h04, d); chk(d[0] == 1'b1, "busy after start");
    do reg_rd(8'h04, d); while (!d[1]);
    chk(d[2] == 0, "no error");
    chk(n_seen == NIN, "all input beats streamed");
    for (int k = 0; k < NIN; k++)
      chk(u_mem.peek((longint'(DST) / 128) + longint'(k)) ==
          {{(DW - MDW){1'b0}}, ~u_mem.peek((longint'(SRC) / 128) + longint'(k))[MDW-1:0]},
          $sformatf("output line %0d", k));
    chk(u_mem.page_errors == 0, "no burst crosses a page");
    chk(u_mem.wlast_errors == 0, "wlast placement");
    // 100 lines from 3 lines before a page end: 3 + 32 + 32 + 32 + 1 -> 5 bursts
    chk(u_mem.rd_bursts == 5, $sformatf("read bursts %0d", u_mem.rd_bursts));
    // DST is one line into a page: 31 + 32 + 32 + 5 -> 4 bursts
    chk(u_mem.wr_bursts == 4, $sformatf("write bursts %0d", u_mem.wr_bursts));
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
