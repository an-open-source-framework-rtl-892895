// fdp_accel_top -- accelerator function unit: an FDP systolic array for
// numerically tailored matrix multiplication, reachable from host memory.
//
// Two parts: axi_mm_stream_bridge reads the operand stream from shared
// memory over an AXI4 master port and writes the results back, under
// control of an AXI4-Lite register file; fdp_array_axis decodes the
// operands, runs them through the N_ROWS x M_COLS array of fused dot
// products with an exact OVF/MSB/LSB fixed-point accumulator, rounds each
// result once as it leaves the array, and buffers it in the backpressure
// FIFO. On the board these two ports connect to the host-coherent shell
// (OpenCAPI link and its AXI bridge), which is not part of this RTL.
//
// Defaults: 32 x 31 PEs, bfloat16 operands and results, accumulator
// <ovf:5,msb:5,lsb:-20> (31 bits), 1024-bit memory beats. One job: N_IN
// input beats, each holding one column of a 32-row A tile and one row of a
// 31-column B tile; every BLOCK_LEN beats close one 32 x 31 tile of C,
// written back as 32 beats (one row of C each, 31 bfloat16 words in the low
// 496 bits, last row first).
//
// The array size, the bfloat16 format and the accumulator parameters follow
// the source; the register map, bus widths and stream layout are this
// design's choices.
module fdp_accel_top #(
  parameter int unsigned N_ROWS     = fdp_pkg::N_ROWS,
  parameter int unsigned M_COLS     = fdp_pkg::M_COLS,
  parameter int unsigned WE         = fdp_pkg::WE,
  parameter int unsigned WF         = fdp_pkg::WF,
  parameter int          OVF        = fdp_pkg::OVF,
  parameter int          MSB        = fdp_pkg::MSB,
  parameter int          LSB        = fdp_pkg::LSB,
  parameter int unsigned ADDR_W     = 64,
  parameter int unsigned DATA_W     = 1024,
  parameter int unsigned OUT_W      = 512,
  parameter int unsigned FIFO_DEPTH = 4 * N_ROWS
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite slave: control and format registers
  input  logic [7:0]          s_axil_awaddr,
  input  logic                s_axil_awvalid,
  output logic                s_axil_awready,
  input  logic [31:0]         s_axil_wdata,
  input  logic                s_axil_wvalid,
  output logic                s_axil_wready,
  output logic [1:0]          s_axil_bresp,
  output logic                s_axil_bvalid,
  input  logic                s_axil_bready,
  input  logic [7:0]          s_axil_araddr,
  input  logic                s_axil_arvalid,
  output logic                s_axil_arready,
  output logic [31:0]         s_axil_rdata,
  output logic [1:0]          s_axil_rresp,
  output logic                s_axil_rvalid,
  input  logic                s_axil_rready,
  // AXI4 master: shared host memory
  output logic [ADDR_W-1:0]   m_axi_araddr,
  output logic [7:0]          m_axi_arlen,
  output logic [2:0]          m_axi_arsize,
  output logic [1:0]          m_axi_arburst,
  output logic                m_axi_arvalid,
  input  logic                m_axi_arready,
  input  logic [DATA_W-1:0]   m_axi_rdata,
  input  logic [1:0]          m_axi_rresp,
  input  logic                m_axi_rlast,
  input  logic                m_axi_rvalid,
  output logic                m_axi_rready,
  output logic [ADDR_W-1:0]   m_axi_awaddr,
  output logic [7:0]          m_axi_awlen,
  output logic [2:0]          m_axi_awsize,
  output logic [1:0]          m_axi_awburst,
  output logic                m_axi_awvalid,
  input  logic                m_axi_awready,
  output logic [DATA_W-1:0]   m_axi_wdata,
  output logic [DATA_W/8-1:0] m_axi_wstrb,
  output logic                m_axi_wlast,
  output logic                m_axi_wvalid,
  input  logic                m_axi_wready,
  input  logic [1:0]          m_axi_bresp,
  input  logic                m_axi_bvalid,
  output logic                m_axi_bready
);
  localparam logic [31:0] FMT0 = {8'(MSB), 8'(OVF), 8'(WF), 8'(WE)};
  localparam logic [31:0] FMT1 = {8'(M_COLS), 8'(N_ROWS), 8'(LSB), 8'd0};

  logic [DATA_W-1:0] in_tdata;
  logic              in_tvalid, in_tlast, in_tready;
  logic [OUT_W-1:0]  out_tdata;
  logic              out_tvalid, out_tlast, out_tready;

  axi_mm_stream_bridge #(
    .ADDR_W(ADDR_W), .DATA_W(DATA_W), .S_DW(DATA_W), .M_DW(OUT_W),
    .MAX_BURST(32), .FMT0(FMT0), .FMT1(FMT1)
  ) u_bridge (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .m_axi_araddr, .m_axi_arlen, .m_axi_arsize, .m_axi_arburst,
    .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rresp, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready,
    .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst,
    .m_axi_awvalid, .m_axi_awready,
    .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast, .m_axi_wvalid, .m_axi_wready,
    .m_axi_bresp, .m_axi_bvalid, .m_axi_bready,
    .m_axis_tdata(in_tdata), .m_axis_tvalid(in_tvalid),
    .m_axis_tlast(in_tlast), .m_axis_tready(in_tready),
    .s_axis_tdata(out_tdata), .s_axis_tvalid(out_tvalid),
    .s_axis_tlast(out_tlast), .s_axis_tready(out_tready)
  );

  fdp_array_axis #(
    .N_ROWS(N_ROWS), .M_COLS(M_COLS), .WE(WE), .WF(WF),
    .OVF(OVF), .MSB(MSB), .LSB(LSB), .WEO(WE), .WFO(WF),
    .DW_IN(DATA_W), .DW_OUT(OUT_W), .FIFO_DEPTH(FIFO_DEPTH)
  ) u_array (
    .clk, .rst_n,
    .s_axis_tdata(in_tdata), .s_axis_tvalid(in_tvalid),
    .s_axis_tlast(in_tlast), .s_axis_tready(in_tready),
    .m_axis_tdata(out_tdata), .m_axis_tvalid(out_tvalid),
    .m_axis_tlast(out_tlast), .m_axis_tready(out_tready)
  );
endmodule
