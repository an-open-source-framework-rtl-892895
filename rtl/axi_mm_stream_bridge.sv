// axi_mm_stream_bridge -- state machines that move data between shared
// memory (AXI4 memory-mapped, as offered by the host-coherent shell) and
// the AXI-stream ports of the FDP array.
//
// Software programs a small AXI4-Lite register file and starts a job:
//   0x00 CTRL      W   bit 0: start (self-clearing)
//   0x04 STATUS    R   bit 0: busy, bit 1: done (cleared by start)
//   0x08 SRC_LO    RW  byte address of the input beats, bits 31:0
//   0x0C SRC_HI    RW  bits 63:32
//   0x10 DST_LO    RW  byte address of the output beats, bits 31:0
//   0x14 DST_HI    RW  bits 63:32
//   0x18 N_IN      RW  number of input beats (one per step of the product)
//   0x1C BLOCK_LEN RW  steps per dot product; tlast is raised every BLOCK_LEN
//   0x20 N_OUT     RW  number of output beats to write back
//   0x24 FMT0      R   {MSB[7:0], OVF[7:0], WF[7:0], WE[7:0]}
//   0x28 FMT1      R   {M_COLS[7:0], N_ROWS[7:0], LSB[7:0], format id 0}
// FMT0/FMT1 are the configuration registers from which the host library
// learns the computer format of the kernel (and casts its matrices if they
// differ).
//
// Read engine: issues AXI4 INCR read bursts of up to MAX_BURST beats (never
// across a 4 KiB boundary), one burst at a time, and streams the returned
// beats into the array with tlast on every BLOCK_LEN-th beat; the array's
// tready throttles the R channel directly. Write engine: issues AXI4 write
// bursts for the array's output stream, one output row per data beat,
// zero-padded to DATA_W bits, and waits for each write response. The job is
// done when all N_IN beats were read and all N_OUT beats written.
//
// The data itself is not buffered: R data goes straight to the stream
// output and the stream input straight to W data, so most output bits are
// wires from inputs, and the padding bits of W data are constant zero.
//
// Addresses must be aligned to DATA_W/8 bytes. Only OKAY responses are
// expected; an error response sets STATUS bit 2 but does not stop the job.
// All of the register map, burst policy and padding are choices of this
// design; the source states only that a state machine translates between
// AXI-MM and AXI-stream and that the format is read from a register.
module axi_mm_stream_bridge #(
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned DATA_W    = 1024,
  parameter int unsigned S_DW      = 1024,   // array input stream width
  parameter int unsigned M_DW      = 512,    // array output stream width
  parameter int unsigned MAX_BURST = 32,
  parameter logic [31:0] FMT0      = 32'h0,
  parameter logic [31:0] FMT1      = 32'h0
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite slave (registers)
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
  // AXI4 master (shared memory)
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
  output logic                m_axi_bready,
  // AXI-stream to the array
  output logic [S_DW-1:0]     m_axis_tdata,
  output logic                m_axis_tvalid,
  output logic                m_axis_tlast,
  input  logic                m_axis_tready,
  // AXI-stream from the array
  input  logic [M_DW-1:0]     s_axis_tdata,
  input  logic                s_axis_tvalid,
  input  logic                s_axis_tlast,
  output logic                s_axis_tready
);
  localparam int unsigned BEAT_B  = DATA_W / 8;           // bytes per beat
  localparam int unsigned BSH     = $clog2(BEAT_B);
  localparam int unsigned BPP     = 4096 / BEAT_B;        // beats per 4 KiB
  localparam logic [2:0]  AXSIZE  = 3'(BSH);

  // ---------------- register file ----------------
  logic [ADDR_W-1:0] src, dst;
  logic [31:0]       n_in, blk_len, n_out;
  logic              start, busy, done, err;

  logic       aw_got, w_got;
  logic [7:0] aw_q;
  logic [31:0] w_q;

  assign s_axil_awready = ~aw_got & ~s_axil_bvalid;
  assign s_axil_wready  = ~w_got & ~s_axil_bvalid;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_arready = ~s_axil_rvalid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      aw_got <= 1'b0; w_got <= 1'b0; aw_q <= '0; w_q <= '0;
      s_axil_bvalid <= 1'b0;
      src <= '0; dst <= '0; n_in <= '0; blk_len <= 32'd1; n_out <= '0;
      start <= 1'b0;
    end else begin
      start <= 1'b0;
      if (s_axil_awvalid && s_axil_awready) begin aw_got <= 1'b1; aw_q <= s_axil_awaddr; end
      if (s_axil_wvalid && s_axil_wready)   begin w_got  <= 1'b1; w_q  <= s_axil_wdata;  end
      if (aw_got && w_got) begin
        aw_got <= 1'b0; w_got <= 1'b0; s_axil_bvalid <= 1'b1;
        unique case (aw_q[7:2])
          6'h00: start <= w_q[0] & ~busy;
          6'h02: src[31:0]  <= w_q;
          6'h03: src[ADDR_W-1:32] <= w_q[ADDR_W-33:0];
          6'h04: dst[31:0]  <= w_q;
          6'h05: dst[ADDR_W-1:32] <= w_q[ADDR_W-33:0];
          6'h06: n_in    <= w_q;
          6'h07: blk_len <= (w_q == 0) ? 32'd1 : w_q;
          6'h08: n_out   <= w_q;
          default: ;
        endcase
      end
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0; s_axil_rdata <= '0;
    end else begin
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        unique case (s_axil_araddr[7:2])
          6'h01: s_axil_rdata <= {29'd0, err, done, busy};
          6'h02: s_axil_rdata <= src[31:0];
          6'h03: s_axil_rdata <= 32'(src[ADDR_W-1:32]);
          6'h04: s_axil_rdata <= dst[31:0];
          6'h05: s_axil_rdata <= 32'(dst[ADDR_W-1:32]);
          6'h06: s_axil_rdata <= n_in;
          6'h07: s_axil_rdata <= blk_len;
          6'h08: s_axil_rdata <= n_out;
          6'h09: s_axil_rdata <= FMT0;
          6'h0A: s_axil_rdata <= FMT1;
          default: s_axil_rdata <= '0;
        endcase
      end else if (s_axil_rvalid && s_axil_rready) begin
        s_axil_rvalid <= 1'b0;
      end
    end
  end

  // ---------------- read engine ----------------
  typedef enum logic [1:0] {RD_IDLE, RD_ADDR, RD_DATA} rd_state_e;
  rd_state_e         rd_st;
  logic [ADDR_W-1:0] rd_addr;
  logic [31:0]       rd_left;      // beats not yet requested
  logic [31:0]       rd_recv;      // beats streamed so far
  logic [31:0]       blk_cnt;
  logic [8:0]        rd_burst;
  logic              rd_fire;

  function automatic logic [8:0] burst_len(logic [ADDR_W-1:0] a, logic [31:0] left);
    int unsigned to_page, n;
    to_page = BPP - int'((a >> BSH) % ADDR_W'(BPP));
    n = MAX_BURST;
    if (to_page < n) n = to_page;
    if (left < n) n = left;
    return 9'(n);
  endfunction

  assign m_axi_arvalid = (rd_st == RD_ADDR);
  assign m_axi_araddr  = rd_addr;
  assign m_axi_arlen   = 8'(rd_burst - 9'd1);
  assign m_axi_arsize  = AXSIZE;
  assign m_axi_arburst = 2'b01;
  assign m_axis_tdata  = S_DW'(m_axi_rdata);
  assign m_axis_tvalid = (rd_st == RD_DATA) & m_axi_rvalid;
  assign m_axis_tlast  = (blk_cnt == blk_len - 1);
  assign m_axi_rready  = (rd_st == RD_DATA) & m_axis_tready;
  assign rd_fire       = m_axi_rvalid & m_axi_rready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_st <= RD_IDLE; rd_addr <= '0; rd_left <= '0; rd_recv <= '0;
      blk_cnt <= '0; rd_burst <= '0;
    end else begin
      unique case (rd_st)
        RD_IDLE: if (start) begin
          rd_addr <= src; rd_left <= n_in; rd_recv <= '0; blk_cnt <= '0;
          if (n_in != 0) begin
            rd_burst <= burst_len(src, n_in);
            rd_st    <= RD_ADDR;
          end
        end
        RD_ADDR: if (m_axi_arready) begin
          rd_left <= rd_left - 32'(rd_burst);
          rd_addr <= rd_addr + (ADDR_W'(rd_burst) << BSH);
          rd_st   <= RD_DATA;
        end
        RD_DATA: if (rd_fire) begin
          rd_recv <= rd_recv + 1;
          blk_cnt <= (blk_cnt == blk_len - 1) ? '0 : blk_cnt + 1;
          if (m_axi_rlast) begin
            if (rd_left == 0) rd_st <= RD_IDLE;
            else begin
              rd_burst <= burst_len(rd_addr, rd_left);
              rd_st    <= RD_ADDR;
            end
          end
        end
        default: rd_st <= RD_IDLE;
      endcase
    end
  end

  // ---------------- write engine ----------------
  typedef enum logic [1:0] {WR_IDLE, WR_ADDR, WR_DATA, WR_RESP} wr_state_e;
  wr_state_e         wr_st;
  logic [ADDR_W-1:0] wr_addr;
  logic [31:0]       wr_left;
  logic [8:0]        wr_burst, wr_beat;
  logic              wr_fire;

  assign m_axi_awvalid = (wr_st == WR_ADDR);
  assign m_axi_awaddr  = wr_addr;
  assign m_axi_awlen   = 8'(wr_burst - 9'd1);
  assign m_axi_awsize  = AXSIZE;
  assign m_axi_awburst = 2'b01;
  assign m_axi_wdata   = DATA_W'(s_axis_tdata);
  assign m_axi_wstrb   = '1;
  assign m_axi_wlast   = (wr_beat == wr_burst - 9'd1);
  assign m_axi_wvalid  = (wr_st == WR_DATA) & s_axis_tvalid;
  assign s_axis_tready = (wr_st == WR_DATA) & m_axi_wready;
  assign m_axi_bready  = (wr_st == WR_RESP);
  assign wr_fire       = m_axi_wvalid & m_axi_wready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_st <= WR_IDLE; wr_addr <= '0; wr_left <= '0; wr_burst <= '0; wr_beat <= '0;
    end else begin
      unique case (wr_st)
        WR_IDLE: if (start && n_out != 0) begin
          wr_addr  <= dst; wr_left <= n_out;
          wr_burst <= burst_len(dst, n_out);
          wr_st    <= WR_ADDR;
        end
        WR_ADDR: if (m_axi_awready) begin
          wr_left <= wr_left - 32'(wr_burst);
          wr_addr <= wr_addr + (ADDR_W'(wr_burst) << BSH);
          wr_beat <= '0;
          wr_st   <= WR_DATA;
        end
        WR_DATA: if (wr_fire) begin
          wr_beat <= wr_beat + 1'b1;
          if (m_axi_wlast) wr_st <= WR_RESP;
        end
        WR_RESP: if (m_axi_bvalid) begin
          if (wr_left == 0) wr_st <= WR_IDLE;
          else begin
            wr_burst <= burst_len(wr_addr, wr_left);
            wr_st    <= WR_ADDR;
          end
        end
        default: wr_st <= WR_IDLE;
      endcase
    end
  end

  // ---------------- job status ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; err <= 1'b0;
    end else begin
      if (start) begin
        busy <= 1'b1; done <= 1'b0; err <= 1'b0;
      end else if (busy && rd_st == RD_IDLE && wr_st == WR_IDLE) begin
        busy <= 1'b0; done <= 1'b1;
      end
      if ((rd_fire && m_axi_rresp != 2'b00) ||
          (m_axi_bvalid && m_axi_bready && m_axi_bresp != 2'b00)) err <= 1'b1;
    end
  end

  // AXI rules: a request, once valid, stays valid and stable until accepted
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_arvalid && !m_axi_arready |=> m_axi_arvalid && $stable(m_axi_araddr) && $stable(m_axi_arlen));
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_awvalid && !m_axi_awready |=> m_axi_awvalid && $stable(m_axi_awaddr) && $stable(m_axi_awlen));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_wvalid && !m_axi_wready |=> m_axi_wvalid && $stable(m_axi_wdata) && $stable(m_axi_wlast));
  // a burst never crosses a 4 KiB page
  a_ar_page: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_arvalid |-> ((32'(m_axi_araddr[11:0]) >> BSH) + 32'(m_axi_arlen)) < BPP);
endmodule
