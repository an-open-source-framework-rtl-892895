// axi_mem_model -- behavioural model of shared host memory behind an AXI4
// slave port, for testbenches only (not synthesizable).
//
// Memory is a sparse associative array of DATA_W-bit lines indexed by
// byte address / (DATA_W/8). Read and write channels are served by two
// independent processes, one burst at a time each, INCR bursts only. Ready
// and valid signals are withheld at random, one clock in STALL (0..99)
// percent of the time, to exercise the master's handshakes. Counters of
// bursts and an error counter for bursts that cross a 4 KiB page are
// available to the testbench.
module axi_mem_model #(
  parameter int unsigned ADDR_W = 64,
  parameter int unsigned DATA_W = 1024,
  parameter int unsigned STALL  = 30
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [ADDR_W-1:0]   araddr,
  input  logic [7:0]          arlen,
  input  logic                arvalid,
  output logic                arready,
  output logic [DATA_W-1:0]   rdata,
  output logic [1:0]          rresp,
  output logic                rlast,
  output logic                rvalid,
  input  logic                rready,
  input  logic [ADDR_W-1:0]   awaddr,
  input  logic [7:0]          awlen,
  input  logic                awvalid,
  output logic                awready,
  input  logic [DATA_W-1:0]   wdata,
  input  logic                wlast,
  input  logic                wvalid,
  output logic                wready,
  output logic [1:0]          bresp,
  output logic                bvalid,
  input  logic                bready
);
  localparam int unsigned BEAT_B = DATA_W / 8;

  logic [DATA_W-1:0] mem [longint unsigned];
  int rd_bursts = 0, wr_bursts = 0, page_errors = 0, wlast_errors = 0;

  function automatic bit stall();
    return $urandom_range(99) < STALL;
  endfunction

  function automatic logic [DATA_W-1:0] peek(longint unsigned line);
    return mem.exists(line) ? mem[line] : '0;
  endfunction

  initial begin
    arready = 0; rvalid = 0; rlast = 0; rdata = '0; rresp = 2'b00;
    forever begin
      longint unsigned a;
      int n;
      @(posedge clk);
      if (!rst_n) continue;
      while (stall()) @(posedge clk);
      #1 arready = 1;
      do @(posedge clk); while (!arvalid);
      a = longint'(araddr) / BEAT_B; n = int'(arlen) + 1;
      if ((araddr % 4096) + longint'(n) * BEAT_B > 4096) page_errors++;
      rd_bursts++;
      #1 arready = 0;
      for (int k = 0; k < n; k++) begin
        while (stall()) begin rvalid = 0; @(posedge clk); #1; end
        rvalid = 1; rdata = peek(a + longint'(k)); rlast = (k == n - 1);
        do @(posedge clk); while (!rready);
        #1 rvalid = 0; rlast = 0;
      end
    end
  end

  initial begin
    awready = 0; wready = 0; bvalid = 0; bresp = 2'b00;
    forever begin
      longint unsigned a;
      int n;
      @(posedge clk);
      if (!rst_n) continue;
      while (stall()) @(posedge clk);
      #1 awready = 1;
      do @(posedge clk); while (!awvalid);
      a = longint'(awaddr) / BEAT_B; n = int'(awlen) + 1;
      if ((awaddr % 4096) + longint'(n) * BEAT_B > 4096) page_errors++;
      wr_bursts++;
      #1 awready = 0;
      for (int k = 0; k < n; k++) begin
        while (stall()) begin wready = 0; @(posedge clk); #1; end
        wready = 1;
        do @(posedge clk); while (!wvalid);
        mem[a + longint'(k)] = wdata;
        if (wlast != (k == n - 1)) wlast_errors++;
        #1 wready = 0;
      end
      bvalid = 1;
      do @(posedge clk); while (!bready);
      #1 bvalid = 0;
    end
  end
endmodule
