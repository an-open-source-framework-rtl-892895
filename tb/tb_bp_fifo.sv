// tb_bp_fifo -- self-checking test of the backpressure FIFO.
//
// Random reservations (only while full_o is low), booked writes and reads
// against a queue model: checks the head word, empty_o, count_o and that
// full_o is raised exactly when another reservation would not fit.
module tb_bp_fifo;
  localparam int WD = 20, D = 8, R = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rsv, wr, rd, empty, full;
  logic [WD-1:0] wdata, rdata;
  logic [$clog2(D+1)-1:0] count;
  logic [WD-1:0] q [$];
  int booked = 0, checks = 0, failures = 0, n_full = 0;

  bp_fifo #(.WIDTH(WD), .DEPTH(D), .RESERVE(R)) dut (
    .clk, .rst_n, .rsv_i(rsv), .wr_i(wr), .wdata_i(wdata), .rd_i(rd),
    .rdata_o(rdata), .empty_o(empty), .full_o(full), .count_o(count));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    rsv = 0; wr = 0; rd = 0; wdata = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty");
      chk(32'(count) == q.size(), "count");
      chk(full == (q.size() + booked + R > D), "full");
      if (full) n_full++;
      if (q.size() != 0) chk(rdata == q[0], "head");
      rsv   = !full && ($urandom_range(3) == 0);
      wr    = (booked > 0) && ($urandom_range(1) == 0);
      wdata = WD'($urandom);
      rd    = ($urandom_range(2) == 0) || (t % 500 > 450);
      if (t % 500 < 200) rd = ($urandom_range(5) == 0);   // let it fill
      @(posedge clk);
      if (rd && q.size() != 0) void'(q.pop_front());
      if (wr) begin q.push_back(wdata); booked--; end
      if (rsv) booked += R;
    end
    chk(n_full > 0, "full seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
