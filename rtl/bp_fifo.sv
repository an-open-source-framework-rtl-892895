// bp_fifo -- backpressure FIFO at the bottom of the array.
//
// The systolic array cannot be stopped: once a block of operands has
// entered, its results come out a fixed number of clocks later. The FIFO
// turns that into a two-way valid/ready handshake: its empty flag drives
// the output stream's tvalid and its full flag drives the input stream's
// tready.
//
// To make "full" safe for results still inside the array, space is
// reserved when a block enters: a pulse on rsv_i books RESERVE entries, and
// each write turns one booked entry into a stored one. full_o is raised as
// soon as another reservation would not fit (stored + booked + RESERVE >
// DEPTH), so results already under way always find room. This reservation
// scheme is a choice of this design; the source only states that full and
// empty generate ready and valid.
//
// Interface: write port wr_i/wdata_i (writes must have been booked), read
// port in first-word-fall-through style: rdata_o is the head entry whenever
// empty_o is low, rd_i pops it. Storage is a register array of DEPTH words.
module bp_fifo #(
  parameter int unsigned WIDTH   = 496,
  parameter int unsigned DEPTH   = 128,
  parameter int unsigned RESERVE = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rsv_i,
  input  logic             wr_i,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic             rd_i,
  output logic [WIDTH-1:0] rdata_o,
  output logic             empty_o,
  output logic             full_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [CW-1:0]    count, booked;
  logic             do_rd;

  assign do_rd   = rd_i & ~empty_o;
  assign empty_o = (count == '0);
  assign full_o  = (32'(count) + 32'(booked) + RESERVE) > DEPTH;
  assign rdata_o = mem[rptr];
  assign count_o = count;

  always_ff @(posedge clk) begin
    if (wr_i) mem[wptr] <= wdata_i;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr   <= '0;
      rptr   <= '0;
      count  <= '0;
      booked <= '0;
    end else begin
      if (wr_i)  wptr <= (32'(wptr) == DEPTH - 1) ? '0 : wptr + 1'b1;
      if (do_rd) rptr <= (32'(rptr) == DEPTH - 1) ? '0 : rptr + 1'b1;
      count  <= count + CW'(wr_i) - CW'(do_rd);
      booked <= booked + (rsv_i ? CW'(RESERVE) : '0) - CW'(wr_i);
    end
  end

  a_write_booked: assert property (@(posedge clk) disable iff (!rst_n)
    wr_i |-> (booked != '0 || rsv_i));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(wr_i && !do_rd && 32'(count) == DEPTH));
endmodule
