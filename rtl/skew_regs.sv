// skew_regs -- triangle of delay registers that skews (or de-skews) the
// lanes of a systolic array.
//
// In a systolic array an operand reaches PE (i,j) i+j clocks after it
// enters, so the lanes feeding the array must be staggered: lane l is
// delayed by l clocks (REVERSE = 0) or by LANES-1-l clocks (REVERSE = 1).
// The same block, with the other orientation, re-aligns the results that
// leave the array staggered. Each lane is a shift register of its own
// length built from flip-flops; lane delay 0 is a plain wire.
//
// Interface: din/dout are LANES words of WIDTH bits, all lanes sampled on
// the same clock. Latency of lane l: l (or LANES-1-l) clocks. Registers
// reset to zero, so lanes carrying a valid bit start empty.
//
// The staggered registers between the matrix buffers and the array appear
// in the source's array drawing; their construction here is this design's.
module skew_regs #(
  parameter int unsigned LANES   = 4,
  parameter int unsigned WIDTH   = 8,
  parameter bit          REVERSE = 1'b0
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [LANES-1:0][WIDTH-1:0] din,
  output logic [LANES-1:0][WIDTH-1:0] dout
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    localparam int unsigned D = REVERSE ? (LANES - 1 - l) : l;
    if (D == 0) begin : g_wire
      assign dout[l] = din[l];
    end else begin : g_delay
      logic [D-1:0][WIDTH-1:0] sr;
      always_ff @(posedge clk) begin
        if (!rst_n) sr <= '0;
        else begin
          sr[0] <= din[l];
          for (int k = 1; k < int'(D); k++) sr[k] <= sr[k-1];
        end
      end
      assign dout[l] = sr[D-1];
    end
  end
endmodule
