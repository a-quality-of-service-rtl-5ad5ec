// alloc_tick: periodic credit event for one thread.
//
// Produces ticks at the fraction num/den of the target's cycles: with num=1,
// den=4 (25% of the bandwidth) it ticks once every 4 cycles. An accumulator
// adds num every cycle; when the sum reaches den, it ticks and den is taken
// off. Rates that are not 1/k, such as 3/20 = 15%, come out exact on average,
// with ticks spread as evenly as whole cycles allow.
//
// Interface: num, den (unsigned, num <= den expected), tick out, registered.
// den = 0 gives no ticks. The accumulator resets to 0. The fractional encoding
// is this design's choice; the paper only asks for a periodic increment based
// on the allocation.
module alloc_tick #(
  parameter int unsigned RW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [RW-1:0] num,
  input  logic [RW-1:0] den,
  output logic          tick
);

  logic [RW:0] acc, sum;

  assign sum = acc + {1'b0, num};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      tick <= 1'b0;
    end else if (den == '0) begin
      acc  <= '0;
      tick <= 1'b0;
    end else if (sum >= {1'b0, den}) begin
      acc  <= sum - {1'b0, den};
      tick <= 1'b1;
    end else begin
      acc  <= sum;
      tick <= 1'b0;
    end
  end

endmodule
