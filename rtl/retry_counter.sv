// retry_counter: the "retry counter entity" of the allocation control. It keeps
// the number of medium-access attempts of the current frame.
//
// As in the paper, the count increases by one on every clock edge where
// start_count is high and returns to 0 when reset is high. The count saturates
// at its maximum instead of wrapping (this design's choice).
//
// Timing: count_val is registered; reset has priority over start_count.
module retry_counter #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             reset,        // synchronous, active high
  input  logic             start_count,
  output logic [WIDTH-1:0] count_val
);

  always_ff @(posedge clk) begin
    if (reset)
      count_val <= '0;
    else if (start_count && count_val != '1)
      count_val <= count_val + 1'b1;
  end

endmodule
