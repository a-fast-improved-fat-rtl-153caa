// coarse_counter: free-running count of system clock cycles, the coarse part
// of every time stamp. It is shared by all channels and stored next to each
// fine time in the readout FIFO.
//
// Interface: synchronous active-high reset to zero, count increments every
// clock and wraps at 2**W. The paper names the counter only; its width and
// reset are this design's choices (W = 21 bits covers 17.5 ms at 120 MHz,
// longer than the 12.9 ms between hits of the published 77.8 Hz test).
module coarse_counter #(
  parameter int W = 21
) (
  input  logic         clk,
  input  logic         rst,
  output logic [W-1:0] count
);

  always_ff @(posedge clk) begin
    if (rst) count <= '0;
    else     count <= count + 1'b1;
  end

endmodule
