// csram_ctrl -- core SRAM controller: which neuron row is being processed.
//
// The token controller pulses start at the beginning of a tick (row 0) and
// next after finishing a neuron. The controller keeps the row address that
// drives the core SRAM and raises done while the last row is selected, which
// tells the token controller that all neurons of the core have been
// evaluated. The counter and the done flag are this design's simplest
// realisation of the published function; the published text gives only what
// the controller does.
module csram_ctrl #(
  parameter int unsigned NEURONS = 256,
  localparam int unsigned AW     = $clog2(NEURONS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,   // select row 0
  input  logic          next,    // advance to the next row
  output logic [AW-1:0] row,
  output logic          done     // current row is the last one
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     row <= '0;
    else if (start) row <= '0;
    else if (next && !done) row <= row + 1'b1;
  end

  assign done = (row == AW'(NEURONS-1));

endmodule
