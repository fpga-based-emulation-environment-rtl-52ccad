// csram_mem -- core SRAM array: one row per neuron, one whole row per cycle.
//
// Each of the NEURONS rows holds everything about one neuron: the synapse
// bits of all AXONS input axons followed by tn_pkg::neuron_params_t
// (potential, reset potential, four weights, leak, two thresholds, reset
// mode, spike destination and delivery tick). With the defaults a row is
// 256 + 130 = 386 bits and the array 256 x 386 = 98,816 bits.
//
// The whole row is read in one clock, as the neuron block needs all
// parameters at once. Read is synchronous: rdata shows mem[raddr] one cycle
// after raddr is presented (block-RAM style). One write port writes a whole
// row; a write and a read of the same row in one cycle return the old row.
// Keeping the array apart from its controller (csram_ctrl) follows the
// published split that lets synthesis map it onto block RAM (5 x 512x72
// plus one 512x36 on the target FPGA). There is no reset: rows hold whatever
// was loaded into them.
module csram_mem #(
  parameter int unsigned NEURONS = 256,
  parameter int unsigned ROW_W   = 386,
  localparam int unsigned AW     = $clog2(NEURONS)
) (
  input  logic             clk,
  input  logic [AW-1:0]    raddr,
  output logic [ROW_W-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [ROW_W-1:0] wdata
);

  logic [ROW_W-1:0] mem [NEURONS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
