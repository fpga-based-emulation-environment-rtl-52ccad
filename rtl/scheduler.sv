// scheduler -- per-core spike store: AXONS rows by 16 tick columns.
//
// A spike packet that reaches its destination core is 12 bits: axon [11:4]
// and tick offset [3:0]. The scheduler sets bit (axon, column) with column =
// active column + tick offset (mod 16), so the spike is seen offset ticks
// later. The active column is a 4-bit counter that advances on every tick
// pulse from the token controller (this replaces the 16 token-passing
// control blocks of the original asynchronous scheduler). A spike whose
// column would be the active one (offset 0 mod 16) is dropped and raises
// error for one cycle; nothing stops. The error goes straight to the user,
// not through the token controller, so scheduler faults can be told apart
// from token controller faults. clear wipes the active column once the core
// has finished the tick.
//
// Interface: axon_spikes is the whole active column, read combinationally
// (LUT memory on the FPGA). A write lands at the next clock; the counter
// advances at the clock where tick is high. The column arithmetic relative to
// the active column follows the published text; the counter, equality check
// and clear follow the published block diagram. Reset clears all columns.
module scheduler
  import tn_pkg::*;
#(
  parameter int unsigned AXONS = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                tick,          // advance the active column
  input  logic                clear,         // wipe the active column
  input  logic                wr_en,         // spike packet from the router
  input  lpkt_t               wr_pkt,
  output logic [AXONS-1:0]    axon_spikes,   // active column
  output logic [TICK_W-1:0]   rd_addr,       // active column index
  output logic                error          // spike aimed at the active column
);

  localparam int unsigned XW = (AXONS > 1) ? $clog2(AXONS) : 1;
  logic [AXONS-1:0] cols [NTICKS];
  logic [TICK_W-1:0] wcol;
  logic              hit_active;

  assign wcol       = rd_addr + wr_pkt.tick;
  assign hit_active = (wcol == rd_addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_addr <= '0;
      error   <= 1'b0;
      for (int c = 0; c < NTICKS; c++) cols[c] <= '0;
    end else begin
      error <= wr_en && hit_active;
      if (clear) cols[rd_addr] <= '0;
      if (wr_en && !hit_active && (32'(wr_pkt.axon) < AXONS))
        cols[wcol][XW'(wr_pkt.axon)] <= 1'b1;
      if (tick) rd_addr <= rd_addr + 1'b1;
    end
  end

  assign axon_spikes = cols[rd_addr];

endmodule
