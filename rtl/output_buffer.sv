// output_buffer -- collects the network's output spikes tick by tick.
//
// Output packets leave the mesh eastwards, one link per mesh row. A
// round-robin merge reads them from the routers' east output buffers
// (read_enable back-pressure, as between routers) and stores each packet
// together with the mesh row it came from. Everything collected during a
// tick is handed to the user after the next tick pulse, so the user sees the
// outputs of a tick all at once and one tick late, which is how the
// reference simulator reports outputs. Output side: out_valid / out_data /
// out_row, popped by out_rd. Storing the row index and using the eastern
// mesh edge as the output port are this design's choices. With a single
// mesh row (NROWS = 1) out_row is one bit that is always 0.
module output_buffer
  import tn_pkg::*;
#(
  parameter int unsigned NROWS = 1,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned RW   = (NROWS > 1) ? $clog2(NROWS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 tick,
  input  logic [NROWS-1:0]     link_valid,
  input  pkt_t [NROWS-1:0]     link_data,
  output logic [NROWS-1:0]     link_rd,
  output logic                 out_valid,
  output pkt_t                 out_data,
  output logic [RW-1:0]        out_row,
  input  logic                 out_rd
);

  localparam int unsigned EW = RW + PKT_W;

  logic [NROWS-1:0][EW-1:0] with_row;
  logic                     m_valid, f_ready;
  logic [EW-1:0]            m_data, f_data;

  always_comb
    for (int r = 0; r < NROWS; r++) with_row[r] = {RW'(r), link_data[r]};

  tn_merge #(.N(NROWS), .W(EW)) u_merge (
    .clk, .rst_n, .valid(link_valid), .data(with_row), .rd_en(link_rd),
    .out_ready(f_ready), .out_valid(m_valid), .out_data(m_data));

  tick_fifo #(.W(EW), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .tick, .in_valid(m_valid), .in_data(m_data), .in_ready(f_ready),
    .out_valid, .out_data(f_data), .out_rd, .level());

  assign {out_row, out_data} = f_data;

endmodule
