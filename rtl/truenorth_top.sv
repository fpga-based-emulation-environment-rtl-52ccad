// truenorth_top -- the emulated network: an NX x NY mesh of cores with an
// input buffer on one corner and an output buffer on the eastern edge.
//
// Core (x, y) has index y*NX + x; north is +y, east is +x. Neighbouring
// routers are joined by their links (packet + valid forwards, read_enable
// backwards). Host packets enter through the input buffer (tick_fifo) into
// the west link of core (0, 0): a packet for core (x, y) carries dx = x and
// dy = y. They are released into the mesh at each tick. Packets that leave
// the mesh eastwards are output spikes: the output buffer collects them with
// their mesh row and releases them to the host after the next tick. Packets
// that leave the mesh on the other three edges have no destination; they are
// drained and counted in edge_drops. The output buffer must hold one tick's
// output (OUT_DEPTH entries): if a tick sends more, the eastern links back
// up and the sending cores stall until the next tick pulse releases it.
//
// tick is the global 1 kHz time step, one clock wide; it must not arrive
// while busy (a core then reports tc_error). Configuration reaches core
// cfg_core (index as above) through the core's configuration port. Per-core
// error flags are kept apart: sched_error (a spike aimed at the active tick)
// and tc_error (token controller). The default 5 x 1 mesh is the size of the
// five-core MNIST network; the mesh arrangement, the input and output points
// and the edge handling are this design's choices. Its ports stand for the
// DMA streams of the host system.
module truenorth_top
  import tn_pkg::*;
#(
  parameter int unsigned NX            = 5,
  parameter int unsigned NY            = 1,
  parameter int unsigned NEURONS       = 256,
  parameter int unsigned AXONS         = 256,
  parameter int unsigned FIFO_DEPTH    = 4,
  parameter int unsigned IN_DEPTH      = 1024,
  parameter int unsigned OUT_DEPTH     = 256,
  parameter bit          SYMMETRIC_THR = 1'b0,
  localparam int unsigned NC           = NX * NY,
  localparam int unsigned CW           = (NC > 1) ? $clog2(NC) : 1,
  localparam int unsigned RW           = (NY > 1) ? $clog2(NY) : 1,
  localparam int unsigned ROW_W        = AXONS + PARAM_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,
  // host -> network spike packets
  input  logic             in_valid,
  input  pkt_t             in_data,
  output logic             in_ready,
  // network -> host output spikes
  output logic             out_valid,
  output pkt_t             out_data,
  output logic [RW-1:0]    out_row,
  input  logic             out_rd,
  // configuration
  input  logic             cfg_we,
  input  logic [CW-1:0]    cfg_core,
  input  logic             cfg_sel,
  input  logic [7:0]       cfg_addr,
  input  logic [ROW_W-1:0] cfg_wdata,
  output logic             cfg_ready,
  // status
  output logic             busy,
  output logic [NC-1:0]    sched_error,
  output logic [NC-1:0]    tc_error,
  output logic [NC-1:0]    spike_sent,
  output logic [15:0]      edge_drops
);

  // Links named by the core that drives the data.
  logic  [NC-1:0] eo_v, eo_rd, wo_v, wo_rd, no_v, no_rd, so_v, so_rd;
  pkt_t  [NC-1:0] eo_d, wo_d;
  vpkt_t [NC-1:0] no_d, so_d;
  logic  [NC-1:0] wi_v, wi_rd, ei_v, ei_rd, si_v, si_rd, ni_v, ni_rd;
  pkt_t  [NC-1:0] wi_d, ei_d;
  vpkt_t [NC-1:0] si_d, ni_d;
  logic  [NC-1:0] c_busy, c_cfg_ready;

  // ------------------------------------------------------- input buffer
  logic ib_valid, ib_rd;
  logic [PKT_W-1:0] ib_data;

  tick_fifo #(.W(PKT_W), .DEPTH(IN_DEPTH)) u_in (
    .clk, .rst_n, .tick, .in_valid, .in_data, .in_ready,
    .out_valid(ib_valid), .out_data(ib_data), .out_rd(ib_rd), .level());

  // -------------------------------------------------------- output buffer
  logic [NY-1:0] ob_valid, ob_rd;
  pkt_t [NY-1:0] ob_data;

  output_buffer #(.NROWS(NY), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n, .tick, .link_valid(ob_valid), .link_data(ob_data), .link_rd(ob_rd),
    .out_valid, .out_data, .out_row, .out_rd);

  // ----------------------------------------------------------------- mesh
  for (genvar y = 0; y < NY; y++) begin : g_row
    for (genvar x = 0; x < NX; x++) begin : g_col
      localparam int unsigned C = y*NX + x;

      // west input: from the west neighbour, or the input buffer at (0,0)
      if (x > 0) begin : g_wi
        assign wi_v[C] = eo_v[C-1];
        assign wi_d[C] = eo_d[C-1];
        assign eo_rd[C-1] = wi_rd[C];
      end else if (y == 0) begin : g_wi_in
        assign wi_v[C] = ib_valid;
        assign wi_d[C] = pkt_t'(ib_data);
        assign ib_rd   = wi_rd[C];
      end else begin : g_wi_none
        assign wi_v[C] = 1'b0;
        assign wi_d[C] = '0;
      end

      // east input: from the east neighbour; the east edge feeds the output buffer
      if (x < NX-1) begin : g_ei
        assign ei_v[C] = wo_v[C+1];
        assign ei_d[C] = wo_d[C+1];
        assign wo_rd[C+1] = ei_rd[C];
      end else begin : g_ei_edge
        assign ei_v[C]    = 1'b0;
        assign ei_d[C]    = '0;
        assign ob_valid[y] = eo_v[C];
        assign ob_data[y]  = eo_d[C];
        assign eo_rd[C]    = ob_rd[y];
      end

      // west edge output has no destination: drained
      if (x == 0) begin : g_wo_edge
        assign wo_rd[C] = wo_v[C];
      end

      // south input: from the core below (its north output)
      if (y > 0) begin : g_si
        assign si_v[C] = no_v[C-NX];
        assign si_d[C] = no_d[C-NX];
        assign no_rd[C-NX] = si_rd[C];
      end else begin : g_si_edge
        assign si_v[C]  = 1'b0;
        assign si_d[C]  = '0;
        assign so_rd[C] = so_v[C];     // south edge output drained
      end

      // north input: from the core above (its south output)
      if (y < NY-1) begin : g_ni
        assign ni_v[C] = so_v[C+NX];
        assign ni_d[C] = so_d[C+NX];
        assign so_rd[C+NX] = ni_rd[C];
      end else begin : g_ni_edge
        assign ni_v[C]  = 1'b0;
        assign ni_d[C]  = '0;
        assign no_rd[C] = no_v[C];     // north edge output drained
      end

      truenorth_core #(
        .NEURONS(NEURONS), .AXONS(AXONS), .FIFO_DEPTH(FIFO_DEPTH), .SYMMETRIC_THR(SYMMETRIC_THR)
      ) u_core (
        .clk, .rst_n, .tick,
        .cfg_we(cfg_we && (cfg_core == CW'(C))), .cfg_sel, .cfg_addr, .cfg_wdata,
        .cfg_ready(c_cfg_ready[C]),
        .west_in_valid(wi_v[C]), .west_in_data(wi_d[C]), .west_in_rd(wi_rd[C]),
        .east_in_valid(ei_v[C]), .east_in_data(ei_d[C]), .east_in_rd(ei_rd[C]),
        .east_out_valid(eo_v[C]), .east_out_data(eo_d[C]), .east_out_rd(eo_rd[C]),
        .west_out_valid(wo_v[C]), .west_out_data(wo_d[C]), .west_out_rd(wo_rd[C]),
        .south_in_valid(si_v[C]), .south_in_data(si_d[C]), .south_in_rd(si_rd[C]),
        .north_in_valid(ni_v[C]), .north_in_data(ni_d[C]), .north_in_rd(ni_rd[C]),
        .north_out_valid(no_v[C]), .north_out_data(no_d[C]), .north_out_rd(no_rd[C]),
        .south_out_valid(so_v[C]), .south_out_data(so_d[C]), .south_out_rd(so_rd[C]),
        .busy(c_busy[C]), .sched_error(sched_error[C]), .tc_error(tc_error[C]),
        .spike_sent(spike_sent[C]));
    end
  end

  assign busy      = |c_busy;
  assign cfg_ready = &c_cfg_ready;

  // Packets drained at the west, north and south edges.
  logic [7:0] drops_now;
  always_comb begin
    drops_now = '0;
    for (int c = 0; c < NC; c++) begin
      if ((c % NX) == 0 && wo_v[c])      drops_now = drops_now + 1'b1;
      if ((c / NX) == 0 && so_v[c])      drops_now = drops_now + 1'b1;
      if ((c / NX) == NY-1 && no_v[c])   drops_now = drops_now + 1'b1;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) edge_drops <= '0;
    else        edge_drops <= edge_drops + 16'(drops_now);
  end

endmodule
