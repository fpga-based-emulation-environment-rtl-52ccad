// truenorth_core -- one neurosynaptic core: 256 neurons x 256 axons.
//
// Five parts: the token controller sequences everything; the core SRAM
// (array csram_mem plus row controller csram_ctrl) holds one row per neuron;
// the neuron block integrates; the scheduler stores incoming spikes by axon
// and tick; the router moves spike packets through the mesh. On each tick
// the token controller advances the scheduler's active column, then for each
// neuron reads its row, feeds the neuron block one axon per clock (weight
// picked by the axon's type, added when the axon has a spike in the active
// column and a synapse to the neuron), writes the new potential back and, if
// the neuron fired, hands the row's 30-bit destination field to the router as
// a spike packet. At the end it clears the active column.
//
// Every axon has a 2-bit type that selects one of the neuron's four weights;
// the types are a per-core table of AXONS entries loaded with the rows.
// Configuration: while the core is idle (cfg_ready), cfg_we writes row
// cfg_addr of the core SRAM (cfg_sel = 0, whole row) or the type of axon
// cfg_addr (cfg_sel = 1, low 2 bits of cfg_wdata). Negative reset value: the
// stored reset potential when reset_mode = 0, its negation when 1.
//
// Timing: a tick takes 2 + NEURONS*(AXONS+3) clocks plus any router stall;
// with the defaults 66,306 clocks, i.e. about 66 MHz for the 1 kHz tick rate.
// The split into five parts, the SRAM row, the scheduler and the FSM follow
// the published design; the axon type table, the configuration port and the
// reset-mode meaning are this design's choices.
module truenorth_core
  import tn_pkg::*;
#(
  parameter int unsigned NEURONS       = 256,
  parameter int unsigned AXONS         = 256,
  parameter int unsigned FIFO_DEPTH    = 4,
  parameter bit          SYMMETRIC_THR = 1'b0,
  localparam int unsigned ROW_W        = AXONS + PARAM_W,
  localparam int unsigned NAW          = $clog2(NEURONS),
  localparam int unsigned XW           = $clog2(AXONS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,
  // configuration
  input  logic             cfg_we,
  input  logic             cfg_sel,
  input  logic [7:0]       cfg_addr,
  input  logic [ROW_W-1:0] cfg_wdata,
  output logic             cfg_ready,
  // mesh links (see router)
  input  logic  west_in_valid,  input  pkt_t  west_in_data,  output logic west_in_rd,
  input  logic  east_in_valid,  input  pkt_t  east_in_data,  output logic east_in_rd,
  output logic  east_out_valid, output pkt_t  east_out_data, input  logic east_out_rd,
  output logic  west_out_valid, output pkt_t  west_out_data, input  logic west_out_rd,
  input  logic  south_in_valid, input  vpkt_t south_in_data, output logic south_in_rd,
  input  logic  north_in_valid, input  vpkt_t north_in_data, output logic north_in_rd,
  output logic  north_out_valid,output vpkt_t north_out_data,input  logic north_out_rd,
  output logic  south_out_valid,output vpkt_t south_out_data,input  logic south_out_rd,
  // status
  output logic             busy,
  output logic             sched_error,
  output logic             tc_error,
  output logic             spike_sent     // a neuron of this core fired (one clock)
);

  // ------------------------------------------------------------ core SRAM
  logic [NAW-1:0]   row;
  logic             csram_start, csram_next, csram_done, csram_we;
  logic [ROW_W-1:0] rdata, wdata;
  logic [NAW-1:0]   waddr;
  logic             we;
  logic [AXONS-1:0] synapses;
  neuron_params_t   prm, prm_w;

  csram_ctrl #(.NEURONS(NEURONS)) u_ctrl (
    .clk, .rst_n, .start(csram_start), .next(csram_next), .row, .done(csram_done));

  assign {synapses, prm} = rdata;

  logic signed [POT_W-1:0] v_next;
  always_comb begin
    prm_w           = prm;
    prm_w.potential = v_next;
    if (cfg_ready && cfg_we && !cfg_sel) begin
      we    = 1'b1;
      waddr = NAW'(cfg_addr);
      wdata = cfg_wdata;
    end else begin
      we    = csram_we;
      waddr = row;
      wdata = {synapses, prm_w};
    end
  end

  csram_mem #(.NEURONS(NEURONS), .ROW_W(ROW_W)) u_mem (
    .clk, .raddr(row), .rdata, .we, .waddr, .wdata);

  // ---------------------------------------------------------- axon types
  logic [G_W-1:0] axon_type [AXONS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int a = 0; a < AXONS; a++) axon_type[a] <= '0;
    else if (cfg_ready && cfg_we && cfg_sel && (32'(cfg_addr) < AXONS))
      axon_type[XW'(cfg_addr)] <= cfg_wdata[G_W-1:0];
  end

  // ----------------------------------------------------------- scheduler
  logic             sched_tick, sched_clear, li_valid;
  lpkt_t            li_data;
  logic [AXONS-1:0] axon_spikes;

  scheduler #(.AXONS(AXONS)) u_sched (
    .clk, .rst_n, .tick(sched_tick), .clear(sched_clear), .wr_en(li_valid), .wr_pkt(li_data),
    .axon_spikes, .rd_addr(), .error(sched_error));

  // ---------------------------------------------------- token controller
  logic [XW-1:0] axon_idx;
  logic          nb_new, nb_proc, nb_spike, r_ready, spike_valid;

  token_controller #(.AXONS(AXONS)) u_tc (
    .clk, .rst_n, .tick, .axon_spikes, .sched_tick, .sched_clear,
    .csram_done, .csram_start, .csram_next, .csram_we, .synapses,
    .axon_idx, .nb_new_neuron(nb_new), .nb_process_spike(nb_proc), .nb_spike,
    .router_ready(r_ready), .spike_valid, .busy, .error(tc_error));

  assign cfg_ready  = !busy;
  assign spike_sent = spike_valid;

  // -------------------------------------------------------- neuron block
  neuron_block #(.SYMMETRIC_THR(SYMMETRIC_THR)) u_nb (
    .clk, .rst_n, .weights(prm.weights), .g(axon_type[axon_idx]),
    .process_spike(nb_proc), .new_neuron(nb_new), .v_prev(prm.potential), .leak(prm.leak),
    .pos_thr(prm.pos_thr), .neg_thr(prm.neg_thr), .pos_reset(prm.reset_pot),
    .neg_reset(prm.reset_mode ? -prm.reset_pot : prm.reset_pot),
    .v_next, .spike(nb_spike));

  // -------------------------------------------------------------- router
  router #(.FIFO_DEPTH(FIFO_DEPTH)) u_router (
    .clk, .rst_n,
    .local_out_valid(spike_valid), .local_out_data(prm.dest), .local_out_ready(r_ready),
    .local_in_valid(li_valid), .local_in_data(li_data),
    .west_in_valid, .west_in_data, .west_in_rd, .east_in_valid, .east_in_data, .east_in_rd,
    .east_out_valid, .east_out_data, .east_out_rd, .west_out_valid, .west_out_data, .west_out_rd,
    .south_in_valid, .south_in_data, .south_in_rd, .north_in_valid, .north_in_data, .north_in_rd,
    .north_out_valid, .north_out_data, .north_out_rd, .south_out_valid, .south_out_data,
    .south_out_rd);

endmodule
