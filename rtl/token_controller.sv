// token_controller -- synchronous 8-state sequencer of one core.
//
// For every tick the controller walks all neurons of the core, and for every
// neuron all input axons, one axon per clock:
//   S0 IDLE    wait for a tick
//   S1 ADDR    advance the scheduler column, select core SRAM row 0
//   S2 WAIT    wait one clock for the row read from the core SRAM
//   S3 FIRST   axon 0: load the stored potential into the neuron block and
//              add the weight if axon 0 has a spike and a synapse
//   S4 LOOP    axons 1 .. AXONS-1, one per clock
//   S5 WRITE   write the new potential to the core SRAM; if the neuron block
//              fires, raise the spike valid bit to the router. If the
//              router's local input is full, S5 waits (back-pressure).
//   S6 VOFF    drop the spike valid bit; next neuron (S2) or, after the
//              last one, S7
//   S7 CLEAR   clear the scheduler column just read, back to S0
// A neuron takes AXONS+3 clocks (S2..S6) and a tick 2 + NEURONS*(AXONS+3)
// clocks from the tick pulse until the controller is back in S0.
//
// The eight states and their order follow the published state diagram that
// collapses the 269 asynchronous states of the original into 8. The stall in
// S5 and the overrun error (tick while busy) are this design's choices; the
// source says only that the router applies back-pressure and that the token
// controller can raise an error distinct from the scheduler's.
module token_controller
  import tn_pkg::*;
#(
  parameter int unsigned AXONS = 256,
  localparam int unsigned XW   = $clog2(AXONS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,
  // scheduler
  input  logic [AXONS-1:0] axon_spikes,
  output logic             sched_tick,
  output logic             sched_clear,
  // core SRAM controller
  input  logic             csram_done,
  output logic             csram_start,
  output logic             csram_next,
  output logic             csram_we,
  // current row's synapse bits
  input  logic [AXONS-1:0] synapses,
  // neuron block
  output logic [XW-1:0]    axon_idx,
  output logic             nb_new_neuron,
  output logic             nb_process_spike,
  input  logic             nb_spike,
  // router local input
  input  logic             router_ready,
  output logic             spike_valid,
  // status
  output logic             busy,
  output logic             error           // tick arrived while busy
);

  typedef enum logic [2:0] {
    S0_IDLE, S1_ADDR, S2_WAIT, S3_FIRST, S4_LOOP, S5_WRITE, S6_VOFF, S7_CLEAR
  } state_t;

  state_t state_q, state_d;
  logic [XW-1:0] axon_q;
  logic          stall;

  assign stall = (state_q == S5_WRITE) && nb_spike && !router_ready;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S0_IDLE:  if (tick) state_d = S1_ADDR;
      S1_ADDR:  state_d = S2_WAIT;
      S2_WAIT:  state_d = S3_FIRST;
      S3_FIRST: state_d = (AXONS > 1) ? S4_LOOP : S5_WRITE;
      S4_LOOP:  if (axon_q == XW'(AXONS-1)) state_d = S5_WRITE;
      S5_WRITE: if (!stall) state_d = S6_VOFF;
      S6_VOFF:  state_d = csram_done ? S7_CLEAR : S2_WAIT;
      S7_CLEAR: state_d = S0_IDLE;
      default:  state_d = S0_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S0_IDLE;
      axon_q      <= '0;
      spike_valid <= 1'b0;
      error       <= 1'b0;
    end else begin
      state_q <= state_d;
      error   <= tick && (state_q != S0_IDLE);
      case (state_q)
        S2_WAIT:  axon_q <= '0;
        S3_FIRST, S4_LOOP: axon_q <= axon_q + 1'b1;
        default: ;
      endcase
      if (state_q == S5_WRITE && nb_spike && router_ready) spike_valid <= 1'b1;
      else if (state_q == S6_VOFF)                        spike_valid <= 1'b0;
    end
  end

  always_comb begin
    axon_idx         = axon_q;
    nb_new_neuron    = (state_q == S3_FIRST);
    nb_process_spike = ((state_q == S3_FIRST) || (state_q == S4_LOOP)) &&
                       axon_spikes[axon_q] && synapses[axon_q];
    sched_tick       = (state_q == S1_ADDR);
    csram_start      = (state_q == S1_ADDR);
    csram_we         = (state_q == S5_WRITE) && !stall;
    csram_next       = (state_q == S6_VOFF) && !csram_done;
    sched_clear      = (state_q == S7_CLEAR);
    busy             = (state_q != S0_IDLE);
  end

  // The spike valid bit is a single-cycle request to the router.
  a_valid_pulse: assert property (@(posedge clk) disable iff (!rst_n)
                   spike_valid |=> !spike_valid);

endmodule
