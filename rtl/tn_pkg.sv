// tn_pkg -- shared widths and record layouts of the TrueNorth-style core.
//
// Widths follow the core SRAM breakdown and the spike packet description:
// a spike packet is 30 bits (dx 9, dy 9, axon 8, delivery tick 4); after the
// horizontal leg it shrinks to 21 bits (dy, axon, tick) and at the
// destination to 12 bits (axon, tick). The tick field sits in bits [3:0] of
// every form of the packet. A neuron row of the core SRAM is 386 bits:
// 256 synapse bits followed by the 130-bit neuron_params_t below
// (100 bits of potential and neuron parameters, 26 bits of spike destination,
// 4 bits of delivery tick). The order of the fields inside a row is this
// design's choice; the field widths are the published ones.
package tn_pkg;

  localparam int unsigned POT_W    = 9;   // stored potential, reset potential
  localparam int unsigned WEIGHT_W = 9;   // synaptic weights, signed
  localparam int unsigned LEAK_W   = 9;   // leak value, signed
  localparam int unsigned THR_W    = 18;  // positive / negative thresholds, signed
  localparam int unsigned NWEIGHTS = 4;   // weights per neuron (axon types)
  localparam int unsigned G_W      = 2;   // axon type index width
  localparam int unsigned DX_W     = 9;
  localparam int unsigned DY_W     = 9;
  localparam int unsigned AXON_W   = 8;
  localparam int unsigned TICK_W   = 4;
  localparam int unsigned NTICKS   = 16;  // scheduler columns
  localparam int unsigned ACC_W    = 18;  // running sum inside the neuron block

  // Spike packet as it leaves a neuron (30 bits).
  typedef struct packed {
    logic signed [DX_W-1:0] dx;
    logic signed [DY_W-1:0] dy;
    logic [AXON_W-1:0]      axon;
    logic [TICK_W-1:0]      tick;
  } pkt_t;

  // Packet on the vertical leg (21 bits).
  typedef struct packed {
    logic signed [DY_W-1:0] dy;
    logic [AXON_W-1:0]      axon;
    logic [TICK_W-1:0]      tick;
  } vpkt_t;

  // Packet delivered to the local scheduler (12 bits).
  typedef struct packed {
    logic [AXON_W-1:0] axon;
    logic [TICK_W-1:0] tick;
  } lpkt_t;

  localparam int unsigned PKT_W  = $bits(pkt_t);   // 30
  localparam int unsigned VPKT_W = $bits(vpkt_t);  // 21
  localparam int unsigned LPKT_W = $bits(lpkt_t);  // 12

  // Potential and neuron parameters (100 bits) + destination (26) + tick (4).
  typedef struct packed {
    logic signed [POT_W-1:0]    potential;
    logic signed [POT_W-1:0]    reset_pot;
    logic signed [NWEIGHTS-1:0][WEIGHT_W-1:0] weights;
    logic signed [LEAK_W-1:0]   leak;
    logic signed [THR_W-1:0]    pos_thr;
    logic signed [THR_W-1:0]    neg_thr;
    logic                       reset_mode;
    pkt_t                       dest;        // dx, dy, axon, delivery tick
  } neuron_params_t;

  localparam int unsigned PARAM_W = $bits(neuron_params_t);  // 130

  // Saturate a wide signed value into the stored potential width.
  function automatic logic signed [POT_W-1:0] sat_pot(input logic signed [ACC_W-1:0] v);
    localparam logic signed [ACC_W-1:0] MAXV = (1 <<< (POT_W-1)) - 1;
    localparam logic signed [ACC_W-1:0] MINV = -(1 <<< (POT_W-1));
    if (v > MAXV)      return POT_W'(MAXV);
    else if (v < MINV) return POT_W'(MINV);
    else               return POT_W'(v);
  endfunction

endpackage
