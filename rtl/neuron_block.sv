// neuron_block -- leaky integrate-and-fire datapath of one core.
//
// What it does: while the token controller walks the input axons of one
// neuron, this block keeps the neuron's running sum. Each cycle it picks one
// of the four synaptic weights s0..s3 by the axon's type g, passes it (or 0
// when process_spike is low) to an adder, and adds it either to the stored
// potential v_prev (first axon, new_neuron high) or to its own register. The
// leak lambda is added after the register, and the leaked value is compared
// with the positive threshold (>=) and the negative threshold (< or <=).
// v_next is the positive reset value if the neuron fires, else the negative
// reset value if it fell below the negative threshold, else the leaked
// potential saturated to the 9-bit stored width.
//
// Timing: one register. Outputs are combinational from it, so after the
// cycle that adds the last axon, v_next and spike are valid in the next
// cycle and stay valid while process_spike and new_neuron are low.
//
// Follows the published datapath: weight mux by axon type, zero mux by
// process_spike, new_neuron mux, register, leak adder, two comparators and
// two reset muxes with the positive one last. The symmetric-threshold option
// (negative comparison <= instead of <) is the published modification for
// signed vector-matrix multiplication; SYMMETRIC_THR = 0 is the reference
// TrueNorth behaviour. This design's own choices: the running sum is 18 bits
// wide, the width of the thresholds, and the stored potential saturates.
module neuron_block
  import tn_pkg::*;
#(
  parameter bit SYMMETRIC_THR = 1'b0
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic signed [NWEIGHTS-1:0][WEIGHT_W-1:0] weights,   // s_j^0..s_j^3
  input  logic [G_W-1:0]                       g,             // axon type G_i
  input  logic                                 process_spike,
  input  logic                                 new_neuron,
  input  logic signed [POT_W-1:0]              v_prev,        // V_j(t-1)
  input  logic signed [LEAK_W-1:0]             leak,          // lambda_j
  input  logic signed [THR_W-1:0]              pos_thr,
  input  logic signed [THR_W-1:0]              neg_thr,
  input  logic signed [POT_W-1:0]              pos_reset,
  input  logic signed [POT_W-1:0]              neg_reset,
  output logic signed [POT_W-1:0]              v_next,        // V_j(t)
  output logic                                 spike
);

  logic signed [ACC_W-1:0] acc_q;
  logic signed [ACC_W-1:0] sel_w, addend, base, leaked;
  logic                    below_neg;

  always_comb begin
    sel_w  = ACC_W'($signed(weights[g]));       // element selects are unsigned: re-sign
    addend = process_spike ? sel_w : '0;
    base   = new_neuron ? ACC_W'(v_prev) : acc_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_q <= '0;
    else        acc_q <= base + addend;
  end

  always_comb begin
    leaked    = acc_q + ACC_W'(leak);
    spike     = (leaked >= ACC_W'(pos_thr));
    below_neg = SYMMETRIC_THR ? (leaked <= ACC_W'(neg_thr)) : (leaked < ACC_W'(neg_thr));
    if (spike)          v_next = pos_reset;
    else if (below_neg) v_next = neg_reset;
    else                v_next = sat_pot(leaked);
  end

endmodule
