// tb_neuron_block -- self-checking test of the neuron block.
//
// Two instances share all inputs: one with the reference (asymmetric)
// negative threshold, one with the symmetric one. Random neurons are
// integrated over a random number of axons; the expected potential, spike
// and reset are computed with plain integers in the testbench. Directed
// cases put the leaked potential exactly on each threshold, where the two
// variants must differ, and check that the stored potential saturates.
module tb_neuron_block;
  import tn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic signed [NWEIGHTS-1:0][WEIGHT_W-1:0] weights;
  logic [G_W-1:0] g;
  logic process_spike, new_neuron;
  logic signed [POT_W-1:0] v_prev, pos_reset, neg_reset;
  logic signed [LEAK_W-1:0] leak;
  logic signed [THR_W-1:0] pos_thr, neg_thr;
  logic signed [POT_W-1:0] v_a, v_s;
  logic spike_a, spike_s;

  neuron_block #(.SYMMETRIC_THR(1'b0)) dut_a (.clk, .rst_n, .weights, .g, .process_spike,
    .new_neuron, .v_prev, .leak, .pos_thr, .neg_thr, .pos_reset, .neg_reset, .v_next(v_a), .spike(spike_a));
  neuron_block #(.SYMMETRIC_THR(1'b1)) dut_s (.clk, .rst_n, .weights, .g, .process_spike,
    .new_neuron, .v_prev, .leak, .pos_thr, .neg_thr, .pos_reset, .neg_reset, .v_next(v_s), .spike(spike_s));

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sx(input logic [31:0] v, input int w);
    return int'($signed(v << (32-w))) >>> (32-w);
  endfunction

  function automatic int expect_v(input int v, input bit sym, output bit spk);
    int nt, pt;
    pt = int'(pos_thr); nt = int'(neg_thr);
    spk = (v >= pt);
    if (spk) return int'(pos_reset);
    if (sym ? (v <= nt) : (v < nt)) return int'(neg_reset);
    if (v > 255) return 255;
    if (v < -256) return -256;
    return v;
  endfunction

  // Integrate one neuron: n_ax axons with the given spike/type pattern.
  task automatic run_neuron(input int n_ax, input int ws[4], input int p0, input int lk,
                            input int pt, input int nt, input int pr, input int nr,
                            input int force_sum, input bit use_force);
    int sum, gi, e_a, e_s;
    bit ps, sp_a, sp_s;
    for (int k = 0; k < 4; k++) weights[k] = WEIGHT_W'(ws[k]);
    v_prev = POT_W'(p0); leak = LEAK_W'(lk); pos_thr = THR_W'(pt); neg_thr = THR_W'(nt);
    pos_reset = POT_W'(pr); neg_reset = POT_W'(nr);
    sum = p0;
    for (int a = 0; a < n_ax; a++) begin
      gi = $urandom_range(0, 3);
      ps = use_force ? (a == 0) : ($urandom_range(0, 2) == 0);
      g = G_W'(gi); process_spike = ps; new_neuron = (a == 0);
      if (ps) sum += ws[gi];
      @(posedge clk); #1;
    end
    if (use_force) sum = force_sum;
    process_spike = 0; new_neuron = 0;
    #1;
    e_a = expect_v(sum + lk, 1'b0, sp_a);
    e_s = expect_v(sum + lk, 1'b1, sp_s);
    checks += 4;
    if (int'(v_a) != e_a || spike_a != sp_a) begin
      failures++; $display("FAIL asym sum=%0d lk=%0d got v=%0d s=%0b exp v=%0d s=%0b", sum, lk, v_a, spike_a, e_a, sp_a);
    end
    if (int'(v_s) != e_s || spike_s != sp_s) begin
      failures++; $display("FAIL sym sum=%0d lk=%0d got v=%0d s=%0b exp v=%0d s=%0b", sum, lk, v_s, spike_s, e_s, sp_s);
    end
    // Register must hold while idle.
    @(posedge clk); #1;
    if (int'(v_a) != e_a) begin failures++; $display("FAIL hold"); end
    if (int'(v_s) != e_s) begin failures++; $display("FAIL hold sym"); end
  endtask

  initial begin
    int ws[4];
    int n_diff;
    weights = '0; g = 0; process_spike = 0; new_neuron = 0; v_prev = 0; leak = 0;
    pos_thr = 0; neg_thr = 0; pos_reset = 0; neg_reset = 0;
    repeat (3) @(posedge clk); rst_n = 1; #1;

    // Directed: leaked potential exactly at the negative threshold.
    // Stored potential -3, one spike of weight 0, leak -2 -> -5 vs threshold -5.
    ws = '{0, 0, 0, 0};
    run_neuron(1, ws, -3, -2, 10, -5, 0, 7, -3, 1'b1);
    checks++;
    if (!(v_a == -5 && v_s == 7)) begin failures++; $display("FAIL equality case a=%0d s=%0d", v_a, v_s); end
    // Exactly at the positive threshold: both fire.
    run_neuron(1, ws, 4, 6, 10, -5, 2, 7, 4, 1'b1);
    checks++;
    if (!(spike_a && spike_s && v_a == 2)) begin failures++; $display("FAIL positive equality"); end
    // Saturation of the stored potential (no reset reached: wide thresholds).
    ws = '{255, 255, 255, 255};
    run_neuron(1, ws, 200, 100, 100000, -100000, 0, 0, 300, 1'b1);
    checks++;
    if (v_a != 255) begin failures++; $display("FAIL saturation %0d", v_a); end

    // Random neurons
    n_diff = 0;
    for (int t = 0; t < 400; t++) begin
      for (int k = 0; k < 4; k++) ws[k] = $urandom_range(0, 511) - 256;
      run_neuron($urandom_range(1, 40), ws, $urandom_range(0, 511) - 256, $urandom_range(0, 511) - 256,
                 $urandom_range(0, 1200) - 200, -int'($urandom_range(0, 1200)) + 200,
                 $urandom_range(0, 511) - 256, $urandom_range(0, 511) - 256, 0, 1'b0);
      if (v_a != v_s) n_diff++;
    end
    $display("random neurons where the two threshold modes differ: %0d", n_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
