// tb_token_controller -- sequencing of one tick by the 8-state controller.
//
// The testbench plays the core SRAM controller (counts csram_next pulses,
// done on the last neuron), the scheduler (a random spike column) and the
// neuron block (fires for chosen neurons). It checks, per neuron, the axon
// order, new_neuron on axon 0 only, process_spike = spike AND synapse for
// every axon, exactly one potential write, one spike-valid pulse for firing
// neurons, the back-pressure stall, the scheduler tick and clear, the
// tick length 2 + N*(A+3) clocks, and the error for a tick while busy.
module tb_token_controller;
  localparam int A = 16, N = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tick, sched_tick, sched_clear, csram_done, csram_start, csram_next, csram_we;
  logic [A-1:0] axon_spikes, synapses;
  logic [3:0] axon_idx;
  logic nb_new_neuron, nb_process_spike, nb_spike, router_ready, spike_valid, busy, error;

  token_controller #(.AXONS(A)) dut (.*);

  int checks = 0, failures = 0;
  int row, nwrites[N], nspikes[N], exp_fire[N], axon_seen, stalls;
  int ticks_s, clears_s;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign csram_done = (row == N-1);
  assign nb_spike   = exp_fire[row] != 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Cycle monitor
  int exp_axon;
  always @(posedge clk) if (rst_n) begin
    if (csram_start) row <= 0;
    else if (csram_next) row <= row + 1;
    if (nb_new_neuron) begin
      chk(axon_idx == 0, "new_neuron not on axon 0");
      exp_axon = 1;
    end else if (nb_process_spike || (busy && axon_idx != 0 && exp_axon == int'(axon_idx))) begin
      if (int'(axon_idx) == exp_axon) exp_axon++;
    end
    if (int'(dut.state_q) == 3 || int'(dut.state_q) == 4)
      chk(nb_process_spike == (axon_spikes[axon_idx] && synapses[axon_idx]), "process_spike");
    if (csram_we) nwrites[row]++;
    if (spike_valid) nspikes[row]++;
    if (sched_tick) ticks_s++;
    if (sched_clear) clears_s++;
    if (int'(dut.state_q) == 5 && nb_spike && !router_ready) stalls++;
  end

  task automatic run_tick(input int stall_row, input int expect_len);
    int len;
    for (int n = 0; n < N; n++) begin nwrites[n] = 0; nspikes[n] = 0; exp_fire[n] = $urandom_range(0, 1); end
    exp_fire[stall_row] = 1;
    axon_spikes = A'($urandom); synapses = A'($urandom);
    @(negedge clk); tick = 1; @(negedge clk); tick = 0;
    len = 0;  // counts the clocks spent outside S0
    while (busy) begin
      // hold the router busy for 3 clocks when the chosen neuron is in S5
      router_ready = !(row == stall_row && int'(dut.state_q) == 5 && stalls < 3);
      @(negedge clk); len++;
    end
    router_ready = 1;
    chk(len == expect_len, $sformatf("tick length %0d exp %0d", len, expect_len));
    for (int n = 0; n < N; n++) begin
      chk(nwrites[n] == 1, $sformatf("writes of neuron %0d = %0d", n, nwrites[n]));
      chk(nspikes[n] == exp_fire[n], $sformatf("spikes of neuron %0d", n));
    end
  endtask

  initial begin
    tick = 0; router_ready = 1; row = 0; stalls = 0; ticks_s = 0; clears_s = 0; exp_axon = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      stalls = 0;
      run_tick(t % N, 2 + N*(A+3) + 3);
      chk(stalls == 3, "stall count");
    end
    chk(ticks_s == 20 && clears_s == 20, "scheduler tick/clear count");
    // Tick while busy -> error
    @(negedge clk); tick = 1; @(negedge clk); tick = 0;
    repeat (5) @(negedge clk);
    tick = 1; @(negedge clk); tick = 0;
    #1 chk(error, "tick overrun error");
    while (busy) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
