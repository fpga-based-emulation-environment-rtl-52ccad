// tb_truenorth_core -- one full-size core (256 neurons x 256 axons) over
// several ticks against a tick-level reference model.
//
// Random neurons are loaded through the configuration port: sparse
// synapses, small weights, random axon types, thresholds, leaks, reset
// modes. Half the neurons send their spikes back to this core (dx = dy = 0,
// delivery 1..3 ticks later), the others one core east (they leave on the
// east link, where the testbench collects them). External spikes enter on
// the west link. The testbench model keeps its own 16-column spike store
// and the potentials, and after every tick compares all 256 stored
// potentials, the set of packets sent east, the number of spikes, the
// length of the tick (2 + N*(A+3) clocks) and the scheduler error count.
module tb_truenorth_core;
  import tn_pkg::*;
  localparam int N = 256, A = 256, ROW_W = A + PARAM_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tick, cfg_we, cfg_sel, cfg_ready, busy, sched_error, tc_error, spike_sent;
  logic [7:0] cfg_addr;
  logic [ROW_W-1:0] cfg_wdata;
  logic  wi_v, wi_rd, ei_rd, eo_v, eo_rd, wo_v, wo_rd, si_rd, ni_rd, no_v, so_v;
  pkt_t  wi_d, eo_d, wo_d;
  vpkt_t no_d, so_d;

  truenorth_core dut (
    .clk, .rst_n, .tick, .cfg_we, .cfg_sel, .cfg_addr, .cfg_wdata, .cfg_ready,
    .west_in_valid(wi_v), .west_in_data(wi_d), .west_in_rd(wi_rd),
    .east_in_valid(1'b0), .east_in_data('0), .east_in_rd(ei_rd),
    .east_out_valid(eo_v), .east_out_data(eo_d), .east_out_rd(eo_rd),
    .west_out_valid(wo_v), .west_out_data(wo_d), .west_out_rd(wo_rd),
    .south_in_valid(1'b0), .south_in_data('0), .south_in_rd(si_rd),
    .north_in_valid(1'b0), .north_in_data('0), .north_in_rd(ni_rd),
    .north_out_valid(no_v), .north_out_data(no_d), .north_out_rd(no_v),
    .south_out_valid(so_v), .south_out_data(so_d), .south_out_rd(so_v),
    .busy, .sched_error, .tc_error, .spike_sent);

  int checks = 0, failures = 0;
  neuron_params_t prm [N];
  logic [A-1:0] syn [N];
  logic [1:0] atype [A];
  logic [A-1:0] sched [16];
  int cnt = 0;
  pkt_t in_q[$];
  logic [29:0] exp_east[$], got_q[$];
  int got_east = 0, spikes_seen = 0, serr_seen = 0, serr_exp = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign wi_v  = in_q.size() > 0;
  assign wi_d  = wi_v ? in_q[0] : '0;
  assign eo_rd = eo_v;
  assign wo_rd = wo_v;

  always @(posedge clk) if (rst_n) begin
    if (wi_rd) void'(in_q.pop_front());
    if (spike_sent) spikes_seen++;
    if (sched_error) serr_seen++;
    if (eo_v) begin
      got_q.push_back(eo_d);
      got_east++;
    end
  end

  function automatic int eval(input int n, output bit spk);
    int sum, lk, v;
    sum = int'(prm[n].potential);
    for (int a = 0; a < A; a++)
      if (sched[cnt][a] && syn[n][a]) sum += int'($signed(prm[n].weights[atype[a]]));
    v = sum + int'(prm[n].leak);
    spk = v >= int'(prm[n].pos_thr);
    if (spk) return int'(prm[n].reset_pot);
    if (v < int'(prm[n].neg_thr)) return prm[n].reset_mode ? -int'(prm[n].reset_pot) : int'(prm[n].reset_pot);
    if (v > 255) return 255;
    if (v < -256) return -256;
    return v;
  endfunction

  task automatic model_tick(output int nspk);
    bit spk;
    int v;
    nspk = 0;
    cnt = (cnt + 1) % 16;
    for (int n = 0; n < N; n++) begin
      v = eval(n, spk);
      prm[n].potential = POT_W'(v);
      if (spk) begin
        nspk++;
        if (prm[n].dest.dx == 0) begin
          if (prm[n].dest.tick == 0) serr_exp++;
          else sched[(cnt + prm[n].dest.tick) % 16][prm[n].dest.axon] = 1'b1;
        end else begin
          pkt_t p;
          p = prm[n].dest; p.dx = p.dx - 1;
          exp_east.push_back(p);
        end
      end
    end
    sched[cnt] = '0;
  endtask

  initial begin
    int len, nspk, total_spk;
    tick = 0; cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_wdata = '0;
    for (int c = 0; c < 16; c++) sched[c] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    // configuration
    for (int a = 0; a < A; a++) begin
      atype[a] = 2'($urandom);
      cfg_we = 1; cfg_sel = 1; cfg_addr = 8'(a); cfg_wdata = ROW_W'(atype[a]);
      @(negedge clk);
    end
    for (int n = 0; n < N; n++) begin
      for (int k = 0; k < A; k += 32) syn[n][k +: 32] = $urandom & $urandom;
      prm[n].potential = POT_W'($urandom_range(0, 40) - 20);
      prm[n].reset_pot = POT_W'($urandom_range(0, 10) - 5);
      for (int w = 0; w < 4; w++) prm[n].weights[w] = WEIGHT_W'($urandom_range(0, 20) - 8);
      prm[n].leak = LEAK_W'($urandom_range(0, 6) - 3);
      prm[n].pos_thr = THR_W'($urandom_range(5, 60));
      prm[n].neg_thr = THR_W'(-$urandom_range(0, 60));
      prm[n].reset_mode = 1'($urandom);
      prm[n].dest.dx = (n % 2 == 0) ? 9'sd0 : 9'sd1;
      prm[n].dest.dy = 0;
      prm[n].dest.axon = 8'($urandom);
      prm[n].dest.tick = (n == 7) ? 4'd0 : 4'($urandom_range(1, 3));
      cfg_we = 1; cfg_sel = 0; cfg_addr = 8'(n); cfg_wdata = {syn[n], prm[n]};
      @(negedge clk);
    end
    cfg_we = 0;
    total_spk = 0;
    for (int t = 0; t < 5; t++) begin
      // external spikes for the next tick (offset 1) and one with offset 0 (error)
      for (int k = 0; k < 60; k++) begin
        pkt_t p;
        p.dx = 0; p.dy = 0; p.axon = 8'($urandom); p.tick = (k == 0) ? 4'd0 : 4'd1;
        in_q.push_back(p);
        if (p.tick == 0) serr_exp++;
        else sched[(cnt + 1) % 16][p.axon] = 1'b1;
      end
      while (in_q.size() > 0) @(negedge clk);
      repeat (10) @(negedge clk);
      tick = 1; @(negedge clk); tick = 0;
      len = 0;
      while (busy) begin @(negedge clk); len++; end
      repeat (20) @(negedge clk);
      model_tick(nspk);
      total_spk += nspk;
      checks++;
      if (len != 2 + N*(A+3)) begin failures++; $display("FAIL tick length %0d", len); end
      for (int n = 0; n < N; n++) begin
        neuron_params_t got;
        got = dut.u_mem.mem[n][PARAM_W-1:0];
        checks++;
        if (got.potential != prm[n].potential) begin
          failures++;
          if (failures < 10) $display("FAIL tick %0d neuron %0d potential %0d exp %0d", t, n, got.potential, prm[n].potential);
        end
      end
      while (got_q.size() > 0) begin
        int idx[$];
        logic [29:0] g;
        g = got_q.pop_front();
        checks++;
        idx = exp_east.find_first_index(x) with (x == g);
        if (idx.size() == 0) begin failures++; $display("FAIL unexpected east packet %h", g); end
        else exp_east.delete(idx[0]);
      end
      checks += 2;
      if (spikes_seen != total_spk) begin failures++; $display("FAIL spikes %0d exp %0d", spikes_seen, total_spk); end
      if (exp_east.size() != 0) begin failures++; $display("FAIL %0d east packets missing", exp_east.size()); end
      $display("tick %0d: %0d spikes, %0d east packets so far", t, nspk, got_east);
    end
    checks += 2;
    if (serr_seen != serr_exp) begin failures++; $display("FAIL scheduler errors %0d exp %0d", serr_seen, serr_exp); end
    if (tc_error) begin failures++; $display("FAIL token controller error"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
