// tb_router -- routing decisions, header updates and back-pressure.
//
// Packets with random dx/dy are offered on all five inputs (local and the
// four neighbour links, each modelled as a neighbour's output buffer).
// Every packet's exit port and rewritten header are predicted from the
// X-then-Y rule; outputs are collected and matched against the prediction
// (merges interleave, so matching is by content). The sinks on the four
// neighbour outputs pop at random and are sometimes held off for long
// stretches, so buffers fill, read_enable stops and the local input is
// refused; no packet may be lost or duplicated. A second phase checks that
// a single eastbound flow keeps one packet per clock through the router.
module tb_router;
  import tn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  lo_v, lo_r, li_v;  pkt_t lo_d;  lpkt_t li_d;
  logic  wi_v, wi_rd, ei_v, ei_rd, eo_v, eo_rd, wo_v, wo_rd;
  pkt_t  wi_d, ei_d, eo_d, wo_d;
  logic  si_v, si_rd, ni_v, ni_rd, no_v, no_rd, so_v, so_rd;
  vpkt_t si_d, ni_d, no_d, so_d;

  router #(.FIFO_DEPTH(4)) dut (
    .clk, .rst_n, .local_out_valid(lo_v), .local_out_data(lo_d), .local_out_ready(lo_r),
    .local_in_valid(li_v), .local_in_data(li_d),
    .west_in_valid(wi_v), .west_in_data(wi_d), .west_in_rd(wi_rd),
    .east_in_valid(ei_v), .east_in_data(ei_d), .east_in_rd(ei_rd),
    .east_out_valid(eo_v), .east_out_data(eo_d), .east_out_rd(eo_rd),
    .west_out_valid(wo_v), .west_out_data(wo_d), .west_out_rd(wo_rd),
    .south_in_valid(si_v), .south_in_data(si_d), .south_in_rd(si_rd),
    .north_in_valid(ni_v), .north_in_data(ni_d), .north_in_rd(ni_rd),
    .north_out_valid(no_v), .north_out_data(no_d), .north_out_rd(no_rd),
    .south_out_valid(so_v), .south_out_data(so_d), .south_out_rd(so_rd));

  int checks = 0, failures = 0;
  // expected outputs per port: 0 east, 1 west, 2 north, 3 south, 4 local (30-bit images)
  logic [29:0] exp_q[5][$];
  pkt_t  q_w[$], q_e[$], q_l[$];
  vpkt_t q_s[$], q_n[$];
  int sent = 0, got = 0, refused = 0, hold_e = 0;
  bit sink_on = 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pkt_t rnd_pkt();
    pkt_t p;
    p.dx = 9'($urandom_range(0, 6)) - 9'sd3;
    p.dy = 9'($urandom_range(0, 6)) - 9'sd3;
    p.axon = 8'($urandom); p.tick = 4'($urandom);
    return p;
  endfunction

  // Horizontal-then-vertical prediction for a packet entering a horizontal merge.
  task automatic predict_h(input pkt_t p);
    pkt_t q;
    if (p.dx > 0) begin q = p; q.dx = p.dx - 1; exp_q[0].push_back(q); end
    else if (p.dx < 0) begin q = p; q.dx = p.dx + 1; exp_q[1].push_back(q); end
    else predict_v('{dy: p.dy, axon: p.axon, tick: p.tick});
  endtask
  task automatic predict_v(input vpkt_t v);
    vpkt_t w;
    if (v.dy > 0) begin w = v; w.dy = v.dy - 1; exp_q[2].push_back(30'(w)); end
    else if (v.dy < 0) begin w = v; w.dy = v.dy + 1; exp_q[3].push_back(30'(w)); end
    else exp_q[4].push_back(30'({v.axon, v.tick}));
  endtask

  task automatic match(input int port, input logic [29:0] val);
    int idx[$];
    checks++;
    idx = exp_q[port].find_first_index(x) with (x == val);
    if (idx.size() == 0) begin failures++; $display("FAIL unexpected packet %h on port %0d", val, port); end
    else exp_q[port].delete(idx[0]);
    got++;
  endtask

  // neighbour buffers feeding the router
  assign wi_v = q_w.size() > 0;  assign wi_d = wi_v ? q_w[0] : '0;
  assign ei_v = q_e.size() > 0;  assign ei_d = ei_v ? q_e[0] : '0;
  assign si_v = q_s.size() > 0;  assign si_d = si_v ? q_s[0] : '0;
  assign ni_v = q_n.size() > 0;  assign ni_d = ni_v ? q_n[0] : '0;
  assign lo_v = q_l.size() > 0;  assign lo_d = lo_v ? q_l[0] : '0;

  always @(negedge clk) begin
    eo_rd = sink_on && eo_v && ($urandom_range(0, 3) != 0) && hold_e == 0;
    wo_rd = sink_on && wo_v && ($urandom_range(0, 3) != 0);
    no_rd = sink_on && no_v && ($urandom_range(0, 3) != 0);
    so_rd = sink_on && so_v && ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (wi_rd) void'(q_w.pop_front());
    if (ei_rd) void'(q_e.pop_front());
    if (si_rd) void'(q_s.pop_front());
    if (ni_rd) void'(q_n.pop_front());
    if (lo_v && lo_r) void'(q_l.pop_front());
    if (lo_v && !lo_r) refused++;
    if (eo_rd) match(0, eo_d);
    if (wo_rd) match(1, wo_d);
    if (no_rd) match(2, 30'(no_d));
    if (so_rd) match(3, 30'(so_d));
    if (li_v)  match(4, 30'(li_d));
    if (hold_e > 0) hold_e--;
  end

  initial begin
    int tput_start, tput_n;
    eo_rd = 0; wo_rd = 0; no_rd = 0; so_rd = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (t % 500 == 100) hold_e = 150;            // east neighbour stops reading
      if ($urandom_range(0, 1) == 0) begin pkt_t p; p = rnd_pkt(); q_l.push_back(p); predict_h(p); sent++; end
      if ($urandom_range(0, 2) == 0) begin pkt_t p; p = rnd_pkt(); p.dx = (p.dx < 0) ? -p.dx : p.dx; q_w.push_back(p); predict_h(p); sent++; end
      if ($urandom_range(0, 2) == 0) begin pkt_t p; p = rnd_pkt(); p.dx = (p.dx > 0) ? -p.dx : p.dx; q_e.push_back(p); predict_h(p); sent++; end
      if ($urandom_range(0, 3) == 0) begin pkt_t p; vpkt_t v; p = rnd_pkt(); v = '{dy: (p.dy < 0) ? -p.dy : p.dy, axon: p.axon, tick: p.tick}; q_s.push_back(v); predict_v(v); sent++; end
      if ($urandom_range(0, 3) == 0) begin pkt_t p; vpkt_t v; p = rnd_pkt(); v = '{dy: (p.dy > 0) ? -p.dy : p.dy, axon: p.axon, tick: p.tick}; q_n.push_back(v); predict_v(v); sent++; end
    end
    // drain
    repeat (3000) @(negedge clk);
    checks++;
    if (got != sent) begin failures++; $display("FAIL sent %0d got %0d", sent, got); end
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (exp_q[k].size() != 0) begin failures++; $display("FAIL %0d packets missing on port %0d", exp_q[k].size(), k); end
    end
    checks++;
    if (refused == 0) begin failures++; $display("FAIL back-pressure never reached the local input"); end
    $display("local input refused on %0d clocks", refused);

    // Throughput: a long eastbound stream from west_in with a sink that always reads.
    sink_on = 1;
    tput_n = 200; got = 0;
    for (int k = 0; k < tput_n; k++) begin pkt_t p; p = rnd_pkt(); p.dx = 2; q_w.push_back(p); predict_h(p); end
    @(negedge clk); tput_start = $time;
    force eo_rd = eo_v;
    while (got < tput_n) @(negedge clk);
    release eo_rd;
    checks++;
    if (($time - tput_start) / 10 > tput_n + 4) begin
      failures++; $display("FAIL east stream took %0d clocks for %0d packets", ($time - tput_start) / 10, tput_n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
