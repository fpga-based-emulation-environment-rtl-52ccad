// tb_truenorth_top -- end-to-end run of the default 5-core network.
//
// The network has the shape of the five-core MNIST classifier: cores 0..3
// each take 256 input axons and send the spikes of 64 neurons to core 4
// (axon 64*i + j); core 4 uses 250 neurons whose spikes leave the mesh
// eastwards into the output buffer. Weights and thresholds are random, not
// trained, so the outputs are not digit votes; what is checked is that the
// hardware computes exactly what a tick-level model of the network computes:
// every stored potential of every core after every tick, and every output
// packet, which must appear only after the tick that follows the tick it was
// produced in. The host streams input spikes through the input buffer.
//
// Mechanisms forced and counted (each must happen at least once):
// inter-core spike delivery, delayed delivery through the scheduler,
// scheduler error (spike aimed at the active tick), router back-pressure
// reaching a neuron (the host stops reading outputs until the buffers fill
// and core 4 stalls), output release one tick late, edge drop of a packet
// addressed outside the mesh. Tick length without stalls is checked too.
module tb_truenorth_top;
  import tn_pkg::*;
  localparam int NC = 5, N = 256, A = 256, ROW_W = A + PARAM_W;
  localparam int TLEN = 2 + N*(A+3);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tick, in_valid, in_ready, out_valid, out_rd, cfg_we, cfg_sel, cfg_ready, busy;
  pkt_t in_data, out_data;
  logic [0:0] out_row;
  logic [2:0] cfg_core;
  logic [7:0] cfg_addr;
  logic [ROW_W-1:0] cfg_wdata;
  logic [NC-1:0] sched_error, tc_error, spike_sent;
  logic [15:0] edge_drops;

  truenorth_top dut (.*);

  int checks = 0, failures = 0;
  neuron_params_t prm [NC][N];
  logic [A-1:0] syn [NC][N];
  logic [1:0] atype [NC][A];
  logic [A-1:0] sched [NC][16];
  int cnt = 0;
  typedef struct { logic [29:0] p; int t; } outrec_t;
  outrec_t exp_out[$];
  int n_intercore = 0, n_delayed = 0, n_serr = 0, n_serr_exp = 0, n_stall = 0, n_out = 0, n_late_ok = 0;
  int spikes_seen = 0, spikes_exp = 0, cur_tick = 0;
  bit host_reading = 1;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host output reader; out_row must be 0 in a one-row mesh
  assign out_rd = host_reading && out_valid;
  always @(posedge clk) if (rst_n) begin
    if (out_rd) begin
      int idx[$];
      checks++;
      idx = exp_out.find_first_index(x) with (x.p == out_data && x.t < cur_tick);
      if (idx.size() == 0) begin failures++; $display("FAIL output %h at tick %0d", out_data, cur_tick); end
      else begin exp_out.delete(idx[0]); n_late_ok++; end
      n_out++;
    end
    spikes_seen += $countones(spike_sent);
    n_serr += $countones(sched_error);
    if (dut.g_row[0].g_col[4].u_core.u_tc.stall) n_stall++;
  end

  function automatic int eval(input int c, input int n, output bit spk);
    int sum, v;
    sum = int'(prm[c][n].potential);
    for (int a = 0; a < A; a++)
      if (sched[c][cnt][a] && syn[c][n][a]) sum += int'($signed(prm[c][n].weights[atype[c][a]]));
    v = sum + int'(prm[c][n].leak);
    spk = v >= int'(prm[c][n].pos_thr);
    if (spk) return int'(prm[c][n].reset_pot);
    if (v < int'(prm[c][n].neg_thr)) return prm[c][n].reset_mode ? -int'(prm[c][n].reset_pot) : int'(prm[c][n].reset_pot);
    if (v > 255) return 255;
    if (v < -256) return -256;
    return v;
  endfunction

  task automatic model_tick();
    bit spk;
    int v;
    cnt = (cnt + 1) % 16;
    for (int c = 0; c < NC; c++)
      for (int n = 0; n < N; n++) begin
        v = eval(c, n, spk);
        prm[c][n].potential = POT_W'(v);
        if (spk) begin
          pkt_t d;
          int dst;
          spikes_exp++;
          d = prm[c][n].dest;
          dst = c + int'(d.dx);
          if (dst >= NC) begin
            outrec_t r;
            d.dx = d.dx - 1;
            r.p = d; r.t = cur_tick;
            exp_out.push_back(r);
          end else begin
            n_intercore++;
            if (d.tick > 1) n_delayed++;
            if (d.tick == 0) n_serr_exp++;
            else sched[dst][(cnt + d.tick) % 16][d.axon] = 1'b1;
          end
        end
      end
    for (int c = 0; c < NC; c++) sched[c][cnt] = '0;
  endtask

  task automatic cfg(input int core, input bit sel, input int addr, input logic [ROW_W-1:0] data);
    cfg_we = 1; cfg_core = 3'(core); cfg_sel = sel; cfg_addr = 8'(addr); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic push_in(input pkt_t p);
    in_valid = 1; in_data = p;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    int len;
    tick = 0; in_valid = 0; in_data = '0; cfg_we = 0; cfg_sel = 0; cfg_core = 0; cfg_addr = 0; cfg_wdata = '0;
    for (int c = 0; c < NC; c++) for (int k = 0; k < 16; k++) sched[c][k] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    checks++;
    if (!cfg_ready) begin failures++; $display("FAIL cfg_ready after reset"); end
    // ---------------------------------------------------------- configure
    for (int c = 0; c < NC; c++) begin
      for (int a = 0; a < A; a++) begin atype[c][a] = 2'($urandom); cfg(c, 1, a, ROW_W'(atype[c][a])); end
      for (int n = 0; n < N; n++) begin
        neuron_params_t p;
        bit used;
        used = (c < 4) ? (n < 64) : (n < 250);
        for (int k = 0; k < A; k += 32) syn[c][n][k +: 32] = used ? ($urandom & $urandom) : 32'h0;
        p.potential = POT_W'($urandom_range(0, 20) - 10);
        p.reset_pot = 0;
        for (int w = 0; w < 4; w++) p.weights[w] = WEIGHT_W'($urandom_range(0, 16) - 6);
        p.leak = ((c == 4 && n < 120) || (c == 1 && n == 5)) ? 9'sd4 : LEAK_W'($urandom_range(0, 4) - 2);
        p.pos_thr = ((c == 4 && n < 120) || (c == 1 && n == 5)) ? 18'sd1 : THR_W'($urandom_range(4, 40));
        p.neg_thr = used ? THR_W'(-$urandom_range(0, 40)) : -18'sd1000;
        p.reset_mode = 1'($urandom);
        p.dest.dy = 0;
        if (!used) begin
          p.pos_thr = 18'sd100000; p.leak = 0;      // silent
          p.dest.dx = 0; p.dest.axon = 0; p.dest.tick = 1;
        end else if (c < 4) begin
          p.dest.dx = 9'(4 - c); p.dest.axon = 8'(64*c + n);
          p.dest.tick = (n == 5 && c == 1) ? 4'd0 : (n % 8 == 0) ? 4'd2 : 4'd1;
        end else begin
          p.dest.dx = 9'sd1; p.dest.axon = 8'(n); p.dest.tick = 4'(n % 16);
        end
        prm[c][n] = p;
        cfg(c, 0, n, {syn[c][n], p});
      end
    end
    // --------------------------------------------------------------- ticks
    for (int t = 0; t < 8; t++) begin
      // input spikes: released at this tick, delivered one tick later
      for (int k = 0; k < 120; k++) begin
        pkt_t p;
        int c;
        c = $urandom_range(0, 3);
        p.dx = 9'(c); p.dy = 0; p.axon = 8'($urandom); p.tick = 1;
        push_in(p);
        sched[c][(cnt + 2) % 16][p.axon] = 1'b1;
      end
      if (t == 1) begin
        pkt_t p;
        p = '{dx: 9'sd0, dy: 9'sd1, axon: 8'd3, tick: 4'd1};   // no core above: dropped at the edge
        push_in(p);
      end
      host_reading = !(t == 3);
      tick = 1; @(negedge clk); tick = 0;
      cur_tick = t;
      len = 0;
      while (busy) begin
        @(negedge clk); len++;
        if (len == 40000) host_reading = 1;      // unblock a stalled core
      end
      host_reading = 1;
      repeat (50) @(negedge clk);
      model_tick();
      if (t != 3) begin
        checks++;
        if (len != TLEN) begin failures++; $display("FAIL tick %0d length %0d exp %0d", t, len, TLEN); end
      end
      for (int c = 0; c < NC; c++)
        for (int n = 0; n < N; n++) begin
          neuron_params_t got;
          got = dut.g_row[0].g_col[0].u_core.u_mem.mem[n][PARAM_W-1:0];
          case (c)
            1: got = dut.g_row[0].g_col[1].u_core.u_mem.mem[n][PARAM_W-1:0];
            2: got = dut.g_row[0].g_col[2].u_core.u_mem.mem[n][PARAM_W-1:0];
            3: got = dut.g_row[0].g_col[3].u_core.u_mem.mem[n][PARAM_W-1:0];
            4: got = dut.g_row[0].g_col[4].u_core.u_mem.mem[n][PARAM_W-1:0];
            default: ;
          endcase
          checks++;
          if (got.potential != prm[c][n].potential) begin
            failures++;
            if (failures < 10) $display("FAIL tick %0d core %0d neuron %0d potential %0d exp %0d", t, c, n, got.potential, prm[c][n].potential);
          end
        end
      $display("tick %0d: %0d clocks, spikes %0d, outputs read %0d, stall clocks %0d", t, len, spikes_seen, n_out, n_stall);
    end
    // two empty ticks release and drain the last outputs
    for (int t = 8; t < 10; t++) begin
      tick = 1; @(negedge clk); tick = 0; cur_tick = t;
      while (busy) @(negedge clk);
      repeat (300) @(negedge clk);
      model_tick();
    end
    // outputs of the last tick are released only by a later tick pulse
    exp_out = exp_out.find(x) with (x.t < cur_tick);
    checks += 4;
    if (spikes_seen != spikes_exp) begin failures++; $display("FAIL spikes %0d exp %0d", spikes_seen, spikes_exp); end
    if (n_serr != n_serr_exp) begin failures++; $display("FAIL scheduler errors %0d exp %0d", n_serr, n_serr_exp); end
    if (exp_out.size() != 0) begin failures++; $display("FAIL %0d outputs never arrived", exp_out.size()); end
    if (|tc_error) begin failures++; $display("FAIL token controller error"); end
    $display("mechanisms: inter-core spikes %0d, delayed deliveries %0d, scheduler errors %0d, stall clocks %0d, outputs released late %0d, edge drops %0d",
             n_intercore, n_delayed, n_serr, n_stall, n_late_ok, edge_drops);
    checks += 6;
    if (n_intercore == 0) begin failures++; $display("FAIL no inter-core spike"); end
    if (n_delayed == 0)   begin failures++; $display("FAIL no delayed delivery"); end
    if (n_serr == 0)      begin failures++; $display("FAIL no scheduler error"); end
    if (n_stall == 0)     begin failures++; $display("FAIL no back-pressure stall"); end
    if (n_late_ok == 0)   begin failures++; $display("FAIL no output released"); end
    if (edge_drops != 1)  begin failures++; $display("FAIL edge drops %0d", edge_drops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
