// mesh_net_check -- reusable network-level check for an NX x NY mesh.
//
// Loads random neurons into every core of a truenorth_top. Each neuron
// sends its spikes to a random axon of a random core up to two hops away in
// x and y, or past the western, northern or southern edge (dropped); about
// OUT_NEURONS neurons send theirs to the output (beyond the eastern edge).
// Inputs are streamed to random cores.
// A tick-level model of the whole network predicts every stored potential,
// every output packet with its mesh row and the tick after which it becomes
// readable, the scheduler errors and the number of edge drops; the mesh is
// compared with it after every tick. Counts of north-, south-, east- and
// west-bound deliveries are reported so that the caller can require each.
module mesh_net_check
  import tn_pkg::*;
#(
  parameter int NX = 3,
  parameter int NY = 3,
  parameter int TICKS = 6,
  parameter int IN_PER_TICK = 200,
  parameter int OUT_NEURONS = 100     // about this many neurons feed the output
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_north, n_south, n_east, n_west, n_out_rows, n_drops
);
  localparam int NC = NX*NY, N = 256, A = 256, ROW_W = A + PARAM_W;
  localparam int CW = (NC > 1) ? $clog2(NC) : 1, RW = (NY > 1) ? $clog2(NY) : 1;
  localparam int TLEN = 2 + N*(A+3);

  logic rst_n = 0;
  logic tick, in_valid, in_ready, out_valid, out_rd, cfg_we, cfg_sel, cfg_ready, busy;
  pkt_t in_data, out_data;
  logic [RW-1:0] out_row;
  logic [CW-1:0] cfg_core;
  logic [7:0] cfg_addr;
  logic [ROW_W-1:0] cfg_wdata;
  logic [NC-1:0] sched_error, tc_error, spike_sent;
  logic [15:0] edge_drops;

  truenorth_top #(.NX(NX), .NY(NY)) dut (.*);

  neuron_params_t prm [NC][N];
  logic [A-1:0] syn [NC][N];
  logic [1:0] atype [NC][A];
  logic [A-1:0] sched [NC][16];
  logic signed [POT_W-1:0] pot_hw [NC][N];
  int cnt = 0, cur_tick = 0, n_serr = 0, n_serr_exp = 0, drops_exp = 0;
  typedef struct { logic [RW+29:0] p; int t; } outrec_t;
  outrec_t exp_out[$];
  bit rows_seen [NY];
  event snap;

  for (genvar c = 0; c < NC; c++) begin : g_snap
    always @(snap)
      for (int n = 0; n < N; n++)
        pot_hw[c][n] = $signed(dut.g_row[c / NX].g_col[c % NX].u_core.u_mem.mem[n][PARAM_W-1 -: POT_W]);
  end

  assign out_rd = out_valid;
  always @(posedge clk) if (rst_n) begin
    if (out_rd) begin
      int idx[$];
      checks++;
      idx = exp_out.find_first_index(x) with (x.p == {out_row, out_data} && x.t < cur_tick);
      if (idx.size() == 0) begin failures++; $display("FAIL output row %0d %h at tick %0d", out_row, out_data, cur_tick); end
      else exp_out.delete(idx[0]);
      rows_seen[out_row] = 1'b1;
    end
    n_serr += $countones(sched_error);
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
          int x, y, tx, ty;
          d = prm[c][n].dest;
          x = c % NX; y = c / NX;
          tx = x + int'(d.dx); ty = y + int'(d.dy);
          if (tx >= NX) begin
            outrec_t r;
            d.dx = d.dx - 9'(NX - x);
            r.p = {RW'(y), d}; r.t = cur_tick;
            exp_out.push_back(r);
          end else if (tx < 0 || ty < 0 || ty >= NY) drops_exp++;
          else begin
            if (ty > y) n_north++;
            if (ty < y) n_south++;
            if (tx > x) n_east++;
            if (tx < x) n_west++;
            if (d.tick == 0) n_serr_exp++;
            else sched[ty*NX + tx][(cnt + d.tick) % 16][d.axon] = 1'b1;
          end
        end
      end
    for (int c = 0; c < NC; c++) sched[c][cnt] = '0;
  endtask

  task automatic cfg(input int core, input bit sel, input int addr, input logic [ROW_W-1:0] data);
    cfg_we = 1; cfg_core = CW'(core); cfg_sel = sel; cfg_addr = 8'(addr); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    int len;
    done = 0; checks = 0; failures = 0;
    n_north = 0; n_south = 0; n_east = 0; n_west = 0; n_out_rows = 0; n_drops = 0;
    tick = 0; in_valid = 0; in_data = '0; cfg_we = 0; cfg_sel = 0; cfg_core = 0; cfg_addr = 0; cfg_wdata = '0;
    for (int r = 0; r < NY; r++) rows_seen[r] = 0;
    for (int c = 0; c < NC; c++) for (int k = 0; k < 16; k++) sched[c][k] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      for (int a = 0; a < A; a++) begin atype[c][a] = 2'($urandom); cfg(c, 1, a, ROW_W'(atype[c][a])); end
      for (int n = 0; n < N; n++) begin
        neuron_params_t p;
        int kind;
        for (int k = 0; k < A; k += 32) syn[c][n][k +: 32] = $urandom & $urandom & $urandom;
        p.potential = POT_W'($urandom_range(0, 20) - 10);
        p.reset_pot = POT_W'($urandom_range(0, 4) - 2);
        for (int w = 0; w < 4; w++) p.weights[w] = WEIGHT_W'($urandom_range(0, 16) - 6);
        p.leak = LEAK_W'($urandom_range(0, 4) - 1);
        p.pos_thr = THR_W'($urandom_range(2, 30));
        p.neg_thr = THR_W'(-$urandom_range(0, 40));
        p.reset_mode = 1'($urandom);
        kind = $urandom_range(0, 19);  // 1: delivery tick 0 (a scheduler error)
        // random hops stay inside the mesh eastwards; west, north and south
        // they may leave it (and are dropped at the edge)
        p.dest.dx = 9'($urandom_range(0, 2 + ((NX-1 - c % NX) < 2 ? (NX-1 - c % NX) : 2))) - 9'sd2;
        p.dest.dy = 9'($urandom_range(0, 4)) - 9'sd2;
        // the output buffer holds one tick of output (256 packets by default),
        // so the number of output neurons is kept well below that
        if ($urandom_range(0, NC*N-1) < OUT_NEURONS) p.dest.dx = 9'(NX - c % NX);
        p.dest.axon = 8'($urandom);
        p.dest.tick = (kind == 1) ? 4'd0 : 4'($urandom_range(1, 3));
        prm[c][n] = p;
        cfg(c, 0, n, {syn[c][n], p});
      end
    end
    for (int t = 0; t < TICKS; t++) begin
      for (int k = 0; k < IN_PER_TICK; k++) begin
        pkt_t p;
        int c;
        c = $urandom_range(0, NC-1);
        p.dx = 9'(c % NX); p.dy = 9'(c / NX); p.axon = 8'($urandom); p.tick = 1;
        in_valid = 1; in_data = p;
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        in_valid = 0;
        sched[c][(cnt + 2) % 16][p.axon] = 1'b1;
      end
      tick = 1; @(negedge clk); tick = 0;
      cur_tick = t;
      len = 0;
      while (busy) begin @(negedge clk); len++; end
      repeat (200) @(negedge clk);
      model_tick();
      ->snap;
      #1;
      checks++;
      if (len < TLEN) begin failures++; $display("FAIL tick %0d length %0d", t, len); end
      for (int c = 0; c < NC; c++)
        for (int n = 0; n < N; n++) begin
          checks++;
          if (pot_hw[c][n] != prm[c][n].potential) begin
            failures++;
            if (failures < 10) $display("FAIL tick %0d core %0d neuron %0d potential %0d exp %0d", t, c, n, pot_hw[c][n], prm[c][n].potential);
          end
        end
      $display("tick %0d: %0d clocks", t, len);
    end
    tick = 1; @(negedge clk); tick = 0; cur_tick = TICKS;
    while (busy) @(negedge clk);
    repeat (500) @(negedge clk);
    model_tick();
    exp_out = exp_out.find(x) with (x.t < cur_tick);
    checks += 4;
    if (exp_out.size() != 0) begin failures++; $display("FAIL %0d outputs never arrived", exp_out.size()); end
    if (n_serr != n_serr_exp) begin failures++; $display("FAIL scheduler errors %0d exp %0d", n_serr, n_serr_exp); end
    if (int'(edge_drops) != drops_exp) begin failures++; $display("FAIL edge drops %0d exp %0d", edge_drops, drops_exp); end
    if (|tc_error) begin failures++; $display("FAIL token controller error"); end
    for (int r = 0; r < NY; r++) n_out_rows += rows_seen[r];
    n_drops = int'(edge_drops);
    done = 1;
  end
endmodule
