// tb_threshold_modes -- the signed-pair example: a "+" and a "-" neuron fed
// by a "+" axon and a "-" axon, on a one-core network built twice in the
// two core shapes of the signed 8x8 vector-matrix product: the reference
// core (160 axons x 256 neurons, negative threshold compared with <) and
// the proposed one (32 axons x 128 neurons, symmetric threshold <=). The
// tick length of each, 2 + neurons*(axons+3) clocks, is checked as well.
//
// Neuron 0 (+) and neuron 1 (-) both have positive threshold 1, negative
// threshold -1, reset 0, leak 0. Axon 0 has type 0, whose weights are +1
// for the + neuron and -1 for the - neuron; axon 1 has type 1 with the
// opposite signs. Tick 1 spikes axon 0, tick 2 nothing, tick 3 axon 1.
// Expected output spikes (+, -): reference 10, 00, 00; symmetric 10, 00, 01.
// In the reference core the - neuron keeps potential -1 after tick 1
// (-1 < -1 is false), so the axon-1 spike at tick 3 only brings it back to
// 0 and the spike is lost; the symmetric core resets it to 0 at tick 1 and
// fires at tick 3. Outputs are read back through the output buffer.
module tb_threshold_modes;
  import tn_pkg::*;
  localparam int A0 = 160, N0 = 256, A1 = 32, N1 = 128;
  localparam int RW0 = A0 + PARAM_W, RW1 = A1 + PARAM_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tick, in_valid, cfg_sel;
  logic [1:0] cfg_we;
  pkt_t in_data;
  logic [0:0] cfg_core;
  logic [7:0] cfg_addr;
  logic [RW0-1:0] cfg_wdata0;
  logic [RW1-1:0] cfg_wdata1;
  logic [1:0] in_ready, out_valid, cfg_ready, busy;
  pkt_t out_data [2];
  logic [0:0] out_row [2];
  logic [0:0] serr [2], tce [2], ss [2];
  logic [15:0] drops [2];

  truenorth_top #(.NX(1), .NY(1), .NEURONS(N0), .AXONS(A0), .SYMMETRIC_THR(1'b0)) ref_core (
    .clk, .rst_n, .tick, .in_valid, .in_data, .in_ready(in_ready[0]),
    .out_valid(out_valid[0]), .out_data(out_data[0]), .out_row(out_row[0]), .out_rd(out_valid[0]),
    .cfg_we(cfg_we[0]), .cfg_core, .cfg_sel, .cfg_addr, .cfg_wdata(cfg_wdata0), .cfg_ready(cfg_ready[0]),
    .busy(busy[0]), .sched_error(serr[0]), .tc_error(tce[0]), .spike_sent(ss[0]), .edge_drops(drops[0]));
  truenorth_top #(.NX(1), .NY(1), .NEURONS(N1), .AXONS(A1), .SYMMETRIC_THR(1'b1)) sym_core (
    .clk, .rst_n, .tick, .in_valid, .in_data, .in_ready(in_ready[1]),
    .out_valid(out_valid[1]), .out_data(out_data[1]), .out_row(out_row[1]), .out_rd(out_valid[1]),
    .cfg_we(cfg_we[1]), .cfg_core, .cfg_sel, .cfg_addr, .cfg_wdata(cfg_wdata1), .cfg_ready(cfg_ready[1]),
    .busy(busy[1]), .sched_error(serr[1]), .tc_error(tce[1]), .spike_sent(ss[1]), .edge_drops(drops[1]));

  int checks = 0, failures = 0, cur = 0;
  int len [2], len_max [2] = '{0, 0};
  bit fired [2][8][2];   // [variant][tick produced][neuron]

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // an output read after tick pulse k was produced during tick k-1
  always @(posedge clk) if (rst_n)
    for (int v = 0; v < 2; v++)
      if (out_valid[v] && out_data[v].axon < 2) fired[v][cur - 1][out_data[v].axon[0]] = 1'b1;

  // writes row addr of both cores, or only of the reference core where the
  // proposed one has no such row; the synapse bits are cut to each width
  task automatic cfg(input bit sel, input int addr, input logic [255:0] syn, input neuron_params_t p);
    cfg_we = {sel ? addr < A1 : addr < N1, 1'b1}; cfg_sel = sel; cfg_addr = 8'(addr);
    cfg_wdata0 = sel ? RW0'(syn) : {syn[A0-1:0], p};
    cfg_wdata1 = sel ? RW1'(syn) : {syn[A1-1:0], p};
    @(negedge clk); cfg_we = '0;
  endtask

  task automatic step(input int axon);   // axon < 0: no input spike
    if (axon >= 0) begin
      in_valid = 1; in_data = '{dx: 9'sd0, dy: 9'sd0, axon: 8'(axon), tick: 4'd1};
      @(negedge clk); in_valid = 0;
    end
    tick = 1; @(negedge clk); tick = 0; cur++;
    len = '{0, 0};
    while (|busy) begin
      for (int v = 0; v < 2; v++) len[v] += int'(busy[v]);
      @(negedge clk);
    end
    for (int v = 0; v < 2; v++) if (len[v] > len_max[v]) len_max[v] = len[v];
    repeat (20) @(negedge clk);
  endtask

  initial begin
    neuron_params_t p;
    logic [255:0] syn;
    int pot_minus [4];
    tick = 0; in_valid = 0; in_data = '0; cfg_we = '0; cfg_sel = 0; cfg_core = 0; cfg_addr = 0;
    cfg_wdata0 = '0; cfg_wdata1 = '0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    p = '0;
    cfg(1, 0, 256'(0), p);         // axon 0: type 0 ("+" input)
    cfg(1, 1, 256'(1), p);         // axon 1: type 1 ("-" input)
    syn = '0; syn[0] = 1'b1; syn[1] = 1'b1;
    for (int n = 0; n < N0; n++) begin
      p = '0;
      p.pos_thr = (n < 2) ? 18'sd1 : 18'sd100000;
      p.neg_thr = (n < 2) ? -18'sd1 : -18'sd100000;
      p.weights[0] = (n == 0) ? 9'sd1 : -9'sd1;
      p.weights[1] = (n == 0) ? -9'sd1 : 9'sd1;
      p.dest = '{dx: 9'sd1, dy: 9'sd0, axon: 8'(n), tick: 4'd1};
      cfg(0, n, (n < 2) ? syn : '0, p);
    end
    // input spike for tick 1 is pushed before the pulse that precedes tick 1
    step(0);      // pulse 1: tick 0 (nothing), releases the axon-0 spike for tick 1
    step(-1);     // tick 1
    pot_minus[1] = int'($signed(ref_core.g_row[0].g_col[0].u_core.u_mem.mem[1][PARAM_W-1 -: POT_W]));
    step(1);      // tick 2, releases the axon-1 spike for tick 3
    pot_minus[2] = int'($signed(ref_core.g_row[0].g_col[0].u_core.u_mem.mem[1][PARAM_W-1 -: POT_W]));
    step(-1);     // tick 3
    pot_minus[3] = int'($signed(ref_core.g_row[0].g_col[0].u_core.u_mem.mem[1][PARAM_W-1 -: POT_W]));
    step(-1);     // releases the tick-3 outputs
    step(-1);
    // expected outputs per tick (1..3), neurons (+, -); tick k of the example
    // is the k+1-th tick pulse, as the first pulse only releases the input
    begin
      bit exp_out [2][4][2];
      exp_out = '{default: 1'b0};
      exp_out[0][1][0] = 1; exp_out[1][1][0] = 1; exp_out[1][3][1] = 1;
      for (int v = 0; v < 2; v++)
        for (int t = 1; t <= 3; t++) begin
          checks++;
          if (fired[v][t+1][0] != exp_out[v][t][0] || fired[v][t+1][1] != exp_out[v][t][1]) begin
            failures++;
            $display("FAIL %s tick %0d outputs (+,-) = %0b%0b exp %0b%0b", (v == 1) ? "symmetric" : "reference", t,
                     fired[v][t+1][0], fired[v][t+1][1], exp_out[v][t][0], exp_out[v][t][1]);
          end
          $display("%s tick %0d: Output(+)=%0b Output(-)=%0b", (v == 1) ? "symmetric" : "reference", t, fired[v][t+1][0], fired[v][t+1][1]);
        end
    end
    checks += 2;
    if (len_max[0] != 2 + N0*(A0+3) || len_max[1] != 2 + N1*(A1+3)) begin
      failures++; $display("FAIL tick lengths %0d %0d exp %0d %0d", len_max[0], len_max[1], 2 + N0*(A0+3), 2 + N1*(A1+3));
    end
    $display("tick length: reference core %0d clocks, proposed core %0d clocks", len_max[0], len_max[1]);
    if (pot_minus[1] != -1 || pot_minus[2] != -1 || pot_minus[3] != 0) begin
      failures++; $display("FAIL reference (-) potentials %0d %0d %0d exp -1 -1 0", pot_minus[1], pot_minus[2], pot_minus[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
