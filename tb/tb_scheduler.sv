// tb_scheduler -- spike store: write at (axon, active + offset), read the
// active column, error on offset 0, clear, and the 16-tick wrap.
//
// A model of 16 columns x 256 axons is kept in the testbench. Random spikes
// are written between ticks; at each tick the active column is compared with
// the model, then cleared as the token controller does.
module tb_scheduler;
  import tn_pkg::*;
  localparam int A = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick, clear, wr_en, error;
  lpkt_t wr_pkt;
  logic [A-1:0] axon_spikes;
  logic [3:0] rd_addr;
  logic [A-1:0] model [16];
  int checks = 0, failures = 0, errors_seen = 0, errors_exp = 0;

  scheduler #(.AXONS(A)) dut (.clk, .rst_n, .tick, .clear, .wr_en, .wr_pkt, .axon_spikes, .rd_addr, .error);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && error) errors_seen++;

  initial begin
    int act;
    tick = 0; clear = 0; wr_en = 0; wr_pkt = '0;
    for (int c = 0; c < 16; c++) model[c] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    act = 0;
    for (int t = 0; t < 40; t++) begin
      for (int s = 0; s < 30; s++) begin
        int ax, off;
        ax = $urandom_range(0, A-1); off = $urandom_range(0, 15);
        if (s < 2) off = 0;
        wr_en = 1; wr_pkt.axon = 8'(ax); wr_pkt.tick = 4'(off);
        if (off == 0) errors_exp++;
        else model[(act + off) % 16][ax] = 1'b1;
        @(negedge clk);
      end
      wr_en = 0;
      // tick: advance, then read and clear the new active column
      tick = 1; @(negedge clk); tick = 0;
      act = (act + 1) % 16;
      checks += 2;
      if (rd_addr != 4'(act)) begin failures++; $display("FAIL rd_addr %0d exp %0d", rd_addr, act); end
      if (axon_spikes !== model[act]) begin failures++; $display("FAIL column %0d", act); end
      clear = 1; @(negedge clk); clear = 0;
      model[act] = '0;
      checks++;
      if (axon_spikes !== '0) begin failures++; $display("FAIL clear"); end
    end
    @(negedge clk);
    checks++;
    if (errors_seen != errors_exp) begin failures++; $display("FAIL errors %0d exp %0d", errors_seen, errors_exp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
