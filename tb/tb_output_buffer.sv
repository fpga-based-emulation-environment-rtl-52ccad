// tb_output_buffer -- output spikes of a tick reach the user after the next
// tick, tagged with their mesh row, none lost.
//
// Three mesh rows offer packets (modelled as router output buffers that
// are popped by the merge). Packets accepted during tick period k must all
// come out after tick k+1 and not before. Reads are random.
module tb_output_buffer;
  import tn_pkg::*;
  localparam int R = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick, out_valid, out_rd;
  logic [R-1:0] link_valid, link_rd;
  pkt_t [R-1:0] link_data;
  pkt_t out_data;
  logic [1:0] out_row;
  int checks = 0, failures = 0;
  pkt_t src[R][$];
  logic [31:0] pending[$], released[$];

  output_buffer #(.NROWS(R), .DEPTH(64)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar r = 0; r < R; r++) begin : g
    assign link_valid[r] = src[r].size() > 0;
    assign link_data[r]  = link_valid[r] ? src[r][0] : '0;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_rd) begin
      int idx[$];
      checks++;
      idx = released.find_first_index(x) with (x == {out_row, out_data});
      if (idx.size() == 0) begin failures++; $display("FAIL unreleased or unknown output"); end
      else released.delete(idx[0]);
    end
    for (int r = 0; r < R; r++)
      if (link_rd[r]) pending.push_back({2'(r), src[r].pop_front()});
    if (tick) while (pending.size() > 0) released.push_back(pending.pop_front());
  end

  initial begin
    tick = 0; out_rd = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      for (int c = 0; c < 20; c++) begin
        for (int r = 0; r < R; r++) if ($urandom_range(0, 3) == 0) src[r].push_back(pkt_t'($urandom));
        out_rd = out_valid && ($urandom_range(0, 1) == 0);
        @(negedge clk);
      end
      out_rd = 0;
      tick = 1; @(negedge clk); tick = 0;
    end
    for (int k = 0; k < 40; k++) begin
      for (int c = 0; c < 100; c++) begin out_rd = out_valid; @(negedge clk); end
      out_rd = 0;
      tick = 1; @(negedge clk); tick = 0;
    end
    for (int c = 0; c < 100; c++) begin out_rd = out_valid; @(negedge clk); end
    out_rd = 0;
    checks++;
    if (released.size() != 0 || pending.size() != 0) begin
      failures++; $display("FAIL left over: released %0d pending %0d", released.size(), pending.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
