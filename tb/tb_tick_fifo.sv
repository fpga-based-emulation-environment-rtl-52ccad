// tb_tick_fifo -- the input buffer releases exactly what arrived before
// each tick, in order, and refuses writes when full.
//
// In every tick period random packets are written while the reader keeps
// trying to read; the reader may only see packets written before the last
// tick. Also fills the buffer to check in_ready and the level count.
module tb_tick_fifo;
  localparam int W = 30, D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick, in_valid, in_ready, out_valid, out_rd;
  logic [W-1:0] in_data, out_data;
  logic [4:0] level;
  int checks = 0, failures = 0;
  logic [W-1:0] pending[$], released[$];

  tick_fifo #(.W(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_rd) begin
      checks++;
      if (released.size() == 0) begin failures++; $display("FAIL read before release"); end
      else if (out_data != released.pop_front()) begin failures++; $display("FAIL order"); end
    end
    if (in_valid && in_ready) pending.push_back(in_data);
    if (tick) begin
      while (pending.size() > 0) released.push_back(pending.pop_front());
    end
  end

  always @(negedge clk) begin
    checks++;
    if (out_valid != (released.size() > 0)) begin failures++; $display("FAIL out_valid %0b exp %0d", out_valid, released.size()); end
  end

  initial begin
    tick = 0; in_valid = 0; in_data = 0; out_rd = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int c = 0; c < 12; c++) begin
        in_valid = ($urandom_range(0, 1) == 0); in_data = W'($urandom);
        out_rd = out_valid && ($urandom_range(0, 2) == 0);
        @(negedge clk);
      end
      in_valid = 0; out_rd = 0;
      tick = 1; @(negedge clk); tick = 0;
    end
    // fill completely
    while (out_valid) begin out_rd = 1; @(negedge clk); end
    out_rd = 0;
    for (int k = 0; k < D + 3; k++) begin in_valid = 1; in_data = W'(k); @(negedge clk); end
    in_valid = 0;
    checks += 2;
    if (in_ready || level != 5'(D)) begin failures++; $display("FAIL full: ready=%0b level=%0d", in_ready, level); end
    if (pending.size() != D) begin failures++; $display("FAIL accepted %0d", pending.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
