// tb_csram_ctrl -- core SRAM controller: row walk and done flag.
//
// Starts a walk, advances row by row and checks the row address and that
// done rises on the last row only; then checks that start restarts at 0
// and that next on the last row does not wrap.
module tb_csram_ctrl;
  localparam int N = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, next, done;
  logic [7:0] row;
  int checks = 0, failures = 0;

  csram_ctrl #(.NEURONS(N)) dut (.clk, .rst_n, .start, .next, .row, .done);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; next = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      start = 1; @(negedge clk); start = 0;
      for (int r = 0; r < N; r++) begin
        checks += 2;
        if (row != 8'(r)) begin failures++; $display("FAIL row %0d got %0d", r, row); end
        if (done != (r == N-1)) begin failures++; $display("FAIL done at %0d", r); end
        next = 1; @(negedge clk); next = 0;
        if (pass == 1) @(negedge clk);  // idle cycles must hold the row
      end
      checks++;
      if (row != 8'(N-1) || !done) begin failures++; $display("FAIL no hold at end"); end
    end
    start = 1; @(negedge clk); start = 0;
    checks++;
    if (row != 0 || done) begin failures++; $display("FAIL restart"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
