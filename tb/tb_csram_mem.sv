// tb_csram_mem -- core SRAM array: whole-row writes and one-cycle reads.
//
// Fills every row with a pattern derived from its index, reads all rows
// back checking the one-clock read latency, overwrites random rows and
// checks read-during-write returns the old row. Full 256 x 386 size.
module tb_csram_mem;
  localparam int N = 256, W = 386;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [7:0] raddr, waddr;
  logic [W-1:0] rdata, wdata;
  logic we;
  logic [W-1:0] model [N];
  int checks = 0, failures = 0;

  csram_mem #(.NEURONS(N), .ROW_W(W)) dut (.clk, .raddr, .rdata, .we, .waddr, .wdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] pat(input int r, input int salt);
    logic [W-1:0] v;
    for (int k = 0; k < W; k += 32) v[k +: 32] = 32'(r * 32'h9E3779B1 + k * 7 + salt);
    return v;
  endfunction

  initial begin
    we = 0; raddr = 0; waddr = 0; wdata = '0;
    @(negedge clk);
    for (int r = 0; r < N; r++) begin
      we = 1; waddr = 8'(r); wdata = pat(r, 0); model[r] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int r = 0; r < N; r++) begin
      raddr = 8'(r);
      @(negedge clk);
      checks++;
      if (rdata !== model[r]) begin failures++; $display("FAIL row %0d", r); end
    end
    for (int t = 0; t < 300; t++) begin
      int r;
      r = $urandom_range(0, N-1);
      raddr = 8'(r); we = 1; waddr = 8'(r); wdata = pat(r, t + 1);
      @(negedge clk);
      checks++;
      if (rdata !== model[r]) begin failures++; $display("FAIL read-during-write row %0d", r); end
      model[r] = wdata; we = 0;
      @(negedge clk);
      checks++;
      if (rdata !== model[r]) begin failures++; $display("FAIL rewrite row %0d", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
