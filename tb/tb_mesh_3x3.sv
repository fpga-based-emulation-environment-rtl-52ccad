// tb_mesh_3x3 -- a 3 x 3 mesh of full-size cores exchanging spikes in all
// four directions, checked against a network model (see mesh_net_check).
// Each of north-, south-, east- and westward delivery, output from every
// mesh row and edge dropping must happen at least once.
module tb_mesh_3x3;
  logic clk = 0;
  always #5 clk = ~clk;
  logic done;
  int checks, failures, n_north, n_south, n_east, n_west, n_out_rows, n_drops;

  mesh_net_check #(.NX(3), .NY(3), .TICKS(6)) u_chk (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int f;
    wait (done);
    f = failures;
    $display("deliveries: north %0d south %0d east %0d west %0d; output rows %0d of 3; edge drops %0d",
             n_north, n_south, n_east, n_west, n_out_rows, n_drops);
    if (n_north == 0 || n_south == 0 || n_east == 0 || n_west == 0) f++;
    if (n_out_rows != 3) f++;
    if (n_drops == 0) f++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + 6, f);
    $finish;
  end
endmodule
