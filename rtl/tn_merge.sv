// tn_merge -- round-robin merge in front of a router buffer.
//
// N sources (router buffers or a neighbour's output buffer) offer a packet
// by raising valid (buffer not empty). When out_ready is high (none of the
// buffers after the merge is full) the merge grants one valid source,
// raises its rd_en (read_enable) for that clock and passes its packet to
// out_data with out_valid high; the packet must be written after the merge in
// the same clock. The grant rotates: the source after the last one served
// has priority. Round robin is this design's choice; the source does not say
// how a merge arbitrates.
module tn_merge #(
  parameter int unsigned N = 2,
  parameter int unsigned W = 30
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        valid,
  input  logic [N-1:0][W-1:0] data,
  output logic [N-1:0]        rd_en,
  input  logic                out_ready,
  output logic                out_valid,
  output logic [W-1:0]        out_data
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last_q, pick;
  logic          found;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (32'(last_q) + 32'(k)) % N;
      if (!found && valid[idx]) begin
        found = 1'b1;
        pick  = IW'(idx);
      end
    end
    out_valid = found && out_ready;
    out_data  = data[pick];
    rd_en     = '0;
    if (out_valid) rd_en[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         last_q <= IW'(N-1);
    else if (out_valid) last_q <= pick;
  end

endmodule
