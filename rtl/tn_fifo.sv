// tn_fifo -- small first-word-fall-through FIFO used as a router buffer.
//
// The head entry is visible on rdata whenever empty is low; rd_en pops it.
// wr_en pushes wdata; the writer must respect full (buffer_full in the
// router description) and the reader must respect empty, both checked by
// assertions. Push and pop may happen in the same clock. Depth is a power of
// two. Reset empties the FIFO.
module tn_fifo #(
  parameter int unsigned W     = 30,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wdata,
  output logic         full,
  input  logic         rd_en,
  output logic [W-1:0] rdata,
  output logic         empty
);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign empty = (wp == rp);
  assign full  = (wp - rp) == (AW+1)'(DEPTH);
  assign rdata = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en) wp <= wp + 1'b1;
      if (rd_en) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) if (wr_en) mem[wp[AW-1:0]] <= wdata;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);

endmodule
