// tick_fifo -- FIFO whose contents become visible only at the next tick.
//
// Used as the input buffer of the emulated network: the host streams spike
// packets in (push side, valid/ready) while a tick is running; they are held
// back and released into the mesh when the next tick pulse arrives, so that
// all inputs of one tick enter the network together. At a tick pulse every
// entry written so far is released; entries written later wait for the
// following tick. The pop side is first-word-fall-through: out_data is the
// oldest released entry while out_valid is high, and out_rd takes it.
// push is refused (in_ready low) when the FIFO is full. The released-pointer
// scheme is this design's choice; the source says only that streamed packets
// are buffered to be read at each tick. Reset empties it.
module tick_fifo #(
  parameter int unsigned W     = 30,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         tick,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         in_ready,
  output logic         out_valid,
  output logic [W-1:0] out_data,
  input  logic         out_rd,
  output logic [AW:0]  level          // entries held, released or not
);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp, rel;

  assign level     = wp - rp;
  assign in_ready  = level != (AW+1)'(DEPTH);
  assign out_valid = (rp != rel);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      rel <= '0;
    end else begin
      if (in_valid && in_ready) wp <= wp + 1'b1;
      if (out_rd)               rp <= rp + 1'b1;
      if (tick)                 rel <= wp;
    end
  end

  always_ff @(posedge clk) if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;

  a_pop_released: assert property (@(posedge clk) disable iff (!rst_n) out_rd |-> out_valid);

endmodule
