// router -- 2-D mesh router of one core, buffers on the outputs of each merge.
//
// Packets go horizontally first, then vertically. dx > 0 travels east and is
// decremented on each eastward hop, dx < 0 travels west and is incremented;
// once dx is 0 the packet (now 21 bits, dx dropped) turns north when dy > 0
// (dy decremented per hop) or south when dy < 0 (dy incremented). When dy
// is also 0 the 12-bit axon/tick remainder goes to the local scheduler.
//
// Sub-modules, as in the published block diagram:
//   from local    : splits the core's own packets by the sign of dx into two
//                   buffers, one feeding forward east, one forward west
//   forward east  : merge(west_in, from local) -> dx==0 ? (dy>0 ? buffer to
//                   north : buffer to south) : dx-1 -> buffer -> east_out
//   forward west  : merge(east_in, from local) -> the same with dx+1 -> west_out
//   forward north : merge(east, west, south_in) -> dy==0 ? buffer to local :
//                   dy-1 -> buffer -> north_out
//   forward south : merge(east, west, north_in) -> dy==0 ? buffer to local :
//                   dy+1 -> buffer -> south_out
//   to local      : merge of the two local buffers -> local_in (12 bits)
// That is 12 buffers (2+3+3+2+2). Every buffer sits between two merges. A
// merge reads a buffer (read_enable) only when that buffer is not empty and
// none of the buffers after the merge is full; each buffer's full flag goes
// back to the merge before it. A link between two routers is therefore
// {valid = buffer not empty, data} forwards and rd_en (read_enable)
// backwards; the *_out ports are the heads of this router's output buffers.
// The local input accepts a packet when neither from-local buffer is full
// (local_ready); the local output (to the scheduler) is never stalled.
//
// Follows the published router: the structure, the decisions (dx==0,
// dy>0, dy==0, dx<0) and the +/-1 updates, the buffer placement, and the
// read_enable / buffer_full back-pressure. The drawing labels some select
// inputs in the opposite sense; the routing here is the one the +/-1 updates
// imply. Buffer depth and round-robin merging are this design's choices.
module router
  import tn_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  // from the core (spike packets of its neurons)
  input  logic  local_out_valid,
  input  pkt_t  local_out_data,
  output logic  local_out_ready,
  // to the core's scheduler
  output logic  local_in_valid,
  output lpkt_t local_in_data,
  // west_in / east_out : 30-bit links, east_in / west_out likewise
  input  logic  west_in_valid,
  input  pkt_t  west_in_data,
  output logic  west_in_rd,
  input  logic  east_in_valid,
  input  pkt_t  east_in_data,
  output logic  east_in_rd,
  output logic  east_out_valid,
  output pkt_t  east_out_data,
  input  logic  east_out_rd,
  output logic  west_out_valid,
  output pkt_t  west_out_data,
  input  logic  west_out_rd,
  // 21-bit vertical links
  input  logic  south_in_valid,
  input  vpkt_t south_in_data,
  output logic  south_in_rd,
  input  logic  north_in_valid,
  input  vpkt_t north_in_data,
  output logic  north_in_rd,
  output logic  north_out_valid,
  output vpkt_t north_out_data,
  input  logic  north_out_rd,
  output logic  south_out_valid,
  output vpkt_t south_out_data,
  input  logic  south_out_rd
);

  // ---------------------------------------------------------------- from local
  logic  fle_full, fle_empty, fle_rd, flw_full, flw_empty, flw_rd;
  pkt_t  fle_q, flw_q;
  logic  fl_west;

  assign fl_west         = local_out_data.dx < 0;
  assign local_out_ready = !fle_full && !flw_full;

  tn_fifo #(.W(PKT_W), .DEPTH(FIFO_DEPTH)) u_fl_e (
    .clk, .rst_n, .wr_en(local_out_valid && local_out_ready && !fl_west),
    .wdata(local_out_data), .full(fle_full), .rd_en(fle_rd), .rdata(fle_q), .empty(fle_empty));
  tn_fifo #(.W(PKT_W), .DEPTH(FIFO_DEPTH)) u_fl_w (
    .clk, .rst_n, .wr_en(local_out_valid && local_out_ready && fl_west),
    .wdata(local_out_data), .full(flw_full), .rd_en(flw_rd), .rdata(flw_q), .empty(flw_empty));

  // ---------------------------------------------------------- forward east
  logic  fe_v, fe_ready, fe_turn, fe_up;
  pkt_t  fe_p, fe_e_w;
  vpkt_t fe_vert;
  logic  fee_full, fee_empty, fen_full, fen_empty, fen_rd, fes_full, fes_empty, fes_rd;
  vpkt_t fen_q, fes_q;
  logic [1:0] fe_rd;

  tn_merge #(.N(2), .W(PKT_W)) u_fe_merge (
    .clk, .rst_n, .valid({!fle_empty, west_in_valid}),
    .data({fle_q, west_in_data}), .rd_en(fe_rd), .out_ready(fe_ready),
    .out_valid(fe_v), .out_data(fe_p));
  assign west_in_rd = fe_rd[0];
  assign fle_rd     = fe_rd[1];
  assign fe_ready   = !fee_full && !fen_full && !fes_full;
  assign fe_turn    = (fe_p.dx == 0);
  assign fe_up      = (fe_p.dy > 0);
  assign fe_vert    = '{dy: fe_p.dy, axon: fe_p.axon, tick: fe_p.tick};
  always_comb begin
    fe_e_w    = fe_p;
    fe_e_w.dx = fe_p.dx - 1'b1;
  end

  tn_fifo #(.W(PKT_W), .DEPTH(FIFO_DEPTH)) u_fe_e (
    .clk, .rst_n, .wr_en(fe_v && !fe_turn), .wdata(fe_e_w), .full(fee_full),
    .rd_en(east_out_rd), .rdata(east_out_data), .empty(fee_empty));
  tn_fifo #(.W(VPKT_W), .DEPTH(FIFO_DEPTH)) u_fe_n (
    .clk, .rst_n, .wr_en(fe_v && fe_turn && fe_up), .wdata(fe_vert), .full(fen_full),
    .rd_en(fen_rd), .rdata(fen_q), .empty(fen_empty));
  tn_fifo #(.W(VPKT_W), .DEPTH(FIFO_DEPTH)) u_fe_s (
    .clk, .rst_n, .wr_en(fe_v && fe_turn && !fe_up), .wdata(fe_vert), .full(fes_full),
    .rd_en(fes_rd), .rdata(fes_q), .empty(fes_empty));
  assign east_out_valid = !fee_empty;

  // ---------------------------------------------------------- forward west
  logic  fw_v, fw_ready, fw_turn, fw_up;
  pkt_t  fw_p, fw_w_w;
  vpkt_t fw_vert;
  logic  fww_full, fww_empty, fwn_full, fwn_empty, fwn_rd, fws_full, fws_empty, fws_rd;
  vpkt_t fwn_q, fws_q;
  logic [1:0] fw_rd;

  tn_merge #(.N(2), .W(PKT_W)) u_fw_merge (
    .clk, .rst_n, .valid({!flw_empty, east_in_valid}),
    .data({flw_q, east_in_data}), .rd_en(fw_rd), .out_ready(fw_ready),
    .out_valid(fw_v), .out_data(fw_p));
  assign east_in_rd = fw_rd[0];
  assign flw_rd     = fw_rd[1];
  assign fw_ready   = !fww_full && !fwn_full && !fws_full;
  assign fw_turn    = (fw_p.dx == 0);
  assign fw_up      = (fw_p.dy > 0);
  assign fw_vert    = '{dy: fw_p.dy, axon: fw_p.axon, tick: fw_p.tick};
  always_comb begin
    fw_w_w    = fw_p;
    fw_w_w.dx = fw_p.dx + 1'b1;
  end

  tn_fifo #(.W(PKT_W), .DEPTH(FIFO_DEPTH)) u_fw_w (
    .clk, .rst_n, .wr_en(fw_v && !fw_turn), .wdata(fw_w_w), .full(fww_full),
    .rd_en(west_out_rd), .rdata(west_out_data), .empty(fww_empty));
  tn_fifo #(.W(VPKT_W), .DEPTH(FIFO_DEPTH)) u_fw_n (
    .clk, .rst_n, .wr_en(fw_v && fw_turn && fw_up), .wdata(fw_vert), .full(fwn_full),
    .rd_en(fwn_rd), .rdata(fwn_q), .empty(fwn_empty));
  tn_fifo #(.W(VPKT_W), .DEPTH(FIFO_DEPTH)) u_fw_s (
    .clk, .rst_n, .wr_en(fw_v && fw_turn && !fw_up), .wdata(fw_vert), .full(fws_full),
    .rd_en(fws_rd), .rdata(fws_q), .empty(fws_empty));
  assign west_out_valid = !fww_empty;

  // --------------------------------------------------------- forward north
  logic  fn_v, fn_ready, fn_local;
  vpkt_t fn_p, fn_n_w;
  lpkt_t fn_l_w;
  logic  fnn_full, fnn_empty, fnl_full, fnl_empty, fnl_rd;
  lpkt_t fnl_q;
  logic [2:0] fn_rd;

  tn_merge #(.N(3), .W(VPKT_W)) u_fn_merge (
    .clk, .rst_n, .valid({south_in_valid, !fwn_empty, !fen_empty}),
    .data({south_in_data, fwn_q, fen_q}), .rd_en(fn_rd), .out_ready(fn_ready),
    .out_valid(fn_v), .out_data(fn_p));
  assign fen_rd      = fn_rd[0];
  assign fwn_rd      = fn_rd[1];
  assign south_in_rd = fn_rd[2];
  assign fn_ready    = !fnn_full && !fnl_full;
  assign fn_local    = (fn_p.dy == 0);
  assign fn_l_w      = '{axon: fn_p.axon, tick: fn_p.tick};
  always_comb begin
    fn_n_w    = fn_p;
    fn_n_w.dy = fn_p.dy - 1'b1;
  end

  tn_fifo #(.W(VPKT_W), .DEPTH(FIFO_DEPTH)) u_fn_n (
    .clk, .rst_n, .wr_en(fn_v && !fn_local), .wdata(fn_n_w), .full(fnn_full),
    .rd_en(north_out_rd), .rdata(north_out_data), .empty(fnn_empty));
  tn_fifo #(.W(LPKT_W), .DEPTH(FIFO_DEPTH)) u_fn_l (
    .clk, .rst_n, .wr_en(fn_v && fn_local), .wdata(fn_l_w), .full(fnl_full),
    .rd_en(fnl_rd), .rdata(fnl_q), .empty(fnl_empty));
  assign north_out_valid = !fnn_empty;

  // --------------------------------------------------------- forward south
  logic  fs_v, fs_ready, fs_local;
  vpkt_t fs_p, fs_s_w;
  lpkt_t fs_l_w;
  logic  fss_full, fss_empty, fsl_full, fsl_empty, fsl_rd;
  lpkt_t fsl_q;
  logic [2:0] fs_rd;

  tn_merge #(.N(3), .W(VPKT_W)) u_fs_merge (
    .clk, .rst_n, .valid({north_in_valid, !fws_empty, !fes_empty}),
    .data({north_in_data, fws_q, fes_q}), .rd_en(fs_rd), .out_ready(fs_ready),
    .out_valid(fs_v), .out_data(fs_p));
  assign fes_rd      = fs_rd[0];
  assign fws_rd      = fs_rd[1];
  assign north_in_rd = fs_rd[2];
  assign fs_ready    = !fss_full && !fsl_full;
  assign fs_local    = (fs_p.dy == 0);
  assign fs_l_w      = '{axon: fs_p.axon, tick: fs_p.tick};
  always_comb begin
    fs_s_w    = fs_p;
    fs_s_w.dy = fs_p.dy + 1'b1;
  end

  tn_fifo #(.W(VPKT_W), .DEPTH(FIFO_DEPTH)) u_fs_s (
    .clk, .rst_n, .wr_en(fs_v && !fs_local), .wdata(fs_s_w), .full(fss_full),
    .rd_en(south_out_rd), .rdata(south_out_data), .empty(fss_empty));
  tn_fifo #(.W(LPKT_W), .DEPTH(FIFO_DEPTH)) u_fs_l (
    .clk, .rst_n, .wr_en(fs_v && fs_local), .wdata(fs_l_w), .full(fsl_full),
    .rd_en(fsl_rd), .rdata(fsl_q), .empty(fsl_empty));
  assign south_out_valid = !fss_empty;

  // -------------------------------------------------------------- to local
  logic [1:0] tl_rd;
  tn_merge #(.N(2), .W(LPKT_W)) u_tl_merge (
    .clk, .rst_n, .valid({!fsl_empty, !fnl_empty}), .data({fsl_q, fnl_q}),
    .rd_en(tl_rd), .out_ready(1'b1), .out_valid(local_in_valid), .out_data(local_in_data));
  assign fnl_rd = tl_rd[0];
  assign fsl_rd = tl_rd[1];

endmodule
