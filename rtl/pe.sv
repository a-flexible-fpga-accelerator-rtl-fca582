// pe: one vector processing element (vPE) of the 1-D array.
//
// A PE computes all Co output channels of one output pixel. It has no
// controller of its own: everything it does is triggered by what arrives on
// its three interconnect ports, each of which it forwards to the next PE
// after one register.
//   * Input interconnect: the receiver decides from the command whether the
//     accompanying input is part of this pixel's Kx*Ky window; if so it is
//     appended to the 32-entry input buffer.
//   * Weight interconnect: every valid weight that arrives while the input
//     buffer holds a window starts one MAC operation with the input at the
//     window offset carried by the weight. The weights come in
//     Ci x Ky x Kx x Co order, so the Co partial sums of the pixel are
//     popped from and pushed back to the 512-entry partial-sum FIFO in turn.
//     On the first term a sum starts from zero; on the last term it goes to
//     the 512-entry output FIFO instead. The weight tagged release_win frees
//     the window (its offset + 1 words). The weight is then forwarded.
//   * Output interconnect: the sender answers read requests addressed to
//     this PE from the output FIFO.
// The structure (receiver, input buffer, MAC, partial sum, output, sender,
// register on the weight line) is that of the paper's PE figure; the weight
// tags and the "window present" issue condition are this design's own.
//
// Timing: MAC issue in the cycle a weight arrives, result written one cycle
// later; all forwarded buses have one cycle of latency.
// The receiver state bits and the FIFO counts are brought out of the
// sub-blocks for observation and assertions; the PE itself needs only the
// cache strobe and the empty/full flags.
module pe
  import cnn_pkg::*;
#(
  parameter int unsigned IBUF_DEPTH = 32,
  parameter int unsigned PSUM_DEPTH = 512,
  parameter int unsigned OBUF_DEPTH = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [ID_W-1:0] my_id,
  input  ibus_t           i_in,
  output ibus_t           i_out,
  input  wbus_t           w_in,
  output wbus_t           w_out,
  input  obus_t           o_in,
  output obus_t           o_out
);

  localparam int unsigned IAW = $clog2(IBUF_DEPTH);
  localparam int unsigned ICW = $clog2(IBUF_DEPTH + 1);
  localparam int unsigned PCW = $clog2(PSUM_DEPTH + 1);
  localparam int unsigned OCW = $clog2(OBUF_DEPTH + 1);

  // ---------------- input interconnect ----------------
  logic cache_en, rd, ls;
  receiver u_rx (
    .clk, .rst_n, .in_bus(i_in), .out_bus(i_out), .cache_en, .rd, .ls
  );

  logic [DATA_W-1:0] ib_data;
  logic [ICW-1:0]    ib_count;
  logic              ib_empty;
  logic              mac_en;

  input_buffer #(.DEPTH(IBUF_DEPTH), .DATA_W(DATA_W)) u_ibuf (
    .clk, .rst_n,
    .wr_en  (cache_en),
    .wr_data(i_in.data),
    .rd_off (IAW'(w_in.koff)),
    .rd_data(ib_data),
    .rel_en (mac_en && w_in.release_win),
    .rel_n  (ICW'(w_in.koff) + ICW'(1)),
    .count  (ib_count),
    .empty  (ib_empty)
  );

  // ---------------- weight interconnect ----------------
  assign mac_en = w_in.valid && !ib_empty;

  always_ff @(posedge clk) begin
    if (!rst_n) w_out <= '0;
    else        w_out <= w_in;
  end

  // ---------------- MAC and partial sums ----------------
  logic              r_valid, r_first, r_last;
  logic [ACC_W-1:0]  r_acc, ps_head;
  logic [PCW-1:0]    ps_count;
  logic              ps_empty, ps_full;

  vmac u_mac (
    .clk, .rst_n,
    .en(mac_en), .a(ib_data), .b(w_in.data), .first(w_in.first), .last(w_in.last),
    .psum(ps_head),
    .res_valid(r_valid), .res_first(r_first), .res_last(r_last), .res(r_acc)
  );

  pe_fifo #(.DEPTH(PSUM_DEPTH), .W(ACC_W)) u_psum (
    .clk, .rst_n,
    .push (r_valid && !r_last),
    .din  (r_acc),
    .pop  (r_valid && !r_first),
    .head (ps_head),
    .count(ps_count),
    .empty(ps_empty),
    .full (ps_full)
  );

  // ---------------- output buffer and sender ----------------
  logic [DATA_W-1:0] ob_head;
  logic [OCW-1:0]    ob_count;
  logic              ob_empty, ob_full, ob_pop;

  pe_fifo #(.DEPTH(OBUF_DEPTH), .W(ACC_W)) u_obuf (
    .clk, .rst_n,
    .push (r_valid && r_last),
    .din  (r_acc),
    .pop  (ob_pop),
    .head (ob_head),
    .count(ob_count),
    .empty(ob_empty),
    .full (ob_full)
  );

  sender u_tx (
    .clk, .rst_n, .my_id, .in_bus(o_in), .out_bus(o_out),
    .ob_pop, .ob_head, .ob_empty
  );

  always_ff @(posedge clk) if (rst_n) begin
    assert (!(r_valid && !r_first && ps_empty)) else $error("pe %0d: partial sum missing", my_id);
    assert (!(mac_en && w_in.release_win && ICW'(w_in.koff) >= ib_count))
      else $error("pe %0d: window released before it was complete", my_id);
    assert (!(r_valid && r_last && ob_full && !ob_pop)) else $error("pe %0d: output buffer overflow", my_id);
    assert (!(r_valid && !r_last && r_first && ps_full)) else $error("pe %0d: more than PSUM_DEPTH output channels", my_id);
  end

endmodule
