// pe_array: the one-dimensional array of NUM_PE vPEs of a core.
//
// PE p receives the three interconnect buses from PE p-1 (PE 0 from the core
// controller) and passes them to PE p+1 one cycle later, so a value sent by
// the controller reaches PE p in cycle t+p+1. Returned outputs leave the last
// PE on o_out. A tile of Wo x Ho output pixels uses PEs 0 .. Wo*Ho-1, read as
// a logical Wo-wide, row-major 2-D arrangement by the receivers; the other
// PEs get no inputs and stay idle. 625 PEs is the largest int8 configuration
// the paper evaluates.
module pe_array
  import cnn_pkg::*;
#(
  parameter int unsigned NUM_PE     = 625,
  parameter int unsigned IBUF_DEPTH = 32,
  parameter int unsigned PSUM_DEPTH = 512,
  parameter int unsigned OBUF_DEPTH = 512
) (
  input  logic  clk,
  input  logic  rst_n,
  input  ibus_t i_in,
  input  wbus_t w_in,
  input  obus_t o_in,
  output obus_t o_out
);

  ibus_t ib [NUM_PE+1];
  wbus_t wb [NUM_PE+1];
  obus_t ob [NUM_PE+1];

  assign ib[0] = i_in;
  assign wb[0] = w_in;
  assign ob[0] = o_in;
  assign o_out = ob[NUM_PE];

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    pe #(.IBUF_DEPTH(IBUF_DEPTH), .PSUM_DEPTH(PSUM_DEPTH), .OBUF_DEPTH(OBUF_DEPTH)) u_pe (
      .clk, .rst_n,
      .my_id(ID_W'(p)),
      .i_in(ib[p]), .i_out(ib[p+1]),
      .w_in(wb[p]), .w_out(wb[p+1]),
      .o_in(ob[p]), .o_out(ob[p+1])
    );
  end

  // The forwarded input and weight buses of the last PE have no consumer.
  ibus_t unused_i;
  wbus_t unused_w;
  assign unused_i = ib[NUM_PE];
  assign unused_w = wb[NUM_PE];

endmodule
