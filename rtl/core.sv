// core: one accelerator core, a core controller driving a 1-D array of
// NUM_PE vPEs through the input, weight and output interconnects.
//
// A core computes one convolution tile at a time: Wo*Ho output pixels (one
// per PE) times Co output channels from Ci input channel words (four int8
// channels each) and a Kx x Ky window. It consumes at most one input and one
// weight per cycle and produces at most one output per cycle, which fixes
// the bandwidth one core can use; more bandwidth is used by more cores.
// Streams and tile command are described in core_ctrl.
module core
  import cnn_pkg::*;
#(
  parameter int unsigned NUM_PE     = 625,
  parameter int unsigned IBUF_DEPTH = 32,
  parameter int unsigned PSUM_DEPTH = 512,
  parameter int unsigned OBUF_DEPTH = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  conv_cmd_t         cmd,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  input  logic              wt_valid,
  output logic              wt_ready,
  input  logic [DATA_W-1:0] wt_data,
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data,
  output ctrl_stat_t        stat
);

  ibus_t i_bus;
  wbus_t w_bus;
  obus_t o_req, o_ret;

  core_ctrl #(.NUM_PE(NUM_PE), .IBUF_DEPTH(IBUF_DEPTH), .OBUF_DEPTH(OBUF_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .in_valid, .in_ready, .in_data,
    .wt_valid, .wt_ready, .wt_data,
    .out_valid, .out_data,
    .i_bus, .w_bus, .o_req, .o_ret,
    .stat
  );

  pe_array #(.NUM_PE(NUM_PE), .IBUF_DEPTH(IBUF_DEPTH), .PSUM_DEPTH(PSUM_DEPTH), .OBUF_DEPTH(OBUF_DEPTH)) u_array (
    .clk, .rst_n,
    .i_in(i_bus), .w_in(w_bus), .o_in(o_req), .o_out(o_ret)
  );

endmodule
