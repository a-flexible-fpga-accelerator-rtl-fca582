// cnn_accel: accelerator top, NUM_CORES independent convolution cores.
//
// The design is a set of cores, each a 1-D array of NUM_PE vector PEs with
// its own controller. The number of cores scales with the memory bandwidth
// (each core streams one input and one weight word in, one output word out,
// per cycle) and the number of PEs per core with the compute resources. The
// configuration evaluated in the paper is one core of 625 int8 vPEs
// (1.25 TOPS peak at 250 MHz), the defaults here.
//
// The blocks around the cores on the FPGA (global controller, DMA engine,
// PCIe controller, DDR memory) are not part of this RTL; each core's tile
// command, input, weight and output streams are ports of this top, indexed
// by core. Handshakes: cmd/in/wt are valid/ready; out is valid only.
module cnn_accel
  import cnn_pkg::*;
#(
  parameter int unsigned NUM_CORES  = 1,
  parameter int unsigned NUM_PE     = 625,
  parameter int unsigned IBUF_DEPTH = 32,
  parameter int unsigned PSUM_DEPTH = 512,
  parameter int unsigned OBUF_DEPTH = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid [NUM_CORES],
  output logic              cmd_ready [NUM_CORES],
  input  conv_cmd_t         cmd       [NUM_CORES],
  input  logic              in_valid  [NUM_CORES],
  output logic              in_ready  [NUM_CORES],
  input  logic [DATA_W-1:0] in_data   [NUM_CORES],
  input  logic              wt_valid  [NUM_CORES],
  output logic              wt_ready  [NUM_CORES],
  input  logic [DATA_W-1:0] wt_data   [NUM_CORES],
  output logic              out_valid [NUM_CORES],
  output logic [DATA_W-1:0] out_data  [NUM_CORES],
  output ctrl_stat_t        stat      [NUM_CORES]
);

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    core #(.NUM_PE(NUM_PE), .IBUF_DEPTH(IBUF_DEPTH), .PSUM_DEPTH(PSUM_DEPTH), .OBUF_DEPTH(OBUF_DEPTH)) u_core (
      .clk, .rst_n,
      .cmd_valid(cmd_valid[c]), .cmd_ready(cmd_ready[c]), .cmd(cmd[c]),
      .in_valid(in_valid[c]),   .in_ready(in_ready[c]),   .in_data(in_data[c]),
      .wt_valid(wt_valid[c]),   .wt_ready(wt_ready[c]),   .wt_data(wt_data[c]),
      .out_valid(out_valid[c]), .out_data(out_data[c]),
      .stat(stat[c])
    );
  end

endmodule
