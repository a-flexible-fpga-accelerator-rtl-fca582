// sender: output-interconnect node of one PE.
//
// The controller sends read requests down the chain, one per cycle at most.
// Each request slot carries the index of the PE that must answer and an
// empty data slot. Every node registers the slot to the next PE; the node
// whose index matches pops one value from its output buffer, puts it in the
// data slot and retires the request. Because a request and the value it
// fetches travel in the same slot of a pipelined chain, no two PEs can write
// the same slot. The answers leave the last PE in the order the requests
// were issued, NUM_PE cycles after issue. Addressing requests by PE index is
// this design's choice; the paper says only that requests are forwarded to
// all PEs and each PE answers with one value.
//
// Timing: ob_pop is combinational in the cycle the request arrives; out_bus is
// registered.
module sender
  import cnn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ID_W-1:0]   my_id,
  input  obus_t             in_bus,
  output obus_t             out_bus,
  output logic              ob_pop,
  input  logic [DATA_W-1:0] ob_head,
  input  logic              ob_empty
);

  logic hit;
  assign hit    = in_bus.req && (in_bus.req_id == my_id);
  assign ob_pop = hit;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_bus <= '0;
    end else begin
      out_bus <= in_bus;
      if (hit) begin
        out_bus.req    <= 1'b0;
        out_bus.dvalid <= 1'b1;
        out_bus.data   <= ob_head;
      end
    end
  end

  always_ff @(posedge clk) if (rst_n) begin
    assert (!(hit && ob_empty)) else $error("sender: request to PE %0d with empty output buffer", my_id);
    assert (!(hit && in_bus.dvalid)) else $error("sender: request slot already holds data");
  end

endmodule
