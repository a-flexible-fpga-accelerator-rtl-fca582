// pe_fifo: 512-entry FIFO used as the PE's partial-sum buffer and as its
// output buffer.
//
// As partial-sum buffer it holds the Co running sums of the PE's output
// pixel: each MAC operation pops the sum of one output channel from the head
// and pushes the updated sum at the tail, so the sums circulate in channel
// order. As output buffer it receives the final sums and is drained by the
// sender. The depth follows the paper; the head is read asynchronously so
// that pop, accumulate and push fit in one cycle, also for Co = 1 (the paper
// uses block RAM, which would need one more pipeline stage).
//
// Interface: push/din, pop, head (combinational), count/empty/full.
// Push and pop may happen in the same cycle.
module pe_fifo #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = 32,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [W-1:0]  din,
  input  logic          pop,
  output logic [W-1:0]  head,
  output logic [CW-1:0] count,
  output logic          empty,
  output logic          full
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign head  = mem[rp];
  assign empty = (count == '0);
  assign full  = (count == CW'(DEPTH));

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : AW'(wp + 1'b1);
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : AW'(rp + 1'b1);
      count <= CW'(count + CW'(push) - CW'(pop));
    end
  end

  always_ff @(posedge clk) if (rst_n) begin
    assert (!(pop && empty)) else $error("pe_fifo underflow");
    assert (!(push && !pop && full)) else $error("pe_fifo overflow");
  end

endmodule
