// input_buffer: the PE's 32-entry input FIFO.
//
// Inputs arrive from the receiver one word at a time and are appended at the
// tail. A PE holds the Kx*Ky window of one input channel and re-reads every
// word of it Co times (once per output channel), so the head of this FIFO is
// not a single word but the oldest window: rd_off selects a word in it, and
// rel_en with rel_n = Kx*Ky frees the whole window at once. With 32 entries,
// the window being used and the window of the next channel fit side by side
// (double buffering) for Kx*Ky <= 16. The depth follows the paper; the offset
// read port and the window release are this design's way of serving the
// re-reads from a FIFO. Read is asynchronous (distributed RAM).
//
// Interface: wr_en/wr_data append; rd_off -> rd_data combinational;
// rel_en/rel_n release; count/empty describe the occupancy.
module input_buffer #(
  parameter int unsigned DEPTH  = 32,
  parameter int unsigned DATA_W = 32,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned CW    = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [DATA_W-1:0] wr_data,
  input  logic [AW-1:0]     rd_off,
  output logic [DATA_W-1:0] rd_data,
  input  logic              rel_en,
  input  logic [CW-1:0]     rel_n,
  output logic [CW-1:0]     count,
  output logic              empty
);

  logic [DATA_W-1:0] mem [DEPTH];
  logic [AW-1:0]     wp, rp;

  // Pointers wrap modulo DEPTH; DEPTH is a power of two in this design.
  assign rd_data = mem[AW'(rp + rd_off)];
  assign empty   = (count == '0);

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr_en)  wp <= AW'(wp + 1'b1);
      if (rel_en) rp <= AW'(rp + rel_n);
      count <= CW'(count + CW'(wr_en) - (rel_en ? rel_n : CW'(0)));
    end
  end

  initial assert (DEPTH == (1 << AW)) else $error("input_buffer: DEPTH must be a power of two");
  always_ff @(posedge clk) if (rst_n) begin
    assert (!(wr_en && !rel_en && count == CW'(DEPTH))) else $error("input_buffer overflow");
    assert (!(rel_en && rel_n > count)) else $error("input_buffer: release of more words than held");
  end

endmodule
