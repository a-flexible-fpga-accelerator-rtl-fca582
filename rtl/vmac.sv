// vmac: the int8 vector multiply-accumulate unit of a vPE.
//
// Each 32-bit operand packs four signed 8-bit lanes (four input channels and
// the matching four weight channels). The unit forms the four lane products,
// reduces them with an adder tree of three adds, and adds the result to the
// partial sum (or to zero on the first term of an output), accumulating in
// 32 bits: four multiplies and four adds per cycle, as the paper describes.
// Lane order (lane i in bits [8i+7:8i]), signedness and wrap-around on
// overflow are this design's choices.
//
// Timing: the products are registered in the cycle en is high; the tree and
// the accumulate are combinational in the next cycle, when res_valid is high
// and the caller supplies psum (the head of the partial-sum FIFO).
module vmac
  import cnn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  input  logic              first,
  input  logic              last,
  input  logic [ACC_W-1:0]  psum,
  output logic              res_valid,
  output logic              res_first,
  output logic              res_last,
  output logic [ACC_W-1:0]  res
);

  logic signed [2*LANE_W-1:0] prod_q [LANES];
  logic signed [ACC_W-1:0]    s01, s23, dot;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_first <= 1'b0;
      res_last  <= 1'b0;
      for (int i = 0; i < LANES; i++) prod_q[i] <= '0;
    end else begin
      res_valid <= en;
      res_first <= first;
      res_last  <= last;
      if (en)
        for (int i = 0; i < LANES; i++)
          prod_q[i] <= $signed(a[i*LANE_W +: LANE_W]) * $signed(b[i*LANE_W +: LANE_W]);
    end
  end

  // Adder tree (three adds) and the accumulate add.
  always_comb begin
    s01 = ACC_W'(prod_q[0]) + ACC_W'(prod_q[1]);
    s23 = ACC_W'(prod_q[2]) + ACC_W'(prod_q[3]);
    dot = s01 + s23;
    res = (res_first ? '0 : psum) + dot;
  end

endmodule
