// tb_vmac: tests the int8 vector MAC. Random packed operands (including the
// extremes -128 and 127 in every lane) are applied one per cycle; one cycle
// later res must equal the four-lane signed dot product added to psum, or
// to zero when first was set, with res_valid/first/last delayed by one cycle.
module tb_vmac;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        en = 0, first = 0, last = 0, res_valid, res_first, res_last;
  logic [31:0] a = 0, b = 0, psum = 0, res;

  vmac dut (.*);

  initial begin
    logic [31:0] pa, pb; bit pf, pl, pe;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    pe = 0;
    for (int i = 0; i < 2000; i++) begin
      en = ($urandom_range(4) != 0);
      a = (i < 4) ? {4{8'h80}} : (i < 8) ? {4{8'h7f}} : $urandom();
      b = (i < 2) ? {4{8'h80}} : (i < 6) ? {4{8'h7f}} : $urandom();
      if (i == 2 || i == 3) b = {4{8'h80}};
      first = $urandom_range(1); last = $urandom_range(1);
      pa = a; pb = b; pf = first; pl = last; pe = en;
      @(posedge clk); #1;
      en = 0;
      psum = $urandom();
      #1;
      checks++;
      if (res_valid !== pe || (pe && (res_first !== pf || res_last !== pl))) begin
        failures++; $display("FAIL flags");
      end
      if (pe) begin
        logic [31:0] e;
        e = (pf ? 32'd0 : psum) + 32'(dot4(pa, pb));
        checks++;
        if (res !== e) begin failures++; if (failures < 10) $display("FAIL res %h exp %h", res, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
