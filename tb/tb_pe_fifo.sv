// tb_pe_fifo: tests the 512-entry partial-sum / output FIFO against a queue
// model with random push and pop (also both in one cycle), filling it to
// full and draining it to empty, and checks the Co = 1 style use where the
// only entry is popped and a new one pushed in the same cycle.
module tb_pe_fifo;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        push = 0, pop = 0, empty, full;
  logic [31:0] din = 0, head;
  logic [9:0]  count;

  pe_fifo #(.DEPTH(512), .W(32)) dut (.*);

  logic [31:0] model[$];

  task automatic step(bit pu, bit po);
    push = pu; pop = po && model.size() > 0; din = $urandom();
    #1;
    if (pop) begin
      checks++;
      if (head !== model[0]) begin failures++; if (failures < 10) $display("FAIL head %h exp %h", head, model[0]); end
    end
    @(posedge clk);
    if (pop) void'(model.pop_front());
    if (push) model.push_back(din);
    #1;
    checks++;
    if (count != 10'(model.size()) || empty != (model.size() == 0) || full != (model.size() == 512)) begin
      failures++; $display("FAIL count %0d model %0d", count, model.size());
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int i = 0; i < 512; i++) step(1, 0);           // fill
    for (int i = 0; i < 100; i++) step(1, 1);           // full, push+pop
    for (int i = 0; i < 512; i++) step(0, 1);           // drain
    step(1, 0);
    for (int i = 0; i < 50; i++) step(1, 1);            // single entry circulating
    step(0, 1);
    for (int i = 0; i < 4000; i++) begin
      int r;
      r = $urandom_range(3);
      step(model.size() < 512 && r != 0, r != 1);
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
