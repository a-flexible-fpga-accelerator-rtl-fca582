// tb_input_buffer: tests the PE input buffer against a queue model.
//
// Windows of random size (1..16 words) are written one word per cycle while
// the previous window is still being read; the bench reads every offset of
// the oldest window in random order, compares with the model, then releases
// the window. Reads and writes overlap in the same cycles (double
// buffering), and count/empty are checked every cycle.
module tb_input_buffer;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        wr_en = 0, rel_en = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic [4:0]  rd_off = 0;
  logic [5:0]  rel_n = 0, count;
  logic        empty;

  input_buffer #(.DEPTH(32), .DATA_W(32)) dut (.*);

  logic [31:0] model[$];

  task automatic check_count();
    checks++;
    if (count != 6'(model.size()) || empty != (model.size() == 0)) begin
      failures++; $display("FAIL count %0d model %0d", count, model.size());
    end
  endtask

  initial begin
    int win [$];
    int wnext;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int t = 0; t < 200; t++) begin
      int n;
      n = $urandom_range(1, 16);
      // fill a window while the model already may hold one
      for (int i = 0; i < n; i++) begin
        int ro;
        wr_en = 1; wr_data = $urandom();
        // read a random offset of the oldest window in the same cycle
        if (win.size() > 0) begin
          ro = $urandom_range(0, win[0] - 1);
          rd_off = 5'(ro);
          #1;
          checks++;
          if (rd_data !== model[ro]) begin failures++; $display("FAIL rd off %0d", ro); end
        end
        @(posedge clk);
        model.push_back(wr_data);
        #1;
        check_count();
      end
      wr_en = 0;
      win.push_back(n);
      // if two windows are held, read all of the oldest and release it
      if (win.size() == 2) begin
        for (int o = win[0] - 1; o >= 0; o--) begin
          rd_off = 5'(o); #1;
          checks++;
          if (rd_data !== model[o]) begin failures++; $display("FAIL rd off %0d", o); end
        end
        @(negedge clk);   // the reads above took several time steps
        rel_en = 1; rel_n = 6'(win[0]);
        @(posedge clk);
        for (int i = 0; i < win[0]; i++) void'(model.pop_front());
        void'(win.pop_front());
        #1; rel_en = 0;
        check_count();
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
