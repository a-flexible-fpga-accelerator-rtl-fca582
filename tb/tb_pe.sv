// tb_pe: tests one vPE on its own, driving its three interconnect ports as
// the controller would.
//
// For each of several random tiles (1..9 window words, 1..20 output
// channels, 1..4 input channel words) the bench sends the window of each
// channel on the input bus (Start, then NoOp, so that this single receiver
// caches every word) while the weights of the previous channel go by on the
// weight bus (double buffering), tagged first/last/release/offset. It then
// reads the Co results back through the output bus and compares them with
// the reference dot-product sums. Also checked: the input and weight buses
// are forwarded one cycle later (Start rewritten to its forwarded form); a request for another PE passes
// through untouched; weights sent while no window is held leave the output
// buffer empty (an inactive PE).
module tb_pe;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ibus_t i_in, i_out;
  wbus_t w_in, w_out;
  obus_t o_in, o_out;
  logic [ID_W-1:0] my_id = ID_W'(3);

  pe dut (.*);

  // forwarding checks
  ibus_t i_prev; wbus_t w_prev;
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (i_out.valid !== i_prev.valid || i_out.data !== i_prev.data ||
          i_out.cmd != ((i_prev.cmd == CMD_START) ? CMD_STARTED : i_prev.cmd) || w_out !== w_prev) begin failures++; $display("FAIL forwarding"); end
    end
    i_prev <= i_in; w_prev <= w_in;
  end

  logic [31:0] inp [4][16];
  logic [31:0] wt  [4][16][20];

  task automatic send_inputs(int c, int kk);
    for (int k = 0; k < kk; k++) begin
      i_in.valid = 1; i_in.cmd = (k == 0) ? CMD_START : CMD_NOP; i_in.data = inp[c][k];
      @(posedge clk); #1;
    end
    i_in = '0;
  endtask

  task automatic send_weights(int c, int ci, int kk, int co);
    for (int k = 0; k < kk; k++)
      for (int o = 0; o < co; o++) begin
        w_in.valid = 1; w_in.data = wt[c][k][o];
        w_in.first = (c == 0 && k == 0); w_in.last = (c == ci - 1 && k == kk - 1);
        w_in.release_win = (k == kk - 1 && o == co - 1); w_in.koff = KOFF_W'(k);
        @(posedge clk); #1;
        if ($urandom_range(4) == 0) begin w_in = '0; @(posedge clk); #1; end
      end
    w_in = '0;
  endtask

  task automatic read_back(int co, int exp_v []);
    int got = 0;
    for (int o = 0; o < co; o++) begin
      o_in = '0; o_in.req = 1; o_in.req_id = my_id;
      @(posedge clk); #1;
      o_in = '0;
      checks++;
      if (!o_out.dvalid || o_out.req || o_out.data !== 32'(exp_v[o])) begin
        failures++; $display("FAIL readback co %0d: %0d exp %0d", o, $signed(o_out.data), exp_v[o]);
      end
    end
  endtask

  initial begin
    i_in = '0; w_in = '0; o_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int t = 0; t < 12; t++) begin
      int kk, co, ci;
      int exp_v [];
      kk = $urandom_range(1, 9); co = $urandom_range(1, 20); ci = $urandom_range(1, 4);
      exp_v = new[co];
      if (t == 0) begin kk = 1; co = 1; ci = 1; end
      for (int c = 0; c < ci; c++) for (int k = 0; k < kk; k++) begin
        inp[c][k] = $urandom();
        for (int o = 0; o < co; o++) wt[c][k][o] = $urandom();
      end
      for (int o = 0; o < co; o++) begin
        exp_v[o] = 0;
        for (int c = 0; c < ci; c++) for (int k = 0; k < kk; k++) exp_v[o] += dot4(inp[c][k], wt[c][k][o]);
      end
      send_inputs(0, kk);
      for (int c = 0; c < ci; c++) begin
        fork
          send_weights(c, ci, kk, co);
          if (c + 1 < ci) send_inputs(c + 1, kk);
        join
      end
      repeat (2) @(posedge clk); #1;
      // a request for another PE passes through
      o_in = '0; o_in.req = 1; o_in.req_id = ID_W'(7);
      @(posedge clk); #1;
      o_in = '0;
      checks++;
      if (!o_out.req || o_out.dvalid || o_out.req_id != ID_W'(7)) begin failures++; $display("FAIL foreign request"); end
      read_back(co, exp_v);
    end
    // inactive PE: weights with no window held do nothing
    send_weights(0, 1, 1, 5);
    repeat (2) @(posedge clk); #1;
    checks++;
    if (!dut.ob_empty || !dut.ps_empty) begin failures++; $display("FAIL inactive PE computed"); end
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
