// tb_receiver: tests the input-interconnect receiver.
//
// Part 1 drives one receiver into each of the four (RD, LS) states, applies
// every command code 0..14 and compares the forwarded command and the new
// state with the transition table written out independently below.
// Part 2 chains 16 receivers like the PEs of a core, streams whole input
// channels with the command sequence derived from the convolution geometry
// (tb_ref_pkg), and checks that every input is cached by exactly the PEs
// whose output pixel uses it, for several tile shapes and strides. The first
// shape, Wo=3, Ho=4, 2x2 window, reproduces the paper's mapping figure (row
// 2 of the input: receivers {3,6}, {3,4,6,7}, {4,5,7,8}, {5,8}).
module tb_receiver;
  import cnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NR = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- part 1: single receiver ----------------
  ibus_t s_in, s_out;
  logic  s_cache, s_rd, s_ls;
  receiver u_single (.clk, .rst_n, .in_bus(s_in), .out_bus(s_out), .cache_en(s_cache), .rd(s_rd), .ls(s_ls));

  // expected (cmd_out, rd, ls) for (cmd_in, rd, ls)
  task automatic expect_tr(int c, bit rd, bit ls, output int co, output bit nrd, output bit nls);
    co = c; nrd = rd; nls = ls;
    case (c)
      3:  if (rd)  begin co = 8;  nrd = 0; end
      8:  if (!rd) begin co = 3;  nrd = 1; end
      1:  if (rd)  begin co = 9;  end
      9:  if (!rd) begin co = 1;  nrd = 1; end
      2:  if (rd)  begin co = 10; nrd = 0; end
      10: if (!rd) begin co = 2;  end
      4:  nrd = ls;
      6:  if (ls)  begin co = 4;  nls = 0; nrd = 0; end
      7:  if (ls)  begin co = 11; nls = 0; end
      11: if (rd)  begin co = 12; nrd = 0; end
      12: if (!rd) begin co = 11; nrd = 1; nls = 1; end
      5:  if (ls)  begin co = 11; nrd = 1; end
      13: begin co = 14; nrd = 1; nls = 1; end
      14: begin nrd = 0; nls = 0; end
      default: ;
    endcase
  endtask

  task automatic beat(input icmd_e c);
    s_in.valid = 1'b1; s_in.cmd = c; s_in.data = $urandom();
    @(posedge clk); #1;
  endtask

  task automatic set_state(bit rd, bit ls);
    beat(CMD_START);                       // rd=1 ls=1
    if (rd && !ls) beat(CMD_SHIFTY);       // ls -> 0, rd stays
    if (!rd && ls) beat(CMD_I_Y11);        // rd -> 0, ls stays
    if (!rd && !ls) beat(CMD_STARTED);     // both 0
  endtask

  // ---------------- part 2: chain ----------------
  ibus_t c_bus [NR+1];
  logic  c_cache [NR];
  logic  c_rd [NR], c_ls [NR];
  for (genvar i = 0; i < NR; i++) begin : g_rx
    receiver u_rx (.clk, .rst_n, .in_bus(c_bus[i]), .out_bus(c_bus[i+1]), .cache_en(c_cache[i]), .rd(c_rd[i]), .ls(c_ls[i]));
  end
  ibus_t c_head;
  assign c_bus[0] = c_head;

  // cached[p][v]: PE p cached input number v (data = v)
  bit cached [NR][1024];
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NR; p++)
      if (c_cache[p]) cached[p][c_bus[p].data[9:0]] = 1'b1;

  task automatic run_tile(int wo, int ho, int kx, int ky, int sx, int sy);
    int wi = (wo - 1) * sx + kx, hi = (ho - 1) * sy + ky, v = 0;
    for (int p = 0; p < NR; p++) for (int i = 0; i < 1024; i++) cached[p][i] = 0;
    for (int y = 0; y < hi; y++)
      for (int x = 0; x < wi; x++) begin
        c_head.valid = 1'b1;
        c_head.cmd   = ref_cmd(wo, ho, kx, ky, sx, sy, y, x);
        c_head.data  = 32'(y * wi + x);
        @(posedge clk); #1;
        // a bubble with no data now and then: state must not change
        if ($urandom_range(3) == 0) begin c_head = '0; @(posedge clk); #1; end
      end
    c_head = '0;
    repeat (NR + 2) @(posedge clk); #1;
    for (int y = 0; y < hi; y++)
      for (int x = 0; x < wi; x++)
        for (int p = 0; p < NR; p++) begin
          checks++;
          if (cached[p][y * wi + x] != ref_needs(p, wo, ho, kx, ky, sx, sy, y, x)) begin
            failures++;
            if (failures < 10) $display("FAIL tile %0dx%0d k%0dx%0d s%0dx%0d: input (%0d,%0d) PE %0d cached=%0d",
                                        wo, ho, kx, ky, sx, sy, y, x, p, cached[p][y * wi + x]);
          end
        end
  endtask

  initial begin
    int co; bit nrd, nls;
    s_in = '0; c_head = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1'b1;
    for (int st = 0; st < 4; st++)
      for (int c = 0; c < 15; c++) begin
        bit rd, ls;
        rd = st[1]; ls = st[0];
        set_state(rd, ls);
        checks++;
        if (s_rd !== rd || s_ls !== ls) begin failures++; $display("FAIL could not set state %0d%0d", rd, ls); end
        expect_tr(c, rd, ls, co, nrd, nls);
        s_in.valid = 1'b1; s_in.cmd = icmd_e'(c); s_in.data = 32'hA5A5_0000 + c;
        #1;
        checks++;
        if (s_cache !== nrd) begin failures++; $display("FAIL cache_en cmd %0d state %0d%0d", c, rd, ls); end
        @(posedge clk); #1;
        checks++;
        if (int'(s_out.cmd) != co || s_rd !== nrd || s_ls !== nls || s_out.data !== 32'hA5A5_0000 + c) begin
          failures++;
          $display("FAIL cmd %0d from RD=%0d LS=%0d: out %0d RD=%0d LS=%0d (expected %0d %0d %0d)",
                   c, rd, ls, s_out.cmd, s_rd, s_ls, co, nrd, nls);
        end
      end
    s_in = '0;
    run_tile(3, 4, 2, 2, 1, 1);   // the paper's mapping figure
    run_tile(4, 4, 3, 3, 1, 1);
    run_tile(3, 3, 3, 3, 2, 2);
    run_tile(5, 3, 3, 2, 2, 1);
    run_tile(16, 1, 3, 3, 1, 3);
    run_tile(2, 8, 1, 3, 1, 2);
    run_tile(4, 2, 1, 1, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
