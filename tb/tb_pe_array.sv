// tb_pe_array: tests a 12-PE array driven directly by the bench.
//
// For each tile the bench plays the controller in its simplest, fully
// sequential form: for every input channel it streams the inputs with the
// reference receiver commands, then the Kx*Ky*Co tagged weights; after the
// last channel it issues Wo*Ho*Co read requests in (co, pixel) order. The
// returned values must match the reference convolution and leave the last PE
// exactly NUM_PE cycles after their request entered PE 0. PEs beyond Wo*Ho
// must stay idle (empty output buffers).
module tb_pe_array;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int NPE = 12;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ibus_t i_in; wbus_t w_in; obus_t o_in, o_out;
  pe_array #(.NUM_PE(NPE)) dut (.*);

  logic ob_empty_v [NPE];
  for (genvar g = 0; g < NPE; g++) begin : g_obs
    assign ob_empty_v[g] = dut.g_pe[g].u_pe.ob_empty;
  end

  typedef struct { logic [31:0] v; int t; } exp_t;
  exp_t expq[$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && o_out.dvalid) begin
      checks++;
      if (expq.size() == 0 || o_out.data !== expq[0].v || cyc != expq[0].t + NPE) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d at %0d (exp %0d at %0d)", $signed(o_out.data), cyc,
                                    expq.size() ? $signed(expq[0].v) : 0, expq.size() ? expq[0].t + NPE : 0);
      end
      if (expq.size()) void'(expq.pop_front());
    end
  end

  task automatic run_tile(int wo, int ho, int co, int ci, int kx, int ky, int sx, int sy);
    int wi = (wo - 1) * sx + kx, hi = (ho - 1) * sy + ky;
    logic [31:0] inp [], wt [];
    inp = new[ci * hi * wi];
    wt  = new[ci * ky * kx * co];
    foreach (inp[i]) inp[i] = $urandom();
    foreach (wt[i])  wt[i]  = $urandom();
    for (int c = 0; c < ci; c++) begin
      for (int y = 0; y < hi; y++) for (int x = 0; x < wi; x++) begin
        i_in.valid = 1; i_in.cmd = ref_cmd(wo, ho, kx, ky, sx, sy, y, x); i_in.data = inp[(c * hi + y) * wi + x];
        @(posedge clk); #1;
      end
      i_in = '0;
      for (int k = 0; k < kx * ky; k++) for (int o = 0; o < co; o++) begin
        w_in.valid = 1; w_in.data = wt[(c * kx * ky + k) * co + o];
        w_in.first = (c == 0 && k == 0); w_in.last = (c == ci - 1 && k == kx * ky - 1);
        w_in.release_win = (k == kx * ky - 1 && o == co - 1); w_in.koff = KOFF_W'(k);
        @(posedge clk); #1;
      end
      w_in = '0;
    end
    repeat (NPE + 3) @(posedge clk); #1;
    for (int p = wo * ho; p < NPE; p++) begin
      checks++;
      if (!ob_empty_v[p]) begin failures++; $display("FAIL idle PE %0d holds outputs", p); end
    end
    for (int o = 0; o < co; o++) for (int p = 0; p < wo * ho; p++) begin
      int acc = 0, ox = p % wo, oy = p / wo;
      for (int c = 0; c < ci; c++) for (int ky_ = 0; ky_ < ky; ky_++) for (int kx_ = 0; kx_ < kx; kx_++)
        acc += dot4(inp[(c * hi + oy * sy + ky_) * wi + ox * sx + kx_], wt[((c * ky + ky_) * kx + kx_) * co + o]);
      o_in = '0; o_in.req = 1; o_in.req_id = ID_W'(p);
      expq.push_back('{32'(acc), cyc});
      @(posedge clk); #1;
    end
    o_in = '0;
    repeat (NPE + 3) @(posedge clk); #1;
  endtask

  initial begin
    i_in = '0; w_in = '0; o_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    run_tile(4, 3, 3, 2, 3, 3, 1, 1);
    run_tile(3, 2, 1, 3, 2, 2, 2, 1);
    run_tile(2, 2, 5, 1, 3, 2, 1, 2);
    run_tile(12, 1, 2, 2, 1, 1, 1, 1);
    run_tile(1, 1, 4, 2, 2, 2, 1, 1);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
