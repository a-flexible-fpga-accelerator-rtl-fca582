// tb_sender: tests the output-interconnect node with a chain of 6 senders,
// each fed by a model output buffer (a queue per PE). Random read requests,
// one per cycle with random gaps, name a PE whose queue is not empty. The
// values must leave the end of the chain in request order, exactly 6 cycles
// after the request entered, each PE's queue being popped once per request.
module tb_sender;
  import cnn_pkg::*;
  localparam int N = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  obus_t bus [N+1];
  logic  pop [N];
  logic [31:0] head [N];
  logic  emp [N];
  logic [31:0] q [N][$];

  for (genvar i = 0; i < N; i++) begin : g_s
    assign head[i] = (q[i].size() > 0) ? q[i][0] : 32'hDEAD_BEEF;
    assign emp[i]  = (q[i].size() == 0);
    sender u_s (.clk, .rst_n, .my_id(ID_W'(i)), .in_bus(bus[i]), .out_bus(bus[i+1]),
                .ob_pop(pop[i]), .ob_head(head[i]), .ob_empty(emp[i]));
  end

  obus_t req;
  assign bus[0] = req;

  typedef struct { logic [31:0] v; int t; } exp_t;
  exp_t expq[$];
  int cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = 0; i < N; i++) if (pop[i]) void'(q[i].pop_front());
    if (rst_n && bus[N].dvalid) begin
      checks++;
      if (expq.size() == 0 || bus[N].data !== expq[0].v || cyc != expq[0].t + N) begin
        failures++;
        if (failures < 10) $display("FAIL got %h at %0d", bus[N].data, cyc);
      end
      if (expq.size() > 0) void'(expq.pop_front());
    end
    if (rst_n && bus[N].req) begin failures++; $display("FAIL request left the chain"); end
  end

  // per-PE pending count, so that a PE is never asked more than it holds
  int pend [N];
  initial begin
    for (int i = 0; i < N; i++) begin
      pend[i] = 0;
      for (int k = 0; k < 400; k++) q[i].push_back({8'(i), 24'(k)});
    end
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int n = 0; n < 1500; n++) begin
      int id;
      id = $urandom_range(N - 1);
      if ($urandom_range(3) == 0 || pend[id] >= 400) begin req = '0; end
      else begin
        req = '0; req.req = 1; req.req_id = ID_W'(id);
        expq.push_back('{ {8'(id), 24'(pend[id])}, cyc });
        pend[id]++;
      end
      @(posedge clk); #1;
    end
    req = '0;
    repeat (N + 3) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d values never returned", expq.size()); end
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
