// tb_core_ctrl: tests the core controller alone, with the PE array replaced
// by a model that answers every read request D cycles later with a value
// encoding the request (PE index and sequence number).
//
// For a list of tiles (different windows, strides, channel counts, with and
// without gaps on the streams) it checks, beat by beat against references
// computed from the convolution geometry:
//   * input bus: the data in stream order and the receiver command of each
//     input (tb_ref_pkg::ref_cmd);
//   * weight bus: the data and the first/last/release/offset tags;
//   * read requests: the PE index order (co outer, pixel inner), and that
//     the output stream returns exactly the model's answers;
// and the scheduling rules: weights of channel c only after the last input
// of channel c; inputs of channel c+2 only after the last weight of channel
// c; the last channel of a tile only after the previous tile's outputs have
// returned; requests only after the tile's last weight. In the tile without
// gaps, inputs of a channel must be taken on consecutive cycles and requests
// issued on consecutive cycles.
module tb_core_ctrl;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int NPE = 16, D = 7, NT = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cmd_valid, cmd_ready, in_valid, in_ready, wt_valid, wt_ready, out_valid;
  conv_cmd_t cmd;
  logic [31:0] in_data, wt_data, out_data;
  ibus_t i_bus; wbus_t w_bus; obus_t o_req, o_ret;
  ctrl_stat_t stat;

  core_ctrl #(.NUM_PE(NPE)) dut (.*);

  // array model: delay line
  obus_t dl [D];
  int seq = 0;
  always @(posedge clk) begin
    if (!rst_n) for (int i = 0; i < D; i++) dl[i] <= '0;
    else begin
      for (int i = D - 1; i > 0; i--) dl[i] <= dl[i-1];
      dl[0] <= '0;
      if (o_req.req) begin
        dl[0].dvalid <= 1; dl[0].data <= {8'(o_req.req_id), 24'(seq)};
        seq <= seq + 1;
      end
    end
  end
  assign o_ret = dl[D-1];

  typedef struct { int wo, ho, co, ci, kx, ky, sx, sy, gap; } tile_t;
  tile_t tiles [NT] = '{
    '{4, 4, 3, 3, 3, 3, 1, 1, 20},
    '{3, 3, 2, 2, 3, 3, 2, 2, 30},
    '{5, 2, 1, 4, 2, 3, 2, 1, 0},
    '{2, 1, 6, 1, 1, 1, 1, 1, 10},
    '{16, 1, 2, 2, 3, 2, 3, 1, 0}
  };

  // expected beats
  typedef struct { int tile, ch; icmd_e cmd; logic [31:0] d; } ibeat_t;
  typedef struct { int tile, ch; logic [31:0] d; bit f, l, r; int k; } wbeat_t;
  typedef struct { int tile; int id; } rbeat_t;
  ibeat_t iq[$]; wbeat_t wq[$]; rbeat_t rq[$];
  logic [31:0] in_src[$], wt_src[$];

  initial begin
    for (int t = 0; t < NT; t++) begin
      tile_t s;
      int wi, hi;
      s = tiles[t];
      wi = (s.wo - 1) * s.sx + s.kx; hi = (s.ho - 1) * s.sy + s.ky;
      for (int c = 0; c < s.ci; c++) begin
        for (int y = 0; y < hi; y++) for (int x = 0; x < wi; x++) begin
          logic [31:0] v;
          v = $urandom();
          in_src.push_back(v);
          iq.push_back('{t, c, ref_cmd(s.wo, s.ho, s.kx, s.ky, s.sx, s.sy, y, x), v});
        end
        for (int k = 0; k < s.kx * s.ky; k++) for (int o = 0; o < s.co; o++) begin
          logic [31:0] v;
          v = $urandom();
          wt_src.push_back(v);
          wq.push_back('{t, c, v, c == 0 && k == 0, c == s.ci - 1 && k == s.kx * s.ky - 1,
                         k == s.kx * s.ky - 1 && o == s.co - 1, k});
        end
      end
      for (int o = 0; o < s.co; o++) for (int p = 0; p < s.wo * s.ho; p++) rq.push_back('{t, p});
    end
  end

  // drivers
  int cmd_idx = 0;
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) cmd_idx <= cmd_idx + 1;
  always_comb begin
    cmd_valid = rst_n && cmd_idx < NT;
    cmd = '0;
    if (cmd_idx < NT) begin
      cmd.wo = DIM_W'(tiles[cmd_idx].wo); cmd.ho = DIM_W'(tiles[cmd_idx].ho);
      cmd.co = DIM_W'(tiles[cmd_idx].co); cmd.ci = CH_W'(tiles[cmd_idx].ci);
      cmd.kx = K_W'(tiles[cmd_idx].kx);   cmd.ky = K_W'(tiles[cmd_idx].ky);
      cmd.sx = S_W'(tiles[cmd_idx].sx);   cmd.sy = S_W'(tiles[cmd_idx].sy);
    end
  end
  int cur_gap;
  assign cur_gap = tiles[(cmd_idx == 0) ? 0 : cmd_idx - 1].gap;
  logic in_hold = 0, wt_hold = 0;
  int in_i = 0, wt_i = 0;   // stream positions, advanced with non-blocking updates
  assign in_valid = rst_n && in_i < in_src.size() && !in_hold;
  assign in_data  = in_i < in_src.size() ? in_src[in_i] : '0;
  assign wt_valid = rst_n && wt_i < wt_src.size() && !wt_hold;
  assign wt_data  = wt_i < wt_src.size() ? wt_src[wt_i] : '0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) in_i <= in_i + 1;
    if (wt_valid && wt_ready) wt_i <= wt_i + 1;
    in_hold <= $urandom_range(99) < cur_gap;
    wt_hold <= $urandom_range(99) < cur_gap;
  end

  // timing records
  int last_in [NT][8], first_in [NT][8], last_w [NT][8], first_w [NT][8];
  int last_ret [NT], first_req [NT], prev_in_cyc = -10, prev_in_ch = -1, prev_in_t = -1, prev_req = -10;
  int ret_tile = 0, ret_cnt = 0;
  logic [31:0] outq[$];

  always @(posedge clk) if (rst_n) begin
    if (i_bus.valid) begin
      checks++;
      if (iq.size() == 0 || i_bus.cmd != iq[0].cmd || i_bus.data !== iq[0].d) begin
        failures++;
        if (failures < 10) $display("FAIL input beat %0d: cmd %0d exp %0d data %h exp %h", cyc, i_bus.cmd, iq.size() ? iq[0].cmd : 0, i_bus.data, iq.size() ? iq[0].d : 0);
      end
      if (iq.size()) begin
        ibeat_t b;
        b = iq.pop_front();
        if (first_in[b.tile][b.ch] < 0) first_in[b.tile][b.ch] = cyc;
        last_in[b.tile][b.ch] = cyc;
        if (tiles[b.tile].gap == 0 && prev_in_t == b.tile && prev_in_ch == b.ch) begin
          checks++;
          if (cyc != prev_in_cyc + 1) begin failures++; $display("FAIL input gap in tile %0d", b.tile); end
        end
        prev_in_cyc = cyc; prev_in_ch = b.ch; prev_in_t = b.tile;
      end
    end
    if (w_bus.valid) begin
      checks++;
      if (wq.size() == 0 || w_bus.data !== wq[0].d || w_bus.first != wq[0].f || w_bus.last != wq[0].l ||
          w_bus.release_win != wq[0].r || int'(w_bus.koff) != wq[0].k) begin
        failures++;
        if (failures < 10) $display("FAIL weight beat");
      end
      if (wq.size()) begin
        wbeat_t b;
        b = wq.pop_front();
        if (first_w[b.tile][b.ch] < 0) first_w[b.tile][b.ch] = cyc;
        last_w[b.tile][b.ch] = cyc;
      end
    end
    if (o_req.req) begin
      checks++;
      if (rq.size() == 0 || int'(o_req.req_id) != rq[0].id) begin failures++; if (failures < 10) $display("FAIL request id"); end
      if (rq.size()) begin
        rbeat_t b;
        b = rq.pop_front();
        if (first_req[b.tile] < 0) first_req[b.tile] = cyc;
        else if (tiles[b.tile].gap == 0) begin
          checks++;
          if (cyc != prev_req + 1) begin failures++; $display("FAIL request gap"); end
        end
        prev_req = cyc;
      end
    end
    if (o_ret.dvalid) outq.push_back(o_ret.data);
    if (out_valid) begin
      checks++;
      if (outq.size() == 0 || out_data !== outq[0]) begin failures++; $display("FAIL output stream"); end
      if (outq.size()) void'(outq.pop_front());
      last_ret[ret_tile] = cyc;
      ret_cnt++;
      if (ret_cnt == tiles[ret_tile].wo * tiles[ret_tile].ho * tiles[ret_tile].co) begin ret_tile++; ret_cnt = 0; end
    end
  end

  initial begin
    for (int t = 0; t < NT; t++) begin
      first_req[t] = -1; last_ret[t] = -1;
      for (int c = 0; c < 8; c++) begin first_in[t][c] = -1; first_w[t][c] = -1; last_in[t][c] = -1; last_w[t][c] = -1; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ret_tile == NT);
    repeat (10) @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      for (int c = 0; c < tiles[t].ci; c++) begin
        checks++;
        if (first_w[t][c] <= last_in[t][c]) begin failures++; $display("FAIL tile %0d ch %0d: weights before inputs", t, c); end
        if (c >= 2) begin
          checks++;
          if (first_in[t][c] <= last_w[t][c-2]) begin failures++; $display("FAIL tile %0d ch %0d: third window", t, c); end
        end
      end
      checks++;
      if (first_req[t] <= last_w[t][tiles[t].ci - 1]) begin failures++; $display("FAIL tile %0d: request before last weight", t); end
      if (t > 0) begin
        checks++;
        if (first_w[t][tiles[t].ci - 1] <= last_ret[t-1] - 1) begin failures++; $display("FAIL tile %0d: last channel before read-back", t); end
      end
    end
    checks++;
    if (iq.size() || wq.size() || rq.size()) begin failures++; $display("FAIL beats missing"); end
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
