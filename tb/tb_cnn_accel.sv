// tb_cnn_accel: end-to-end test of the accelerator top with two cores of
// 16 vPEs each (the PE count is reduced; buffers are full size). Core 0 is
// checked against a reference convolution; core 1 gets the same streams and
// must match core 0 cycle by cycle, which checks that the cores of the top
// are independent copies.
//
// A list of convolution tiles is run back to back. For each tile the bench
// draws random int8 inputs and weights, packs four channels per word, and
// computes the expected outputs with a plain reference convolution
//   O(co,oy,ox) = sum_{c,ky,kx} dot4(I(c, oy*Sy+ky, ox*Sx+kx), W(c,ky,kx,co)).
// Inputs are streamed per channel in row-major order, weights in
// Ci x Ky x Kx x Co order, with random gaps on both streams; outputs are
// expected in (co, oy, ox) order. The tile list makes every mechanism of the
// core happen: each receiver command the controller can emit (Start,
// DilateX, ShiftX, ErodeX, NoOp, DilateY, ShiftY, ErodeY, RotateY), inputs
// waiting for weights (input stall), inputs waiting for a free window,
// the last channel waiting for the previous tile's read-back (output
// stall), read-back overlapping the next tile, and Co = 1 and
// Kx*Ky = 1 corner cases. Each is counted and a count of zero is a failure.
// Rate checks: a tile's outputs arrive on consecutive cycles (one word per
// cycle), and in the last tile, whose streams have no gaps and whose
// compute is shorter than its input time, the inputs are taken one per
// cycle from the first to the last.
module tb_cnn_accel;
  import cnn_pkg::*;

  localparam int unsigned NPE = 16;
  localparam int unsigned NT  = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              cmd_valid [2], cmd_ready [2];
  conv_cmd_t         cmd       [2];
  logic              in_valid  [2], in_ready [2];
  logic [DATA_W-1:0] in_data   [2];
  logic              wt_valid  [2], wt_ready [2];
  logic [DATA_W-1:0] wt_data   [2];
  logic              out_valid [2];
  logic [DATA_W-1:0] out_data  [2];
  ctrl_stat_t        stat      [2];

  cnn_accel #(.NUM_CORES(2), .NUM_PE(NPE)) dut (.*);

  // core 1 is given exactly the streams of core 0 and must behave
  // identically, cycle by cycle
  assign cmd_valid[1] = cmd_valid[0];
  assign cmd[1]       = cmd[0];
  assign in_valid[1]  = in_valid[0];
  assign in_data[1]   = in_data[0];
  assign wt_valid[1]  = wt_valid[0];
  assign wt_data[1]   = wt_data[0];

  int checks = 0, failures = 0;

  // tile list: wo ho co ci kx ky sx sy gap%
  typedef struct { int wo, ho, co, ci, kx, ky, sx, sy, gap; } tile_t;
  tile_t tiles [NT] = '{
    '{4, 4,  3, 2, 3, 3, 1, 1, 20},   // X and Y dilate/shift/erode
    '{3, 2,  1, 3, 3, 3, 2, 2, 30},   // strides: NoOp, RotateY; Co = 1
    '{2, 1, 20, 4, 2, 2, 1, 1, 10},   // long compute: inputs wait for a window
    '{5, 3,  2, 1, 1, 1, 1, 1, 10},   // 1x1 window, single channel: output stall
    '{8, 2,  4, 2, 3, 2, 1, 2, 25},   // mixed strides
    '{16, 1, 2, 3, 2, 2, 2, 1, 0}     // no gaps: full-rate input check
  };

  logic [31:0] in_q[$], wt_q[$], exp_q[$];
  int          tile_words[NT], tile_inputs[NT];

  function automatic logic [31:0] rnd_word();
    return $urandom();
  endfunction

  function automatic int dot4(logic [31:0] a, logic [31:0] b);
    int s = 0;
    for (int l = 0; l < 4; l++) s += int'($signed(a[8*l +: 8])) * int'($signed(b[8*l +: 8]));
    return s;
  endfunction

  task automatic gen_tile(tile_t t, int idx);
    int wi = (t.wo - 1) * t.sx + t.kx;
    int hi = (t.ho - 1) * t.sy + t.ky;
    logic [31:0] in_a [];
    logic [31:0] w_a  [];
    in_a = new[t.ci * hi * wi];
    w_a  = new[t.ci * t.ky * t.kx * t.co];
    foreach (in_a[i]) begin in_a[i] = rnd_word(); in_q.push_back(in_a[i]); end
    foreach (w_a[i])  begin w_a[i]  = rnd_word(); wt_q.push_back(w_a[i]);  end
    for (int co = 0; co < t.co; co++)
      for (int oy = 0; oy < t.ho; oy++)
        for (int ox = 0; ox < t.wo; ox++) begin
          int acc = 0;
          for (int c = 0; c < t.ci; c++)
            for (int ky = 0; ky < t.ky; ky++)
              for (int kx = 0; kx < t.kx; kx++)
                acc += dot4(in_a[(c * hi + oy * t.sy + ky) * wi + ox * t.sx + kx],
                            w_a[((c * t.ky + ky) * t.kx + kx) * t.co + co]);
          exp_q.push_back(acc);
        end
    tile_words[idx]  = t.wo * t.ho * t.co;
    tile_inputs[idx] = t.ci * hi * wi;
  endtask

  // ---------------- stream drivers ----------------
  int cmd_idx = 0, in_tile = 0, in_sent_tile = 0, wt_tile_gap = 0;
  int in_gap = 0, wt_gap = 0;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (cmd_valid[0] && cmd_ready[0]) cmd_idx <= cmd_idx + 1;
    end
  end

  always_comb begin
    cmd_valid[0] = rst_n && (cmd_idx < NT);
    cmd[0] = '0;
    if (cmd_idx < NT) begin
      cmd[0].wo = DIM_W'(tiles[cmd_idx].wo);
      cmd[0].ho = DIM_W'(tiles[cmd_idx].ho);
      cmd[0].co = DIM_W'(tiles[cmd_idx].co);
      cmd[0].ci = CH_W'(tiles[cmd_idx].ci);
      cmd[0].kx = K_W'(tiles[cmd_idx].kx);
      cmd[0].ky = K_W'(tiles[cmd_idx].ky);
      cmd[0].sx = S_W'(tiles[cmd_idx].sx);
      cmd[0].sy = S_W'(tiles[cmd_idx].sy);
    end
  end

  // gap percentage follows the tile the controller currently works on
  int cur_gap;
  assign cur_gap = (cmd_idx == 0) ? tiles[0].gap : tiles[cmd_idx - 1].gap;

  // stream positions advance with non-blocking updates, so the DUT samples
  // the word that was presented during the cycle
  logic in_hold = 1'b0, wt_hold = 1'b0;
  int in_i = 0, wt_i = 0;
  assign in_valid[0] = rst_n && (in_i < in_q.size()) && !in_hold;
  assign in_data[0]  = (in_i < in_q.size()) ? in_q[in_i] : '0;
  assign wt_valid[0] = rst_n && (wt_i < wt_q.size()) && !wt_hold;
  assign wt_data[0]  = (wt_i < wt_q.size()) ? wt_q[wt_i] : '0;

  always @(posedge clk) if (rst_n) begin
    if (in_valid[0] && in_ready[0]) in_i <= in_i + 1;
    if (wt_valid[0] && wt_ready[0]) wt_i <= wt_i + 1;
    in_hold <= ($urandom_range(99) < cur_gap);
    wt_hold <= ($urandom_range(99) < cur_gap);
  end

  // ---------------- output checker ----------------
  int out_tile = 0, out_in_tile = 0, last_out_cyc = 0, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid[0]) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output %h", out_data[0]);
      end else begin
        logic [31:0] e;
        e = exp_q.pop_front();
        if (out_data[0] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL tile %0d word %0d: got %0d expected %0d",
                                      out_tile, out_in_tile, $signed(out_data[0]), $signed(e));
        end
      end
      if (out_in_tile != 0) begin
        checks++;
        if (cyc != last_out_cyc + 1) begin
          failures++;
          $display("FAIL tile %0d: output gap of %0d cycles", out_tile, cyc - last_out_cyc);
        end
      end
      last_out_cyc = cyc;
      if (out_in_tile == tile_words[out_tile] - 1) begin
        out_tile++;
        out_in_tile = 0;
      end else out_in_tile++;
    end
  end

  // ---------------- second core ----------------
  int n_core1 = 0;
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (cmd_ready[1] != cmd_ready[0] || in_ready[1] != in_ready[0] || wt_ready[1] != wt_ready[0] ||
        out_valid[1] != out_valid[0] || (out_valid[0] && out_data[1] !== out_data[0])) begin
      failures++;
      if (failures < 10) $display("FAIL core 1 differs from core 0");
    end
    if (out_valid[1]) n_core1++;
  end

  // ---------------- mechanism counters ----------------
  int cmd_seen [15];
  int n_in_stall = 0, n_win_stall = 0, n_out_stall = 0, n_overlap = 0, n_done = 0;
  ibus_t ib0;
  assign ib0 = dut.g_core[0].u_core.i_bus;
  always @(posedge clk) if (rst_n) begin
    if (ib0.valid) cmd_seen[int'(ib0.cmd)]++;
    if (stat[0].in_stall)  n_in_stall++;
    if (stat[0].win_stall) n_win_stall++;
    if (stat[0].out_stall) n_out_stall++;
    if (stat[0].busy && stat[0].rb_busy) n_overlap++;
    if (stat[0].tile_done) n_done++;
  end

  // full-rate check on the last tile: first to last input fire
  int last_first = -1, last_last = -1, in_fires = 0;
  always @(posedge clk) if (rst_n && in_valid[0] && in_ready[0]) begin
    if (in_fires == tile_inputs[0] + tile_inputs[1] + tile_inputs[2] + tile_inputs[3] + tile_inputs[4])
      last_first = cyc;
    last_last = cyc;
    in_fires++;
  end

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("  %-28s %0d", what, n);
  endtask

  initial begin
    for (int i = 0; i < 15; i++) cmd_seen[i] = 0;
    for (int i = 0; i < NT; i++) gen_tile(tiles[i], i);
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    wait (out_tile == NT);
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    checks++;
    if (last_last - last_first != tile_inputs[NT-1] - 1) begin
      failures++;
      $display("FAIL last tile took %0d cycles for %0d inputs", last_last - last_first + 1, tile_inputs[NT-1]);
    end
    $display("mechanisms:");
    need("cmd Start",   cmd_seen[CMD_START]);
    need("cmd NoOp",    cmd_seen[CMD_NOP]);
    need("cmd DilateX", cmd_seen[CMD_DILATEX]);
    need("cmd ShiftX",  cmd_seen[CMD_SHIFTX]);
    need("cmd ErodeX",  cmd_seen[CMD_ERODEX]);
    need("cmd DilateY", cmd_seen[CMD_DILATEY]);
    need("cmd ShiftY",  cmd_seen[CMD_SHIFTY]);
    need("cmd ErodeY",  cmd_seen[CMD_ERODEY]);
    need("cmd RotateY", cmd_seen[CMD_ROTATEY]);
    need("input stall cycles", n_in_stall);
    need("window-full stall cycles", n_win_stall);
    need("output stall cycles", n_out_stall);
    need("read-back overlap cycles", n_overlap);
    need("tiles completed", n_done);
    need("core 1 outputs", n_core1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: %0d of %0d tiles read back", out_tile, NT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
