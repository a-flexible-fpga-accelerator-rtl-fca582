// tb_vgg16_tiles: runs tiles of VGG-16 convolution layers on the accelerator
// top at its default parameters (one core of 625 int8 vPEs).
//
// Layer shapes (3x3 windows, stride 1, output sizes and channel counts) are
// those of VGG-16; the host's tiling into at most 25 x 25 output pixels is
// applied, and input channels are packed four to a word with unused lanes
// zero (conv1_1 has 3 input channels). To keep the run short, each tile uses
// only 4 or 8 of the layer's input channels; the output side is full:
//   conv5_x  14 x 14 plane, all 512 output channels (one tile per layer);
//   conv1_1  a 25 x 25 interior tile and a 24 x 25 edge tile, 64 channels;
//   conv3_1  a 25 x 25 tile, 128 of its 256 output channels.
// Inputs and weights are random int8 values; every output is compared in
// (co, oy, ox) order with a reference convolution
//   O(co,oy,ox) = sum_{c,ky,kx} dot4(I(c, oy+ky, ox+kx), W(c,ky,kx,co)).
// The conv5_x tile is compute-bound: after its first weight the core must
// take one weight per cycle (Ci*9*Co cycles, the vPE array's peak rate).
// Outputs of a tile must come on consecutive cycles; commands, stalls,
// read-back overlap and completed tiles are counted (zero counts fail).
module tb_vgg16_tiles;
  import cnn_pkg::*;

    localparam int unsigned NT  = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              cmd_valid [1], cmd_ready [1];
  conv_cmd_t         cmd       [1];
  logic              in_valid  [1], in_ready [1];
  logic [DATA_W-1:0] in_data   [1];
  logic              wt_valid  [1], wt_ready [1];
  logic [DATA_W-1:0] wt_data   [1];
  logic              out_valid [1];
  logic [DATA_W-1:0] out_data  [1];
  ctrl_stat_t        stat      [1];

  cnn_accel dut (.*);

  int checks = 0, failures = 0;

  // tile list: wo ho co ci kx ky sx sy gap%
  typedef struct { int wo, ho, co, ci, kx, ky, sx, sy, gap, lanes; } tile_t;
  tile_t tiles [NT] = '{
    '{14, 14, 512, 2, 3, 3, 1, 1, 0, 4},   // conv5_x: whole 14x14 plane, all 512 outputs, 8 input channels
    '{25, 25,  64, 1, 3, 3, 1, 1, 5, 3},   // conv1_1: interior 25x25 tile, 3 input channels
    '{24, 25,  64, 1, 3, 3, 1, 1, 5, 3},   // conv1_1: right-edge tile, 24 wide
    '{25, 25, 128, 2, 3, 3, 1, 1, 5, 4}    // conv3_1: 25x25 tile, 128 of 256 outputs, 8 input channels
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
    foreach (in_a[i]) begin
      in_a[i] = rnd_word();
      for (int l = t.lanes; l < 4; l++) in_a[i][8*l +: 8] = 8'h00;   // unused channel lanes are zero
      in_q.push_back(in_a[i]);
    end
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

  // rate check on the first tile, which is compute-bound and has no
  // earlier read-back to wait for: after its first weight, one weight is
  // taken every cycle, Ci*Kx*Ky*Co in all
  int w_first = -1, w_last = -1, w_fires = 0;
  always @(posedge clk) if (rst_n && wt_valid[0] && wt_ready[0]) begin
    if (w_fires == 0) w_first = cyc;
    if (w_fires == tiles[0].ci * tiles[0].kx * tiles[0].ky * tiles[0].co - 1) w_last = cyc;
    w_fires++;
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
    if (w_last - w_first != tiles[0].ci * tiles[0].kx * tiles[0].ky * tiles[0].co - 1) begin
      failures++;
      $display("FAIL first tile took %0d cycles for its %0d weights", w_last - w_first + 1,
               tiles[0].ci * tiles[0].kx * tiles[0].ky * tiles[0].co);
    end else $display("  first tile: %0d weights in %0d cycles", w_fires > 0 ? tiles[0].ci * tiles[0].kx * tiles[0].ky * tiles[0].co : 0, w_last - w_first + 1);
    $display("mechanisms:");
    need("cmd Start",   cmd_seen[CMD_START]);
    need("cmd ShiftX",  cmd_seen[CMD_SHIFTX]);
    need("cmd ShiftY",  cmd_seen[CMD_SHIFTY]);
    need("cmd DilateX", cmd_seen[CMD_DILATEX]);
    need("cmd ErodeX",  cmd_seen[CMD_ERODEX]);
    need("input stall cycles", n_in_stall);
    need("output stall cycles", n_out_stall);
    need("read-back overlap cycles", n_overlap);
    need("tiles completed", n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: %0d of %0d tiles read back", out_tile, NT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
